// tb_ivf_dist_stage: self-checking test of Stage IVFDist (chain of PEs).
//
// D=8, 37 cells over 4 PEs, so the cells do not split evenly. Loads random
// centroids, sends queries back to back with random result stalls, and
// checks that each query yields exactly one item per cell, with the squared
// L2 distance computed in software, the last flag on the final item only.
// The order of items is not checked (SelCells does not depend on it).
module tb_ivf_dist_stage;
  import fanns_pkg::*;
  localparam int unsigned D     = 8;
  localparam int unsigned NLIST = 37;
  localparam int unsigned NPE   = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  logic wr_en = 1'b0, q_valid = 1'b0, q_ready, out_valid, out_ready = 1'b1, out_last;
  id_t  wr_cell = '0;
  logic [D-1:0][ELEM_W-1:0] wr_vec = '0, q_vec = '0;
  item_t out_item;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  ivf_dist_stage #(.D(D), .NLIST(NLIST), .NPE(NPE)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cent [NLIST][D];
  longint exp_d [$][NLIST];
  int   nitem = 0, nq_out = 0, pready = 100;
  bit   seen [NLIST];
  always @(negedge clk) if (rst_n && out_valid && out_ready) begin
    int c;
    c = int'(out_item.id);
    checks++;
    if (c >= int'(NLIST) || exp_d.size() == 0 || seen[c] || longint'(out_item.distance) != exp_d[0][c]) begin
      failures++;
      $display("query %0d: item id %0d distance %0d wrong or repeated", nq_out, c, out_item.distance);
    end else seen[c] = 1'b1;
    nitem++;
    checks++;
    if (out_last != (nitem == int'(NLIST))) begin
      failures++;
      $display("query %0d: last flag on item %0d", nq_out, nitem);
    end
    if (out_last) begin
      nitem = 0;
      nq_out++;
      for (int i = 0; i < int'(NLIST); i++) seen[i] = 1'b0;
      if (exp_d.size() > 0) void'(exp_d.pop_front());
    end
  end
  always @(posedge clk) begin
    #1;
    out_ready = ($urandom_range(99) < pready);
  end

  initial begin
    int nq = 40;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int l = 0; l < int'(NLIST); l++) begin
      for (int i = 0; i < int'(D); i++) begin
        cent[l][i] = int'($urandom_range(0, 65535)) - 32768;
        wr_vec[i] = ELEM_W'(cent[l][i]);
      end
      wr_cell = id_t'(l);
      wr_en = 1'b1;
      @(negedge clk);
    end
    wr_en = 1'b0;
    for (int q = 0; q < nq; q++) begin
      longint e [NLIST];
      if (q == 20) pready = 50;
      for (int i = 0; i < int'(D); i++) q_vec[i] = ELEM_W'($urandom_range(0, 65535));
      for (int l = 0; l < int'(NLIST); l++) begin
        e[l] = 0;
        for (int i = 0; i < int'(D); i++) e[l] += (longint'(cent[l][i]) - longint'($signed(q_vec[i]))) ** 2;
      end
      exp_d.push_back(e);
      q_valid = 1'b1;
      forever begin
        bit acc;
        acc = q_ready;
        @(posedge clk);
        if (acc) break;
        @(negedge clk);
      end
      @(negedge clk);
      q_valid = 1'b0;
    end
    while (nq_out < nq) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
