// tb_build_lut_stage: self-checking test of Stage BuildLUT (residual unit and
// chain of PEs).
//
// D=8, M=4 sub-spaces of 2 dimensions, 8 codes, 16 cells, 5 probed cells per
// query over 2 PEs (uneven blocks). Loads random centroids and codebooks
// (large values so the residual saturates), then sends queries with their 5
// cell commands and drains the LUT packets with random stalls. Every packet
// must come in probe order: a header carrying the cell command, then 8 rows
// whose entry s of row k equals the squared distance between sub-vector s of
// the saturated residual (query minus cell centroid) and sub-vector s of code
// k, computed in software. With the output never stalled, the stage must
// deliver a query's 5 x 9 beats back to back.
module tb_build_lut_stage;
  import fanns_pkg::*;
  localparam int unsigned D = 8, M = 4, KSUB = 8, NLIST = 16, NPROBE = 5, NPE = 2;
  localparam int unsigned DSUB = D / M;

  logic clk = 1'b0, rst_n = 1'b0;
  logic cent_wr_en = 1'b0, cb_wr_en = 1'b0;
  id_t  cent_wr_cell = '0;
  logic [$clog2(KSUB)-1:0] cb_wr_idx = '0;
  logic [D-1:0][ELEM_W-1:0] cent_wr_vec = '0, cb_wr_data = '0, q_vec = '0;
  logic q_valid = 1'b0, q_ready, cmd_valid = 1'b0, cmd_ready;
  cell_cmd_t cmd = '0, lut_cmd;
  logic lut_valid, lut_ready = 1'b0, lut_hdr;
  logic [M-1:0][DIST_W-1:0] lut_row;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  build_lut_stage #(.D(D), .M(M), .KSUB(KSUB), .NLIST(NLIST), .NPROBE(NPROBE), .NPE(NPE)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cent [NLIST][D], cbk [KSUB][D];
  cell_cmd_t exp_cmd [$];
  logic [M-1:0][DIST_W-1:0] exp_row [$];
  int nbeat = 0, pready = 60;
  longint cyc = 0, t_first = -1, t_last = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) if (rst_n && lut_valid && lut_ready) begin
    int b;
    b = nbeat % int'(KSUB + 1);
    checks++;
    if (b == 0) begin
      if (!lut_hdr || exp_cmd.size() == 0 || lut_cmd != exp_cmd[0]) begin
        failures++;
        $display("beat %0d: header expected, hdr=%0b cell %0d", nbeat, lut_hdr, lut_cmd.cell_id);
      end
      if (exp_cmd.size() > 0) void'(exp_cmd.pop_front());
    end else begin
      if (lut_hdr || exp_row.size() == 0 || lut_row != exp_row[0]) begin
        failures++;
        if (failures < 10) $display("beat %0d: row %0d wrong", nbeat, b - 1);
      end
      if (exp_row.size() > 0) void'(exp_row.pop_front());
    end
    if (nbeat == 0 && pready == 100) t_first = cyc;
    t_last = cyc;
    nbeat++;
  end
  always @(posedge clk) begin
    #1;
    lut_ready = ($urandom_range(99) < pready);
  end

  function automatic int sat16(int v);
    return (v > 32767) ? 32767 : (v < -32768) ? -32768 : v;
  endfunction

  task automatic run();
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int l = 0; l < int'(NLIST); l++) begin
      for (int i = 0; i < int'(D); i++) begin
        cent[l][i] = int'($urandom_range(0, 65535)) - 32768;
        cent_wr_vec[i] = ELEM_W'(cent[l][i]);
      end
      cent_wr_cell = id_t'(l); cent_wr_en = 1'b1;
      @(negedge clk);
    end
    cent_wr_en = 1'b0;
    for (int k = 0; k < int'(KSUB); k++) begin
      for (int i = 0; i < int'(D); i++) begin
        cbk[k][i] = int'($urandom_range(0, 65535)) - 32768;
        cb_wr_data[i] = ELEM_W'(cbk[k][i]);
      end
      cb_wr_idx = $clog2(KSUB)'(k); cb_wr_en = 1'b1;
      @(negedge clk);
    end
    cb_wr_en = 1'b0;
    for (int q = 0; q < 8; q++) begin
      int x [D];
      if (q == 7) begin
        // timed query: wait until the stage is idle, then never stall
        while (exp_cmd.size() > 0 || exp_row.size() > 0) @(negedge clk);
        pready = 100;
        nbeat = 0;
      end
      for (int i = 0; i < int'(D); i++) begin
        x[i] = int'($urandom_range(0, 65535)) - 32768;
        q_vec[i] = ELEM_W'(x[i]);
      end
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
      for (int p = 0; p < int'(NPROBE); p++) begin
        int l = int'($urandom_range(0, NLIST - 1));
        int r [D];
        cmd.cell_id = id_t'(l);
        cmd.start = ADDR_W'($urandom);
        cmd.rows = CNT_W'($urandom_range(1, 9));
        cmd.count = CNT_W'($urandom_range(0, 99));
        cmd.last = (p == int'(NPROBE) - 1);
        exp_cmd.push_back(cmd);
        for (int i = 0; i < int'(D); i++) r[i] = sat16(x[i] - cent[l][i]);
        for (int k = 0; k < int'(KSUB); k++) begin
          logic [M-1:0][DIST_W-1:0] w;
          for (int s = 0; s < int'(M); s++) begin
            longint a = 0;
            for (int t = 0; t < int'(DSUB); t++) a += longint'(r[s*DSUB+t] - cbk[k][s*DSUB+t]) ** 2;
            w[s] = DIST_W'(a);
          end
          exp_row.push_back(w);
        end
        cmd_valid = 1'b1;
        forever begin
          bit acc;
          acc = cmd_ready;
          @(posedge clk);
          if (acc) break;
          @(negedge clk);
        end
        @(negedge clk);
        cmd_valid = 1'b0;
      end
    end
    while (exp_cmd.size() > 0 || exp_row.size() > 0) @(negedge clk);
    repeat (10) @(negedge clk);
    checks++;
    if (nbeat != int'(NPROBE * (KSUB + 1)) || t_last - t_first + 1 > int'(NPROBE * (KSUB + 1)) + 2) begin
      failures++;
      $display("timed query: %0d beats in %0d cycles", nbeat, t_last - t_first + 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
  initial run();
endmodule
