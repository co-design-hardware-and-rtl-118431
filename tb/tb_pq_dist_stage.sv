// tb_pq_dist_stage: self-checking test of Stage PQDist (chain of PEs).
//
// M=4 sub-spaces, 16 codes, 4 PEs, each with a channel of the behavioural
// memory (random latency-free back-pressure). Random cells of 0..21 vectors
// are stored in the layout the PEs expect (vector j in channel j % 4, row
// start + j / 4) and random LUT packets (header, then 16 rows) are sent down
// the chain with random gaps, while the outputs are drained with random
// stalls. Every PE's output stream is compared item by item with software:
// the sum of the looked-up distances and the vector ID, the maximum distance
// for padding slots, and the last flag on the last row of a query's last cell.
module tb_pq_dist_stage;
  import fanns_pkg::*;
  localparam int unsigned M    = 4;
  localparam int unsigned KSUB = 16;
  localparam int unsigned NPE  = 4;
  localparam int unsigned RW   = ID_W + M * CODE_W;

  logic clk = 1'b0, rst_n = 1'b0;
  logic lut_valid = 1'b0, lut_ready, lut_hdr = 1'b0;
  cell_cmd_t lut_cmd = '0;
  logic [M-1:0][DIST_W-1:0] lut_row = '0;
  logic [NPE-1:0] mem_req_valid, mem_req_ready, mem_rsp_valid;
  logic [NPE-1:0][ADDR_W-1:0] mem_req_addr;
  logic [NPE-1:0][RW-1:0] mem_rsp_data;
  logic [NPE-1:0] out_valid, out_ready = '0, out_last;
  item_t [NPE-1:0] out_item;
  int checks = 0, failures = 0, npad = 0;
  always #5 clk = ~clk;

  pq_dist_stage #(.M(M), .KSUB(KSUB), .NPE(NPE), .OUTQ(4)) dut (.*);
  hbm_model #(.NCH(NPE), .AW(ADDR_W), .DW(RW), .LAT(3), .STALL(25)) u_hbm (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req_addr(mem_req_addr), .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data)
  );

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint exp_d [NPE][$];
  bit     exp_l [NPE][$];
  int     exp_i [NPE][$];
  int     nout = 0, nexp = 0;
  always @(negedge clk) if (rst_n) begin
    for (int p = 0; p < int'(NPE); p++) if (out_valid[p] && out_ready[p]) begin
      checks++;
      if (exp_d[p].size() == 0 || longint'(out_item[p].distance) != exp_d[p][0] ||
          out_last[p] != exp_l[p][0] ||
          (exp_i[p][0] >= 0 && int'(out_item[p].id) != exp_i[p][0])) begin
        failures++;
        if (failures < 10) $display("PE %0d: got %0d id %0d last %0b, expected %0d id %0d last %0b", p,
                                    out_item[p].distance, out_item[p].id, out_last[p],
                                    (exp_d[p].size() > 0) ? exp_d[p][0] : -1,
                                    (exp_i[p].size() > 0) ? exp_i[p][0] : -1,
                                    (exp_l[p].size() > 0) ? exp_l[p][0] : 0);
      end
      if (out_item[p].distance == DIST_MAX) npad++;
      if (exp_d[p].size() > 0) begin
        void'(exp_d[p].pop_front()); void'(exp_l[p].pop_front()); void'(exp_i[p].pop_front());
      end
      nout++;
    end
  end
  always @(posedge clk) begin
    #1;
    for (int p = 0; p < int'(NPE); p++) out_ready[p] = ($urandom_range(99) < 70);
  end

  task automatic send_beat(logic hdr, cell_cmd_t c, logic [M-1:0][DIST_W-1:0] row);
    @(negedge clk);
    while ($urandom_range(3) == 0) @(negedge clk);
    lut_valid = 1'b1; lut_hdr = hdr; lut_cmd = c; lut_row = row;
    forever begin
      bit acc;
      acc = lut_ready;
      @(posedge clk);
      if (acc) break;
      @(negedge clk);
    end
    @(negedge clk);
    lut_valid = 1'b0;
  endtask

  task automatic run();
    int row = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int q = 0; q < 6; q++) begin
      int ncell = int'($urandom_range(1, 4));
      for (int c = 0; c < ncell; c++) begin
        cell_cmd_t cmd;
        longint lut [M][KSUB];
        logic [M-1:0][DIST_W-1:0] w;
        int count = (c == 1) ? 0 : int'($urandom_range(1, 21));
        int rows = (count == 0) ? 1 : (count + int'(NPE) - 1) / int'(NPE);
        cmd.cell_id = id_t'(q * 10 + c);
        cmd.start = ADDR_W'(row);
        cmd.rows = CNT_W'(rows);
        cmd.count = CNT_W'(count);
        cmd.last = (c == ncell - 1);
        for (int s = 0; s < int'(M); s++)
          for (int k = 0; k < int'(KSUB); k++) lut[s][k] = longint'($urandom_range(0, 1 << 20));
        for (int r = 0; r < rows; r++)
          for (int p = 0; p < int'(NPE); p++) begin
            int j = r * int'(NPE) + p;
            logic [RW-1:0] e;
            longint d = 0;
            e = '0;
            e[M*CODE_W +: ID_W] = id_t'(100000 * q + 1000 * c + j);
            for (int s = 0; s < int'(M); s++) begin
              int code = int'($urandom_range(0, KSUB - 1));
              e[s*CODE_W +: CODE_W] = CODE_W'(code);
              d += lut[s][code];
            end
            u_hbm.mem[(longint'(p) << 32) + longint'(row + r)] = e;
            exp_d[p].push_back((j < count) ? d : longint'(DIST_MAX));
            exp_i[p].push_back((j < count) ? 100000 * q + 1000 * c + j : -1);
            exp_l[p].push_back(cmd.last && (r == rows - 1));
            nexp++;
          end
        row += rows;
        send_beat(1'b1, cmd, '0);
        for (int k = 0; k < int'(KSUB); k++) begin
          for (int s = 0; s < int'(M); s++) w[s] = DIST_W'(lut[s][k]);
          send_beat(1'b0, cmd, w);
        end
      end
    end
    while (nout < nexp) @(negedge clk);
    repeat (20) @(negedge clk);
    checks++;
    if (nout != nexp || npad == 0) begin
      failures++;
      $display("%0d outputs of %0d, %0d padding", nout, nexp, npad);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
  initial run();
endmodule
