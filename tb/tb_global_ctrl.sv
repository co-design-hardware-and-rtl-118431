// tb_global_ctrl: self-checking test of the global controller.
//
// Query fork: random queries with random ready on both copies; each query
// must appear exactly once on each side, in order, and no new query may be
// taken while either copy is still waiting. Cell commands: a random cell
// table (counts 0..200, NPQ=36) is loaded, random cell IDs are streamed in
// with random stalls, and every command must carry the cell's start row and
// count, rows = max(1, ceil(count/36)) and the last flag of its input. One
// command per cycle when the consumer always takes it.
module tb_global_ctrl;
  import fanns_pkg::*;
  localparam int unsigned D     = 4;
  localparam int unsigned NLIST = 64;
  localparam int unsigned NPQ   = 36;

  logic clk = 1'b0, rst_n = 1'b0;
  logic wr_en = 1'b0;
  id_t  wr_cell = '0;
  logic [ADDR_W-1:0] wr_start = '0;
  logic [CNT_W-1:0]  wr_count = '0;
  logic q_valid = 1'b0, q_ready, qa_valid, qa_ready = 1'b0, qb_valid, qb_ready = 1'b0;
  logic [D-1:0][ELEM_W-1:0] q_vec = '0, qa_vec, qb_vec;
  logic sel_valid = 1'b0, sel_ready, sel_last = 1'b0, cmd_valid, cmd_ready = 1'b0;
  item_t sel_item = '0;
  cell_cmd_t cmd;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  global_ctrl #(.D(D), .NLIST(NLIST), .NPQ(NPQ)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cstart [NLIST], ccount [NLIST];
  logic [D*ELEM_W-1:0] qa_exp [$], qb_exp [$];
  cell_cmd_t cmd_exp [$];
  int pa = 50, pb = 50, pc = 50, ps = 50, pq = 50;
  int ncmd = 0, nqa = 0, nqb = 0, nsel = 0, nq = 0;
  longint cyc = 0, t_first = 0, t_last = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) if (rst_n) begin
    if (q_valid && q_ready) begin
      checks++;
      if (qa_valid || qb_valid) begin failures++; $display("query taken while a copy is pending"); end
      qa_exp.push_back(q_vec); qb_exp.push_back(q_vec); nq++;
    end
    if (qa_valid && qa_ready) begin
      checks++;
      if (qa_exp.size() == 0 || qa_vec != qa_exp[0]) begin failures++; $display("IVFDist copy wrong"); end
      if (qa_exp.size() > 0) void'(qa_exp.pop_front());
      nqa++;
    end
    if (qb_valid && qb_ready) begin
      checks++;
      if (qb_exp.size() == 0 || qb_vec != qb_exp[0]) begin failures++; $display("BuildLUT copy wrong"); end
      if (qb_exp.size() > 0) void'(qb_exp.pop_front());
      nqb++;
    end
    if (sel_valid && sel_ready) begin
      cell_cmd_t e;
      int c;
      c = int'(sel_item.id);
      e.cell_id = sel_item.id;
      e.start   = ADDR_W'(cstart[c]);
      e.count   = CNT_W'(ccount[c]);
      e.rows    = CNT_W'((ccount[c] == 0) ? 1 : (ccount[c] + int'(NPQ) - 1) / int'(NPQ));
      e.last    = sel_last;
      cmd_exp.push_back(e);
      nsel++;
    end
    if (cmd_valid && cmd_ready) begin
      checks++;
      if (cmd_exp.size() == 0 || cmd != cmd_exp[0]) begin
        failures++;
        $display("command %0d: cell %0d start %0d rows %0d count %0d last %0b", ncmd,
                 cmd.cell_id, cmd.start, cmd.rows, cmd.count, cmd.last);
      end
      if (cmd_exp.size() > 0) void'(cmd_exp.pop_front());
      if (ncmd == 1010) t_first = cyc;
      if (ncmd == 1099) t_last = cyc;
      ncmd++;
    end
  end

  always @(posedge clk) begin
    #1;
    qa_ready  = ($urandom_range(99) < pa);
    qb_ready  = ($urandom_range(99) < pb);
    cmd_ready = ($urandom_range(99) < pc);
    if (!sel_valid || sel_ready) begin
      sel_valid = rst_n && !wr_en && ($urandom_range(99) < ps) && (nsel < 1100);
      sel_item  = '{distance: dist_t'($urandom), id: id_t'($urandom_range(0, NLIST - 1))};
      sel_last  = ($urandom_range(16) == 0);
    end
    if (!q_valid || q_ready) begin
      q_valid = rst_n && !wr_en && ($urandom_range(99) < pq) && (nq < 300);
      for (int i = 0; i < int'(D); i++) q_vec[i] = ELEM_W'($urandom);
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    wr_en = 1'b1;
    for (int l = 0; l < int'(NLIST); l++) begin
      cstart[l] = int'($urandom_range(0, 100000));
      ccount[l] = (l % 5 == 0) ? 0 : int'($urandom_range(1, 200));
      wr_cell = id_t'(l); wr_start = ADDR_W'(cstart[l]); wr_count = CNT_W'(ccount[l]);
      @(negedge clk);
    end
    wr_en = 1'b0;
    while (ncmd < 1000) @(negedge clk);
    pc = 100; ps = 100;   // full rate for the last 100 commands (timed: 90)
    while (ncmd < 1100 || nqa < 300 || nqb < 300) @(negedge clk);
    checks++;
    if (t_last - t_first != 89) begin
      failures++;
      $display("90 commands at full rate took %0d cycles", t_last - t_first + 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
