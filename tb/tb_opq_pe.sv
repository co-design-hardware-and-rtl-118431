// tb_opq_pe: self-checking test of opq_pe (Stage OPQ).
//
// D=8, FRAC=14. Loads a random fixed-point matrix (large entries so that both
// saturation limits are hit), sends random queries and checks every output
// element against y[r] = sat((sum_c R[r][c] * x[c]) >>> 14) computed in
// software. Checks the schedule of one output element per cycle: the result
// is offered D + 1 cycles after the query was taken (D rows, one register). Result stalls check that
// nothing is lost or overwritten while the output waits.
module tb_opq_pe;
  import fanns_pkg::*;
  localparam int unsigned D    = 8;
  localparam int unsigned FRAC = 14;

  logic clk = 1'b0, rst_n = 1'b0;
  logic wr_en = 1'b0, in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0;
  logic [$clog2(D)-1:0] wr_row = '0;
  logic [D-1:0][ELEM_W-1:0] wr_data = '0, in_vec = '0, out_vec;
  int checks = 0, failures = 0, nsat = 0;
  always #5 clk = ~clk;

  opq_pe #(.D(D), .FRAC(FRAC), .EN(1'b1)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int rm [D][D];
  logic [D-1:0][ELEM_W-1:0] exp_v [$];
  longint exp_t [$];
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic logic [D-1:0][ELEM_W-1:0] model(logic [D-1:0][ELEM_W-1:0] x);
    logic [D-1:0][ELEM_W-1:0] y;
    for (int r = 0; r < int'(D); r++) begin
      longint acc = 0;
      for (int c = 0; c < int'(D); c++) acc += longint'(rm[r][c]) * longint'($signed(x[c]));
      acc = acc >>> FRAC;
      if (acc > 32767) begin acc = 32767; nsat++; end
      if (acc < -32768) begin acc = -32768; nsat++; end
      y[r] = ELEM_W'(acc);
    end
    return y;
  endfunction

  int nout = 0, pready = 100;
  always @(negedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      exp_v.push_back(model(in_vec));
      exp_t.push_back(cyc);
    end
    if (out_valid && out_ready) begin
      checks++;
      if (exp_v.size() == 0 || out_vec != exp_v[0]) begin
        failures++;
        $display("query %0d: got %h expected %h", nout, out_vec, (exp_v.size() > 0) ? exp_v[0] : '0);
      end
      if (exp_v.size() > 0) begin void'(exp_v.pop_front()); void'(exp_t.pop_front()); end
      nout++;
    end
  end
  // latency: first cycle the result is offered
  bit was_valid = 0;
  always @(negedge clk) if (rst_n) begin
    if (out_valid && !was_valid && exp_t.size() > 0) begin
      checks++;
      if (cyc - exp_t[0] != D + 1) begin
        failures++;
        $display("query %0d: result after %0d cycles, expected %0d", nout, cyc - exp_t[0], D + 1);
      end
    end
    was_valid = out_valid && !out_ready;
  end
  always @(posedge clk) begin
    #1;
    out_ready = ($urandom_range(99) < pready);
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int r = 0; r < int'(D); r++) begin
      for (int c = 0; c < int'(D); c++) begin
        rm[r][c] = int'($urandom_range(0, 65535)) - 32768;
        wr_data[c] = ELEM_W'(rm[r][c]);
      end
      wr_row = $clog2(D)'(r);
      wr_en = 1'b1;
      @(negedge clk);
    end
    wr_en = 1'b0;
    for (int q = 0; q < 300; q++) begin
      if (q == 150) pready = 40;
      for (int i = 0; i < int'(D); i++)
        in_vec[i] = ELEM_W'((q % 3 == 0) ? $urandom_range(0, 65535) : $urandom_range(0, 2000) - 1000);
      in_valid = 1'b1;
      forever begin
        bit acc;
        acc = in_ready;
        @(posedge clk);
        if (acc) break;
        @(negedge clk);
      end
      @(negedge clk);
      in_valid = 1'b0;
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    pready = 100;
    repeat (3 * D) @(negedge clk);
    checks++;
    if (nout != 300 || nsat == 0) begin
      failures++;
      $display("%0d results of 300, %0d saturations", nout, nsat);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
