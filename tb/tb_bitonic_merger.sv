// tb_bitonic_merger: self-checking test of bitonic_merger (L = 16).
//
// Pairs of sorted 16-item arrays enter with random gaps while `en` stalls the
// pipeline at random. Each output must be the 16 smallest of the 32 inputs,
// sorted ascending, with the last flag, exactly 1 + log2(16) = 5 enabled
// cycles after the pair entered.
module tb_bitonic_merger;
  import fanns_pkg::*;
  localparam int unsigned L = 16;
  localparam int unsigned LAT = 1 + $clog2(L);

  logic clk = 1'b0, rst_n = 1'b0;
  logic en = 1'b0, in_valid = 1'b0, in_last = 1'b0, out_valid, out_last;
  item_t [L-1:0] in_a = '0, in_b = '0, out_items;
  int checks = 0, failures = 0, nout = 0, nin = 0;
  int pen = 100, range = 1000;
  always #5 clk = ~clk;

  bitonic_merger #(.L(L)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint encnt = 0;
  always @(posedge clk) if (rst_n && en) encnt <= encnt + 1;

  dist_t [L-1:0] exp_s [$];
  bit     exp_l [$];
  longint exp_t [$];
  always @(negedge clk) if (rst_n && en) begin
    if (out_valid) begin
      checks++;
      if (exp_s.size() == 0) begin
        failures++;
        $display("unexpected output");
      end else begin
        for (int i = 0; i < int'(L); i++)
          if (out_items[i].distance != exp_s[0][i]) begin
            failures++;
            $display("merge %0d item %0d: %0d expected %0d", nout, i, out_items[i].distance, exp_s[0][i]);
            break;
          end
        checks++;
        if (out_last != exp_l[0]) begin failures++; $display("merge %0d: last flag", nout); end
        checks++;
        if (encnt - exp_t[0] != LAT) begin
          failures++;
          $display("merge %0d: latency %0d expected %0d", nout, encnt - exp_t[0], LAT);
        end
        void'(exp_s.pop_front()); void'(exp_l.pop_front()); void'(exp_t.pop_front());
      end
      nout++;
    end
    if (in_valid) begin
      dist_t [L-1:0] s;
      dist_t r [$];
      r.delete();
      for (int i = 0; i < int'(L); i++) begin r.push_back(in_a[i].distance); r.push_back(in_b[i].distance); end
      r.sort();
      for (int i = 0; i < int'(L); i++) s[i] = r[i];
      exp_s.push_back(s);
      exp_l.push_back(in_last);
      exp_t.push_back(encnt);
    end
  end

  always @(posedge clk) begin
    dist_t ra [$], rb [$];
    #1;
    en = ($urandom_range(99) < pen);
    in_valid = rst_n && (nin < 2000) && ($urandom_range(3) != 0);
    in_last  = ($urandom_range(4) == 0);
    ra.delete(); rb.delete();
    for (int i = 0; i < int'(L); i++) begin
      ra.push_back(dist_t'($urandom_range(range)));
      rb.push_back(dist_t'($urandom_range(range)));
    end
    ra.sort(); rb.sort();
    for (int i = 0; i < int'(L); i++) begin
      in_a[i] = '{distance: ra[i], id: id_t'(i)};
      in_b[i] = '{distance: rb[i], id: id_t'(L + i)};
    end
    if (in_valid && en) nin++;
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    repeat (500) @(posedge clk);
    range = 5;
    repeat (500) @(posedge clk);
    pen = 60; range = 1 << 30;
    while (nin < 2000) @(posedge clk);
    pen = 100;
    repeat (20) @(posedge clk);
    checks++;
    if (nout != nin || exp_s.size() != 0) begin
      failures++;
      $display("%0d merges in, %0d out", nin, nout);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
