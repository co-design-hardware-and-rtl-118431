// tb_bitonic_sorter: self-checking test of bitonic_sorter (L = 16).
//
// Random sets of 16 items (narrow and wide distance ranges, so ties occur)
// enter with random gaps while `en` stalls the pipeline at random. Every set
// must come out sorted ascending, as a permutation of its input, with its
// last flag, exactly 10 enabled cycles after it entered: the latency
// log2(l)(1+log2(l))/2 the paper gives for a sorting network of width l=16.
module tb_bitonic_sorter;
  import fanns_pkg::*;
  localparam int unsigned L = 16;
  localparam int unsigned LAT = $clog2(L) * ($clog2(L) + 1) / 2;

  logic clk = 1'b0, rst_n = 1'b0;
  logic en = 1'b0, in_valid = 1'b0, in_last = 1'b0, out_valid, out_last;
  item_t [L-1:0] in_items = '0, out_items;
  int checks = 0, failures = 0, nout = 0;
  int pen = 100;
  always #5 clk = ~clk;

  bitonic_sorter #(.L(L)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint encnt = 0;
  always @(posedge clk) if (rst_n && en) encnt <= encnt + 1;

  item_t [L-1:0] exp_s [$];
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
          // equal distances may come in either order: compare distances
          // here and the ID multiset below
          if (out_items[i].distance != exp_s[0][i].distance) begin
            failures++;
            $display("set %0d item %0d: %0d expected %0d", nout, i,
                     out_items[i].distance, exp_s[0][i].distance);
            break;
          end
        begin
          id_t a [$], b [$];
          for (int i = 0; i < int'(L); i++) begin a.push_back(out_items[i].id); b.push_back(exp_s[0][i].id); end
          a.sort(); b.sort();
          checks++;
          if (a != b) begin failures++; $display("set %0d: items lost", nout); end
          a.delete(); b.delete();
        end
        checks++;
        if (out_last != exp_l[0]) begin failures++; $display("set %0d: last flag", nout); end
        checks++;
        if (encnt - exp_t[0] != LAT) begin
          failures++;
          $display("set %0d: latency %0d expected %0d", nout, encnt - exp_t[0], LAT);
        end
        void'(exp_s.pop_front()); void'(exp_l.pop_front()); void'(exp_t.pop_front());
      end
      nout++;
    end
    if (in_valid) begin
      item_t [L-1:0] s;
      item_t r [$];
      r.delete();
      for (int i = 0; i < int'(L); i++) r.push_back(in_items[i]);
      r.sort() with (item.distance);
      for (int i = 0; i < int'(L); i++) s[i] = r[i];
      exp_s.push_back(s);
      exp_l.push_back(in_last);
      exp_t.push_back(encnt);
    end
  end

  int nin = 0;
  int range = 1000;
  always @(posedge clk) begin
    #1;
    en = ($urandom_range(99) < pen);
    in_valid = rst_n && (nin < 2000) && ($urandom_range(3) != 0);
    in_last  = ($urandom_range(4) == 0);
    for (int i = 0; i < int'(L); i++)
      in_items[i] = '{distance: dist_t'($urandom_range(range)), id: id_t'(nin * L + i)};
    if (in_valid && en) nin++;
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    repeat (500) @(posedge clk);
    range = 5;           // many ties
    repeat (500) @(posedge clk);
    pen = 60; range = 1 << 30;
    while (nin < 2000) @(posedge clk);
    pen = 100;
    repeat (30) @(posedge clk);
    checks++;
    if (nout != nin || exp_s.size() != 0) begin
      failures++;
      $display("%0d sets in, %0d out", nin, nout);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
