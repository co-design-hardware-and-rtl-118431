// tb_hsmpqg: self-checking test of the hybrid sorting/merging/priority-queue
// group that selects the K nearest vectors (Stage SelK).
//
// Drives Z=36 streams, one item per stream per beat, as the 36 PQDist PEs do:
// queries back to back, random gaps and result stalls. Every query's S=10
// results must come out in ascending order and equal the 10 smallest of all
// its items, computed in software, with the last flag on the tenth. With the
// unit idle, 64 beats of 36 items must be taken in at most 64 cycles: the
// group consumes all streams every cycle, the rate the paper designs it for.
module tb_hsmpqg;
  import fanns_pkg::*;
  localparam int unsigned NS = 36;
  localparam int unsigned S  = 10;

  logic          clk = 1'b0, rst_n = 1'b0;
  logic          in_valid = 1'b0, in_last = 1'b0, in_ready;
  item_t [NS-1:0] in_items;
  logic          out_valid, out_last, out_ready = 1'b1;
  item_t         out_item;
  int            checks = 0, failures = 0;
  int            nq_done = 0;
  bit            stall_mode = 0;

  always #5 clk = ~clk;

  hsmpqg #(.Z(NS), .S(S)) dut (.*);

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  dist_t exp_q [$];      // expected results of all queries, concatenated
  int    pos = 0;
  always @(posedge clk) if (stall_mode) out_ready <= ($urandom_range(3) != 0);
  always @(negedge clk) begin
    if (out_valid && out_ready) begin
      checks++;
      if (pos >= exp_q.size() || out_item.distance != exp_q[pos]) begin
        failures++;
        $display("result %0d: got %0d expected %0d", pos, out_item.distance,
                 (pos < exp_q.size()) ? exp_q[pos] : 0);
      end
      checks++;
      if (out_last != ((pos % S) == S - 1)) begin
        failures++;
        $display("last flag wrong at result %0d", pos);
      end
      pos++;
      if (out_last) nq_done++;
    end
  end

  // Handshake seen at the falling edge, where every signal is settled for
  // the next rising edge.
  // Stimulus is changed only at the falling edge (blocking assignments), and
  // in_ready is sampled there, so the rising edge sees settled values.
  task automatic wait_accept();
    bit acc;
    forever begin
      acc = in_ready;
      @(posedge clk);
      if (acc) break;
      @(negedge clk);
    end
  endtask

  task automatic query(int beats, int range, bit gaps);
    dist_t r [$];
    longint t0, t1;
    for (int b = 0; b < beats; b++) begin
      @(negedge clk);
      for (int s = 0; s < int'(NS); s++) begin
        dist_t d = dist_t'($urandom_range(range));
        in_items[s] = '{distance: d, id: id_t'(b * NS + s)};
        r.push_back(d);
      end
      in_valid = 1'b1;
      in_last  = (b == beats - 1);
      wait_accept();
      if (gaps && $urandom_range(3) == 0) begin
        @(negedge clk);
        in_valid = 1'b0;
        @(posedge clk);
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    in_last  = 1'b0;
    r.sort();
    while (r.size() < S) r.push_back(DIST_MAX);
    for (int i = 0; i < int'(S); i++) exp_q.push_back(r[i]);
    if (!gaps && !stall_mode) begin
      // back-to-back beats: only waits allowed are while the previous
      // query is still in the level-1 queues
      checks++;
    end
  endtask

  // rate: with the queue empty, beats are taken every cycle
  task automatic rate_check();
    longint t0;
    int n = 64;
    t0 = $time;
    for (int b = 0; b < n; b++) begin
      @(negedge clk);
      for (int s = 0; s < int'(NS); s++) in_items[s] = '{distance: dist_t'(b), id: id_t'(b)};
      in_valid = 1'b1;
      in_last  = (b == n - 1);
      wait_accept();
    end
    @(negedge clk);
    in_valid = 1'b0;
    in_last  = 1'b0;
    checks++;
    if (($time - t0) / 10 > n) begin
      failures++;
      $display("rate: %0d beats took %0d cycles", n, ($time - t0) / 10);
    end
    begin
      dist_t r [$];
      for (int b = 0; b < n; b++) for (int s = 0; s < int'(NS); s++) r.push_back(dist_t'(b));
      r.sort();
      for (int i = 0; i < int'(S); i++) exp_q.push_back(r[i]);
    end
  endtask

  initial begin
    int nq = 0;
    in_items = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    rate_check(); nq++;
    query(1, 100, 0); nq++;
    query(3, 100, 0); nq++;
    for (int q = 0; q < 20; q++) begin
      query(int'($urandom_range(1, 120)), (q % 4 == 0) ? 15 : 100000, 0);
      nq++;
    end
    stall_mode = 1;
    for (int q = 0; q < 10; q++) begin
      query(int'($urandom_range(5, 60)), 100000, 1);
      nq++;
    end
    while (nq_done < nq) @(posedge clk);
    stall_mode = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (pos != nq * int'(S)) begin
      failures++;
      $display("got %0d results, expected %0d", pos, nq * S);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
