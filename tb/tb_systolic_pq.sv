// tb_systolic_pq: self-checking test of the systolic priority queue.
//
// Streams queries of random length (shorter and longer than S, random and
// tied distances) into the queue at full rate and compares the S items it
// returns with the S smallest distances of the query, sorted in software.
// Also checks the rate (one replace every two cycles: in_ready never high in
// two consecutive cycles, N items accepted within 2N+1 cycles) and that the
// drain takes S cycles before the first result.
module tb_systolic_pq;
  import fanns_pkg::*;
  localparam int unsigned S = 10;

  logic  clk = 1'b0, rst_n = 1'b0;
  logic  in_valid = 1'b0, in_last = 1'b0, in_ready, filling;
  item_t in_item = ITEM_MAX;
  logic  out_valid, out_last, out_ready = 1'b1;
  item_t out_item;
  int    checks = 0, failures = 0;

  always #5 clk = ~clk;

  systolic_pq #(.S(S)) dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // rate rule: in_ready never on in two consecutive cycles
  logic prev_ready = 1'b0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (prev_ready && in_ready) begin
        failures++;
        $display("in_ready high in consecutive cycles");
      end
      prev_ready <= in_ready;
    end
  end

  dist_t got [$];
  int    last_seen = 0;
  longint out_cycle = 0, last_in_cycle = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) begin
    if (out_valid && out_ready) begin
      if (got.size() == 0) out_cycle = cyc;
      got.push_back(out_item.distance);
      if (out_last) last_seen++;
    end
  end

  task automatic run_query(int n, int range, bit stall_out);
    dist_t ref_d [$];
    longint t0;
    int cnt;
    got.delete();
    last_seen = 0;
    out_ready <= !stall_out;
    for (int i = 0; i < n; i++) ref_d.push_back(dist_t'($urandom_range(range)));
    t0 = cyc;
    for (int i = 0; i < n; i++) begin
      in_valid <= 1'b1;
      in_item  <= '{distance: ref_d[i], id: id_t'(i)};
      in_last  <= (i == n - 1);
      do @(posedge clk); while (!in_ready);
    end
    last_in_cycle = cyc;
    in_valid <= 1'b0;
    in_last  <= 1'b0;
    checks++;
    if (last_in_cycle - t0 > 2 * n + 1) begin
      failures++;
      $display("rate: %0d items took %0d cycles", n, last_in_cycle - t0);
    end
    if (stall_out) begin
      repeat (S + 20) @(posedge clk);
      out_ready <= 1'b1;
    end
    cnt = 0;
    while (last_seen == 0 && cnt < 1000) begin
      @(posedge clk);
      cnt++;
    end
    @(posedge clk);
    ref_d.sort();
    while (ref_d.size() < S) ref_d.push_back(DIST_MAX);
    checks++;
    if (got.size() != S) begin
      failures++;
      $display("expected %0d results, got %0d", S, got.size());
    end else begin
      for (int i = 0; i < int'(S); i++) begin
        checks++;
        if (got[i] != ref_d[i]) begin
          failures++;
          $display("n=%0d result %0d: got %0d expected %0d", n, i, got[i], ref_d[i]);
        end
      end
    end
    if (!stall_out) begin
      checks++;
      if (out_cycle - last_in_cycle < S || out_cycle - last_in_cycle > S + 3) begin
        failures++;
        $display("drain took %0d cycles", out_cycle - last_in_cycle);
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    run_query(1, 1000, 0);
    run_query(5, 1000, 0);
    run_query(S, 1000, 0);
    run_query(S + 1, 1000, 0);
    for (int q = 0; q < 40; q++) run_query(int'($urandom_range(2, 300)), (q % 3 == 0) ? 20 : 1000000, q % 5 == 1);
    // descending input: every item replaces the root
    begin
      dist_t r [$];
      got.delete();
      last_seen = 0;
      for (int i = 0; i < 50; i++) begin
        in_valid <= 1'b1;
        in_item  <= '{distance: dist_t'(1000 - i), id: id_t'(i)};
        in_last  <= (i == 49);
        do @(posedge clk); while (!in_ready);
      end
      in_valid <= 1'b0;
      in_last  <= 1'b0;
      while (last_seen == 0) @(posedge clk);
      @(posedge clk);
      for (int i = 0; i < int'(S); i++) begin
        checks++;
        if (got[i] != dist_t'(951 + i)) begin
          failures++;
          $display("descending: got %0d expected %0d", got[i], 951 + i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
