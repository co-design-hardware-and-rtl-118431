// hpq: hierarchical priority queue (HPQ) selecting the S smallest of NS streams.
//
// Level 1 holds two systolic queues per input stream. A systolic queue takes
// one replace every two cycles, so a stream that delivers one item per cycle
// is split in two: the two queues of a pair run in opposite phases and each
// cycle the item goes to the one whose phase accepts it. Level 2 is a single
// queue of length S. When a query's last item has entered level 1 (in_last on
// the beat shared by all streams), every level-1 queue sorts itself and the
// gatherer moves their 2*NS*S items, queue by queue, into the level-2 queue at
// one item per two cycles. The level-2 queue then emits the S results, smallest
// first, with out_last on the S-th.
//
// Timing: in_ready is high whenever all level-1 queues collect; it drops for
// the cycle after in_last (the twin queue receives its end marker) and while
// any level-1 queue still holds the previous query. Gathering costs about
// 4*NS*S cycles per query and overlaps the next query's collection once the
// level-1 queues are empty.
//
// From the paper: two levels, z first-level queues feeding one second-level
// queue, and two queues per stream producing one item per cycle. The gathering
// order and the end-of-query marker are this design's choice.
module hpq
  import fanns_pkg::*;
#(
  parameter int unsigned NS = 1,   // input streams
  parameter int unsigned S  = 17   // results per query
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,   // one beat carries one item per stream
  input  item_t [NS-1:0]       in_items,
  input  logic                 in_last,
  output logic                 in_ready,
  output logic                 out_valid,
  output item_t                out_item,
  output logic                 out_last,
  input  logic                 out_ready
);
  localparam int unsigned NQ = 2 * NS;
  localparam int unsigned GW = (NQ > 1) ? $clog2(NQ) : 1;

  logic [NQ-1:0] l1_in_valid, l1_in_last, l1_in_ready, l1_filling;
  item_t [NQ-1:0] l1_in_item;
  logic [NQ-1:0] l1_out_valid, l1_out_last, l1_out_ready;
  item_t [NQ-1:0] l1_out_item;

  logic          pending;       // twin queues still owe an end marker
  logic [NS-1:0] pend_to_b;     // per stream: marker goes to queue B (else A)

  assign in_ready = (&l1_filling) && !pending;

  // ---- level-1 input split ----
  always_comb begin
    for (int s = 0; s < int'(NS); s++) begin
      l1_in_valid[2*s]   = 1'b0;
      l1_in_valid[2*s+1] = 1'b0;
      l1_in_item[2*s]    = in_items[s];
      l1_in_item[2*s+1]  = in_items[s];
      l1_in_last[2*s]    = in_last;
      l1_in_last[2*s+1]  = in_last;
      if (pending) begin
        // end marker for the twin queue, now in its accepting phase
        l1_in_item[2*s]    = ITEM_MAX;
        l1_in_item[2*s+1]  = ITEM_MAX;
        l1_in_last[2*s]    = 1'b1;
        l1_in_last[2*s+1]  = 1'b1;
        l1_in_valid[2*s]   = !pend_to_b[s];
        l1_in_valid[2*s+1] = pend_to_b[s];
      end else if (in_valid && in_ready) begin
        l1_in_valid[2*s]   = l1_in_ready[2*s];
        l1_in_valid[2*s+1] = !l1_in_ready[2*s];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pending   <= 1'b0;
      pend_to_b <= '0;
    end else if (pending) begin
      pending <= 1'b0;
    end else if (in_valid && in_ready && in_last) begin
      pending <= 1'b1;
      for (int s = 0; s < int'(NS); s++) pend_to_b[s] <= l1_in_ready[2*s];
    end
  end

  for (genvar g = 0; g < int'(NQ); g++) begin : g_l1
    systolic_pq #(.S(S), .PHASE_INIT(g[0])) u_pq (
      .clk, .rst_n,
      .in_valid (l1_in_valid[g]), .in_item(l1_in_item[g]), .in_last(l1_in_last[g]),
      .in_ready (l1_in_ready[g]), .filling(l1_filling[g]),
      .out_valid(l1_out_valid[g]), .out_item(l1_out_item[g]), .out_last(l1_out_last[g]),
      .out_ready(l1_out_ready[g])
    );
  end

  // ---- gatherer: level-1 queues, in order, into the level-2 queue ----
  logic [GW-1:0] gsel;
  logic  l2_in_valid, l2_in_ready, l2_in_last, l2_filling;
  item_t l2_in_item;

  assign l2_in_valid = l1_out_valid[gsel];
  assign l2_in_item  = l1_out_item[gsel];
  assign l2_in_last  = l1_out_last[gsel] && (gsel == GW'(NQ - 1));

  always_comb begin
    l1_out_ready       = '0;
    l1_out_ready[gsel] = l2_in_ready;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      gsel <= '0;
    end else if (l2_in_valid && l2_in_ready && l1_out_last[gsel]) begin
      gsel <= (gsel == GW'(NQ - 1)) ? '0 : gsel + 1'b1;
    end
  end

  systolic_pq #(.S(S), .PHASE_INIT(1'b0)) u_l2 (
    .clk, .rst_n,
    .in_valid (l2_in_valid), .in_item(l2_in_item), .in_last(l2_in_last),
    .in_ready (l2_in_ready), .filling(l2_filling),
    .out_valid, .out_item, .out_last, .out_ready
  );

  // The two queues of a pair never accept in the same cycle.
  for (genvar s = 0; s < int'(NS); s++) begin : g_chk
    a_twin_phase: assert property (@(posedge clk) disable iff (!rst_n)
                                   !(l1_in_ready[2*s] && l1_in_ready[2*s+1]));
  end
endmodule
