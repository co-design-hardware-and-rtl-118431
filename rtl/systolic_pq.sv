// systolic_pq: systolic priority queue that keeps the S smallest items of a stream.
//
// The queue is a register array q[0..S-1] joined by compare-swap units, with
// the root q[0] on the input side. Only the "replace" operation exists: an
// incoming item that is smaller than the root overwrites the root. A free
// running phase bit alternates two kinds of cycles:
//   phase 0: the root may be replaced, then pairs (0,1), (2,3), ... compare-swap;
//   phase 1: pairs (1,2), (3,4), ... compare-swap.
// Each compare-swap moves the larger item towards the root, so the root is the
// largest of the kept items and the smallest ones settle at the far end. One
// replace is therefore possible every two cycles (in_ready is high in phase 0
// only). The item marked in_last ends the query: the queue then runs S more
// swap cycles, which fully sorts it (odd-even transposition), and streams the
// S items out smallest first (out_last on the S-th), refilling the root with
// ITEM_MAX so that it is empty again for the next query.
//
// The replace operation, the two-cycle rhythm and the odd/even pairing follow
// the systolic queue of the paper's selection stages; the end-of-query drain
// and serial read-out are this design's choice. PHASE_INIT lets two queues run
// in opposite phases so that together they accept one item every cycle.
module systolic_pq
  import fanns_pkg::*;
#(
  parameter int unsigned S          = 10,
  parameter bit          PHASE_INIT = 1'b0
) (
  input  logic  clk,
  input  logic  rst_n,
  // insert side
  input  logic  in_valid,
  input  item_t in_item,
  input  logic  in_last,
  output logic  in_ready,
  output logic  filling,     // queue is collecting (not draining or emitting)
  // read-out side
  output logic  out_valid,
  output item_t out_item,
  output logic  out_last,
  input  logic  out_ready
);
  typedef enum logic [1:0] {FILL, DRAIN, EMIT} state_e;

  state_e state;
  logic   phase;
  item_t  q [S];
  logic [$clog2(S+1)-1:0] cnt;

  assign filling   = (state == FILL);
  assign in_ready  = (state == FILL) && !phase;
  assign out_valid = (state == EMIT);
  assign out_item  = q[S-1];
  assign out_last  = (state == EMIT) && (cnt == ($clog2(S+1))'(S - 1));

  // One compare-swap layer; pairs start at index `first`.
  function automatic void cswap(ref item_t a [S], input int first);
    for (int i = first; i + 1 < int'(S); i += 2) begin
      if (a[i].distance < a[i+1].distance) begin
        item_t t = a[i];
        a[i]   = a[i+1];
        a[i+1] = t;
      end
    end
  endfunction

  item_t nq [S];
  always_comb begin
    for (int i = 0; i < int'(S); i++) nq[i] = q[i];
    if (state == EMIT) begin
      if (out_ready) begin
        for (int i = int'(S) - 1; i > 0; i--) nq[i] = q[i-1];
        nq[0] = ITEM_MAX;
      end
    end else if (!phase) begin
      if (state == FILL && in_valid && (in_item.distance < q[0].distance)) nq[0] = in_item;
      cswap(nq, 0);
    end else begin
      cswap(nq, 1);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= FILL;
      phase <= PHASE_INIT;
      cnt   <= '0;
      for (int i = 0; i < int'(S); i++) q[i] <= ITEM_MAX;
    end else begin
      phase <= !phase;
      for (int i = 0; i < int'(S); i++) q[i] <= nq[i];
      unique case (state)
        FILL: if (in_valid && in_ready && in_last) begin
          state <= DRAIN;
          cnt   <= '0;
        end
        DRAIN: begin
          if (cnt == ($clog2(S+1))'(S)) begin
            state <= EMIT;
            cnt   <= '0;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        EMIT: if (out_ready) begin
          if (out_last) begin
            state <= FILL;
            cnt   <= '0;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        default: state <= FILL;
      endcase
    end
  end

  // The root is only ever written in phase 0 of a collecting cycle.
  a_insert_rate: assert property (@(posedge clk) disable iff (!rst_n)
                                  (in_valid && in_ready) |=> !in_ready);
endmodule
