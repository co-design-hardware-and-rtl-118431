// ivf_dist_pe: one PE of Stage IVFDist, a link in a 1-D array of NPE PEs.
//
// The nlist IVF centroids are split into NPE contiguous blocks; PE number IDX
// keeps block IDX on chip (the first NLIST % NPE PEs hold one centroid more).
// For each query the PE computes the squared L2 distance from the query to
// each of its centroids, one centroid per cycle (D subtract-square units and
// an adder tree, centroid read registered), and buffers the results.
//
// The PEs form a chain instead of a broadcast/gather tree: PE IDX takes the
// query from PE IDX-1 and passes it on to PE IDX+1, and its result stream
// first forwards the BASE distances of all upstream PEs (arriving on r_in)
// and then appends its own. The last PE therefore emits all nlist (distance,
// cell ID) items of a query in cell order, flagging the final one with last.
//
// Timing: query in, one cycle to latch, NLOC+1 cycles to compute; the result
// stream runs at one item per cycle when not stalled. A new query is taken once
// the previous one's own results have all left. The chain topology and the
// per-stage PE count come from the paper; the even block split, the compute
// rate and the buffering are this design's choice.
module ivf_dist_pe
  import fanns_pkg::*;
#(
  parameter int unsigned D     = 128,
  parameter int unsigned NLIST = 8192,
  parameter int unsigned NPE   = 11,
  parameter int unsigned IDX   = 0
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // centroid load (broadcast; the PE keeps the cells of its block)
  input  logic                     wr_en,
  input  id_t                      wr_cell,
  input  logic [D-1:0][ELEM_W-1:0] wr_vec,
  // query chain
  input  logic                     q_in_valid,
  output logic                     q_in_ready,
  input  logic [D-1:0][ELEM_W-1:0] q_in_vec,
  output logic                     q_out_valid,
  input  logic                     q_out_ready,
  output logic [D-1:0][ELEM_W-1:0] q_out_vec,
  // result chain
  input  logic                     r_in_valid,
  output logic                     r_in_ready,
  input  item_t                    r_in_item,
  input  logic                     r_in_last,
  output logic                     r_out_valid,
  input  logic                     r_out_ready,
  output item_t                    r_out_item,
  output logic                     r_out_last
);
  localparam int unsigned PER  = NLIST / NPE;
  localparam int unsigned REM  = NLIST % NPE;
  localparam int unsigned CAP  = PER + ((REM > 0) ? 1 : 0);
  localparam int unsigned NLOC = PER + ((IDX < REM) ? 1 : 0);
  localparam int unsigned BASE = IDX * PER + ((IDX < REM) ? IDX : REM);
  localparam int unsigned AW   = $clog2(CAP + 1);
  localparam int unsigned BW   = $clog2(NLIST + 1);
  localparam bit          TAIL = (IDX == NPE - 1);
  localparam int unsigned SQW  = 2 * ELEM_W + 2;

  logic [D-1:0][ELEM_W-1:0] cent [CAP];
  dist_t                    res  [CAP];

  // ---- centroid load ----
  always_ff @(posedge clk) begin
    if (wr_en && wr_cell >= ID_W'(BASE) && wr_cell < ID_W'(BASE + NLOC))
      cent[AW'(wr_cell - ID_W'(BASE))] <= wr_vec;
  end

  logic own_phase;   // upstream items all forwarded, own results next

  // ---- query latch and forward ----
  logic [D-1:0][ELEM_W-1:0] q;
  logic                     active;      // computing or emitting own results
  logic [AW-1:0]            rd_idx;      // next centroid to read
  logic                     rd_v;        // centroid register holds a row
  logic [AW-1:0]            rd_q;        // index of the registered row
  logic [D-1:0][ELEM_W-1:0] crow;
  logic [AW-1:0]            n_done;      // own distances computed
  logic [AW-1:0]            n_sent;      // own distances emitted
  logic [BW-1:0]            n_fwd;       // upstream items forwarded

  assign q_in_ready = !active && !q_out_valid;

  always_ff @(posedge clk) begin
    if (!rst_n) q_out_valid <= 1'b0;
    else if (q_in_valid && q_in_ready) q_out_valid <= !TAIL;
    else if (q_out_ready) q_out_valid <= 1'b0;
  end
  always_ff @(posedge clk) begin
    if (q_in_valid && q_in_ready) q_out_vec <= q_in_vec;
  end

  // ---- distance datapath ----
  dist_t dsum;
  always_comb begin
    dsum = '0;
    for (int i = 0; i < int'(D); i++) begin
      logic signed [SQW-1:0] df;
      df   = SQW'($signed(crow[i])) - SQW'($signed(q[i]));
      dsum += DIST_W'($unsigned(df * df));
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      active <= 1'b0;
      rd_idx <= '0;
      rd_v   <= 1'b0;
      n_done <= '0;
    end else begin
      if (q_in_valid && q_in_ready) begin
        active <= 1'b1;
        rd_idx <= '0;
        n_done <= '0;
      end
      rd_v <= 1'b0;
      if (active && rd_idx < AW'(NLOC)) begin
        crow   <= cent[rd_idx];
        rd_q   <= rd_idx;
        rd_v   <= 1'b1;
        rd_idx <= rd_idx + 1'b1;
      end
      if (rd_v) begin
        res[rd_q] <= dsum;
        n_done    <= n_done + 1'b1;
      end
      if (active && r_out_valid && r_out_ready && own_phase && n_sent == AW'(NLOC - 1))
        active <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (q_in_valid && q_in_ready) q <= q_in_vec;
  end

  // ---- result chain: upstream first, then own ----
  assign own_phase = (n_fwd == BW'(BASE));

  always_comb begin
    r_in_ready  = 1'b0;
    r_out_valid = 1'b0;
    r_out_item  = '{distance: res[n_sent], id: ID_W'(BASE) + ID_W'(n_sent)};
    r_out_last  = TAIL && (n_sent == AW'(NLOC - 1));
    if (active && !own_phase) begin
      r_out_valid = r_in_valid;
      r_in_ready  = r_out_ready;
      r_out_item  = r_in_item;
      r_out_last  = r_in_last;
    end else if (active && own_phase) begin
      r_out_valid = (n_sent < n_done);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      n_fwd  <= '0;
      n_sent <= '0;
    end else if (r_out_valid && r_out_ready) begin
      if (!own_phase) begin
        n_fwd <= n_fwd + 1'b1;
      end else if (n_sent == AW'(NLOC - 1)) begin
        n_sent <= '0;
        n_fwd  <= '0;
      end else begin
        n_sent <= n_sent + 1'b1;
      end
    end
  end
endmodule
