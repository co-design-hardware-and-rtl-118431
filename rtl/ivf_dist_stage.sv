// ivf_dist_stage: Stage IVFDist, NPE ivf_dist_pe links in a 1-D array.
//
// Computes the squared L2 distance from each query to all NLIST IVF
// centroids, held on chip and split evenly over the PEs. The query enters
// PE 0 and is handed down the chain; the result stream leaves the last PE
// as NLIST (distance, cell ID) items in cell order, the last one flagged.
// The stream is the input of Stage SelCells. A query costs about NLIST/NPE
// compute cycles per PE (all PEs in parallel) and NLIST output cycles at the
// tail, which is the stage's steady-state rate.
module ivf_dist_stage
  import fanns_pkg::*;
#(
  parameter int unsigned D     = 128,
  parameter int unsigned NLIST = 8192,
  parameter int unsigned NPE   = 11
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  id_t                      wr_cell,
  input  logic [D-1:0][ELEM_W-1:0] wr_vec,
  input  logic                     q_valid,
  output logic                     q_ready,
  input  logic [D-1:0][ELEM_W-1:0] q_vec,
  output logic                     out_valid,
  input  logic                     out_ready,
  output item_t                    out_item,
  output logic                     out_last
);
  logic                     qv [NPE+1];
  logic                     qr [NPE+1];
  logic [D-1:0][ELEM_W-1:0] qd [NPE+1];
  logic                     rv [NPE+1];
  logic                     rr [NPE+1];
  item_t                    ri [NPE+1];
  logic                     rl [NPE+1];

  assign qv[0]   = q_valid;
  assign q_ready = qr[0];
  assign qd[0]   = q_vec;
  assign qr[NPE] = 1'b1;           // the last PE never forwards the query
  assign rv[0]   = 1'b0;           // nothing upstream of PE 0
  assign ri[0]   = ITEM_MAX;
  assign rl[0]   = 1'b0;
  assign out_valid = rv[NPE];
  assign rr[NPE]   = out_ready;
  assign out_item  = ri[NPE];
  assign out_last  = rl[NPE];

  for (genvar p = 0; p < int'(NPE); p++) begin : g_pe
    ivf_dist_pe #(.D(D), .NLIST(NLIST), .NPE(NPE), .IDX(p)) u_pe (
      .clk, .rst_n, .wr_en, .wr_cell, .wr_vec,
      .q_in_valid (qv[p]),   .q_in_ready (qr[p]),   .q_in_vec (qd[p]),
      .q_out_valid(qv[p+1]), .q_out_ready(qr[p+1]), .q_out_vec(qd[p+1]),
      .r_in_valid (rv[p]),   .r_in_ready (rr[p]),   .r_in_item(ri[p]),   .r_in_last(rl[p]),
      .r_out_valid(rv[p+1]), .r_out_ready(rr[p+1]), .r_out_item(ri[p+1]), .r_out_last(rl[p+1])
    );
  end
endmodule
