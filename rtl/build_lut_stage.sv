// build_lut_stage: Stage BuildLUT, residual unit plus NPE build_lut_pe links.
//
// Input: the query (from the global controller's fork) and one cell command
// per probed cell. Output: one LUT packet per probed cell, in probe order,
// each a header beat with the cell command followed by KSUB rows of M
// distances. The IVF centroids (for the residual) and the PQ codebook are
// kept on chip. Steady state is limited by the tail PE's output, NPROBE *
// (KSUB+1) beats per query, while the NPE PEs compute their blocks in
// parallel.
module build_lut_stage
  import fanns_pkg::*;
#(
  parameter int unsigned D      = 128,
  parameter int unsigned M      = 16,
  parameter int unsigned KSUB   = 256,
  parameter int unsigned NLIST  = 8192,
  parameter int unsigned NPROBE = 17,
  parameter int unsigned NPE    = 9
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     cent_wr_en,
  input  id_t                      cent_wr_cell,
  input  logic [D-1:0][ELEM_W-1:0] cent_wr_vec,
  input  logic                     cb_wr_en,
  input  logic [$clog2(KSUB)-1:0]  cb_wr_idx,
  input  logic [D-1:0][ELEM_W-1:0] cb_wr_data,
  input  logic                     q_valid,
  output logic                     q_ready,
  input  logic [D-1:0][ELEM_W-1:0] q_vec,
  input  logic                     cmd_valid,
  output logic                     cmd_ready,
  input  cell_cmd_t                cmd,
  output logic                     lut_valid,
  input  logic                     lut_ready,
  output logic                     lut_hdr,
  output cell_cmd_t                lut_cmd,
  output logic [M-1:0][DIST_W-1:0] lut_row
);
  logic                     rv [NPE+1];
  logic                     rr [NPE+1];
  logic [D-1:0][ELEM_W-1:0] rd [NPE+1];
  cell_cmd_t                rc [NPE+1];
  logic                     lv [NPE+1];
  logic                     lr [NPE+1];
  logic                     lh [NPE+1];
  cell_cmd_t                lc [NPE+1];
  logic [M-1:0][DIST_W-1:0] lw [NPE+1];

  lut_residual #(.D(D), .NLIST(NLIST)) u_res (
    .clk, .rst_n,
    .wr_en(cent_wr_en), .wr_cell(cent_wr_cell), .wr_vec(cent_wr_vec),
    .q_valid, .q_ready, .q_vec,
    .cmd_valid, .cmd_ready, .cmd_in(cmd),
    .out_valid(rv[0]), .out_ready(rr[0]), .out_res(rd[0]), .out_cmd(rc[0])
  );

  assign rr[NPE] = 1'b1;   // the tail PE keeps every residual that reaches it
  assign lv[0]   = 1'b0;   // nothing upstream of PE 0
  assign lh[0]   = 1'b0;
  assign lc[0]   = '0;
  assign lw[0]   = '0;
  assign lut_valid = lv[NPE];
  assign lr[NPE]   = lut_ready;
  assign lut_hdr   = lh[NPE];
  assign lut_cmd   = lc[NPE];
  assign lut_row   = lw[NPE];

  for (genvar p = 0; p < int'(NPE); p++) begin : g_pe
    build_lut_pe #(.D(D), .M(M), .KSUB(KSUB), .NPROBE(NPROBE), .NPE(NPE), .IDX(p)) u_pe (
      .clk, .rst_n, .cb_wr_en, .cb_wr_idx, .cb_wr_data,
      .res_in_valid (rv[p]),   .res_in_ready (rr[p]),   .res_in_vec (rd[p]),   .res_in_cmd (rc[p]),
      .res_out_valid(rv[p+1]), .res_out_ready(rr[p+1]), .res_out_vec(rd[p+1]), .res_out_cmd(rc[p+1]),
      .lut_in_valid (lv[p]),   .lut_in_ready (lr[p]),   .lut_in_hdr (lh[p]),   .lut_in_cmd (lc[p]),   .lut_in_row (lw[p]),
      .lut_out_valid(lv[p+1]), .lut_out_ready(lr[p+1]), .lut_out_hdr(lh[p+1]), .lut_out_cmd(lc[p+1]), .lut_out_row(lw[p+1])
    );
  end
endmodule
