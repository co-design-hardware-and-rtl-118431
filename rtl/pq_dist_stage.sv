// pq_dist_stage: Stage PQDist, NPE pq_dist_pe links in a 1-D array.
//
// The LUT packets from Stage BuildLUT enter PE 0 and are passed from PE to
// PE; every PE scans its own memory channel, so the stage has NPE channel
// ports and NPE distance streams (the input streams of Stage SelK). All PEs
// read the same number of rows per cell, so the streams stay equally long
// and carry last on the same position.
module pq_dist_stage
  import fanns_pkg::*;
#(
  parameter int unsigned M    = 16,
  parameter int unsigned KSUB = 256,
  parameter int unsigned NPE  = 36,
  parameter int unsigned OUTQ = 16
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            lut_valid,
  output logic                            lut_ready,
  input  logic                            lut_hdr,
  input  cell_cmd_t                       lut_cmd,
  input  logic [M-1:0][DIST_W-1:0]        lut_row,
  output logic [NPE-1:0]                  mem_req_valid,
  input  logic [NPE-1:0]                  mem_req_ready,
  output logic [NPE-1:0][ADDR_W-1:0]      mem_req_addr,
  input  logic [NPE-1:0]                  mem_rsp_valid,
  input  logic [NPE-1:0][ID_W+M*CODE_W-1:0] mem_rsp_data,
  output logic [NPE-1:0]                  out_valid,
  input  logic [NPE-1:0]                  out_ready,
  output item_t [NPE-1:0]                 out_item,
  output logic [NPE-1:0]                  out_last
);
  logic                     lv [NPE+1];
  logic                     lr [NPE+1];
  logic                     lh [NPE+1];
  cell_cmd_t                lc [NPE+1];
  logic [M-1:0][DIST_W-1:0] lw [NPE+1];

  assign lv[0]     = lut_valid;
  assign lut_ready = lr[0];
  assign lh[0]     = lut_hdr;
  assign lc[0]     = lut_cmd;
  assign lw[0]     = lut_row;
  assign lr[NPE]   = 1'b1;     // beats leaving the tail PE are dropped

  for (genvar p = 0; p < int'(NPE); p++) begin : g_pe
    pq_dist_pe #(.M(M), .KSUB(KSUB), .NPE(NPE), .IDX(p), .OUTQ(OUTQ)) u_pe (
      .clk, .rst_n,
      .lut_in_valid (lv[p]),   .lut_in_ready (lr[p]),   .lut_in_hdr (lh[p]),
      .lut_in_cmd   (lc[p]),   .lut_in_row   (lw[p]),
      .lut_out_valid(lv[p+1]), .lut_out_ready(lr[p+1]), .lut_out_hdr(lh[p+1]),
      .lut_out_cmd  (lc[p+1]), .lut_out_row  (lw[p+1]),
      .mem_req_valid(mem_req_valid[p]), .mem_req_ready(mem_req_ready[p]),
      .mem_req_addr (mem_req_addr[p]),
      .mem_rsp_valid(mem_rsp_valid[p]), .mem_rsp_data(mem_rsp_data[p]),
      .out_valid(out_valid[p]), .out_ready(out_ready[p]),
      .out_item (out_item[p]),  .out_last (out_last[p])
    );
  end
endmodule
