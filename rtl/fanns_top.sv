// fanns_top: IVF-PQ vector-search accelerator, K=10 configuration for SIFT100M.
//
// A query (a D-dimensional vector) passes six pipelined stages:
//   OPQ      rotate the query by the OPQ matrix                  (opq_pe)
//   IVFDist  distances to all NLIST IVF centroids, N_IVF PEs      (ivf_dist_stage)
//   SelCells keep the NPROBE closest cells, 2-queue HPQ           (hpq)
//   BuildLUT per probed cell, an M x KSUB distance table, N_LUT PEs (build_lut_stage)
//   PQDist   scan the cells' PQ codes by table lookup, N_PQ PEs,
//            one memory channel each                              (pq_dist_stage)
//   SelK     keep the K closest vectors over N_PQ streams, HSMPQG (hsmpqg)
// The global controller forks the rotated query to IVFDist and (through a
// FIFO) to BuildLUT, and turns selected cell IDs into scan commands from its
// cell metadata table. Several queries are in flight in different stages.
//
// Interfaces: the index is loaded through one write port (ld_*), whose target
// selects an OPQ row, an IVF centroid (written to both on-chip copies), a PQ
// codeword or a cell's {start row, count} (in ld_data's low ADDR_W + CNT_W
// bits). Queries enter on q_*, results leave on res_* as K items per query,
// closest first, the K-th flagged last. The PQ codes live in off-chip memory:
// each PQDist PE has a read port (request address, in-order response with
// {vector ID, M codes}); the memory itself is outside this design. The host
// link (PCIe or a network stack) is outside too.
//
// Default parameters are the K=10 design the paper reports for SIFT100M at
// R@10 = 80%: OPQ + IVF8192, nprobe 17, m = 16, 1/11/9/36 PEs in Stages
// OPQ/IVFDist/BuildLUT/PQDist, SelCells as a 2-stream HPQ and SelK as a
// 36-stream HSMPQG. Number formats and FIFO depths are this design's choice.
module fanns_top
  import fanns_pkg::*;
#(
  parameter int unsigned D        = 128,
  parameter int unsigned M        = 16,
  parameter int unsigned KSUB     = 256,
  parameter int unsigned NLIST    = 8192,
  parameter int unsigned NPROBE   = 17,
  parameter int unsigned K        = 10,
  parameter int unsigned N_IVF    = 11,
  parameter int unsigned N_LUT    = 9,
  parameter int unsigned N_PQ     = 36,
  parameter bit          OPQ_EN   = 1'b1,
  parameter int unsigned OPQ_FRAC = 14,
  parameter int unsigned OUTQ     = 16,
  parameter int unsigned QFIFO    = 4
) (
  input  logic                             clk,
  input  logic                             rst_n,
  // index load
  input  logic                             ld_valid,
  input  ld_target_e                       ld_target,
  input  id_t                              ld_addr,
  input  logic [D-1:0][ELEM_W-1:0]         ld_data,
  // queries
  input  logic                             q_valid,
  output logic                             q_ready,
  input  logic [D-1:0][ELEM_W-1:0]         q_vec,
  // results
  output logic                             res_valid,
  input  logic                             res_ready,
  output item_t                            res_item,
  output logic                             res_last,
  // memory channels, one per PQDist PE
  output logic [N_PQ-1:0]                  mem_req_valid,
  input  logic [N_PQ-1:0]                  mem_req_ready,
  output logic [N_PQ-1:0][ADDR_W-1:0]      mem_req_addr,
  input  logic [N_PQ-1:0]                  mem_rsp_valid,
  input  logic [N_PQ-1:0][ID_W+M*CODE_W-1:0] mem_rsp_data
);
  localparam int unsigned QW = D * ELEM_W;

  // ---- load decode ----
  logic ld_opq, ld_cent, ld_cb, ld_meta;
  logic [QW-1:0] ld_flat;
  assign ld_flat = ld_data;
  assign ld_opq  = ld_valid && (ld_target == LD_OPQ_ROW);
  assign ld_cent = ld_valid && (ld_target == LD_CENTROID);
  assign ld_cb   = ld_valid && (ld_target == LD_CODEBOOK);
  assign ld_meta = ld_valid && (ld_target == LD_CELLMETA);

  // ---- Stage OPQ ----
  logic            opq_valid, opq_ready;
  logic [QW-1:0]   opq_vec;
  opq_pe #(.D(D), .FRAC(OPQ_FRAC), .EN(OPQ_EN)) u_opq (
    .clk, .rst_n,
    .wr_en(ld_opq), .wr_row(ld_addr[$clog2(D)-1:0]), .wr_data(ld_data),
    .in_valid(q_valid), .in_ready(q_ready), .in_vec(q_vec),
    .out_valid(opq_valid), .out_ready(opq_ready), .out_vec(opq_vec)
  );

  // ---- global controller ----
  logic          qa_valid, qa_ready, qb_valid, qb_ready;
  logic [QW-1:0] qa_vec, qb_vec;
  logic          sel_valid, sel_ready, sel_last;
  item_t         sel_item;
  logic          cmd_valid, cmd_ready;
  cell_cmd_t     cmd;

  global_ctrl #(.D(D), .NLIST(NLIST), .NPQ(N_PQ)) u_ctrl (
    .clk, .rst_n,
    .wr_en(ld_meta), .wr_cell(ld_addr),
    .wr_start(ld_flat[ADDR_W-1:0]), .wr_count(ld_flat[ADDR_W +: CNT_W]),
    .q_valid(opq_valid), .q_ready(opq_ready), .q_vec(opq_vec),
    .qa_valid, .qa_ready, .qa_vec,
    .qb_valid, .qb_ready, .qb_vec,
    .sel_valid, .sel_ready, .sel_item, .sel_last,
    .cmd_valid, .cmd_ready, .cmd
  );

  // ---- Stage IVFDist ----
  logic  ivf_valid, ivf_ready, ivf_last;
  item_t ivf_item;
  ivf_dist_stage #(.D(D), .NLIST(NLIST), .NPE(N_IVF)) u_ivf (
    .clk, .rst_n,
    .wr_en(ld_cent), .wr_cell(ld_addr), .wr_vec(ld_data),
    .q_valid(qa_valid), .q_ready(qa_ready), .q_vec(qa_vec),
    .out_valid(ivf_valid), .out_ready(ivf_ready), .out_item(ivf_item), .out_last(ivf_last)
  );

  // ---- Stage SelCells: HPQ, one stream split over two queues ----
  hpq #(.NS(1), .S(NPROBE)) u_selcells (
    .clk, .rst_n,
    .in_valid(ivf_valid), .in_items(ivf_item), .in_last(ivf_last), .in_ready(ivf_ready),
    .out_valid(sel_valid), .out_item(sel_item), .out_last(sel_last), .out_ready(sel_ready)
  );

  // ---- query FIFO towards BuildLUT ----
  logic          lq_valid, lq_ready;
  logic [QW-1:0] lq_vec;
  logic [$clog2(QFIFO+1)-1:0] lq_count;
  stream_fifo #(.WIDTH(QW), .DEPTH(QFIFO)) u_qfifo (
    .clk, .rst_n,
    .in_valid(qb_valid), .in_ready(qb_ready), .in_data(qb_vec),
    .out_valid(lq_valid), .out_ready(lq_ready), .out_data(lq_vec), .count(lq_count)
  );

  // ---- Stage BuildLUT ----
  logic                     lut_valid, lut_ready, lut_hdr;
  cell_cmd_t                lut_cmd;
  logic [M-1:0][DIST_W-1:0] lut_row;
  build_lut_stage #(.D(D), .M(M), .KSUB(KSUB), .NLIST(NLIST), .NPROBE(NPROBE), .NPE(N_LUT)) u_lut (
    .clk, .rst_n,
    .cent_wr_en(ld_cent), .cent_wr_cell(ld_addr), .cent_wr_vec(ld_data),
    .cb_wr_en(ld_cb), .cb_wr_idx(ld_addr[$clog2(KSUB)-1:0]), .cb_wr_data(ld_data),
    .q_valid(lq_valid), .q_ready(lq_ready), .q_vec(lq_vec),
    .cmd_valid, .cmd_ready, .cmd,
    .lut_valid, .lut_ready, .lut_hdr, .lut_cmd, .lut_row
  );

  // ---- Stage PQDist ----
  logic [N_PQ-1:0] pq_valid, pq_ready, pq_last;
  item_t [N_PQ-1:0] pq_item;
  pq_dist_stage #(.M(M), .KSUB(KSUB), .NPE(N_PQ), .OUTQ(OUTQ)) u_pq (
    .clk, .rst_n,
    .lut_valid, .lut_ready, .lut_hdr, .lut_cmd, .lut_row,
    .mem_req_valid, .mem_req_ready, .mem_req_addr, .mem_rsp_valid, .mem_rsp_data,
    .out_valid(pq_valid), .out_ready(pq_ready), .out_item(pq_item), .out_last(pq_last)
  );

  // ---- Stage SelK: one beat when every PQDist stream has an item ----
  logic all_valid, selk_ready;
  assign all_valid = &pq_valid;
  assign pq_ready  = {N_PQ{all_valid && selk_ready}};

  hsmpqg #(.Z(N_PQ), .S(K)) u_selk (
    .clk, .rst_n,
    .in_valid(all_valid), .in_items(pq_item), .in_last(pq_last[0]), .in_ready(selk_ready),
    .out_valid(res_valid), .out_item(res_item), .out_last(res_last), .out_ready(res_ready)
  );

  // All PQDist streams are equally long, so last arrives on the same beat.
  a_last_aligned: assert property (@(posedge clk) disable iff (!rst_n)
                                   all_valid |-> (pq_last == '0 || pq_last == '1));
endmodule
