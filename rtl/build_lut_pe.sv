// build_lut_pe: one PE of Stage BuildLUT, a link in a 1-D array of NPE PEs.
//
// For a probed cell with residual query r, the distance lookup table (LUT)
// has M columns (one per PQ sub-space of D/M dimensions) and KSUB rows (one
// per sub-quantizer centroid): LUT[j][s] = || r_s - C_s[j] ||^2. The PE keeps
// its own copy of the PQ codebook (KSUB words, word j = centroid j of all M
// sub-quantizers side by side) and produces one LUT row per cycle (D subtract-
// square units, M adder trees of D/M inputs).
//
// Each query probes NPROBE cells; PE IDX builds a contiguous block of them
// (NPROBE/NPE each, the first NPROBE % NPE PEs one more). The residual stream
// passes through the chain: each PE keeps the first NOWN residuals that reach
// it and forwards the rest. The LUT stream is a packet per cell, a header beat
// carrying the cell command then KSUB row beats; each PE first forwards the
// upstream PEs' packets (arriving on lut_in) and then appends its own, so the
// last PE emits all NPROBE tables of a query in probe order.
//
// Timing: KSUB+1 beats per cell at one beat per cycle, rows computed as they
// are sent. The stage, its PE count and the 1-D array follow the paper; the
// block ownership, the packet format and the row-per-cycle rate are this
// design's choice.
module build_lut_pe
  import fanns_pkg::*;
#(
  parameter int unsigned D      = 128,
  parameter int unsigned M      = 16,
  parameter int unsigned KSUB   = 256,
  parameter int unsigned NPROBE = 17,
  parameter int unsigned NPE    = 9,
  parameter int unsigned IDX    = 0
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // codebook load (broadcast)
  input  logic                     cb_wr_en,
  input  logic [$clog2(KSUB)-1:0]  cb_wr_idx,
  input  logic [D-1:0][ELEM_W-1:0] cb_wr_data,
  // residual chain
  input  logic                     res_in_valid,
  output logic                     res_in_ready,
  input  logic [D-1:0][ELEM_W-1:0] res_in_vec,
  input  cell_cmd_t                res_in_cmd,
  output logic                     res_out_valid,
  input  logic                     res_out_ready,
  output logic [D-1:0][ELEM_W-1:0] res_out_vec,
  output cell_cmd_t                res_out_cmd,
  // LUT chain
  input  logic                     lut_in_valid,
  output logic                     lut_in_ready,
  input  logic                     lut_in_hdr,
  input  cell_cmd_t                lut_in_cmd,
  input  logic [M-1:0][DIST_W-1:0] lut_in_row,
  output logic                     lut_out_valid,
  input  logic                     lut_out_ready,
  output logic                     lut_out_hdr,
  output cell_cmd_t                lut_out_cmd,
  output logic [M-1:0][DIST_W-1:0] lut_out_row
);
  localparam int unsigned DSUB = D / M;
  localparam int unsigned PER  = NPROBE / NPE;
  localparam int unsigned REM  = NPROBE % NPE;
  localparam int unsigned NOWN = PER + ((IDX < REM) ? 1 : 0);
  localparam int unsigned BLO  = IDX * PER + ((IDX < REM) ? IDX : REM);
  localparam int unsigned NFWD = NPROBE - BLO - NOWN;
  localparam int unsigned PW   = $clog2(NPROBE + 1);
  localparam int unsigned KW   = $clog2(KSUB + 1);
  localparam int unsigned SQW  = 2 * ELEM_W + 2;

  // ---- codebook ----
  logic [D-1:0][ELEM_W-1:0] cb [KSUB];
  always_ff @(posedge clk) begin
    if (cb_wr_en) cb[cb_wr_idx] <= cb_wr_data;
  end

  // ---- residual intake ----
  logic [D-1:0][ELEM_W-1:0] own_res [NOWN];
  cell_cmd_t                own_cmd [NOWN];
  logic [PW-1:0]            own_n;     // own residuals held
  logic [PW-1:0]            rcnt;      // residuals seen this query
  logic                     take_own;

  assign take_own      = (rcnt < PW'(NOWN));
  assign res_in_ready  = take_own ? (own_n < PW'(NOWN)) : res_out_ready;
  assign res_out_valid = res_in_valid && !take_own;
  assign res_out_vec   = res_in_vec;
  assign res_out_cmd   = res_in_cmd;

  // ---- LUT output sequencing ----
  logic [PW-1:0] oc;                   // packet index within the query
  logic [KW-1:0] beat;                 // 0 = header, 1..KSUB = rows
  logic          fwd_phase;
  logic [PW-1:0] own_o;

  assign fwd_phase = (oc < PW'(BLO));
  assign own_o     = oc - PW'(BLO);

  logic [M-1:0][DIST_W-1:0] own_row;
  always_comb begin
    logic [D-1:0][ELEM_W-1:0] cw;
    logic [D-1:0][ELEM_W-1:0] rv;
    cw = cb[(beat == '0) ? '0 : $clog2(KSUB)'(beat - 1'b1)];
    rv = own_res[fwd_phase ? '0 : own_o];
    for (int s = 0; s < int'(M); s++) begin
      own_row[s] = '0;
      for (int t = 0; t < int'(DSUB); t++) begin
        logic signed [SQW-1:0] df;
        df = SQW'($signed(rv[s*DSUB+t])) - SQW'($signed(cw[s*DSUB+t]));
        own_row[s] += DIST_W'($unsigned(df * df));
      end
    end
  end

  always_comb begin
    if (fwd_phase) begin
      lut_out_valid = lut_in_valid;
      lut_in_ready  = lut_out_ready;
      lut_out_hdr   = lut_in_hdr;
      lut_out_cmd   = lut_in_cmd;
      lut_out_row   = lut_in_row;
    end else begin
      lut_out_valid = (own_o < own_n);
      lut_in_ready  = 1'b0;
      lut_out_hdr   = (beat == '0);
      lut_out_cmd   = own_cmd[own_o];
      lut_out_row   = own_row;
    end
  end

  logic out_fire, pkt_end, qry_end;
  assign out_fire = lut_out_valid && lut_out_ready;
  assign pkt_end  = out_fire && (beat == KW'(KSUB));
  assign qry_end  = pkt_end && (oc == PW'(BLO + NOWN - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      own_n <= '0;
      rcnt  <= '0;
      oc    <= '0;
      beat  <= '0;
    end else begin
      if (res_in_valid && res_in_ready) begin
        rcnt <= (rcnt == PW'(NOWN + NFWD - 1)) ? '0 : rcnt + 1'b1;
        if (take_own) own_n <= own_n + 1'b1;
      end
      if (out_fire) beat <= pkt_end ? '0 : beat + 1'b1;
      if (pkt_end)  oc   <= qry_end ? '0 : oc + 1'b1;
      if (qry_end)  own_n <= '0;
    end
  end

  always_ff @(posedge clk) begin
    if (res_in_valid && res_in_ready && take_own) begin
      own_res[rcnt[$clog2(NOWN > 1 ? NOWN : 2)-1:0]] <= res_in_vec;
      own_cmd[rcnt[$clog2(NOWN > 1 ? NOWN : 2)-1:0]] <= res_in_cmd;
    end
  end

  initial begin
    assert (NOWN >= 1) else $error("more BuildLUT PEs than probed cells");
    assert (D % M == 0) else $error("D must be a multiple of M");
  end
endmodule
