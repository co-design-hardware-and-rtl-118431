// lut_residual: front end of Stage BuildLUT, forms the residual query per cell.
//
// An IVF-PQ index encodes each database vector relative to the centroid of its
// Voronoi cell, so the lookup table of a probed cell is built from the
// residual r = x - c_cell. This unit keeps its own on-chip copy of the NLIST
// centroids (the "on-chip index store" of Stage BuildLUT), holds the current
// query, and for each cell command from the global controller reads the
// cell's centroid (one registered read) and emits r, saturated to the element
// width, together with the command. The query is released after the command
// flagged last. Two cycles per cell plus the output hand-off.
// Using the residual follows standard IVF-PQ (the paper speaks of the
// "normalized query vector"); saturation is this design's choice.
module lut_residual
  import fanns_pkg::*;
#(
  parameter int unsigned D     = 128,
  parameter int unsigned NLIST = 8192
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  id_t                      wr_cell,
  input  logic [D-1:0][ELEM_W-1:0] wr_vec,
  input  logic                     q_valid,
  output logic                     q_ready,
  input  logic [D-1:0][ELEM_W-1:0] q_vec,
  input  logic                     cmd_valid,
  output logic                     cmd_ready,
  input  cell_cmd_t                cmd_in,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [D-1:0][ELEM_W-1:0] out_res,
  output cell_cmd_t                out_cmd
);
  localparam int unsigned CW = $clog2(NLIST);
  localparam logic signed [ELEM_W:0] EMAX = (ELEM_W+1)'(2 ** (ELEM_W - 1) - 1);
  localparam logic signed [ELEM_W:0] EMIN = -EMAX - 1;

  logic [D-1:0][ELEM_W-1:0] cent [NLIST];
  always_ff @(posedge clk) begin
    if (wr_en) cent[wr_cell[CW-1:0]] <= wr_vec;
  end

  typedef enum logic [1:0] {WAIT, READ, SEND} state_e;
  state_e                   state;
  logic                     qv;
  logic [D-1:0][ELEM_W-1:0] q, c;

  assign q_ready   = !qv;
  assign cmd_ready = qv && (state == WAIT);
  assign out_valid = (state == SEND);

  always_comb begin
    for (int i = 0; i < int'(D); i++) begin
      logic signed [ELEM_W:0] r;
      r = (ELEM_W+1)'($signed(q[i])) - (ELEM_W+1)'($signed(c[i]));
      if (r > EMAX)      out_res[i] = EMAX[ELEM_W-1:0];
      else if (r < EMIN) out_res[i] = EMIN[ELEM_W-1:0];
      else               out_res[i] = r[ELEM_W-1:0];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= WAIT;
      qv    <= 1'b0;
    end else begin
      if (q_valid && q_ready) qv <= 1'b1;
      unique case (state)
        WAIT: if (cmd_valid && cmd_ready) state <= READ;
        READ: state <= SEND;
        SEND: if (out_ready) begin
          state <= WAIT;
          if (out_cmd.last) qv <= 1'b0;
        end
        default: state <= WAIT;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (q_valid && q_ready) q <= q_vec;
    if (cmd_valid && cmd_ready) out_cmd <= cmd_in;
    if (state == READ) c <= cent[out_cmd.cell_id[CW-1:0]];
  end
endmodule
