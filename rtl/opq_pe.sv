// opq_pe: Stage OPQ, rotates each query by the OPQ matrix.
//
// Optimised product quantisation applies a learned rotation R (D x D) to the
// query before anything else: y = R x. This PE holds R on chip, one row per
// word, loaded through the write port. For a query it computes one output
// element per cycle: row r of R times the query, D multiply-adds in parallel,
// then an arithmetic shift right by FRAC (R is fixed-point with FRAC fraction
// bits) and saturation to the element width. A query therefore takes D
// cycles plus one for the output hand-off; the next query is accepted once the
// result has been taken. With EN = 0 (an index trained without OPQ) the stage
// is not built and queries pass straight through.
//
// The stage and its single PE follow the paper (Stage OPQ, one PE in the K=10
// design); the fixed-point format and the row-per-cycle schedule are this
// design's choice.
module opq_pe
  import fanns_pkg::*;
#(
  parameter int unsigned D    = 128,
  parameter int unsigned FRAC = 14,
  parameter bit          EN   = 1'b1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // matrix load
  input  logic                       wr_en,
  input  logic [$clog2(D)-1:0]       wr_row,
  input  logic [D-1:0][ELEM_W-1:0]   wr_data,
  // query in
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic [D-1:0][ELEM_W-1:0]   in_vec,
  // rotated query out
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [D-1:0][ELEM_W-1:0]   out_vec
);
  localparam int unsigned ACC_W = 2 * ELEM_W + $clog2(D) + 1;

  if (!EN) begin : g_bypass
    assign out_valid = in_valid;
    assign in_ready  = out_ready;
    assign out_vec   = in_vec;
    logic unused;
    assign unused = ^{clk, rst_n, wr_en, wr_row, wr_data};
  end else begin : g_opq
    logic [D-1:0][ELEM_W-1:0] rmat [D];
    logic [D-1:0][ELEM_W-1:0] q, y;
    logic [$clog2(D)-1:0]     row;
    logic                     busy, done;

    always_ff @(posedge clk) begin
      if (wr_en) rmat[wr_row] <= wr_data;
    end

    // dot product of one matrix row with the held query
    logic signed [ACC_W-1:0] acc;
    logic signed [ACC_W-1:0] shifted;
    logic [ELEM_W-1:0]       sat;
    always_comb begin
      acc = '0;
      for (int c = 0; c < int'(D); c++)
        acc += ACC_W'($signed(rmat[row][c])) * ACC_W'($signed(q[c]));
      shifted = acc >>> FRAC;
      if (shifted > ACC_W'(signed'({1'b0, {(ELEM_W-1){1'b1}}})))
        sat = {1'b0, {(ELEM_W-1){1'b1}}};
      else if (shifted < -ACC_W'(signed'({1'b0, {(ELEM_W-1){1'b1}}})) - 1)
        sat = {1'b1, {(ELEM_W-1){1'b0}}};
      else
        sat = shifted[ELEM_W-1:0];
    end

    assign in_ready  = !busy && !done;
    assign out_valid = done;
    assign out_vec   = y;

    always_ff @(posedge clk) begin
      if (!rst_n) begin
        busy <= 1'b0;
        done <= 1'b0;
        row  <= '0;
      end else begin
        if (in_valid && in_ready) begin
          q    <= in_vec;
          busy <= 1'b1;
          row  <= '0;
        end
        if (busy) begin
          y[row] <= sat;
          if (row == $clog2(D)'(D - 1)) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
          row <= row + 1'b1;
        end
        if (done && out_ready) done <= 1'b0;
      end
    end
  end
endmodule
