// global_ctrl: the accelerator's global controller.
//
// Two jobs. (1) Query fork: each (rotated) query is needed twice, by Stage
// IVFDist now and by Stage BuildLUT once the cells are chosen; the controller
// takes a query when both output slots are free and hands a copy to each side
// independently. (2) Scan metadata: it holds, for every Voronoi cell, where
// the cell's PQ codes start in the memory channels and how many vectors it
// has. For every cell ID that Stage SelCells selects it looks these up (one
// cycle) and issues a cell command: the start row, the number of rows each of
// the NPQ channels must read (ceil(count/NPQ), at least one) and the vector
// count, which the PQDist PEs use to detect padding. The last selected cell of
// a query carries last.
//
// Memory layout (this design's choice): vector j of a cell is stored in
// channel j % NPQ at row start + j / NPQ, so every channel reads the same rows
// and the tail of the last row is padding. The paper names the global
// controller and its padding meta-information; the rest is this design's.
module global_ctrl
  import fanns_pkg::*;
#(
  parameter int unsigned D     = 128,
  parameter int unsigned NLIST = 8192,
  parameter int unsigned NPQ   = 36
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // cell metadata load
  input  logic                     wr_en,
  input  id_t                      wr_cell,
  input  logic [ADDR_W-1:0]        wr_start,
  input  logic [CNT_W-1:0]         wr_count,
  // query fork
  input  logic                     q_valid,
  output logic                     q_ready,
  input  logic [D-1:0][ELEM_W-1:0] q_vec,
  output logic                     qa_valid,
  input  logic                     qa_ready,
  output logic [D-1:0][ELEM_W-1:0] qa_vec,
  output logic                     qb_valid,
  input  logic                     qb_ready,
  output logic [D-1:0][ELEM_W-1:0] qb_vec,
  // selected cells in, cell commands out
  input  logic                     sel_valid,
  output logic                     sel_ready,
  input  item_t                    sel_item,
  input  logic                     sel_last,
  output logic                     cmd_valid,
  input  logic                     cmd_ready,
  output cell_cmd_t                cmd
);
  localparam int unsigned CW = $clog2(NLIST);

  // ---- query fork ----
  assign q_ready = !qa_valid && !qb_valid;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      qa_valid <= 1'b0;
      qb_valid <= 1'b0;
    end else begin
      if (q_valid && q_ready) begin
        qa_valid <= 1'b1;
        qb_valid <= 1'b1;
      end else begin
        if (qa_ready) qa_valid <= 1'b0;
        if (qb_ready) qb_valid <= 1'b0;
      end
    end
  end
  always_ff @(posedge clk) begin
    if (q_valid && q_ready) begin
      qa_vec <= q_vec;
      qb_vec <= q_vec;
    end
  end

  // ---- cell metadata table ----
  logic [ADDR_W-1:0] meta_start [NLIST];
  logic [CNT_W-1:0]  meta_count [NLIST];
  always_ff @(posedge clk) begin
    if (wr_en) begin
      meta_start[wr_cell[CW-1:0]] <= wr_start;
      meta_count[wr_cell[CW-1:0]] <= wr_count;
    end
  end

  logic [CNT_W-1:0] rows;
  always_comb begin
    rows = (meta_count[sel_item.id[CW-1:0]] + CNT_W'(NPQ - 1)) / CNT_W'(NPQ);
    if (rows == '0) rows = CNT_W'(1);
  end

  assign sel_ready = !cmd_valid || cmd_ready;
  always_ff @(posedge clk) begin
    if (!rst_n) cmd_valid <= 1'b0;
    else if (sel_ready) cmd_valid <= sel_valid;
  end
  always_ff @(posedge clk) begin
    if (sel_valid && sel_ready) begin
      cmd.cell_id <= sel_item.id;
      cmd.start   <= meta_start[sel_item.id[CW-1:0]];
      cmd.count   <= meta_count[sel_item.id[CW-1:0]];
      cmd.rows    <= rows;
      cmd.last    <= sel_last;
    end
  end
endmodule
