// stream_fifo: synchronous valid/ready FIFO that connects processing elements.
//
// The accelerator is a set of PEs joined by FIFOs: a PE pops its input FIFO,
// works, and pushes its output FIFO. This is that FIFO: a circular buffer of
// DEPTH words of WIDTH bits with a registered occupancy count. A word pushed
// in cycle t can be popped in cycle t+1 (no fall-through). in_ready is low
// only when full; out_valid is high whenever the FIFO is not empty. The depth
// is this design's choice; the FIFO sizes of the original are not published.
module stream_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic             push, pop;

  assign in_ready  = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (count != '0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rd_ptr];

  function automatic logic [AW-1:0] incr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= incr(wr_ptr);
      if (pop)  rd_ptr <= incr(rd_ptr);
      count <= count + {{($clog2(DEPTH+1)-1){1'b0}}, push} - {{($clog2(DEPTH+1)-1){1'b0}}, pop};
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  // A full FIFO never accepts and an empty one never delivers.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  int'(count) <= int'(DEPTH));
endmodule
