// item_delay: enabled shift-register delay line for an array of L items.
//
// Delays a set of L items (with valid and last) by N enabled cycles so that a
// sorter output can meet a merger input that arrives later. N = 0 is a wire.
// `en` stalls the line together with the networks it runs beside.
module item_delay
  import fanns_pkg::*;
#(
  parameter int unsigned L = 16,
  parameter int unsigned N = 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic          in_valid,
  input  logic          in_last,
  input  item_t [L-1:0] in_items,
  output logic          out_valid,
  output logic          out_last,
  output item_t [L-1:0] out_items
);
  if (N == 0) begin : g_wire
    assign out_valid = in_valid;
    assign out_last  = in_last;
    assign out_items = in_items;
  end else begin : g_line
    item_t [L-1:0] d [N];
    logic [N-1:0]  v, l;
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        v <= '0;
        l <= '0;
      end else if (en) begin
        v[0] <= in_valid;
        l[0] <= in_last;
        for (int i = 1; i < int'(N); i++) begin
          v[i] <= v[i-1];
          l[i] <= l[i-1];
        end
      end
      if (en) begin
        d[0] <= in_items;
        for (int i = 1; i < int'(N); i++) d[i] <= d[i-1];
      end
    end
    assign out_valid = v[N-1];
    assign out_last  = l[N-1];
    assign out_items = d[N-1];
  end
endmodule
