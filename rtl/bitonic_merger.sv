// bitonic_merger: bitonic partial merger, two sorted L-arrays in, L smallest out.
//
// Both inputs are sorted ascending. The first stage pairs a[i] with b[L-1-i]
// and keeps the smaller of each pair; the L survivors are exactly the L
// smallest of the 2L inputs and form a bitonic sequence. log2(L) half-cleaner
// stages (distance L/2, ..., 1, all ascending) then sort them. Every stage is
// a register, so latency is 1 + log2(L) enabled cycles (5 for L = 16) and one
// merge completes per cycle. `en` stalls the pipeline. The "32 inputs, 16
// outputs" shape is the paper's; the stage structure is the standard bitonic
// partial merge and the register placement is this design's choice.
module bitonic_merger
  import fanns_pkg::*;
#(
  parameter int unsigned L = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic          in_valid,
  input  logic          in_last,
  input  item_t [L-1:0] in_a,
  input  item_t [L-1:0] in_b,
  output logic          out_valid,
  output logic          out_last,
  output item_t [L-1:0] out_items
);
  localparam int unsigned LG  = $clog2(L);
  localparam int unsigned NST = LG + 1;

  function automatic item_t [L-1:0] half_clean(input item_t [L-1:0] a, input int j);
    item_t [L-1:0] r = a;
    for (int i = 0; i < int'(L); i++) begin
      int l = i ^ j;
      if (l > i && a[i].distance > a[l].distance) begin
        r[i] = a[l];
        r[l] = a[i];
      end
    end
    return r;
  endfunction

  item_t [L-1:0] first;
  always_comb begin
    for (int i = 0; i < int'(L); i++)
      first[i] = (in_b[L-1-i].distance < in_a[i].distance) ? in_b[L-1-i] : in_a[i];
  end

  item_t [L-1:0] st [NST];
  logic          vld [NST];
  logic          lst [NST];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      vld[0] <= 1'b0;
      lst[0] <= 1'b0;
    end else if (en) begin
      vld[0] <= in_valid;
      lst[0] <= in_last;
    end
    if (en) st[0] <= first;
  end

  for (genvar s = 1; s < int'(NST); s++) begin : g_st
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        vld[s] <= 1'b0;
        lst[s] <= 1'b0;
      end else if (en) begin
        vld[s] <= vld[s-1];
        lst[s] <= lst[s-1];
      end
      if (en) st[s] <= half_clean(st[s-1], int'(L >> s));
    end
  end

  assign out_items = st[NST-1];
  assign out_valid = vld[NST-1];
  assign out_last  = lst[NST-1];
endmodule
