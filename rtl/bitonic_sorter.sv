// bitonic_sorter: fully pipelined bitonic sorting network of width L.
//
// Takes L items per cycle and returns them sorted by ascending distance.
// The network is Batcher's bitonic sort: for block size k = 2, 4, ..., L and
// then distance j = k/2, ..., 1, element i is compare-exchanged with element
// i^j, ascending where (i & k) == 0 and descending elsewhere. Each of these
// log2(L)*(log2(L)+1)/2 layers is one register stage, so the latency is
// exactly that many enabled cycles (10 for L = 16), matching the latency the
// paper states for its sorting networks, and the throughput is one set per
// cycle. `en` advances the whole pipeline (a stall holds every stage); valid
// and last travel with the data. The width 16 is the paper's; the layer-per-
// cycle pipelining is this design's reading of its latency formula.
module bitonic_sorter
  import fanns_pkg::*;
#(
  parameter int unsigned L = 16
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
  localparam int unsigned LG  = $clog2(L);
  localparam int unsigned NST = LG * (LG + 1) / 2;

  function automatic item_t [L-1:0] layer(input item_t [L-1:0] a, input int k, input int j);
    item_t [L-1:0] r = a;
    for (int i = 0; i < int'(L); i++) begin
      int l = i ^ j;
      if (l > i) begin
        bit up = ((i & k) == 0);
        if (up ? (a[i].distance > a[l].distance) : (a[i].distance < a[l].distance)) begin
          r[i] = a[l];
          r[l] = a[i];
        end
      end
    end
    return r;
  endfunction

  item_t [L-1:0] st [NST+1];
  logic          vld [NST+1];
  logic          lst [NST+1];

  assign st[0]  = in_items;
  assign vld[0] = in_valid;
  assign lst[0] = in_last;

  for (genvar p = 1; p <= int'(LG); p++) begin : g_blk
    for (genvar q = p; q >= 1; q--) begin : g_step
      localparam int IDX = p * (p - 1) / 2 + (p - q);
      always_ff @(posedge clk) begin
        if (!rst_n) begin
          vld[IDX+1] <= 1'b0;
          lst[IDX+1] <= 1'b0;
        end else if (en) begin
          vld[IDX+1] <= vld[IDX];
          lst[IDX+1] <= lst[IDX];
        end
        if (en) st[IDX+1] <= layer(st[IDX], 1 << p, 1 << (q - 1));
      end
    end
  end

  assign out_items = st[NST];
  assign out_valid = vld[NST];
  assign out_last  = lst[NST];

  initial begin
    assert (L >= 2 && (1 << LG) == L) else $error("L must be a power of two");
  end
endmodule
