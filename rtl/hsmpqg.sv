// hsmpqg: Stage SelK, hybrid sorting, merging and priority-queue group (HSMPQG).
//
// Selects the S smallest of all items that Z streams deliver for a query. All
// Z streams advance together: one input beat carries one item from each
// stream. The beat is cut into NSORT = ceil(Z/L) groups of L (the last group
// padded with dummy ITEM_MAX streams) and each group is sorted by an L-wide
// bitonic sorter. NSORT-1 bitonic partial mergers then reduce the sorted
// groups to the L smallest items of the beat: the first merger takes sorters 0
// and 1, each further merger takes the previous merger's output and the next
// sorter's output, delayed to arrive in step. The S smallest of those L are
// kept (the rest can never reach the result, since S items of the same beat
// beat them) and enter an S-stream hierarchical priority queue (hpq), which
// returns the S results of the query smallest first.
//
// Timing: one beat per cycle; in_ready is the hpq's, and a stall freezes the
// whole sorting and merging pipeline. The pipeline adds 10 + 5*(NSORT-1)
// cycles for L = 16. Structure, widths (16-element sorters, 32-in/16-out
// mergers, top-S pick, queue group, gathering) follow the paper; the chained
// merger order is this design's choice (for three sorters, as at Z = 36, it is
// the only arrangement with two mergers).
module hsmpqg
  import fanns_pkg::*;
#(
  parameter int unsigned Z = 36,  // input streams
  parameter int unsigned S = 10,  // results per query (K)
  parameter int unsigned L = 16   // sorter width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  item_t [Z-1:0] in_items,
  input  logic          in_last,
  output logic          in_ready,
  output logic          out_valid,
  output item_t         out_item,
  output logic          out_last,
  input  logic          out_ready
);
  localparam int unsigned NSORT = (Z + L - 1) / L;
  localparam int unsigned LG    = $clog2(L);
  localparam int unsigned LAT_S = LG * (LG + 1) / 2;
  localparam int unsigned LAT_M = LG + 1;

  logic en;
  assign in_ready = en;

  // ---- group and sort ----
  item_t [L-1:0] grp [NSORT];
  always_comb begin
    for (int g = 0; g < int'(NSORT); g++)
      for (int i = 0; i < int'(L); i++)
        grp[g][i] = (g * int'(L) + i < int'(Z)) ? in_items[g*L+i] : ITEM_MAX;
  end

  item_t [L-1:0] srt   [NSORT];
  logic          srt_v [NSORT];
  logic          srt_l [NSORT];

  for (genvar g = 0; g < int'(NSORT); g++) begin : g_sort
    bitonic_sorter #(.L(L)) u_sort (
      .clk, .rst_n, .en,
      .in_valid(in_valid && en), .in_last(in_last), .in_items(grp[g]),
      .out_valid(srt_v[g]), .out_last(srt_l[g]), .out_items(srt[g])
    );
  end

  // ---- merge chain ----
  item_t [L-1:0] mrg   [NSORT];
  logic          mrg_v [NSORT];
  logic          mrg_l [NSORT];
  assign mrg[0]   = srt[0];
  assign mrg_v[0] = srt_v[0];
  assign mrg_l[0] = srt_l[0];

  for (genvar g = 1; g < int'(NSORT); g++) begin : g_merge
    item_t [L-1:0] dly;
    logic          dly_v, dly_l;
    item_delay #(.L(L), .N((g - 1) * LAT_M)) u_dly (
      .clk, .rst_n, .en,
      .in_valid(srt_v[g]), .in_last(srt_l[g]), .in_items(srt[g]),
      .out_valid(dly_v), .out_last(dly_l), .out_items(dly)
    );
    bitonic_merger #(.L(L)) u_merge (
      .clk, .rst_n, .en,
      .in_valid(mrg_v[g-1] && dly_v), .in_last(mrg_l[g-1]),
      .in_a(mrg[g-1]), .in_b(dly),
      .out_valid(mrg_v[g]), .out_last(mrg_l[g]), .out_items(mrg[g])
    );
  end

  // ---- pick top S, queue group and gathering ----
  item_t [S-1:0] top;
  always_comb begin
    for (int i = 0; i < int'(S); i++) top[i] = mrg[NSORT-1][i];
  end

  hpq #(.NS(S), .S(S)) u_hpq (
    .clk, .rst_n,
    .in_valid(mrg_v[NSORT-1]), .in_items(top), .in_last(mrg_l[NSORT-1]),
    .in_ready(en),
    .out_valid, .out_item, .out_last, .out_ready
  );

  initial begin
    assert (S < L) else $error("HSMPQG needs S < L; use an HPQ otherwise");
  end
endmodule
