// tb_fanns_top_full: end-to-end test of fanns_top at its default sizes.
//
// The top is instantiated without parameter overrides, so this runs the
// configuration the design is built for: D=128, 16 sub-spaces of 256
// centroids, 8192 cells with 17 probed, K=10, 11 IVFDist PEs, 9 BuildLUT PEs
// and 36 PQDist PEs / HBM channels. The index is random and small per cell
// (up to 80 vectors) so that loading and the software model stay quick; two
// queries are sent back to back. Checking is shared with tb_fanns_top
// (fanns_top_tb_body.svh).
module tb_fanns_top_full;
  import fanns_pkg::*;
  localparam int unsigned D        = 128;
  localparam int unsigned M        = 16;
  localparam int unsigned KSUB     = 256;
  localparam int unsigned NLIST    = 8192;
  localparam int unsigned NPROBE   = 17;
  localparam int unsigned K        = 10;
  localparam int unsigned N_PQ     = 36;
  localparam bit          OPQ_EN   = 1'b1;
  localparam int unsigned OPQ_FRAC = 14;
  localparam int          NQUERY   = 2;
  localparam int          MAXV     = 80;
  localparam int          RANGE    = 2000;
  localparam int          RES_STALL = 30;
  localparam int          WATCHDOG = 400000;
  localparam bit          DEBUG    = 0;

  fanns_top dut (.*);

`include "fanns_top_tb_body.svh"
endmodule
