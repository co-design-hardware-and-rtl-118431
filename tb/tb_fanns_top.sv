// tb_fanns_top: end-to-end test of the accelerator at reduced sizes.
//
// D=16, M=4 sub-spaces of 4 dimensions, 16 centroids per codebook, 32 cells,
// 5 probed cells, K=10, 3 IVFDist PEs, 2 BuildLUT PEs and 4 PQDist PEs with
// HBM channels. The reduced sizes keep every loop of the design short while
// still exercising each path: several cells per PE, uneven cell sizes, empty
// cells (padding), several queries in flight, memory and result
// back-pressure. The checking itself is in fanns_top_tb_body.svh.
module tb_fanns_top;
  import fanns_pkg::*;
  localparam int unsigned D        = 16;
  localparam int unsigned M        = 4;
  localparam int unsigned KSUB     = 16;
  localparam int unsigned NLIST    = 32;
  localparam int unsigned NPROBE   = 5;
  localparam int unsigned K        = 10;
  localparam int unsigned N_PQ     = 4;
  localparam bit          OPQ_EN   = 1'b1;
  localparam int unsigned OPQ_FRAC = 14;
  localparam int          NQUERY   = 6;
  localparam int          MAXV     = 13;
  localparam int          RANGE    = 2000;
  localparam int          RES_STALL = 30;
  localparam int          WATCHDOG = 400000;
  localparam bit          DEBUG    = 0;

  fanns_top #(.D(D), .M(M), .KSUB(KSUB), .NLIST(NLIST), .NPROBE(NPROBE), .K(K),
              .N_IVF(3), .N_LUT(2), .N_PQ(N_PQ), .OPQ_EN(OPQ_EN), .OPQ_FRAC(OPQ_FRAC),
              .OUTQ(4), .QFIFO(2)) dut (.*);

`include "fanns_top_tb_body.svh"
endmodule
