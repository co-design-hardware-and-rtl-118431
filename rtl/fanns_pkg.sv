// fanns_pkg: types and constants shared by the IVF-PQ vector-search accelerator.
//
// Every stage of the accelerator exchanges one of three things: a vector of
// D signed fixed-point elements (query, centroid, residual), a scored item
// (a distance plus an identifier, used both for Voronoi cells and database
// vectors), or a per-cell scan command built by the global controller.
// Element and distance widths are this design's choice; the algorithm does
// not fix a number format. Distances are unsigned and wide enough to hold a
// full sum of squared 16-bit differences over 128 dimensions without wrap.
package fanns_pkg;

  // Number format (not fixed by the algorithm description; chosen here).
  parameter int unsigned ELEM_W = 16;   // signed vector element
  parameter int unsigned DIST_W = 48;   // unsigned squared-L2 distance
  parameter int unsigned ID_W   = 32;   // vector ID or cell ID
  parameter int unsigned ADDR_W = 32;   // memory-channel row address
  parameter int unsigned CNT_W  = 32;   // per-cell vector count / row count
  parameter int unsigned CODE_W = 8;    // one PQ code is one byte (256 centroids)

  typedef logic [DIST_W-1:0] dist_t;
  typedef logic [ID_W-1:0]   id_t;

  // A scored candidate: smaller distance is better.
  typedef struct packed {
    dist_t distance;
    id_t   id;
  } item_t;

  localparam dist_t DIST_MAX = '1;
  localparam item_t ITEM_MAX = '{distance: '1, id: '1};

  // Scan command for one probed cell, produced by the global controller and
  // carried through BuildLUT and PQDist in front of the cell's lookup table.
  typedef struct packed {
    id_t               cell_id;  // Voronoi cell ID
    logic [ADDR_W-1:0] start;  // first row of the cell in every channel
    logic [CNT_W-1:0]  rows;   // rows to read per channel (>= 1)
    logic [CNT_W-1:0]  count;  // valid vectors of the cell (rest is padding)
    logic              last;   // last probed cell of the query
  } cell_cmd_t;

  // Index-load targets of the host write port.
  typedef enum logic [1:0] {
    LD_OPQ_ROW  = 2'd0,  // one row of the OPQ rotation matrix
    LD_CENTROID = 2'd1,  // one IVF centroid (written to IVFDist and BuildLUT)
    LD_CODEBOOK = 2'd2,  // PQ codeword j of all m sub-quantizers
    LD_CELLMETA = 2'd3   // {start row, vector count} of one cell
  } ld_target_e;

endpackage
