// pc2im_pkg: constants and types shared by the blocks of the point-cloud accelerator.
// The sizes follow the accelerator's published organisation: a 2048-point tile of
// 16-bit coordinates held in 4 point groups x 16 point clusters x 32 rows, 19-bit L1
// distances, and a temporary-distance CAM of 16 groups x 128 pairs per array.
// The enumerations and the index layout (index = {row, cluster}) are this design's own.
package pc2im_pkg;

  localparam int COORD_W  = 16;   // coordinate width (16-bit quantisation)
  localparam int N_PTG    = 4;    // point groups in the distance CIM
  localparam int N_PTC    = 16;   // point clusters per group = distances per cycle
  localparam int PTC_ROWS = 32;   // points stored per point cluster
  localparam int N_ROWS   = N_PTG * PTC_ROWS;           // 128 sweep rows
  localparam int N_POINTS = N_ROWS * N_PTC;             // 2048 points
  localparam int IDX_W    = $clog2(N_POINTS);           // 11
  localparam int ROW_W    = $clog2(N_ROWS);             // 7
  localparam int LANE_W   = $clog2(N_PTC);              // 4
  localparam int DIST_W   = 19;   // L1 distance width

  // One stored point. Coordinates are two's complement.
  typedef struct packed {
    logic signed [COORD_W-1:0] z;
    logic signed [COORD_W-1:0] y;
    logic signed [COORD_W-1:0] x;
  } point_t;

  // Kind of neighbour query run by the sorter/merger.
  typedef enum logic {
    Q_LATTICE = 1'b0,   // keep the nearest points with L1 distance <= range (PSA layers)
    Q_KNN     = 1'b1    // keep the nearest points regardless of range (PFP layers)
  } query_mode_e;

  // One neighbour list entry.
  typedef struct packed {
    logic             valid;
    logic [IDX_W-1:0] idx;
  } nb_entry_t;

endpackage
