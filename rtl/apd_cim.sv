// apd_cim: approximate-distance SRAM-CIM. Stores a tile of points and computes, per
// cycle, the L1 (Manhattan) distance |x-xr|+|y-yr|+|z-zr| of 16 stored points to a
// reference point. This replaces the squared Euclidean distance of farthest point
// sampling and ball query by an adder-only operation that suits an SRAM array.
//
// Organisation (from the accelerator description): N_PTG point groups, each of N_PTC
// point clusters; each cluster stores PTC_ROWS points. Activating one row of one group
// reads one point from each of its clusters; each cluster's near-memory units
// (apd_nmu, one per coordinate) subtract the reference, and the ABS accumulator of
// the cluster sums the three absolute differences into a DIST_W-bit distance.
//
// Index layout (this design's choice): point index = {row, cluster}, where
// row = {group, row-in-cluster}. A sweep row therefore returns the 16 consecutive
// indexes row*16 .. row*16+15.
//
// Interface and timing (this design's choice; all outputs registered, 1-cycle latency):
//   wr_en/wr_idx/wr_pt  : write one point.
//   rd_en/rd_idx        : read one point; rd_valid/rd_pt next cycle.
//   ref_load/ref_idx    : read a stored point into the reference registers; the
//                         reference is in use from the next cycle on.
//   cmp_en/cmp_row      : compute the 16 distances of a row; dist_valid/dist_out/dist_row
//                         next cycle.
// At most one of rd_en, ref_load and cmp_en may be high in a cycle (one array access).
module apd_cim
  import pc2im_pkg::*;
#(
  parameter int N_GRP  = N_PTG,
  parameter int N_CL   = N_PTC,
  parameter int ROWS   = PTC_ROWS,
  parameter int CW     = COORD_W,
  parameter int DW     = DIST_W
) (
  input  logic clk,
  input  logic rst_n,
  // point write
  input  logic                              wr_en,
  input  logic [$clog2(N_GRP*ROWS*N_CL)-1:0] wr_idx,
  input  point_t                            wr_pt,
  // point read
  input  logic                              rd_en,
  input  logic [$clog2(N_GRP*ROWS*N_CL)-1:0] rd_idx,
  output logic                              rd_valid,
  output point_t                            rd_pt,
  // reference load
  input  logic                              ref_load,
  input  logic [$clog2(N_GRP*ROWS*N_CL)-1:0] ref_idx,
  output point_t                            ref_pt,
  // distance computation
  input  logic                              cmp_en,
  input  logic [$clog2(N_GRP*ROWS)-1:0]     cmp_row,
  output logic                              dist_valid,
  output logic [$clog2(N_GRP*ROWS)-1:0]     dist_row,
  output logic [N_CL-1:0][DW-1:0]           dist_out
);
  localparam int NR  = N_GRP * ROWS;       // rows seen by a sweep
  localparam int RW  = $clog2(NR);
  localparam int LW  = $clog2(N_CL);

  // One memory per point cluster column; each holds NR points.
  point_t mem [N_CL][NR];

  logic [RW-1:0] acc_row;
  logic [LW-1:0] acc_lane;
  always_comb begin
    if (ref_load) {acc_row, acc_lane} = ref_idx;
    else          {acc_row, acc_lane} = rd_idx;
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_idx[LW-1:0]][wr_idx[LW+RW-1:LW]] <= wr_pt;
  end

  // Reference registers (bit-parallel inputs to the array).
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ref_pt   <= '0;
      rd_valid <= 1'b0;
      rd_pt    <= '0;
    end else begin
      rd_valid <= rd_en;
      if (rd_en)    rd_pt  <= mem[acc_lane][acc_row];
      if (ref_load) ref_pt <= mem[acc_lane][acc_row];
    end
  end

  // Near-memory subtraction and ABS accumulation per cluster.
  logic [N_CL-1:0][DW-1:0] dist_c;
  for (genvar l = 0; l < N_CL; l++) begin : g_ptc
    point_t     p;
    logic [CW:0] dx, dy, dz;
    assign p = mem[l][cmp_row];
    apd_nmu #(.W(CW)) u_nx (.stored(p.x), .ref_bits(ref_pt.x), .diff(dx));
    apd_nmu #(.W(CW)) u_ny (.stored(p.y), .ref_bits(ref_pt.y), .diff(dy));
    apd_nmu #(.W(CW)) u_nz (.stored(p.z), .ref_bits(ref_pt.z), .diff(dz));
    // ABS accumulator: absolute value of each difference, then the sum.
    logic [CW:0] ax, ay, az;
    always_comb begin
      ax = dx[CW] ? (~dx + 1'b1) : dx;
      ay = dy[CW] ? (~dy + 1'b1) : dy;
      az = dz[CW] ? (~dz + 1'b1) : dz;
      dist_c[l] = DW'(ax) + DW'(ay) + DW'(az);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dist_valid <= 1'b0;
      dist_row   <= '0;
      dist_out   <= '0;
    end else begin
      dist_valid <= cmp_en;
      if (cmp_en) begin
        dist_row <= cmp_row;
        dist_out <= dist_c;
      end
    end
  end


  a_one_access: assert property (@(posedge clk) disable iff (!rst_n)
                                 $onehot0({rd_en, ref_load, cmp_en}))
    else $error("apd_cim: more than one array access in a cycle");

endmodule
