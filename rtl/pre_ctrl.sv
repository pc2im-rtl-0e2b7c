// pre_ctrl: sequencer of the data preprocessing module (the control part of the
// accelerator's bus and control block). For one tile of n_points points already in
// the distance CIM it runs
//   1. farthest point sampling of n_samples centroids. The first centroid is point 0.
//      Each iteration loads the newest centroid as reference, sweeps all rows of the
//      distance CIM (16 L1 distances per cycle) into the MAX-CAM array in load mode,
//      then switches that array to search mode and starts the in-situ compare, bit
//      CAM and data CAM; the index found is written to the centroid index buffer (CIB)
//      and becomes the next reference. The flow follows Fig. 10(b)-style "store TD,
//      compare, bit CAM, data CAM" steps of the description.
//   2. a neighbour query per centroid: the centroid (read back from the CIB) is the
//      reference, a sweep streams the distances to the sorter/merger (lattice mode with
//      range L for PSA layers, kNN mode for PFP layers) and the resulting list of K
//      {valid, index} entries is written to the neighbour index buffer (NIB) entry j.
// Choices of this design: the start point, the order of the steps inside an
// iteration, and the use of the two CAM arrays: tile t uses array (t mod 2), so
// consecutive tiles alternate arrays; within one tile the two arrays are not used
// concurrently because each iteration depends on the previous one.
// The neighbour list is written to the NIB exactly as the sorter/merger holds it
// (nib_wdata is the sorter's list routed through); this unit supplies the write
// strobe and the entry address only.
// Interface: start/busy/done; configuration is sampled at start. Counters report how
// many FPS iterations, searches, queries and masked lanes occurred (for testing).
module pre_ctrl
  import pc2im_pkg::*;
#(
  parameter int N_LANE     = N_PTC,
  parameter int NROWS      = N_ROWS,
  parameter int K          = 32,
  parameter int CENT_DEPTH = 512,
  parameter int DW         = DIST_W
) (
  input  logic clk,
  input  logic rst_n,
  input  logic                                 start,
  input  logic [$clog2(NROWS*N_LANE+1)-1:0]    n_points,
  input  logic [$clog2(CENT_DEPTH+1)-1:0]      n_samples,
  input  query_mode_e                          qmode,
  input  logic [DW-1:0]                        range_l,
  output logic                                 busy,
  output logic                                 done,
  // distance CIM
  output logic                                 ref_load,
  output logic [$clog2(NROWS*N_LANE)-1:0]      ref_idx,
  output logic                                 cmp_en,
  output logic [$clog2(NROWS)-1:0]             cmp_row,
  input  logic                                 dist_valid,
  input  logic [$clog2(NROWS)-1:0]             dist_row,
  // MAX-CAM
  output logic                                 cam_sel,
  output logic                                 cam_clr,
  output logic                                 cam_ld_en,
  output logic                                 cam_ld_first,
  output logic [N_LANE-1:0]                    lane_mask,
  output logic                                 cam_srch_start,
  input  logic                                 cam_srch_done,
  input  logic [$clog2(NROWS*N_LANE)-1:0]      cam_srch_idx,
  // sorter / merger
  output logic                                 sm_clear,
  output query_mode_e                          sm_mode,
  output logic [DW-1:0]                        sm_range,
  output logic                                 sm_in_valid,
  input  nb_entry_t [K-1:0]                    sm_list,
  // centroid index buffer
  output logic                                 cib_we,
  output logic [$clog2(CENT_DEPTH)-1:0]        cib_waddr,
  output logic [$clog2(NROWS*N_LANE)-1:0]      cib_wdata,
  output logic                                 cib_re,
  output logic [$clog2(CENT_DEPTH)-1:0]        cib_raddr,
  input  logic [$clog2(NROWS*N_LANE)-1:0]      cib_rdata,
  // neighbour index buffer
  output logic                                 nib_we,
  output logic [$clog2(CENT_DEPTH)-1:0]        nib_waddr,
  output nb_entry_t [K-1:0]                    nib_wdata,
  // event counters
  output logic [31:0]                          cnt_fps_iter,
  output logic [31:0]                          cnt_query,
  output logic [31:0]                          cnt_masked_rows
);
  localparam int PI = $clog2(NROWS*N_LANE);
  localparam int RW = $clog2(NROWS);
  localparam int LW = $clog2(N_LANE);
  localparam int JW = $clog2(CENT_DEPTH);

  typedef enum logic [3:0] {
    S_IDLE, S_CLR, F_REF, F_SWEEP, F_DRAIN, F_GO, F_SRCH,
    Q_CIB, Q_REF, Q_SWEEP, Q_DRAIN, Q_WR, S_DONE
  } state_e;
  state_e state;

  logic [$clog2(NROWS*N_LANE+1)-1:0] npts_q;
  logic [$clog2(CENT_DEPTH+1)-1:0]   nsmp_q;
  logic [RW:0]                       nrows_q;   // rows that hold points
  logic [RW:0]                       row;
  logic [JW:0]                       iter;      // centroids found so far
  logic [PI-1:0]                     cur;       // current reference index
  logic                              bank;      // array of the current tile
  logic                              first;     // first sweep of the tile
  logic [DW-1:0]                     range_q;
  query_mode_e                       qmode_q;
  logic [1:0]                        drain;

  // Lanes of a row that hold a point of the tile.
  function automatic logic [N_LANE-1:0] lanes_of(logic [RW-1:0] r,
                                                 logic [$clog2(NROWS*N_LANE+1)-1:0] np);
    logic [N_LANE-1:0] m;
    for (int l = 0; l < N_LANE; l++)
      m[l] = ((RW+LW+1)'({r, LW'(l)}) < (RW+LW+1)'(np));
    return m;
  endfunction

  assign lane_mask = lanes_of(dist_row, npts_q);

  always_comb begin
    ref_load       = (state == F_REF) || (state == Q_REF);
    ref_idx        = (state == Q_REF) ? cib_rdata : cur;
    cmp_en         = (state == F_SWEEP) || (state == Q_SWEEP);
    cmp_row        = row[RW-1:0];
    cam_clr        = (state == S_CLR);
    cam_ld_en      = dist_valid && (state == F_SWEEP || state == F_DRAIN);
    cam_ld_first   = first;
    cam_srch_start = (state == F_GO);
    sm_clear       = (state == Q_REF);
    sm_mode        = qmode_q;
    sm_range       = range_q;
    sm_in_valid    = dist_valid && (state == Q_SWEEP || state == Q_DRAIN);
    cib_re         = (state == Q_CIB);
    cib_raddr      = JW'(iter);
    cib_we         = (state == S_CLR) || (state == F_SRCH && cam_srch_done);
    cib_waddr      = (state == S_CLR) ? '0 : JW'(iter);
    cib_wdata      = (state == S_CLR) ? '0 : cam_srch_idx;
    nib_we         = (state == Q_WR);
    nib_waddr      = JW'(iter);
    nib_wdata      = sm_list;
    busy           = (state != S_IDLE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      npts_q  <= '0;
      nsmp_q  <= '0;
      nrows_q <= '0;
      row     <= '0;
      iter    <= '0;
      cur     <= '0;
      bank    <= 1'b1;
      cam_sel <= 1'b0;
      first   <= 1'b0;
      range_q <= '0;
      qmode_q <= Q_LATTICE;
      drain   <= '0;
      done    <= 1'b0;
      cnt_fps_iter    <= '0;
      cnt_query       <= '0;
      cnt_masked_rows <= '0;
    end else begin
      done   <= 1'b0;
      if (cam_ld_en && lane_mask != '1) cnt_masked_rows <= cnt_masked_rows + 1;
      unique case (state)
        S_IDLE: if (start) begin
          npts_q  <= n_points;
          nsmp_q  <= n_samples;
          nrows_q <= (RW+1)'((32'(n_points) + N_LANE - 1) / N_LANE);
          range_q <= range_l;
          qmode_q <= qmode;
          bank    <= ~bank;
          cam_sel <= ~bank;                 // array of this tile in load mode
          iter    <= '0;
          cur     <= '0;
          first   <= 1'b1;
          state   <= (n_samples == 0 || n_points == 0) ? S_DONE : S_CLR;
        end
        S_CLR: begin
          // centroid 0 is point 0 (written to the CIB in this cycle)
          iter      <= 1;
          state     <= (nsmp_q == 1) ? Q_CIB : F_REF;
        end
        F_REF: begin
          row   <= '0;
          state <= F_SWEEP;
        end
        F_SWEEP: begin
          if (row + 1'b1 == nrows_q) state <= F_DRAIN;
          row <= row + 1'b1;
        end
        F_DRAIN: begin                      // last row is written this cycle
          first   <= 1'b0;
          cam_sel <= ~bank;                 // same array goes to search mode
          state   <= F_GO;
        end
        F_GO: state <= F_SRCH;
        F_SRCH: if (cam_srch_done) begin
          cnt_fps_iter <= cnt_fps_iter + 1;
          cur       <= cam_srch_idx;
          iter      <= iter + 1'b1;
          cam_sel   <= bank;                // back to load mode
          if (iter + 1'b1 == nsmp_q) begin
            iter  <= '0;
            state <= Q_CIB;
          end else begin
            state <= F_REF;
          end
        end
        Q_CIB: state <= Q_REF;              // centroid index read in flight
        Q_REF: begin
          row   <= '0;
          state <= Q_SWEEP;
        end
        Q_SWEEP: begin
          if (row + 1'b1 == nrows_q) begin
            state <= Q_DRAIN;
            drain <= '0;
          end
          row <= row + 1'b1;
        end
        Q_DRAIN: begin                      // distances and sorter pipeline empty
          drain <= drain + 1'b1;
          if (drain == 2'd2) state <= Q_WR;
        end
        Q_WR: begin
          cnt_query <= cnt_query + 1;
          if (iter + 1'b1 == nsmp_q) state <= S_DONE;
          else begin
            iter  <= iter + 1'b1;
            state <= Q_CIB;
          end
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
