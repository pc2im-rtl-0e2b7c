// max_cam_array: one array of the two-level MAX-CAM. It keeps, for every point of a
// tile, the minimal distance D_s to the set of sampled centroids, and finds the point
// with the largest D_s (the next farthest-point-sampling centroid).
//
// Organisation (from the accelerator description): N_TDG temporary-distance groups
// (TDG), each of N_TDP temporary-distance pairs (TDP). A pair holds an upper and a
// lower temporary distance (TD) and two latches: AS (adaptive selector latch, result
// of the in-situ compare upper >= lower) and IM (CAM result latch, the pair is still a
// max candidate). The smaller TD of a pair is its current D_s; a new distance is
// always written over the larger one, so no read-modify-write is needed.
//
// Operations:
//   clr           : all TDs to 0, AS = IM = 1 (start of a tile).
//   ld_en         : write ld_dist[g] into pair ld_row of every group g whose lane bit
//                   is set; into the larger TD (AS ? upper : lower), or into both TDs
//                   when ld_first is set (first centroid of a tile).
//   srch_start    : run the search: 1 cycle in-situ compare (AS = upper >= lower,
//                   IM = 1), DW cycles of bit CAM from MSB to LSB, 1 cycle 16-to-1 MAX
//                   tree over the group maxima, 1 cycle data CAM on the smaller TDs
//                   with the global maximum, priority-encoded to the lowest index.
//                   srch_done pulses with srch_max and srch_idx DW+4 cycles after the
//                   cycle of srch_start (compare, DW bit steps, tree, data CAM).
// Bit CAM: in each group, a zero detector (OR of the match lines) tells whether any
// candidate has a 1 at the searched bit. If so the candidates with a 0 drop out (IM
// cleared) and the group maximum gets a 1 at that bit; if none match, nothing drops.
// The per-group bit CAM, the MAX tree over group maxima and the lowest-index rule for
// ties are this design's reading of the description; the description does not state
// how groups are combined or how ties are broken.
// Index layout: idx = {pair, group}, matching apd_cim's {row, cluster}.
module max_cam_array
  import pc2im_pkg::*;
#(
  parameter int N_TDG = 16,
  parameter int N_TDP = 128,
  parameter int DW    = DIST_W
) (
  input  logic clk,
  input  logic rst_n,
  input  logic                          clr,
  input  logic                          ld_en,
  input  logic                          ld_first,
  input  logic [$clog2(N_TDP)-1:0]      ld_row,
  input  logic [N_TDG-1:0]              ld_lane,
  input  logic [N_TDG-1:0][DW-1:0]      ld_dist,
  input  logic                          srch_start,
  output logic                          srch_busy,
  output logic                          srch_done,
  output logic [DW-1:0]                 srch_max,
  output logic [$clog2(N_TDP*N_TDG)-1:0] srch_idx
);
  localparam int PW = $clog2(N_TDP);
  localparam int GW = $clog2(N_TDG);
  localparam int BW = $clog2(DW + 1);

  logic [DW-1:0] td_u [N_TDG][N_TDP];
  logic [DW-1:0] td_l [N_TDG][N_TDP];
  logic          as_l [N_TDG][N_TDP];
  logic          im_l [N_TDG][N_TDP];

  typedef enum logic [2:0] {S_IDLE, S_CMP, S_BIT, S_TREE, S_DATA} state_e;
  state_e          state;
  logic [BW-1:0]   bitpos;
  logic [N_TDG-1:0][DW-1:0] grp_max;
  logic [DW-1:0]   gmax;

  // Smaller TD of each pair (the current D_s) and bit CAM match lines.
  logic [DW-1:0] sm [N_TDG][N_TDP];
  logic          hit [N_TDG][N_TDP];
  logic [N_TDG-1:0] zd;   // zero detector output per group: some candidate matched
  always_comb begin
    for (int g = 0; g < N_TDG; g++) begin
      zd[g] = 1'b0;
      for (int k = 0; k < N_TDP; k++) begin
        sm[g][k]  = as_l[g][k] ? td_l[g][k] : td_u[g][k];
        hit[g][k] = im_l[g][k] & sm[g][k][bitpos[$clog2(DW)-1:0]];
        zd[g]     = zd[g] | hit[g][k];
      end
    end
  end

  // 16-to-1 MAX tree over the group maxima.
  always_comb begin
    gmax = '0;
    for (int g = 0; g < N_TDG; g++)
      if (grp_max[g] > gmax) gmax = grp_max[g];
  end

  // Data CAM: exact match of the global maximum against every smaller TD; the lowest
  // matching index wins.
  logic                          dc_found;
  logic [$clog2(N_TDP*N_TDG)-1:0] dc_idx;
  always_comb begin
    dc_found = 1'b0;
    dc_idx   = '0;
    for (int k = 0; k < N_TDP; k++)
      for (int g = 0; g < N_TDG; g++)
        if (!dc_found && sm[g][k] == gmax) begin
          dc_found = 1'b1;
          dc_idx   = {PW'(k), GW'(g)};
        end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      bitpos    <= '0;
      grp_max   <= '0;
      srch_done <= 1'b0;
      srch_max  <= '0;
      srch_idx  <= '0;
      for (int g = 0; g < N_TDG; g++)
        for (int k = 0; k < N_TDP; k++) begin
          td_u[g][k] <= '0;
          td_l[g][k] <= '0;
          as_l[g][k] <= 1'b1;
          im_l[g][k] <= 1'b1;
        end
    end else begin
      srch_done <= 1'b0;
      if (clr) begin
        for (int g = 0; g < N_TDG; g++)
          for (int k = 0; k < N_TDP; k++) begin
            td_u[g][k] <= '0;
            td_l[g][k] <= '0;
            as_l[g][k] <= 1'b1;
            im_l[g][k] <= 1'b1;
          end
      end else if (ld_en) begin
        for (int g = 0; g < N_TDG; g++)
          if (ld_lane[g]) begin
            if (ld_first || as_l[g][ld_row])  td_u[g][ld_row] <= ld_dist[g];
            if (ld_first || !as_l[g][ld_row]) td_l[g][ld_row] <= ld_dist[g];
          end
      end
      case (state)
        S_IDLE: if (srch_start) state <= S_CMP;
        S_CMP: begin
          // In-situ compare of every pair; all pairs become candidates again.
          for (int g = 0; g < N_TDG; g++)
            for (int k = 0; k < N_TDP; k++) begin
              as_l[g][k] <= (td_u[g][k] >= td_l[g][k]);
              im_l[g][k] <= 1'b1;
            end
          bitpos <= BW'(DW - 1);
          state  <= S_BIT;
        end
        S_BIT: begin
          for (int g = 0; g < N_TDG; g++) begin
            grp_max[g][bitpos[$clog2(DW)-1:0]] <= zd[g];
            if (zd[g])
              for (int k = 0; k < N_TDP; k++)
                im_l[g][k] <= hit[g][k];
          end
          if (bitpos == '0) state <= S_TREE;
          else              bitpos <= bitpos - 1'b1;
        end
        S_TREE: begin
          srch_max <= gmax;
          state    <= S_DATA;
        end
        S_DATA: begin
          srch_idx  <= dc_idx;
          srch_done <= 1'b1;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign srch_busy = (state != S_IDLE);

  // The S_DATA step uses gmax directly; srch_max holds the same value by then.
  a_no_load_in_search: assert property (@(posedge clk) disable iff (!rst_n)
                                        srch_busy |-> !(ld_en || clr))
    else $error("max_cam_array: load or clear while searching");
endmodule
