// ping_pong_max_cam: two-level Ping-Pong-MAX CAM. Two max_cam_array instances behind a
// global selector. The selector puts one array in load mode (it takes clear and
// distance writes) and the other in search mode (it takes search starts), so that the
// temporary distances of one array can be written while the maximum of the other is
// being searched: array-level ping-pong. Inside each array the pairs of temporary
// distances give the second, cell-level ping-pong (see max_cam_array).
//
// Interface: sel chooses the load-mode array (sel = 0: array 0 loads, array 1
// searches; sel = 1: the reverse). The load-side and search-side ports are otherwise
// those of max_cam_array; the search result comes from the array in search mode at the
// time the search was started. Timing is that of max_cam_array (search result DW+4 cycles after the start).
// The accelerator description names the selector and the two modes; the exact port split is this
// design's own.
module ping_pong_max_cam
  import pc2im_pkg::*;
#(
  parameter int N_TDG = 16,
  parameter int N_TDP = 128,
  parameter int DW    = DIST_W
) (
  input  logic clk,
  input  logic rst_n,
  input  logic                          sel,
  // load side
  input  logic                          ld_clr,
  input  logic                          ld_en,
  input  logic                          ld_first,
  input  logic [$clog2(N_TDP)-1:0]      ld_row,
  input  logic [N_TDG-1:0]              ld_lane,
  input  logic [N_TDG-1:0][DW-1:0]      ld_dist,
  // search side
  input  logic                          srch_start,
  output logic                          srch_busy,
  output logic                          srch_done,
  output logic [DW-1:0]                 srch_max,
  output logic [$clog2(N_TDP*N_TDG)-1:0] srch_idx
);
  localparam int IW = $clog2(N_TDP*N_TDG);

  logic [1:0]          a_busy, a_done;
  logic [1:0][DW-1:0]  a_max;
  logic [1:0][IW-1:0]  a_idx;
  logic                srch_arr;   // array whose search is running or was last run

  for (genvar a = 0; a < 2; a++) begin : g_arr
    logic is_load;
    assign is_load = (sel == 1'(a));
    max_cam_array #(.N_TDG(N_TDG), .N_TDP(N_TDP), .DW(DW)) u_arr (
      .clk, .rst_n,
      .clr       (ld_clr & is_load),
      .ld_en     (ld_en & is_load),
      .ld_first,
      .ld_row,
      .ld_lane,
      .ld_dist,
      .srch_start(srch_start & !is_load),
      .srch_busy (a_busy[a]),
      .srch_done (a_done[a]),
      .srch_max  (a_max[a]),
      .srch_idx  (a_idx[a])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          srch_arr <= 1'b0;
    else if (srch_start) srch_arr <= ~sel;
  end

  assign srch_busy = a_busy[srch_arr];
  assign srch_done = a_done[srch_arr];
  assign srch_max  = a_max[srch_arr];
  assign srch_idx  = a_idx[srch_arr];

  a_sel_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 srch_busy |-> !srch_start)
    else $error("ping_pong_max_cam: search started while one is running");
endmodule
