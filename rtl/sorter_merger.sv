// sorter_merger: neighbour search on the distance stream of the distance CIM.
// Every cycle the CIM delivers N_IN distances of consecutive point indexes. The sorter
// orders them; the merger merges the sorted group into a running sorted list of the K
// nearest points seen since the last clear. In lattice mode (PSA layers) a point takes
// part only if its L1 distance is within the query range L, so the list holds up to K
// points of the lattice around the reference; in kNN mode (PFP layers) every point
// takes part and the list holds the K nearest.
//
// Both steps are rank based: an element's output position is the number of elements
// that order before it (distance, then index; invalid elements last), so each is one
// layer of comparators and a selection. Keeping the K nearest lattice points (rather
// than, say, the first K in index order) is this design's choice: the description
// gives the function of the sorter/merger, not its algorithm.
//
// Timing: in_valid at cycle t enters the sort register at t+1 and the list at t+2.
// clear empties the list at once (and drops the group in the sort register).
// list_cnt counts the valid entries; the list stays sorted, entry 0 nearest.
module sorter_merger
  import pc2im_pkg::*;
#(
  parameter int N_IN = 16,
  parameter int K    = 32,
  parameter int DW   = DIST_W,
  parameter int IW   = IDX_W
) (
  input  logic clk,
  input  logic rst_n,
  input  logic                        clear,
  input  query_mode_e                 mode,
  input  logic [DW-1:0]               range_l,
  input  logic                        in_valid,
  input  logic [N_IN-1:0]             in_lane,      // lane holds a point of the tile
  input  logic [IW-$clog2(N_IN)-1:0]  in_row,       // index of lane j = {in_row, j}
  input  logic [N_IN-1:0][DW-1:0]     in_dist,
  output logic [K-1:0]                list_valid,
  output logic [K-1:0][DW-1:0]        list_dist,
  output logic [K-1:0][IW-1:0]        list_idx,
  output logic [$clog2(K+1)-1:0]      list_cnt,
  output logic                        busy          // a group is still in flight
);
  localparam int LW = $clog2(N_IN);

  typedef struct packed {
    logic          inv;    // 1: empty slot, orders after every valid entry
    logic [DW-1:0] d;
    logic [IW-1:0] idx;
  } ent_t;

  function automatic logic precedes(ent_t a, ent_t b);
    return {a.inv, a.d, a.idx} < {b.inv, b.d, b.idx};
  endfunction

  // ---- sorter ----
  ent_t in_e   [N_IN];
  ent_t srt_c  [N_IN];
  always_comb begin
    for (int j = 0; j < N_IN; j++) begin
      in_e[j].inv  = !in_lane[j] || (mode == Q_LATTICE && in_dist[j] > range_l);
      in_e[j].d = in_dist[j];
      in_e[j].idx  = {in_row, LW'(j)};
    end
    for (int p = 0; p < N_IN; p++) srt_c[p] = '{inv: 1'b1, d: '1, idx: '1};
    for (int j = 0; j < N_IN; j++) begin
      int r;
      r = 0;
      for (int i = 0; i < N_IN; i++)
        if (precedes(in_e[i], in_e[j])) r++;
      srt_c[r] = in_e[j];        // indexes are distinct, so ranks are distinct
    end
  end

  ent_t srt_q [N_IN];
  logic srt_v;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      srt_v <= 1'b0;
      for (int j = 0; j < N_IN; j++) srt_q[j] <= '{inv: 1'b1, d: '1, idx: '1};
    end else begin
      srt_v <= in_valid && !clear;
      if (in_valid)
        for (int j = 0; j < N_IN; j++) srt_q[j] <= srt_c[j];
    end
  end

  // ---- merger ----
  ent_t lst_q [K];
  ent_t mrg_c [K];
  always_comb begin
    int r;
    r = 0;
    for (int p = 0; p < K; p++) mrg_c[p] = lst_q[p];
    if (srt_v) begin
      for (int p = 0; p < K; p++) mrg_c[p] = '{inv: 1'b1, d: '1, idx: '1};
      // list entries: position = own rank + number of new entries before it
      for (int i = 0; i < K; i++) begin
        r = i;
        for (int j = 0; j < N_IN; j++)
          if (precedes(srt_q[j], lst_q[i])) r++;
        if (r < K) mrg_c[r] = lst_q[i];
      end
      for (int j = 0; j < N_IN; j++) begin
        r = j;
        for (int i = 0; i < K; i++)
          if (precedes(lst_q[i], srt_q[j])) r++;
        if (r < K) mrg_c[r] = srt_q[j];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < K; p++) lst_q[p] <= '{inv: 1'b1, d: '1, idx: '1};
    end else if (clear) begin
      for (int p = 0; p < K; p++) lst_q[p] <= '{inv: 1'b1, d: '1, idx: '1};
    end else begin
      for (int p = 0; p < K; p++) lst_q[p] <= mrg_c[p];
    end
  end

  always_comb begin
    list_cnt = '0;
    for (int p = 0; p < K; p++) begin
      list_valid[p] = !lst_q[p].inv;
      list_dist[p]  = lst_q[p].d;
      list_idx[p]   = lst_q[p].idx;
      if (!lst_q[p].inv) list_cnt = list_cnt + 1'b1;
    end
  end

  assign busy = srt_v;
endmodule
