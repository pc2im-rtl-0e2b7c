// tb_pre_ctrl: self-checking test of the preprocessing sequencer with the real
// distance CIM, MAX-CAM and sorter/merger around it (index buffers are arrays here).
// Three tiles are run: a partial tile (not a multiple of 16 points, lattice query),
// a full 2048-point tile (kNN query) and a small one (lattice). The centroid list must
// equal farthest point sampling with L1 distance computed here (start at point 0,
// lowest index on ties), each neighbour list must equal the K nearest qualifying
// points, the CAM array must alternate between tiles, and the cycle count must match
// 2 + (S-1)(rows+26) + S(rows+6) + 1 cycles from start to done for S centroids and
// `rows` sweep rows.
module tb_pre_ctrl;
  import pc2im_pkg::*;
  localparam int K = 32, CD = 512;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // DUT and the blocks it drives
  logic start = 0;
  logic [IDX_W:0] n_points = 0;
  logic [9:0] n_samples = 0;
  query_mode_e qmode = Q_LATTICE;
  logic [DIST_W-1:0] range_l = 0;
  logic busy, done;
  logic ref_load, cmp_en, dist_valid;
  logic [IDX_W-1:0] ref_idx;
  logic [ROW_W-1:0] cmp_row, dist_row;
  logic cam_sel, cam_clr, cam_ld_en, cam_ld_first, cam_srch_start, cam_srch_done;
  logic [N_PTC-1:0] lane_mask;
  logic [IDX_W-1:0] cam_srch_idx;
  logic sm_clear, sm_in_valid;
  query_mode_e sm_mode;
  logic [DIST_W-1:0] sm_range;
  nb_entry_t [K-1:0] sm_list;
  logic cib_we, cib_re, nib_we;
  logic [8:0] cib_waddr, cib_raddr, nib_waddr;
  logic [IDX_W-1:0] cib_wdata, cib_rdata;
  nb_entry_t [K-1:0] nib_wdata;
  logic [31:0] cnt_fps_iter, cnt_query, cnt_masked_rows;

  pre_ctrl dut (.*);

  // point memory
  logic pt_we = 0;
  logic [IDX_W-1:0] pt_idx = 0;
  point_t pt_w = '0, rd_pt, ref_pt;
  logic rd_valid;
  logic [N_PTC-1:0][DIST_W-1:0] dist_w;
  apd_cim u_apd (.clk, .rst_n, .wr_en(pt_we), .wr_idx(pt_idx), .wr_pt(pt_w),
                 .rd_en(1'b0), .rd_idx('0), .rd_valid, .rd_pt, .ref_load, .ref_idx,
                 .ref_pt, .cmp_en, .cmp_row, .dist_valid, .dist_row, .dist_out(dist_w));
  logic srch_busy;
  logic [DIST_W-1:0] srch_max;
  ping_pong_max_cam u_cam (.clk, .rst_n, .sel(cam_sel), .ld_clr(cam_clr), .ld_en(cam_ld_en),
                           .ld_first(cam_ld_first), .ld_row(dist_row), .ld_lane(lane_mask),
                           .ld_dist(dist_w), .srch_start(cam_srch_start), .srch_busy,
                           .srch_done(cam_srch_done), .srch_max, .srch_idx(cam_srch_idx));
  logic [K-1:0] lv; logic [K-1:0][DIST_W-1:0] ld; logic [K-1:0][IDX_W-1:0] li;
  logic [5:0] lcnt; logic smb;
  sorter_merger u_sm (.clk, .rst_n, .clear(sm_clear), .mode(sm_mode), .range_l(sm_range),
                      .in_valid(sm_in_valid), .in_lane(lane_mask), .in_row(dist_row),
                      .in_dist(dist_w), .list_valid(lv), .list_dist(ld), .list_idx(li),
                      .list_cnt(lcnt), .busy(smb));
  always_comb for (int i = 0; i < K; i++) sm_list[i] = '{valid: lv[i], idx: li[i]};

  logic [IDX_W-1:0]  cib [CD];
  nb_entry_t [K-1:0] nib [CD];
  always_ff @(posedge clk) begin
    if (cib_we) cib[cib_waddr] <= cib_wdata;
    if (cib_re) cib_rdata <= cib[cib_raddr];
    if (nib_we) nib[nib_waddr] <= nib_wdata;
  end

  point_t pts [N_POINTS];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  int sel_seen [2];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (cam_srch_start) sel_seen[cam_sel]++;

  function automatic int iabs(int v); return v < 0 ? -v : v; endfunction
  function automatic int l1(int a, int b);
    return iabs(int'(pts[a].x) - int'(pts[b].x)) + iabs(int'(pts[a].y) - int'(pts[b].y))
         + iabs(int'(pts[a].z) - int'(pts[b].z));
  endfunction

  task automatic run_tile(int np, int ns, query_mode_e qm, int rl, int spread);
    int cent [CD]; int ds [N_POINTS]; int t0, rows, want_cyc;
    for (int i = 0; i < N_POINTS; i++) begin
      pts[i].x = 16'($urandom_range(spread));
      pts[i].y = 16'($urandom_range(spread));
      pts[i].z = 16'($urandom_range(spread));
      @(negedge clk); pt_we = 1; pt_idx = IDX_W'(i); pt_w = pts[i];
    end
    @(negedge clk); pt_we = 0;
    // reference FPS
    cent[0] = 0;
    for (int i = 0; i < np; i++) ds[i] = 32'h7fffffff;
    for (int s = 1; s < ns; s++) begin
      int best, bv; best = 0; bv = -1;
      for (int i = 0; i < np; i++) begin
        int d; d = l1(i, cent[s-1]);
        if (d < ds[i]) ds[i] = d;
        if (ds[i] > bv) begin bv = ds[i]; best = i; end
      end
      cent[s] = best;
    end
    n_points = (IDX_W+1)'(np); n_samples = 10'(ns); qmode = qm; range_l = DIST_W'(rl);
    start = 1; t0 = cyc;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    rows = (np + 15) / 16;
    want_cyc = 2 + (ns - 1) * (rows + 26) + ns * (rows + 6) + 1;  // start, clear, FPS, queries, done
    checks++;
    if (cyc - t0 != want_cyc) begin failures++; $display("cycles %0d want %0d", cyc - t0, want_cyc); end
    for (int s = 0; s < ns; s++) begin
      checks++;
      if (cib[s] != IDX_W'(cent[s])) begin
        failures++; if (failures < 10) $display("centroid %0d: %0d want %0d", s, cib[s], cent[s]);
      end
    end
    // reference neighbour lists
    for (int s = 0; s < ns; s++) begin
      bit used [N_POINTS];
      for (int i = 0; i < np; i++) used[i] = 0;
      for (int p = 0; p < K; p++) begin
        int best, bd; best = -1; bd = 0;
        for (int i = 0; i < np; i++) begin
          int d; d = l1(i, cent[s]);
          if (!used[i] && (qm == Q_KNN || d <= rl) && (best < 0 || d < bd)) begin best = i; bd = d; end
        end
        checks++;
        if (best < 0) begin
          if (nib[s][p].valid) begin failures++; $display("list %0d entry %0d should be empty", s, p); end
        end else begin
          used[best] = 1;
          if (!nib[s][p].valid || nib[s][p].idx != IDX_W'(best)) begin
            failures++;
            if (failures < 10) $display("list %0d entry %0d: %0d/%0d want %0d", s, p,
                                        nib[s][p].valid, nib[s][p].idx, best);
          end
        end
      end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_tile(200, 12, Q_LATTICE, 3000, 8000);
    run_tile(2048, 6, Q_KNN, 0, 30000);
    run_tile(37, 5, Q_LATTICE, 400, 1000);
    checks += 3;
    if (sel_seen[0] == 0 || sel_seen[1] == 0) begin failures++; $display("CAM arrays did not alternate"); end
    if (cnt_fps_iter != 11 + 5 + 4 || cnt_query != 12 + 6 + 5) begin
      failures++; $display("counters %0d %0d", cnt_fps_iter, cnt_query);
    end
    if (cnt_masked_rows == 0) begin failures++; $display("no partial row"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
