// tb_pc2im_top: end-to-end test of the accelerator with every parameter at its
// default. It runs one PSA layer on a full 2048-point tile and the preprocessing of a
// second, partial tile:
//   tile A (2048 points): FPS of 32 centroids + lattice query (K = 32), a two-layer
//     MLP on all points (layer 1 back into the input buffer, layer 2 into the
//     feature buffer, both through ReLU/BN), then aggregation of the 32 point sets;
//   tile B (1000 points): FPS of 16 centroids + kNN query.
// Every result is compared with a model computed here: FPS with L1 distance, the
// K nearest neighbours, the integer MLP with folded BN and ReLU, and max-pooling
// relative to the centroid. It also counts the mechanisms the design has and fails
// if one never happened: FPS iterations, lattice and kNN queries, points dropped by
// the lattice range, partial sweep rows, both CAM arrays used, MLP results written
// back for a next layer and to the feature buffer, ReLU clipping, aggregation.
module tb_pc2im_top;
  import pc2im_pkg::*;
  localparam int K = 32, C = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic pt_we = 0, pt_re = 0;
  logic [IDX_W-1:0] pt_widx = 0, pt_ridx = 0;
  point_t pt_wdata = '0, pt_rdata;
  logic pre_start = 0, pre_busy, pre_done;
  logic [IDX_W:0] n_points = 0;
  logic [9:0] n_samples = 0, agg_n_cent = 0;
  query_mode_e qmode = Q_LATTICE;
  logic [DIST_W-1:0] range_l = 0;
  logic cib_re = 0, nib_re = 0;
  logic [8:0] cib_raddr = 0, nib_raddr = 0, agg_out_cent;
  logic [IDX_W-1:0] cib_rdata;
  nb_entry_t [K-1:0] nib_rdata;
  logic w_we = 0, bn_we = 0;
  logic [3:0] w_row = 0, w_out = 0, w_in = 0, bn_ch = 0, mlp_row = 0;
  logic [15:0] w_data = 0;
  logic signed [15:0] bn_scale = 0;
  logic signed [39:0] bn_bias = 0;
  logic [5:0] bn_shift = 0;
  logic fcb_we = 0, mlp_start = 0, mlp_to_fb = 0, mlp_busy, mlp_done;
  logic [10:0] fcb_waddr = 0, mlp_src = 0, mlp_dst = 0;
  logic [11:0] mlp_n = 0;
  logic [C-1:0][15:0] fcb_wdata = '0;
  logic fb_re = 0, agg_start = 0, agg_busy, agg_done, agg_out_valid;
  logic [IDX_W-1:0] fb_raddr = 0;
  logic [C-1:0][15:0] fb_rdata;
  logic [C-1:0][16:0] agg_out_feat;
  logic [31:0] cnt_fps_iter, cnt_query, cnt_masked_rows, cnt_mlp_vec;

  pc2im_top dut (.*);

  point_t pts [N_POINTS];
  logic signed [15:0] wgt [2][16][16];         // [layer][out][in]
  logic signed [39:0] bias [16];
  logic [15:0] feat0 [N_POINTS][16];           // MLP input
  logic [15:0] feat1 [N_POINTS][16];           // after layer 1
  logic [15:0] feat2 [N_POINTS][16];           // after layer 2 (feature buffer)
  int cent [512];
  int nbl [512][K];                            // -1 = empty
  int n_relu_zero = 0, n_lattice_short = 0, n_agg = 0, sel_seen [2];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (dut.cam_srch_start) sel_seen[dut.cam_sel]++;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int iabs(int v); return v < 0 ? -v : v; endfunction
  function automatic int l1(int a, int b);
    return iabs(int'(pts[a].x) - int'(pts[b].x)) + iabs(int'(pts[a].y) - int'(pts[b].y))
         + iabs(int'(pts[a].z) - int'(pts[b].z));
  endfunction

  // folded BN + ReLU of the model
  function automatic logic [15:0] post(longint acc, int ch);
    longint m;
    m = (acc + longint'(bias[ch])) >>> 10;
    if (m <= 0) return 16'd0;
    if (m > 32767) return 16'd32767;
    return 16'(m);
  endfunction

  task automatic load_points(int spread);
    for (int i = 0; i < N_POINTS; i++) begin
      pts[i].x = 16'($urandom_range(spread));
      pts[i].y = 16'($urandom_range(spread));
      pts[i].z = 16'($urandom_range(spread));
      @(negedge clk); pt_we = 1; pt_widx = IDX_W'(i); pt_wdata = pts[i];
    end
    @(negedge clk); pt_we = 0;
    // read a few back
    for (int t = 0; t < 8; t++) begin
      int i; i = $urandom_range(N_POINTS - 1);
      pt_re = 1; pt_ridx = IDX_W'(i);
      @(negedge clk); pt_re = 0;
      checks++;
      if (pt_rdata != pts[i]) begin failures++; $display("point read %0d", i); end
    end
  endtask

  task automatic preprocess(int np, int ns, query_mode_e qm, int rl);
    int ds [N_POINTS];
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
    for (int s = 0; s < ns; s++) begin
      bit used [N_POINTS];
      for (int i = 0; i < np; i++) used[i] = 0;
      for (int p = 0; p < K; p++) begin
        int best, bd; best = -1; bd = 0;
        for (int i = 0; i < np; i++) begin
          int d; d = l1(i, cent[s]);
          if (!used[i] && (qm == Q_KNN || d <= rl) && (best < 0 || d < bd)) begin best = i; bd = d; end
        end
        nbl[s][p] = best;
        if (best >= 0) used[best] = 1;
      end
      if (nbl[s][K-1] < 0) n_lattice_short++;
    end
    n_points = (IDX_W+1)'(np); n_samples = 10'(ns); qmode = qm; range_l = DIST_W'(rl);
    @(negedge clk); pre_start = 1;
    @(negedge clk); pre_start = 0;
    while (!pre_done) @(negedge clk);
    @(negedge clk);
    // read back and check the index buffers through the host ports
    for (int s = 0; s < ns; s++) begin
      cib_re = 1; cib_raddr = 9'(s); nib_re = 1; nib_raddr = 9'(s);
      @(negedge clk); cib_re = 0; nib_re = 0;
      checks++;
      if (cib_rdata != IDX_W'(cent[s])) begin
        failures++; if (failures < 10) $display("centroid %0d: %0d want %0d", s, cib_rdata, cent[s]);
      end
      for (int p = 0; p < K; p++) begin
        checks++;
        if (nbl[s][p] < 0 ? nib_rdata[p].valid
                          : (!nib_rdata[p].valid || nib_rdata[p].idx != IDX_W'(nbl[s][p]))) begin
          failures++; if (failures < 10) $display("list %0d entry %0d wrong", s, p);
        end
      end
    end
  endtask

  task automatic run_mlp(int n, int row, int src, int dst, bit to_fb);
    mlp_n = 12'(n); mlp_row = 4'(row); mlp_src = 11'(src); mlp_dst = 11'(dst); mlp_to_fb = to_fb;
    @(negedge clk); mlp_start = 1;
    @(negedge clk); mlp_start = 0;
    while (!mlp_done) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // ---------- tile A ----------
    load_points(4000);
    preprocess(2048, 32, Q_LATTICE, 700);
    // weights: layer 1 in row 0, layer 2 in row 1; BN: scale 1, bias, shift 10
    for (int l = 0; l < 2; l++)
      for (int o = 0; o < 16; o++)
        for (int i = 0; i < 16; i++) begin
          wgt[l][o][i] = 16'($urandom_range(4000)) - 16'sd2000;
          @(negedge clk); w_we = 1; w_row = 4'(l); w_out = 4'(o); w_in = 4'(i); w_data = wgt[l][o][i];
        end
    @(negedge clk); w_we = 0;
    for (int c = 0; c < 16; c++) begin
      bias[c] = 40'(longint'($urandom_range(4000000)) - 2000000);
      @(negedge clk); bn_we = 1; bn_ch = 4'(c); bn_scale = 16'sd1; bn_bias = bias[c]; bn_shift = 6'd10;
    end
    @(negedge clk); bn_we = 0;
    // MLP inputs: coordinates and random features
    for (int p = 0; p < N_POINTS; p++) begin
      for (int c = 0; c < 16; c++)
        feat0[p][c] = (c == 0) ? pts[p].x : (c == 1) ? pts[p].y : (c == 2) ? pts[p].z
                                          : 16'($urandom_range(8000));
      @(negedge clk); fcb_we = 1; fcb_waddr = 11'(p);
      for (int c = 0; c < 16; c++) fcb_wdata[c] = feat0[p][c];
    end
    @(negedge clk); fcb_we = 0;
    for (int p = 0; p < N_POINTS; p++)
      for (int o = 0; o < 16; o++) begin
        longint a; a = 0;
        for (int i = 0; i < 16; i++) a += longint'($signed(feat0[p][i])) * longint'(wgt[0][o][i]);
        feat1[p][o] = post(a, o);
        if (feat1[p][o] == 0) n_relu_zero++;
      end
    for (int p = 0; p < N_POINTS; p++)
      for (int o = 0; o < 16; o++) begin
        longint a; a = 0;
        for (int i = 0; i < 16; i++) a += longint'($signed(feat1[p][i])) * longint'(wgt[1][o][i]);
        feat2[p][o] = post(a, o);
      end
    // layer 1: 1024 points at a time, results back to the input buffer at +1024 / -1024
    run_mlp(1024, 0, 0, 1024, 0);      // points 0..1023 -> entries 1024..2047
    // entries 1024..2047 now hold layer-1 outputs of points 0..1023;
    // layer 2 on them, into feature buffer entries 0..1023
    run_mlp(1024, 1, 1024, 0, 1);
    // points 1024..2047: layer 1 needs their inputs, which were overwritten: reload
    for (int p = 1024; p < N_POINTS; p++) begin
      @(negedge clk); fcb_we = 1; fcb_waddr = 11'(p - 1024);
      for (int c = 0; c < 16; c++) fcb_wdata[c] = feat0[p][c];
    end
    @(negedge clk); fcb_we = 0;
    run_mlp(1024, 0, 0, 1024, 0);
    run_mlp(1024, 1, 1024, 1024, 1);
    // check the feature buffer
    for (int p = 0; p < N_POINTS; p += 7) begin
      fb_re = 1; fb_raddr = IDX_W'(p);
      @(negedge clk); fb_re = 0;
      for (int c = 0; c < 16; c++) begin
        checks++;
        if (fb_rdata[c] != feat2[p][c]) begin
          failures++; if (failures < 10) $display("feature %0d ch %0d: %0d want %0d", p, c, fb_rdata[c], feat2[p][c]);
        end
      end
    end
    // aggregation of the 32 point sets
    agg_n_cent = 10'd32;
    @(negedge clk); agg_start = 1;
    @(negedge clk); agg_start = 0;
    while (!agg_done) begin
      @(negedge clk);
      if (agg_out_valid) begin
        int j, ci;
        j = int'(agg_out_cent); ci = cent[j];
        for (int c = 0; c < 16; c++) begin
          int mx; mx = int'(feat2[ci][c]);
          for (int p = 0; p < K; p++)
            if (nbl[j][p] >= 0 && int'(feat2[nbl[j][p]][c]) > mx) mx = int'(feat2[nbl[j][p]][c]);
          checks++;
          if (int'($signed(agg_out_feat[c])) != mx - int'(feat2[ci][c])) begin
            failures++; if (failures < 10) $display("agg %0d ch %0d", j, c);
          end
        end
        n_agg++;
      end
    end
    // ---------- tile B ----------
    load_points(20000);
    preprocess(1000, 16, Q_KNN, 0);
    // ---------- mechanisms ----------
    checks += 9;
    if (cnt_fps_iter != 31 + 15) begin failures++; $display("FPS iterations %0d", cnt_fps_iter); end
    if (cnt_query != 32 + 16) begin failures++; $display("queries %0d", cnt_query); end
    if (n_lattice_short == 0) begin failures++; $display("lattice range never cut a list"); end
    if (cnt_masked_rows == 0) begin failures++; $display("no partial sweep row"); end
    if (sel_seen[0] == 0 || sel_seen[1] == 0) begin failures++; $display("one CAM array unused"); end
    if (cnt_mlp_vec != 4096) begin failures++; $display("MLP vectors %0d", cnt_mlp_vec); end
    if (n_relu_zero == 0) begin failures++; $display("ReLU never clipped"); end
    if (n_agg != 32) begin failures++; $display("aggregations %0d", n_agg); end
    if (cyc == 0) failures++;
    $display("mechanisms: fps=%0d queries=%0d short_lists=%0d masked_rows=%0d cam_sel0=%0d cam_sel1=%0d mlp=%0d relu0=%0d agg=%0d",
             cnt_fps_iter, cnt_query, n_lattice_short, cnt_masked_rows, sel_seen[0], sel_seen[1],
             cnt_mlp_vec, n_relu_zero, n_agg);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
