// tb_sorter_merger: self-checking test of the neighbour sorter/merger (K = 32,
// 16 distances per cycle). Streams of up to 128 rows with random distances and lane
// masks are sent in lattice mode (with a range) and in kNN mode. The expected list,
// the K smallest (distance, index) pairs among the points that qualify, is computed
// here by selection over all points sent, and compared entry by entry with the list,
// also in the middle of a stream. Checks the 2-cycle pipeline latency and clear.
module tb_sorter_merger;
  import pc2im_pkg::*;

  localparam int N_IN = 16, K = 32, DW = DIST_W;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear = 0, in_valid = 0;
  query_mode_e mode = Q_LATTICE;
  logic [DW-1:0] range_l = '0;
  logic [N_IN-1:0] in_lane = '1;
  logic [6:0] in_row = '0;
  logic [N_IN-1:0][DW-1:0] in_dist = '0;
  logic [K-1:0] list_valid;
  logic [K-1:0][DW-1:0] list_dist;
  logic [K-1:0][IDX_W-1:0] list_idx;
  logic [$clog2(K+1)-1:0] list_cnt;
  logic busy;

  sorter_merger dut (.*);

  // points sent since the last clear that qualify
  int unsigned sd [$];
  int unsigned si [$];
  int n_lattice_drop = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_list(string tag);
    int unsigned ed [K]; int unsigned ei [K]; bit used [$]; int n;
    used = {};
    foreach (sd[i]) used.push_back(0);
    n = 0;
    for (int p = 0; p < K; p++) begin
      int best; best = -1;
      foreach (sd[i])
        if (!used[i] && (best < 0 || sd[i] < sd[best] || (sd[i] == sd[best] && si[i] < si[best])))
          best = i;
      if (best >= 0) begin used[best] = 1; ed[p] = sd[best]; ei[p] = si[best]; n++; end
    end
    checks++;
    if (int'(list_cnt) != n) begin failures++; $display("%s: count %0d want %0d", tag, list_cnt, n); end
    for (int p = 0; p < K; p++) begin
      checks++;
      if (p < n) begin
        if (!list_valid[p] || list_dist[p] != DW'(ed[p]) || list_idx[p] != IDX_W'(ei[p])) begin
          failures++;
          if (failures < 10) $display("%s: entry %0d (%0d,%0d) want (%0d,%0d)", tag, p,
                                      list_dist[p], list_idx[p], ed[p], ei[p]);
        end
      end else if (list_valid[p]) begin
        failures++; $display("%s: entry %0d should be empty", tag, p);
      end
    end
  endtask

  task automatic do_clear();
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    sd = {}; si = {};
  endtask

  task automatic stream(int rows, int unsigned lim, bit masks);
    for (int r = 0; r < rows; r++) begin
      @(negedge clk);
      in_valid = 1; in_row = 7'(r);
      in_lane = masks ? N_IN'($urandom) : '1;
      for (int l = 0; l < N_IN; l++) begin
        int unsigned v; v = $urandom_range(lim);
        in_dist[l] = DW'(v);
        if (in_lane[l]) begin
          if (mode == Q_KNN || v <= range_l) begin sd.push_back(v); si.push_back(r*N_IN + l); end
          else n_lattice_drop++;
        end
      end
    end
    @(negedge clk); in_valid = 0;
    @(negedge clk);                 // 2-cycle latency: list complete now
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // latency: one row, list must not change before two edges have passed
    mode = Q_KNN; do_clear();
    @(negedge clk); in_valid = 1; in_row = 0; in_lane = '1;
    for (int l = 0; l < N_IN; l++) in_dist[l] = DW'(100 - l);
    @(negedge clk); in_valid = 0;
    checks++; if (list_cnt != 0) begin failures++; $display("list changed after 1 cycle"); end
    @(negedge clk);
    checks++; if (list_cnt != N_IN || list_idx[0] != 15) begin failures++; $display("list not ready after 2 cycles"); end
    do_clear();
    checks++; if (list_cnt != 0) begin failures++; $display("clear failed"); end
    // kNN over full tiles, mid-stream check too
    for (int t = 0; t < 3; t++) begin
      do_clear();
      stream(40, t == 0 ? 20 : 5000, t == 2);
      check_list("knn-mid");
      stream(88, 5000, 1);
      check_list("knn");
    end
    // lattice mode: few points inside, then many inside
    mode = Q_LATTICE;
    for (int t = 0; t < 4; t++) begin
      range_l = (t < 2) ? 19'd300 : 19'd40000;
      do_clear();
      stream(128, 100000, t[0]);
      check_list("lattice");
    end
    checks++;
    if (n_lattice_drop == 0) begin failures++; $display("no point dropped by the range"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
