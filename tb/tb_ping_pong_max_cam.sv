// tb_ping_pong_max_cam: self-checking test of the two-array MAX-CAM at full size
// (2 x 16 groups x 128 pairs). Each array gets several rounds of 16-distance row
// writes (the first round with ld_first), so every pair must keep the minimum of what
// it was given. After each round the array is searched while the other array is being
// loaded (array-level ping-pong); the maximum of the minima and its lowest index are
// compared with a model kept here, and srch_done must rise DW+4 cycles after srch_start.
// Rounds alternate narrow value ranges (many ties) and the full 19-bit range.
module tb_ping_pong_max_cam;
  import pc2im_pkg::*;

  localparam int NG = 16, NP = 128, DW = DIST_W;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic sel = 0, ld_clr = 0, ld_en = 0, ld_first = 0, srch_start = 0;
  logic [6:0] ld_row = '0;
  logic [NG-1:0] ld_lane = '1;
  logic [NG-1:0][DW-1:0] ld_dist = '0;
  logic srch_busy, srch_done;
  logic [DW-1:0] srch_max;
  logic [IDX_W-1:0] srch_idx;

  ping_pong_max_cam dut (.*);

  int unsigned ds [2][N_POINTS];
  int unsigned counts [2];   // searches checked per array

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Load one round into the array in load mode (sel must select it).
  task automatic load_round(int a, bit first, int unsigned lim);
    for (int r = 0; r < NP; r++) begin
      @(negedge clk);
      ld_en = 1; ld_first = first; ld_row = 7'(r);
      for (int g = 0; g < NG; g++) begin
        int unsigned v;
        v = $urandom_range(lim);
        ld_dist[g] = DW'(v);
        if (first || v < ds[a][r*NG + g]) ds[a][r*NG + g] = v;
      end
    end
    @(negedge clk); ld_en = 0; ld_first = 0;
  endtask

  // Search the array not in load mode and check the result and the latency.
  task automatic search_check(int a);
    int unsigned want_max; int want_idx; int cyc;
    want_max = 0; want_idx = 0;
    for (int i = 0; i < N_POINTS; i++)
      if (ds[a][i] > want_max) begin want_max = ds[a][i]; want_idx = i; end
    @(negedge clk); srch_start = 1;
    @(negedge clk); srch_start = 0;
    cyc = 1;
    while (!srch_done && cyc < 100) begin @(negedge clk); cyc++; end
    checks += 3;
    if (cyc != DW + 4) begin failures++; $display("search took %0d cycles", cyc); end
    if (srch_max != DW'(want_max)) begin
      failures++; $display("array %0d max %0d want %0d", a, srch_max, want_max);
    end
    if (srch_idx != IDX_W'(want_idx)) begin
      failures++; $display("array %0d idx %0d want %0d", a, srch_idx, want_idx);
    end
    counts[a]++;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // clear both arrays
    sel = 0; @(negedge clk); ld_clr = 1; @(negedge clk); ld_clr = 0;
    sel = 1; @(negedge clk); ld_clr = 1; @(negedge clk); ld_clr = 0;
    // first rounds of both
    sel = 0; load_round(0, 1, 1000);
    sel = 1; load_round(1, 1, (1 << DW) - 1);
    for (int it = 0; it < 6; it++) begin
      int unsigned lim0, lim1;
      lim0 = (it % 2) ? (1 << DW) - 1 : 300;
      lim1 = (it % 2) ? 50 : (1 << DW) - 1;
      // array 0 searches while array 1 loads, then the reverse
      sel = 1;
      fork
        search_check(0);
        load_round(1, 0, lim1);
      join
      sel = 0;
      fork
        search_check(1);
        load_round(0, 0, lim0);
      join
    end
    // a point that is the only maximum at the highest index
    sel = 0;
    @(negedge clk); ld_en = 1; ld_row = 7'd127; ld_lane = '0; ld_lane[15] = 1;
    ld_dist[15] = '1; @(negedge clk); ld_en = 0; ld_lane = '1;
    if (ds[0][N_POINTS-1] < (1 << DW) - 1) ; // minimum stays what it was
    sel = 1; search_check(0);
    checks++;
    if (counts[0] < 6 || counts[1] < 6) begin failures++; $display("too few searches"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
