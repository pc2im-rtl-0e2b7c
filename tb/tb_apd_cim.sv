// tb_apd_cim: self-checking test of the distance CIM at full size (2048 points).
// Fills the array with random points (including extreme coordinates), loads several
// reference points, sweeps every row and compares each of the 16 distances per cycle
// with |dx|+|dy|+|dz| computed here with plain integer arithmetic. Also checks the
// 1-cycle distance latency, one sweep row per cycle, and the point read port.
module tb_apd_cim;
  import pc2im_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic wr_en = 0, rd_en = 0, ref_load = 0, cmp_en = 0;
  logic [IDX_W-1:0] wr_idx = '0, rd_idx = '0, ref_idx = '0;
  point_t wr_pt = '0, rd_pt, ref_pt;
  logic rd_valid, dist_valid;
  logic [ROW_W-1:0] cmp_row = '0, dist_row;
  logic [N_PTC-1:0][DIST_W-1:0] dist_out;

  apd_cim dut (.*);

  point_t pts [N_POINTS];

  function automatic int iabs(int v);
    return v < 0 ? -v : v;
  endfunction
  function automatic int l1(point_t a, point_t b);
    return iabs(int'(a.x) - int'(b.x)) + iabs(int'(a.y) - int'(b.y)) + iabs(int'(a.z) - int'(b.z));
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N_POINTS; i++) begin
      pts[i].x = 16'($urandom);
      pts[i].y = 16'($urandom);
      pts[i].z = 16'($urandom);
    end
    pts[5]  = '{x: 16'sh7fff, y: 16'sh7fff, z: 16'sh7fff};
    pts[77] = '{x: 16'sh8000, y: 16'sh8000, z: 16'sh8000};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < N_POINTS; i++) begin
      @(negedge clk);
      wr_en = 1; wr_idx = IDX_W'(i); wr_pt = pts[i];
    end
    @(negedge clk); wr_en = 0;
    // read port
    for (int t = 0; t < 20; t++) begin
      int i;
      i = (t == 0) ? 5 : $urandom_range(N_POINTS-1);
      rd_en = 1; rd_idx = IDX_W'(i);
      @(negedge clk); rd_en = 0;
      checks++;
      if (!rd_valid || rd_pt !== pts[i]) begin
        failures++; $display("read mismatch at %0d", i);
      end
    end
    // distance sweeps
    for (int r = 0; r < 4; r++) begin
      int ri;
      int cyc_first, cyc_last;
      ri = (r == 0) ? 77 : (r == 1) ? 5 : $urandom_range(N_POINTS-1);
      ref_load = 1; ref_idx = IDX_W'(ri);
      @(negedge clk); ref_load = 0;
      checks++;
      if (ref_pt !== pts[ri]) begin failures++; $display("ref mismatch"); end
      fork
        begin
          for (int row = 0; row < N_ROWS; row++) begin
            cmp_en = 1; cmp_row = ROW_W'(row);
            @(negedge clk);
          end
          cmp_en = 0;
        end
        begin
          int seen;
          seen = 0;
          while (seen < N_ROWS) begin
            @(posedge clk); #1;
            if (dist_valid) begin
              checks++;
              if (dist_row != ROW_W'(seen)) begin
                failures++; $display("row order: got %0d want %0d", dist_row, seen);
              end
              for (int l = 0; l < N_PTC; l++) begin
                int want;
                want = l1(pts[seen*N_PTC + l], pts[ri]);
                checks++;
                if (int'(dist_out[l]) != want) begin
                  failures++;
                  if (failures < 10) $display("dist mismatch row %0d lane %0d: %0d vs %0d",
                                              seen, l, dist_out[l], want);
                end
              end
              seen++;
            end else if (seen > 0) begin
              failures++; $display("gap in the distance stream");
              seen = N_ROWS;
            end
          end
        end
      join
      // latency: a single compute gives its result at the next clock edge only
      @(negedge clk); cmp_en = 1; cmp_row = 7'd3;
      #1;
      checks++;
      if (dist_valid) begin failures++; $display("result before the clock edge"); end
      @(posedge clk); #1;
      checks++;
      if (!dist_valid || dist_row != 7'd3) begin failures++; $display("latency not 1"); end
      @(negedge clk); cmp_en = 0;
      @(posedge clk); #1;
      checks++;
      if (dist_valid) begin failures++; $display("valid held too long"); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
