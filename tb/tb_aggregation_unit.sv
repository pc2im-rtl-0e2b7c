// tb_aggregation_unit: self-checking test of the aggregation unit (C = 16, K = 32).
// The three buffers are modelled here as arrays with a 1-cycle read. Random signed
// features, random centroid indexes and random neighbour lists (some entries invalid,
// one list empty) are used; each output must equal max(centroid, valid neighbours)
// minus the centroid feature, per channel, in centroid order. Also checks the cycle
// count of a centroid: 2 set-up cycles + K list cycles + 1 drain + 1 output.
module tb_aggregation_unit;
  import pc2im_pkg::*;
  localparam int C = 16, FW = 16, K = 32, NC = 12;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0;
  logic [9:0] n_cent = 0;
  logic busy, done, cib_re, nib_re, fb_re, out_valid;
  logic [8:0] cib_addr, nib_addr, out_cent;
  logic [IDX_W-1:0] cib_data, fb_addr;
  nb_entry_t [K-1:0] nib_data;
  logic [C-1:0][FW-1:0] fb_data;
  logic [C-1:0][FW:0] out_feat;

  aggregation_unit dut (.*);

  logic [IDX_W-1:0]     cib [512];
  nb_entry_t [K-1:0]    nib [512];
  logic [C-1:0][FW-1:0] fb  [N_POINTS];

  always_ff @(posedge clk) begin
    if (cib_re) cib_data <= cib[cib_addr];
    if (nib_re) nib_data <= nib[nib_addr];
    if (fb_re)  fb_data  <= fb[fb_addr];
  end

  int n_out = 0, cyc = 0, t_first = -1, t_last = -1;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    int ci;
    if (t_first < 0) t_first = cyc;
    t_last = cyc;
    checks++;
    if (out_cent != 9'(n_out)) begin failures++; $display("centroid order"); end
    ci = cib[n_out];
    for (int c = 0; c < C; c++) begin
      int mx, e;
      mx = int'($signed(fb[ci][c]));
      for (int n = 0; n < K; n++)
        if (nib[n_out][n].valid && int'($signed(fb[nib[n_out][n].idx][c])) > mx)
          mx = int'($signed(fb[nib[n_out][n].idx][c]));
      e = mx - int'($signed(fb[ci][c]));
      checks++;
      if (int'($signed(out_feat[c])) != e) begin
        failures++;
        if (failures < 10) $display("cent %0d ch %0d: %0d want %0d", n_out, c, $signed(out_feat[c]), e);
      end
    end
    n_out++;
  end

  initial begin
    for (int p = 0; p < N_POINTS; p++)
      for (int c = 0; c < C; c++) fb[p][c] = 16'($urandom);
    for (int j = 0; j < 512; j++) begin
      cib[j] = IDX_W'($urandom);
      for (int n = 0; n < K; n++) begin
        nib[j][n].valid = ($urandom_range(3) != 0) && (j != 3);
        nib[j][n].idx   = IDX_W'($urandom);
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; n_cent = NC;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
    checks += 2;
    if (n_out != NC) begin failures++; $display("outputs %0d", n_out); end
    if ((t_last - t_first) != (NC - 1) * (K + 4)) begin
      failures++; $display("cycles per centroid %0d (%0d..%0d)", (t_last - t_first) / (NC - 1), t_first, t_last);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
