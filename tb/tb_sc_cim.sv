// tb_sc_cim: self-checking test of the split-concatenate CIM at full size (64 slices,
// 8 LWB pairs, 16 rows). All weights are written with random 16-bit signed values
// (plus the extremes), random input vectors (with -32768, 32767, 0 and -1 mixed in)
// are applied back to back on several rows, and each of the 16 outputs is compared
// with the dot product computed here in 64-bit integers. Also checks the latency
// (y_valid 5 cycles after start) and the rate (one vector every 4 cycles).
module tb_sc_cim;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic w_we = 0, start = 0;
  logic [3:0] w_row = 0, w_out = 0, w_in = 0, row = 0;
  logic [15:0] w_data = 0;
  logic [15:0][15:0] x = '0;
  logic ready, y_valid;
  logic [15:0][39:0] y;

  sc_cim dut (.*);

  logic signed [15:0] wm [16][16][16];     // [row][out][in]
  longint exp_y [64][16];
  int    t_start [64];
  int    n_in = 0;
  int    cyc = 0;
  int    last_valid = -1, n_out = 0, n_gap_bad = 0;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output checker
  always @(negedge clk) if (rst_n && y_valid) begin
    int ts;
    ts = t_start[n_out];
    checks++;
    if (cyc - ts != 5) begin failures++; $display("latency %0d", cyc - ts); end
    if (last_valid >= 0) begin
      checks++;
      if (cyc - last_valid != 4) begin failures++; $display("rate: gap %0d", cyc - last_valid); end
    end
    last_valid = cyc;
    for (int o = 0; o < 16; o++) begin
      checks++;
      if ($signed(y[o]) != exp_y[n_out][o]) begin
        failures++;
        if (failures < 10) $display("out %0d: %0d want %0d", o, $signed(y[o]), exp_y[n_out][o]);
      end
    end
    n_out++;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 16; r++)
      for (int o = 0; o < 16; o++)
        for (int i = 0; i < 16; i++) begin
          logic signed [15:0] v;
          v = 16'($urandom);
          if (r == 1 && o == 0) v = 16'sh8000;
          if (r == 1 && o == 1) v = 16'sh7fff;
          if (r == 2)           v = 16'($urandom_range(15)) - 16'sd8;
          wm[r][o][i] = v;
          @(negedge clk);
          w_we = 1; w_row = 4'(r); w_out = 4'(o); w_in = 4'(i); w_data = v;
        end
    @(negedge clk); w_we = 0;
    for (int v = 0; v < 60; v++) begin
      int r;
      r = (v < 4) ? 1 : (v < 8) ? 2 : $urandom_range(15);
      for (int i = 0; i < 16; i++) begin
        case ($urandom_range(7))
          0: x[i] = 16'h8000;
          1: x[i] = 16'h7fff;
          2: x[i] = 16'hffff;
          3: x[i] = 16'h0000;
          default: x[i] = 16'($urandom);
        endcase
      end
      if (v < 2) x = {16{16'h8000}};
      for (int o = 0; o < 16; o++) begin
        exp_y[v][o] = 0;
        for (int i = 0; i < 16; i++)
          exp_y[v][o] += longint'($signed(x[i])) * longint'(wm[r][o][i]);
      end
      row = 4'(r);
      start = 1;
      while (!ready) @(negedge clk);
      t_start[v] = cyc;
      @(negedge clk);
      start = 0;
    end
    repeat (10) @(negedge clk);
    checks++;
    if (n_out != 60) begin failures++; $display("got %0d outputs", n_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
