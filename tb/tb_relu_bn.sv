// tb_relu_bn: self-checking test of the folded BN + ReLU unit. Random per-channel
// scale and bias, several shifts, random accumulators (small and near the 40-bit
// limits); each output is compared with relu(sat16((acc*scale+bias) >>> shift))
// computed here with 128-bit integers. Checks the 1-cycle latency.
module tb_relu_bn;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_we = 0, in_valid = 0;
  logic [3:0] cfg_ch = 0;
  logic signed [15:0] cfg_scale = 0;
  logic signed [39:0] cfg_bias = 0;
  logic [5:0] shift = 0;
  logic [15:0][39:0] in_acc = '0;
  logic out_valid;
  logic [15:0][15:0] out_feat;

  relu_bn dut (.*);

  logic signed [15:0] sc [16];
  logic signed [39:0] bi [16];
  int n_zero = 0, n_sat = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 16; c++) begin
      sc[c] = 16'($urandom);
      bi[c] = 40'(longint'($urandom_range(2000000)) - 1000000);
      @(negedge clk); cfg_we = 1; cfg_ch = 4'(c); cfg_scale = sc[c]; cfg_bias = bi[c];
    end
    @(negedge clk); cfg_we = 0;
    for (int v = 0; v < 200; v++) begin
      shift = 6'($urandom_range(30));
      for (int c = 0; c < 16; c++)
        in_acc[c] = (v % 3 == 0) ? 40'({$urandom, $urandom}) : 40'(longint'($urandom_range(200000)) - 100000);
      in_valid = 1;
      @(negedge clk); in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("no output after 1 cycle"); end
      for (int c = 0; c < 16; c++) begin
        logic signed [127:0] m; int e;
        m = 128'($signed(in_acc[c])) * 128'(sc[c]) + 128'(bi[c]);
        m = m >>> shift;
        if (m <= 0) begin e = 0; n_zero++; end
        else if (m > 32767) begin e = 32767; n_sat++; end
        else e = int'(m);
        checks++;
        if (int'(out_feat[c]) != e) begin
          failures++;
          if (failures < 10) $display("ch %0d: %0d want %0d", c, out_feat[c], e);
        end
      end
      @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("valid held"); end
    end
    checks++;
    if (n_zero == 0 || n_sat == 0) begin failures++; $display("ReLU or saturation never hit"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
