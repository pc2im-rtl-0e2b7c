// tb_sram_1r1w: self-checking test of the on-chip buffer (2048 x 16 default size).
// Writes random words to every address, reads them back in random order, checks the
// 1-cycle read latency, that rd_data holds while re is low, and that a read and a
// write of the same address in one cycle return the old word.
module tb_sram_1r1w;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we = 0, re = 0;
  logic [10:0] wr_addr = 0, rd_addr = 0;
  logic [15:0] wr_data = 0, rd_data;

  sram_1r1w dut (.*);

  logic [15:0] model [2048];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 2048; a++) begin
      model[a] = 16'($urandom);
      @(negedge clk); we = 1; wr_addr = 11'(a); wr_data = model[a];
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 3000; t++) begin
      int a; a = $urandom_range(2047);
      re = 1; rd_addr = 11'(a);
      if (t % 5 == 0) begin                 // write the same address in the same cycle
        we = 1; wr_addr = 11'(a); wr_data = 16'($urandom);
      end
      @(negedge clk);
      checks++;
      if (rd_data != model[a]) begin
        failures++; if (failures < 10) $display("addr %0d: %h want %h", a, rd_data, model[a]);
      end
      if (we) model[a] = wr_data;
      we = 0; re = 0;
      if (t % 7 == 0) begin                 // hold
        @(negedge clk);
        checks++;
        if (rd_data != model[a] && (t % 5 != 0)) begin failures++; $display("read data not held"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
