// relu_bn: post-processing of the MLP outputs. Batch normalisation is folded into a
// per-channel affine map, y = (acc * scale + bias) >>> shift, rounded towards minus
// infinity, saturated to FW-bit signed, then ReLU (negative values become 0).
// The description names a ReLU/BN unit after the MLP engine; the folded form, the
// fixed-point format and the saturation are this design's choices.
// Interface: cfg_we writes scale and bias of channel cfg_ch; shift is a common input.
// Timing: one vector per cycle, in_valid at t gives out_valid at t+1.
module relu_bn #(
  parameter int C     = 16,   // channels
  parameter int ACC_W = 40,   // input width (MLP accumulators)
  parameter int SW    = 16,   // scale width
  parameter int FW    = 16    // output feature width
) (
  input  logic clk,
  input  logic rst_n,
  input  logic                         cfg_we,
  input  logic [$clog2(C)-1:0]         cfg_ch,
  input  logic signed [SW-1:0]         cfg_scale,
  input  logic signed [ACC_W-1:0]      cfg_bias,
  input  logic [5:0]                   shift,
  input  logic                         in_valid,
  input  logic [C-1:0][ACC_W-1:0]      in_acc,
  output logic                         out_valid,
  output logic [C-1:0][FW-1:0]         out_feat
);
  localparam int MW = ACC_W + SW + 1;

  logic signed [SW-1:0]    scale [C];
  logic signed [ACC_W-1:0] bias  [C];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < C; c++) begin
        scale[c] <= SW'(1);
        bias[c]  <= '0;
      end
    end else if (cfg_we) begin
      scale[cfg_ch] <= cfg_scale;
      bias[cfg_ch]  <= cfg_bias;
    end
  end

  logic [C-1:0][FW-1:0] f_n;
  always_comb begin
    for (int c = 0; c < C; c++) begin
      logic signed [MW-1:0] m;
      m = MW'($signed(in_acc[c])) * MW'(scale[c]) + MW'(bias[c]);
      m = m >>> shift;
      if (m <= 0)                           f_n[c] = '0;
      else if (m > MW'((1 << (FW-1)) - 1))  f_n[c] = FW'((1 << (FW-1)) - 1);
      else                                  f_n[c] = m[FW-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_feat  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_feat <= f_n;
    end
  end
endmodule
