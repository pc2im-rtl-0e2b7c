// apd_nmu: near-memory unit of one coordinate column of the distance CIM.
// The sense amplifier of each bit line delivers two logic results of the stored bit
// and the driven input bit: Data/OR and Datab/NAND. From them the unit forms
// XOR = OR & NAND and a carry-ripple adder (generate = ~NAND, propagate = XOR).
// Subtraction a - r is done by driving the inverted reference bits and setting the
// first carry to 1, as the accelerator's description states. Purely combinational.
// The output is one bit wider than the operands so the difference never overflows.
module apd_nmu #(
  parameter int W = 16
) (
  input  logic [W-1:0] stored,   // bits read from the SRAM column (operand a)
  input  logic [W-1:0] ref_bits, // reference coordinate (operand r)
  output logic [W:0]   diff      // a - r, two's complement, W+1 bits
);
  logic [W:0] a_ext, in_ext;     // sign-extended operands
  logic [W:0] or_l, nand_l, xor_l;
  logic       carry;

  always_comb begin
    a_ext  = {stored[W-1], stored};
    in_ext = ~{ref_bits[W-1], ref_bits};       // inverted input for subtraction
    or_l   = a_ext | in_ext;                    // Data/OR sensing
    nand_l = ~(a_ext & in_ext);                 // Datab/NAND sensing
    xor_l  = or_l & nand_l;
    carry  = 1'b1;                              // C0 = 1 completes the two's complement
    for (int i = 0; i <= W; i++) begin
      diff[i] = xor_l[i] ^ carry;
      carry   = ~nand_l[i] | (xor_l[i] & carry);
    end
  end
endmodule
