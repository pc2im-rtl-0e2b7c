// sc_fua: fused adder of the split-concatenate CIM. It is shared by a pair of 4-bit
// local weight blocks A and B and driven by the input clusters INA and INB of two
// adjacent inputs. A 4-bit carry-ripple adder forms A+B ahead of time, whatever the
// inputs. For each of the four cluster bits k, a 3-1 select picks A (INA_k only),
// B (INB_k only) or the 4-bit sum (both), or nothing, and the four picks are
// concatenated into a dense 16-bit word: cluster bits are 2^4 apart, so the 4-bit
// products never overlap and no multiplier is needed. The carry of the sum is placed
// by a 2-1 select at bit 4k+4 of a sparse word, for a separate sparse adder tree.
// Combinational. Weight nibbles are treated as unsigned here; the signs of the top
// weight block and of the input sign bit are merged in the periphery (sc_cim).
// top_val is the 5-bit value picked at k = 3, which the periphery needs for the input
// sign correction.
module sc_fua (
  input  logic [3:0]  wa,       // weight block A
  input  logic [3:0]  wb,       // weight block B
  input  logic [3:0]  ina,      // input cluster A (bit k has weight 2^(4k))
  input  logic [3:0]  inb,      // input cluster B
  output logic [15:0] dense,    // concatenated 4-bit picks
  output logic [3:0]  carry,    // carry picks, carry[k] has weight 2^(4k+4)
  output logic [4:0]  top_val   // full value picked at k = 3
);
  logic [4:0] sum_ab;
  assign sum_ab = {1'b0, wa} + {1'b0, wb};   // carry-ripple adder, input independent

  always_comb begin
    for (int k = 0; k < 4; k++) begin
      // shared decoder: IA, IB, IAB select lines of the 3-1 SEL
      unique case ({ina[k], inb[k]})
        2'b10:   begin dense[4*k +: 4] = wa;          carry[k] = 1'b0;      end
        2'b01:   begin dense[4*k +: 4] = wb;          carry[k] = 1'b0;      end
        2'b11:   begin dense[4*k +: 4] = sum_ab[3:0]; carry[k] = sum_ab[4]; end
        default: begin dense[4*k +: 4] = 4'h0;        carry[k] = 1'b0;      end
      endcase
    end
    top_val = {carry[3], dense[15:12]};
  end
endmodule
