// pim_simd_alu: the 256-bit SIMD ALU of a PIM unit.
//
// Sixteen FP16 lanes work in parallel on one 256-bit DRAM word, matching the I/O width of a
// bank's cell array. Per lane, with operands a, b and accumulator c:
//   ALU_PASS : y = a               (used to stage a bank word into a register)
//   ALU_ADD  : y = a + b
//   ALU_MUL  : y = a * b
//   ALU_MAC  : y = c + a * b       (product rounded, then sum rounded: not fused)
// Lanes are independent: there is no cross-lane path, so operands must be SIMD-aligned.
// The block is purely combinational; the PIM unit registers its result in the register file.
// The 256-bit/16-lane FP16 width is the paper's; the operation set beyond the add and
// multiply-accumulate the paper's primitives use, and the unfused MAC, are design choices.
module pim_simd_alu
  import pim_pkg::*;
  import fp16_pkg::*;
(
  input  alu_op_e op,
  input  word_t   a,
  input  word_t   b,
  input  word_t   c,
  output word_t   y
);

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic [15:0] la, lb, lc, prod;
      la   = a[16*l +: 16];
      lb   = b[16*l +: 16];
      lc   = c[16*l +: 16];
      prod = fp16_mul(la, lb);
      unique case (op)
        ALU_PASS: y[16*l +: 16] = la;
        ALU_ADD:  y[16*l +: 16] = fp16_add(la, lb);
        ALU_MUL:  y[16*l +: 16] = prod;
        ALU_MAC:  y[16*l +: 16] = fp16_add(lc, prod);
        default:  y[16*l +: 16] = la;
      endcase
    end
  end

endmodule
