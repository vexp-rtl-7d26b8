// fexp_decoder: recognises the two EXP instructions in an offloaded 32-bit
// RISC-V instruction word and extracts their fields.
//
//   FEXP  rd, rs1 : 0011111 00000 rs1 000 rd 1010011   (scalar BF16)
//   VFEXP rd, rs1 : 1011111 00000 rs1 000 rd 1010011   (4 x BF16 packed SIMD)
//
// Both are R-type OP-FP words whose rs2 field is 00000 and funct3 is 000; the
// instruction's MSB (bit 31) is the only difference and selects the packed
// form. All fixed bits are compared, so any other word, including other FP
// instructions, gives is_exp_o = 0. rd and rs1 are the usual R-type fields
// [11:7] and [19:15] and address the 32 x 64-bit FP register file; rs2_o and
// rs3_o are also returned at their standard positions [24:20] and [31:27]
// for the operand fetch of the other FP instructions.
//
// Follows the paper's encoding table. Purely combinational.
module fexp_decoder
  import vexp_pkg::*;
(
  input  logic [31:0] instr_i,
  output logic        is_exp_o,
  output logic        vectorial_o,
  output fp_reg_t     rd_o,
  output fp_reg_t     rs1_o,
  output fp_reg_t     rs2_o,
  output fp_reg_t     rs3_o
);

  always_comb begin
    is_exp_o    = (instr_i[30:25] == F7_FEXP[5:0])
                && (instr_i[24:20] == 5'b00000)
                && (instr_i[14:12] == 3'b000)
                && (instr_i[6:0]   == OPC_OP_FP);
    vectorial_o = instr_i[31];
    rd_o        = instr_i[11:7];
    rs1_o       = instr_i[19:15];
    rs2_o       = instr_i[24:20];
    rs3_o       = instr_i[31:27];
  end

  // F7_FEXP and F7_VFEXP differ only in their MSB
  initial assert (F7_FEXP[5:0] == F7_VFEXP[5:0] && F7_FEXP[6] != F7_VFEXP[6]);

endmodule
