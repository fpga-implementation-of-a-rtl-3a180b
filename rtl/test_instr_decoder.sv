// Decoder for the custom router-test instructions of the core.
//
// Combinational. Recognises three instructions in a 32-bit MIPS word:
//   test-apply   : opcode 0x3B; bits [25:4] carry the apply_t fields
//                  (5 valid input ports, 1 VC select, 5 x 3-bit requested
//                  output ports, 1 fill bit), bits [3:0] are zero.
//   test-gather HI/LO : R-type, opcode 0, RS = RT = SHAMT = 0, RD is the
//                  destination register, FUNC 0x28 (HI) or 0x29 (LO).
// The paper fixes the 6-bit opcode position, the R-type form of the gather
// instructions and the 5/1/15-bit apply fields; the opcode and FUNC values,
// the bit order inside the apply fields and the fill bit are this design's.
module test_instr_decoder
  import noc_pkg::*;
(
  input  logic [31:0] instr,
  output logic        is_apply,
  output logic        is_gather_hi,
  output logic        is_gather_lo,
  output apply_t      apply,
  output logic [4:0]  rd
);
  logic [5:0] opcode, funct;
  logic [4:0] rs, rt, shamt;
  logic       r_zero;

  assign opcode = instr[31:26];
  assign rs     = instr[25:21];
  assign rt     = instr[20:16];
  assign rd     = instr[15:11];
  assign shamt  = instr[10:6];
  assign funct  = instr[5:0];
  assign r_zero = (rs == '0) && (rt == '0) && (shamt == '0);

  assign is_apply     = (opcode == OP_TEST_APPLY) && (instr[3:0] == 4'h0);
  assign is_gather_hi = (opcode == OP_SPECIAL) && r_zero && (funct == FUNC_GATHER_HI);
  assign is_gather_lo = (opcode == OP_SPECIAL) && r_zero && (funct == FUNC_GATHER_LO);
  assign apply        = apply_t'(instr[25:4]);
endmodule
