// shatr_decoder: the part added to the host's decode stage for the shatr
// instruction.
//
// shatr is an R-type instruction in the custom-0 major opcode (0001011)
// with funct3 = 000 and funct7 = 0000000. Its rs1 field names the integer
// register that holds the round index; rd and rs2 are not used and no
// integer register is written. The paper states only that an unused opcode
// slot was taken; the slot and field use here are this design's own choice,
// custom-0 being the slot the RISC-V specification reserves for such
// extensions.
//
// Interface: instr_i the 32-bit instruction word; is_shatr_o high when it
// is shatr; rs1_o the rs1 field, for the host's register-file read port.
// Timing: combinational.
module shatr_decoder
  import keccak_pkg::*;
(
  input  logic [31:0] instr_i,
  output logic        is_shatr_o,
  output logic [4:0]  rs1_o
);

  assign is_shatr_o = instr_i[6:0]   == OPC_CUSTOM0 &&
                      instr_i[14:12] == F3_SHATR    &&
                      instr_i[31:25] == F7_SHATR;
  assign rs1_o      = instr_i[19:15];

endmodule
