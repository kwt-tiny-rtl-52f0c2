// kwt_custom_decoder: decoder extension for the accelerator instruction.
//
// The accelerator is reached through one R-type instruction on the RISC-V
// custom-1 major opcode (7'b0101011):
//   [31:25] funct7 = 0   [24:20] rs2   [19:15] rs1   [14:12] funct3
//   [11:7]  rd           [6:0]   opcode
// funct3 selects the operator (000 EXP, 001 INVERT, 011 GELU, 100 TO_FIXED,
// 101 TO_FLOAT), as published. All five operators read only rs1; rs2 is
// decoded but not used.
//
// custom_valid_o flags a supported encoding and custom_illegal_o a custom-1
// word with a non-zero funct7 or an unassigned funct3 (010, 110, 111), so
// that the core can raise an illegal-instruction exception; flagging these
// rather than ignoring them is this design's choice. Neither is set for any
// other opcode, which the core's own decoder handles.
//
// Interface and timing: purely combinational, same cycle as the core's
// decode stage.
module kwt_custom_decoder
  import kwt_pkg::*;
(
  input  word_t      instr_i,
  output logic       custom_valid_o,
  output logic       custom_illegal_o,
  output kwt_op_e    op_o,
  output logic [4:0] rd_o,
  output logic [4:0] rs1_o,
  output logic [4:0] rs2_o
);

  logic [6:0] opcode;
  logic [6:0] funct7;
  logic [2:0] funct3;
  logic       funct3_ok;

  assign opcode = instr_i[6:0];
  assign funct3 = instr_i[14:12];
  assign funct7 = instr_i[31:25];
  assign rd_o   = instr_i[11:7];
  assign rs1_o  = instr_i[19:15];
  assign rs2_o  = instr_i[24:20];

  always_comb begin
    funct3_ok = 1'b1;
    op_o      = OP_EXP;
    unique case (funct3)
      3'b000:  op_o = OP_EXP;
      3'b001:  op_o = OP_INVERT;
      3'b011:  op_o = OP_GELU;
      3'b100:  op_o = OP_TO_FIXED;
      3'b101:  op_o = OP_TO_FLOAT;
      default: funct3_ok = 1'b0;
    endcase
  end

  assign custom_valid_o   = (opcode == OPCODE_CUSTOM1) && (funct7 == 7'd0) && funct3_ok;
  assign custom_illegal_o = (opcode == OPCODE_CUSTOM1) && !custom_valid_o;

  always_comb begin
    assert (!(custom_valid_o && custom_illegal_o))
      else $error("custom instruction both valid and illegal");
  end

endmodule
