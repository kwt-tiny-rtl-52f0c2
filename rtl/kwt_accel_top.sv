// kwt_accel_top: custom-instruction execute path of the accelerated core.
//
// This is the part of the modified RV32IMC core that the accelerator adds:
// the decoder extension for the custom-1 instruction and the accelerator
// half of the ALU. The core itself (fetch, register file, integer ALU,
// load/store) is not part of this design; its connection points are the
// ports: the instruction word from decode, the register-file read
// addresses and the rs1 value read back, and the register-file write
// (address, data, enable) for rd.
//
// rd_we_o is raised only for a supported custom-1 encoding; a custom-1 word
// with an unsupported funct3/funct7 raises illegal_o instead and writes
// nothing. Writes to x0 are left for the register file to discard, as in
// any RISC-V core.
//
// Interface and timing: purely combinational. In a core with a single-cycle
// ALU the result is written back in the instruction's execute cycle, so
// each custom instruction costs one cycle, like an integer add.
module kwt_accel_top
  import kwt_pkg::*;
(
  input  word_t      instr_i,        // instruction in decode/execute
  output logic [4:0] rs1_addr_o,     // register-file read port A
  output logic [4:0] rs2_addr_o,     // register-file read port B
  input  word_t      rs1_rdata_i,    // rs1 value
  output logic       rd_we_o,        // write rd
  output logic [4:0] rd_addr_o,
  output word_t      rd_wdata_o,
  output logic       illegal_o       // unsupported custom-1 encoding
);

  kwt_op_e op;
  logic    valid;

  kwt_custom_decoder u_dec (
    .instr_i          (instr_i),
    .custom_valid_o   (valid),
    .custom_illegal_o (illegal_o),
    .op_o             (op),
    .rd_o             (rd_addr_o),
    .rs1_o            (rs1_addr_o),
    .rs2_o            (rs2_addr_o)
  );

  kwt_custom_alu u_alu (
    .op_i        (op),
    .operand_a_i (rs1_rdata_i),
    .result_o    (rd_wdata_o)
  );

  assign rd_we_o = valid;

endmodule
