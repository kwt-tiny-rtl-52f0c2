// kwt_custom_alu: the accelerator added to the core's ALU.
//
// Holds the five operator units side by side, all fed with the rs1 value,
// and selects the result named by the decoded operator. Together with the
// integer ALU of the core this forms the modified ALU: a softmax row is
// computed by software as TO_FIXED per element, an integer max and
// subtraction, EXP per element, an integer sum, one INVERT, integer
// multiplications and TO_FLOAT; GELU replaces the erf() call of the MLP.
//
// The selection is a plain multiplexer (this design's choice; the published
// description says only that the units sit in the ALU).
//
// Interface and timing: purely combinational, operand to result in the
// same cycle, like the core's other single-cycle ALU operations.
module kwt_custom_alu
  import kwt_pkg::*;
(
  input  kwt_op_e op_i,
  input  word_t   operand_a_i,   // rs1 value
  output word_t   result_o       // rd value
);

  word_t exp_y, inv_y, gelu_y, fix_y, flt_y;

  kwt_exp_lut    u_exp   (.x_i(operand_a_i), .y_o(exp_y));
  kwt_invert_lut u_inv   (.x_i(operand_a_i), .y_o(inv_y));
  kwt_gelu_unit  u_gelu  (.x_i(operand_a_i), .y_o(gelu_y));
  kwt_to_fixed   u_fix   (.f_i(operand_a_i), .q_o(fix_y));
  kwt_to_float   u_flt   (.q_i(operand_a_i), .f_o(flt_y));

  always_comb begin
    unique case (op_i)
      OP_EXP:      result_o = exp_y;
      OP_INVERT:   result_o = inv_y;
      OP_GELU:     result_o = gelu_y;
      OP_TO_FIXED: result_o = fix_y;
      OP_TO_FLOAT: result_o = flt_y;
      default:     result_o = '0;
    endcase
  end

endmodule
