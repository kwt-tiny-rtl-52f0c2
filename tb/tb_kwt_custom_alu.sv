// tb_kwt_custom_alu: self-checking test of the accelerator ALU multiplexer.
//
// Each operator is applied to operands whose results are known in closed
// form (worked out by hand or with real arithmetic here), and the same
// operand is sent through every operator to show that the selection
// follows the operator input.
module tb_kwt_custom_alu;
  import kwt_pkg::*;

  logic        clk = 1'b0;
  kwt_op_e     op;
  logic [31:0] a, r;
  int          checks = 0, failures = 0;

  kwt_custom_alu dut (.op_i(op), .operand_a_i(a), .result_o(r));

  always #5 clk = ~clk;

  function automatic logic [31:0] q_of(real v);
    return 32'($rtoi($floor(v * 16777216.0 + 0.5)));
  endfunction

  task automatic run(kwt_op_e o, logic [31:0] v, logic [31:0] exp_v);
    @(negedge clk);
    op = o;
    a  = v;
    @(posedge clk);
    checks++;
    if (r !== exp_v) begin
      failures++;
      $display("FAIL %s(%h): got %h expected %h", o.name(), v, r, exp_v);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    run(OP_EXP,      32'h0000_0000, 32'h0100_0000);        // exp(0) = 1
    run(OP_EXP,      32'h0100_0000, q_of($exp(-1.0)));     // exp(-1)
    run(OP_EXP,      32'h0280_0000, q_of($exp(-2.5)));     // exp(-2.5)
    run(OP_INVERT,   32'h0200_0000, 32'h0080_0000);        // 1/2
    run(OP_INVERT,   32'h0400_0000, 32'h0040_0000);        // 1/4
    run(OP_INVERT,   32'h0A00_0000, q_of(0.1));            // 1/10
    run(OP_GELU,     32'h0200_0000, 32'h0200_0000);        // identity
    run(OP_GELU,     32'hFE00_0000, 32'h0000_0000);        // zero
    run(OP_TO_FIXED, 32'h3FC0_0000, 32'h0180_0000);        // 1.5f
    run(OP_TO_FIXED, 32'hC020_0000, 32'hFD80_0000);        // -2.5f
    run(OP_TO_FLOAT, 32'h0180_0000, 32'h3FC0_0000);        // 1.5
    run(OP_TO_FLOAT, 32'hFD80_0000, 32'hC020_0000);        // -2.5
    // One operand (2.0 as Q8.24, 0x02000000) through every operator.
    run(OP_EXP,      32'h0200_0000, q_of($exp(-2.0)));
    run(OP_INVERT,   32'h0200_0000, 32'h0080_0000);
    run(OP_GELU,     32'h0200_0000, 32'h0200_0000);
    run(OP_TO_FIXED, 32'h0200_0000, 32'h0000_0000);        // a tiny float
    run(OP_TO_FLOAT, 32'h0200_0000, 32'h4000_0000);        // 2.0f
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
