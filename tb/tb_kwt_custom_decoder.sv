// tb_kwt_custom_decoder: self-checking test of the custom-1 decoder.
//
// Every funct3 value is tried with funct7 = 0 and with random non-zero
// funct7, on the custom-1 opcode and on other opcodes, with random register
// fields. Expected operator codes are taken from the published funct3
// table, written out here as literals.
module tb_kwt_custom_decoder;
  import kwt_pkg::*;

  logic        clk = 1'b0;
  logic [31:0] instr;
  logic        valid, illegal;
  kwt_op_e     op;
  logic [4:0]  rd, rs1, rs2;
  int          checks = 0, failures = 0;

  kwt_custom_decoder dut (
    .instr_i(instr), .custom_valid_o(valid), .custom_illegal_o(illegal),
    .op_o(op), .rd_o(rd), .rs1_o(rs1), .rs2_o(rs2)
  );

  always #5 clk = ~clk;

  task automatic expect_bit(string what, logic got, logic exp_v);
    checks++;
    if (got !== exp_v) begin
      failures++;
      $display("FAIL %s: instr=%h got %b expected %b", what, instr, got, exp_v);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [2:0]  f3;
    logic [6:0]  f7, opc;
    logic [4:0]  a, b, d;
    logic        supported;
    logic [2:0]  exp_op;
    for (int k = 0; k < 3000; k++) begin
      f3  = 3'($urandom);
      f7  = ($urandom % 2) ? 7'd0 : 7'($urandom);
      opc = ($urandom % 4 != 0) ? 7'b0101011 : 7'($urandom);
      a = 5'($urandom); b = 5'($urandom); d = 5'($urandom);
      @(negedge clk);
      instr = {f7, b, a, f3, d, opc};
      @(posedge clk);
      case (f3)
        3'b000:  begin supported = 1'b1; exp_op = 3'b000; end  // ALU_EXP
        3'b001:  begin supported = 1'b1; exp_op = 3'b001; end  // ALU_INVERT
        3'b011:  begin supported = 1'b1; exp_op = 3'b011; end  // ALU_GELU
        3'b100:  begin supported = 1'b1; exp_op = 3'b100; end  // ALU_TO_FIXED
        3'b101:  begin supported = 1'b1; exp_op = 3'b101; end  // ALU_TO_FLOAT
        default: begin supported = 1'b0; exp_op = 3'b000; end
      endcase
      expect_bit("valid",   valid,   opc == 7'h2B && f7 == 0 && supported);
      expect_bit("illegal", illegal, opc == 7'h2B && !(f7 == 0 && supported));
      if (valid) begin
        checks++;
        if (3'(op) !== exp_op) begin
          failures++;
          $display("FAIL op: instr=%h got %b expected %b", instr, op, exp_op);
        end
      end
      checks++;
      if (rd !== d || rs1 !== a || rs2 !== b) begin
        failures++;
        $display("FAIL register fields: instr=%h", instr);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
