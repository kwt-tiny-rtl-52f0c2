// tb_kwt_exp_lut: self-checking test of the exp(-z) table operator.
//
// For every one of the 320 table slots a random z inside the slot is
// applied and the output is compared with exp(-i/32) rounded to Q8.24,
// computed here with the simulator's real arithmetic. Out-of-range inputs
// (negative z, z >= 10) and the approximation error against exp(-z) are
// also checked. The operator is combinational, so each result is checked
// in the cycle its input is applied.
module tb_kwt_exp_lut;
  logic        clk = 1'b0;
  logic [31:0] x, y;
  int          checks = 0, failures = 0;

  kwt_exp_lut dut (.x_i(x), .y_o(y));

  always #5 clk = ~clk;

  function automatic logic [31:0] q_of(real v);
    return 32'($rtoi($floor(v * 16777216.0 + 0.5)));
  endfunction

  task automatic expect_eq(string what, logic [31:0] got, logic [31:0] exp_v);
    checks++;
    if (got !== exp_v) begin
      failures++;
      $display("FAIL %s: x=%h got %h expected %h", what, x, got, exp_v);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real zr, err, worst;
    worst = 0.0;
    for (int i = 0; i < 320; i++) begin
      @(negedge clk);
      x = (32'(i) << 19) | ($urandom & 32'h7FFFF);
      @(posedge clk);
      expect_eq($sformatf("slot %0d", i), y, q_of($exp(-real'(i) / 32.0)));
      zr  = real'(x) / 16777216.0;
      err = $exp(-zr) - real'(y) / 16777216.0;
      if (err < 0) err = -err;
      if (err > worst) worst = err;
    end
    // Step error of a 1/32-wide slot is at most 1 - exp(-1/32).
    checks++;
    if (worst > 1.0 - $exp(-1.0 / 32.0) + 1e-6) begin
      failures++;
      $display("FAIL worst approximation error %f", worst);
    end
    // Out-of-range inputs.
    @(negedge clk); x = 32'hFF00_0000;           // -1.0
    @(posedge clk); expect_eq("negative", y, 32'h0100_0000);
    @(negedge clk); x = 32'h0A00_0000;           // 10.0
    @(posedge clk); expect_eq("z=10", y, 32'h0);
    @(negedge clk); x = 32'h7FFF_FFFF;
    @(posedge clk); expect_eq("z max", y, 32'h0);
    @(negedge clk); x = 32'h0000_0000;
    @(posedge clk); expect_eq("z=0", y, 32'h0100_0000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
