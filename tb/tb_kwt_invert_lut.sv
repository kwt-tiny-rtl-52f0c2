// tb_kwt_invert_lut: self-checking test of the 1/z table operator.
//
// For every slot i a random z in [(i+1)/32, (i+2)/32) is applied and the
// output is compared with 32/(i+1) rounded to Q8.24. Inputs below 1/32
// (zero and negative) and above the table are checked against the clamp
// values, and the relative error against 1/z is bounded for z >= 1.
module tb_kwt_invert_lut;
  logic        clk = 1'b0;
  logic [31:0] x, y;
  int          checks = 0, failures = 0;

  kwt_invert_lut dut (.x_i(x), .y_o(y));

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
    real zr, rel, worst;
    worst = 0.0;
    for (int i = 0; i < 320; i++) begin
      @(negedge clk);
      x = (32'(i + 1) << 19) | ($urandom & 32'h7FFFF);
      @(posedge clk);
      expect_eq($sformatf("slot %0d", i), y, q_of(32.0 / real'(i + 1)));
      zr = real'(x) / 16777216.0;
      if (zr >= 1.0) begin
        rel = (real'(y) / 16777216.0) * zr - 1.0;
        if (rel < 0) rel = -rel;
        if (rel > worst) worst = rel;
      end
    end
    // Slot width 1/32 at z >= 1 gives a relative error below 1/32.
    checks++;
    if (worst > 1.0 / 32.0) begin
      failures++;
      $display("FAIL worst relative error %f", worst);
    end
    @(negedge clk); x = 32'h0;
    @(posedge clk); expect_eq("zero", y, 32'h2000_0000);
    @(negedge clk); x = 32'hFFF0_0000;
    @(posedge clk); expect_eq("negative", y, 32'h2000_0000);
    @(negedge clk); x = 32'h0007_FFFF;                 // just below 1/32
    @(posedge clk); expect_eq("below 1/32", y, 32'h2000_0000);
    @(negedge clk); x = 32'h0100_0000;                 // 1.0 -> entry 31
    @(posedge clk); expect_eq("one", y, 32'h0100_0000);
    @(negedge clk); x = 32'h1B00_0000;                 // 27.0, above table
    @(posedge clk); expect_eq("above", y, q_of(0.1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
