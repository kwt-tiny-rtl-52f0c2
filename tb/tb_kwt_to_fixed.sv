// tb_kwt_to_fixed: self-checking test of the binary32 -> Q8.24 operator.
//
// Random binary32 words are built from a random sign, exponent and
// fraction; their exact value is formed with real arithmetic and the
// expected Q8.24 word is that value times 2^24, truncated toward zero and
// saturated at the format's limits. Zeros, subnormals, infinities, NaN and
// the limits themselves are checked directly.
module tb_kwt_to_fixed;
  logic        clk = 1'b0;
  logic [31:0] f, q;
  int          checks = 0, failures = 0;
  int          n_sat = 0;

  kwt_to_fixed dut (.f_i(f), .q_o(q));

  always #5 clk = ~clk;

  function automatic logic [31:0] expected(logic [31:0] w);
    real v;
    int  e;
    e = int'(w[30:23]);
    if (e == 0)   return 32'h0;
    if (e == 255) return w[31] ? 32'h8000_0000 : 32'h7FFF_FFFF;
    v = (1.0 + real'(w[22:0]) / 8388608.0) * (2.0 ** (e - 127)) * 16777216.0;
    if (w[31]) v = -v;
    if (v >= 2147483647.0)  return 32'h7FFF_FFFF;
    if (v <= -2147483648.0) return 32'h8000_0000;
    return 32'($rtoi(v));                     // $rtoi truncates toward zero
  endfunction

  task automatic check(logic [31:0] w);
    @(negedge clk);
    f = w;
    @(posedge clk);
    checks++;
    if (q !== expected(w)) begin
      failures++;
      $display("FAIL f=%h got %h expected %h", w, q, expected(w));
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(32'h0000_0000);          // +0
    check(32'h8000_0000);          // -0
    check(32'h0000_1234);          // subnormal
    check(32'h3F80_0000);          // 1.0
    check(32'hBF80_0000);          // -1.0
    check(32'h3FC0_0000);          // 1.5
    check(32'h42FE_0000);          // 127.0
    check(32'h4300_0000);          // 128.0 saturates
    check(32'hC300_0000);          // -128.0 exact
    check(32'hC301_0000);          // -129.0 saturates
    check(32'h7F80_0000);          // +inf
    check(32'hFF80_0000);          // -inf
    check(32'h7FC0_0000);          // NaN
    check(32'h3380_0000);          // 2^-24, one LSB
    check(32'h3300_0000);          // 2^-25, below one LSB
    for (int k = 0; k < 2000; k++) begin
      logic [31:0] w;
      w = {1'($urandom), 8'(32'd95 + ($urandom % 32'd45)), 23'($urandom)};  // 2^-32 .. 2^12
      if (w[30:23] >= 8'd134) n_sat++;
      check(w);
    end
    checks++;
    if (n_sat == 0) begin
      failures++;
      $display("FAIL no saturating input was generated");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
