// tb_kwt_to_float: self-checking test of the Q8.24 -> binary32 operator.
//
// The expected result is derived from the simulator's double-precision
// encoding of the exact value q/2^24: its exponent is re-biased to single
// precision and its fraction truncated to 23 bits (round toward zero).
// Zero, the most negative word and random words of every magnitude are
// checked.
module tb_kwt_to_float;
  logic        clk = 1'b0;
  logic [31:0] q, f;
  int          checks = 0, failures = 0;

  kwt_to_float dut (.q_i(q), .f_o(f));

  always #5 clk = ~clk;

  function automatic logic [31:0] expected(logic [31:0] w);
    logic [63:0] d;
    if (w == 32'h0) return 32'h0;
    d = $realtobits(real'($signed(w)) / 16777216.0);
    return {d[63], 8'(int'(d[62:52]) - 1023 + 127), d[51:29]};
  endfunction

  task automatic check(logic [31:0] w);
    @(negedge clk);
    q = w;
    @(posedge clk);
    checks++;
    if (f !== expected(w)) begin
      failures++;
      $display("FAIL q=%h got %h expected %h", w, f, expected(w));
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(32'h0000_0000);
    check(32'h0100_0000);          // 1.0
    check(32'hFF00_0000);          // -1.0
    check(32'h8000_0000);          // -128.0
    check(32'h7FFF_FFFF);          // largest, truncated
    check(32'h0000_0001);          // 2^-24
    check(32'hFFFF_FFFF);          // -2^-24
    for (int k = 0; k < 2000; k++) begin
      logic [31:0] w;
      w = $urandom >> ($urandom % 32);        // every magnitude
      if ($urandom % 2) w = -w;
      check(w);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
