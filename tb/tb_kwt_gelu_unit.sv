// tb_kwt_gelu_unit: self-checking test of the piecewise GELU operator.
//
// The reference GELU uses an erf computed here by Simpson integration of
// 2/sqrt(pi)*exp(-t^2), independent of the series used to build the table.
// Checked: the value of every segment at its centre (within one LSB), both
// thresholds and their neighbours, the identity and zero regions, and the
// approximation error for random inputs in [-4, 4].
module tb_kwt_gelu_unit;
  localparam real LO = -1.857;
  localparam real HI = 1.595;

  logic        clk = 1'b0;
  logic [31:0] x, y;
  int          checks = 0, failures = 0;

  kwt_gelu_unit dut (.x_i(x), .y_o(y));

  always #5 clk = ~clk;

  function automatic logic [31:0] q_of(real v);
    return 32'($rtoi($floor(v * 16777216.0 + 0.5)));
  endfunction

  function automatic real r_of(logic [31:0] q);
    return real'($signed(q)) / 16777216.0;
  endfunction

  function automatic real erf_simpson(real v);
    int  n;
    real h, s, t;
    n = 2000;
    h = v / n;
    s = 1.0 + $exp(-v * v);
    for (int k = 1; k < n; k++) begin
      t  = k * h;
      s += ((k % 2) ? 4.0 : 2.0) * $exp(-t * t);
    end
    return s * h / 3.0 * 2.0 / $sqrt(3.14159265358979323846);
  endfunction

  function automatic real gelu_ref(real v);
    return 0.5 * v * (1.0 + erf_simpson(v / $sqrt(2.0)));
  endfunction

  task automatic apply(logic [31:0] v);
    @(negedge clk);
    x = v;
    @(posedge clk);
  endtask

  task automatic expect_near(string what, logic [31:0] exp_v, int tol);
    int d;
    checks++;
    d = $signed(y) - $signed(exp_v);
    if (d > tol || d < -tol) begin
      failures++;
      $display("FAIL %s: x=%h got %h expected %h", what, x, y, exp_v);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real w, c, err, worst;
    logic [31:0] lo_q, hi_q;
    w    = (HI - LO) / 32.0;
    lo_q = q_of(LO);
    hi_q = q_of(HI);
    // Segment centres.
    for (int i = 0; i < 32; i++) begin
      c = LO + (i + 0.5) * w;
      apply(q_of(c));
      expect_near($sformatf("segment %0d", i), q_of(gelu_ref(c)), 1);
    end
    // Thresholds: inclusive window, identity above, zero below.
    apply(hi_q);       expect_near("x=HI",    q_of(gelu_ref(HI - 0.5 * w)), 1);
    apply(hi_q + 1);   expect_near("x=HI+",   hi_q + 1, 0);
    apply(lo_q);       expect_near("x=LO",    q_of(gelu_ref(LO + 0.5 * w)), 1);
    apply(lo_q - 1);   expect_near("x=LO-",   32'h0, 0);
    apply(q_of(2.5));  expect_near("x=2.5",   q_of(2.5), 0);
    apply(32'h7FFF_FFFF); expect_near("x=max", 32'h7FFF_FFFF, 0);
    apply(q_of(-5.0)); expect_near("x=-5",    32'h0, 0);
    apply(32'h8000_0000); expect_near("x=min", 32'h0, 0);
    // Random inputs: error bounded by the step and the threshold jumps.
    worst = 0.0;
    for (int k = 0; k < 400; k++) begin
      apply(32'($signed(int'($urandom % 32'd134217728)) - 32'sd67108864)); // [-4, 4)
      err = r_of(y) - gelu_ref(r_of(x));
      if (err < 0) err = -err;
      if (err > worst) worst = err;
    end
    checks++;
    if (worst > 0.1) begin
      failures++;
      $display("FAIL worst approximation error %f", worst);
    end
    $display("worst GELU error %f", worst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
