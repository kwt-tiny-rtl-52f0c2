// tb_kwt_accel_top: end-to-end test of the custom-instruction execute path.
//
// The testbench plays the part of the RV32 core: it keeps a 32-entry
// register file, issues one instruction word per clock cycle to the top,
// feeds back the rs1 value the top asks for and performs the register
// write the top requests. Integer work that the core's own ALU would do
// (max, subtraction, sum, multiplication) is done here in plain integer
// arithmetic.
//
// Workload, at the sizes of the KWT-Tiny model (sequence length 27, MLP
// width 24, one layer):
//   * softmax of all 27 rows of a 27 x 27 attention-score matrix, in the
//     max-shifted form: TO_FIXED per score, max and max - x in integers,
//     EXP per element, integer sum, one INVERT per row, integer products,
//     TO_FLOAT per probability; compared with a real-arithmetic softmax;
//   * GELU of all 27 x 24 MLP hidden activations: TO_FIXED, GELU, TO_FLOAT;
//     compared with GELU built on an independent erf.
// It also drives the corner mechanisms: EXP beyond its table, INVERT of a
// sum above its table, the three GELU regions, TO_FIXED saturation (an
// MFCC-like input of a few hundred), a custom-1 word with an unassigned
// funct3 (illegal, no write) and a non-custom opcode (ignored). Each
// mechanism must occur at least once. Every custom instruction must
// complete in the cycle it is issued.
module tb_kwt_accel_top;
  localparam int SEQLEN  = 27;
  localparam int MLP_DIM = 24;

  logic        clk = 1'b0;
  logic [31:0] instr, rs1_rdata, rd_wdata;
  logic [4:0]  rs1_addr, rs2_addr, rd_addr;
  logic        rd_we, illegal;

  kwt_accel_top dut (
    .instr_i(instr), .rs1_addr_o(rs1_addr), .rs2_addr_o(rs2_addr),
    .rs1_rdata_i(rs1_rdata), .rd_we_o(rd_we), .rd_addr_o(rd_addr),
    .rd_wdata_o(rd_wdata), .illegal_o(illegal)
  );

  always #5 clk = ~clk;

  logic [31:0] regs [32];
  int checks = 0, failures = 0;
  int cycles = 0, issued = 0;
  // Mechanism counters.
  int n_exp = 0, n_inv = 0, n_gelu = 0, n_fix = 0, n_flt = 0;
  int n_exp_sat = 0, n_inv_clamp = 0, n_gelu_id = 0, n_gelu_zero = 0, n_gelu_lut = 0;
  int n_fix_sat = 0, n_illegal = 0, n_foreign = 0;

  // Register file write port: one write per cycle, x0 stays zero.
  always_ff @(posedge clk) begin
    cycles <= cycles + 1;
    if (rd_we && rd_addr != 5'd0) regs[rd_addr] <= rd_wdata;
  end
  assign rs1_rdata = regs[rs1_addr];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- helpers
  function automatic logic [31:0] rtype(logic [2:0] f3, logic [4:0] rd, logic [4:0] rs1);
    return {7'd0, 5'd0, rs1, f3, rd, 7'b0101011};
  endfunction

  function automatic logic [31:0] f32_of(real v);  // truncating real -> binary32
    logic [63:0] d;
    if (v == 0.0) return 32'h0;
    d = $realtobits(v);
    return {d[63], 8'(int'(d[62:52]) - 1023 + 127), d[51:29]};
  endfunction

  function automatic real real_of_f32(logic [31:0] f);
    if (f[30:0] == 0) return 0.0;
    return $bitstoreal({f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0});
  endfunction

  function automatic real erf_simpson(real v);
    real h, s, t;
    h = v / 2000.0;
    s = 1.0 + $exp(-v * v);
    for (int k = 1; k < 2000; k++) begin
      t  = k * h;
      s += ((k % 2) ? 4.0 : 2.0) * $exp(-t * t);
    end
    return s * h / 3.0 * 2.0 / $sqrt(3.14159265358979323846);
  endfunction

  function automatic real rand_real(real lo, real hi);
    return lo + (hi - lo) * real'($urandom % 32'd1000000) / 1000000.0;
  endfunction

  task automatic fail(string msg);
    failures++;
    $display("FAIL %s", msg);
  endtask

  // Issue one instruction word and check the one-cycle completion.
  task automatic issue(logic [31:0] word);
    int c0;
    @(negedge clk);
    instr = word;
    c0 = cycles;
    @(posedge clk);
    #1;
    issued++;
    checks++;
    if (cycles - c0 != 1) fail("instruction did not complete in one cycle");
  endtask

  // Run one custom operation: rs1 = x5, rd = x6.
  task automatic op(logic [2:0] f3, logic [31:0] a, output logic [31:0] y);
    regs[5] = a;
    issue(rtype(f3, 5'd6, 5'd5));
    y = regs[6];
    case (f3)
      3'b000: n_exp++;
      3'b001: n_inv++;
      3'b011: n_gelu++;
      3'b100: n_fix++;
      3'b101: n_flt++;
      default: ;
    endcase
  endtask

  // ---------------------------------------------------------------- softmax
  task automatic softmax_row(input real x [SEQLEN]);
    logic [31:0] xq [SEQLEN];
    logic [31:0] e  [SEQLEN];
    logic [31:0] mx, sum, inv, pq, pf, unused;
    real         ref_sum, xmax, pref, p;
    longint      prod;
    xmax = x[0];
    for (int i = 1; i < SEQLEN; i++) if (x[i] > xmax) xmax = x[i];
    ref_sum = 0.0;
    for (int i = 0; i < SEQLEN; i++) ref_sum += $exp(x[i] - xmax);
    for (int i = 0; i < SEQLEN; i++) op(3'b100, f32_of(x[i]), xq[i]);
    mx = xq[0];
    for (int i = 1; i < SEQLEN; i++) if ($signed(xq[i]) > $signed(mx)) mx = xq[i];
    sum = 0;
    for (int i = 0; i < SEQLEN; i++) begin
      op(3'b000, mx - xq[i], e[i]);
      if ($signed(mx - xq[i]) >= $signed(32'h0A00_0000)) begin
        n_exp_sat++;
        checks++;
        if (e[i] != 0) fail("EXP beyond its table is not zero");
      end
      sum += e[i];
    end
    op(3'b001, sum, inv);
    if ($signed(sum) > $signed(32'h0A08_0000)) begin
      // Sum above the table (10 + 1/32): the last entry, 1/10, is used.
      n_inv_clamp++;
      checks++;
      if (inv != 32'($rtoi($floor(0.1 * 16777216.0 + 0.5))))
        fail($sformatf("INVERT clamp: sum %h gave %h", sum, inv));
      return;
    end
    for (int i = 0; i < SEQLEN; i++) begin
      prod = longint'(e[i]) * longint'(inv);
      pq   = 32'(prod >>> 24);
      op(3'b101, pq, pf);
      p    = real_of_f32(pf);
      pref = $exp(x[i] - xmax) / ref_sum;
      checks++;
      if (p - pref > 0.1 * pref + 1e-4 || pref - p > 0.1 * pref + 1e-4)
        fail($sformatf("softmax element %0d: %f vs %f", i, p, pref));
    end
  endtask

  // ---------------------------------------------------------------- GELU
  task automatic gelu_one(real v);
    logic [31:0] q, g, f;
    real         y, yref;
    op(3'b100, f32_of(v), q);
    op(3'b011, q, g);
    op(3'b101, g, f);
    if ($signed(q) > $signed(32'h0198_51EC)) n_gelu_id++;        // above 1.595
    else if ($signed(q) < $signed(32'hFE24_A5E3)) n_gelu_zero++; // below -1.857
    else n_gelu_lut++;
    y    = real_of_f32(f);
    yref = 0.5 * v * (1.0 + erf_simpson(v / $sqrt(2.0)));
    checks++;
    if (y - yref > 0.1 || yref - y > 0.1)
      fail($sformatf("GELU(%f) = %f, expected %f", v, y, yref));
  endtask

  // ---------------------------------------------------------------- main
  initial begin
    real row [SEQLEN];
    logic [31:0] y;
    int c_start, n_start;
    foreach (regs[i]) regs[i] = 32'h0;
    instr = 32'h0000_0013;               // nop
    @(posedge clk);
    #1;
    c_start = cycles;
    n_start = issued;

    // One attention layer: SEQLEN softmax rows of SEQLEN scores.
    for (int r = 0; r < SEQLEN; r++) begin
      for (int i = 0; i < SEQLEN; i++) row[i] = rand_real(-4.0, 4.0);
      if (r == 1) row[3] = -12.0;                                  // EXP beyond table
      if (r == 2) for (int i = 0; i < SEQLEN; i++) row[i] = rand_real(0.0, 0.3); // large sum
      softmax_row(row);
    end

    // One MLP hidden layer: SEQLEN x MLP_DIM GELUs.
    for (int k = 0; k < SEQLEN * MLP_DIM; k++) gelu_one(rand_real(-3.0, 3.0));

    checks++;
    if (cycles - c_start != issued - n_start)
      fail($sformatf("%0d instructions took %0d cycles", issued - n_start, cycles - c_start));

    // TO_FIXED saturation on an MFCC-sized input of a few hundred.
    op(3'b100, f32_of(300.0), y);
    checks++;
    if (y == 32'h7FFF_FFFF) n_fix_sat++; else fail("TO_FIXED did not saturate 300.0");

    // Unassigned funct3 on custom-1: illegal, no write.
    regs[6] = 32'h1234_5678;
    regs[5] = 32'h0100_0000;
    issue({7'd0, 5'd0, 5'd5, 3'b010, 5'd6, 7'b0101011});
    checks++;
    if (illegal && regs[6] == 32'h1234_5678) n_illegal++;
    else fail("unassigned funct3 not flagged or wrote rd");

    // A base-ISA instruction (add x6, x5, x0) is not the accelerator's.
    issue({7'd0, 5'd0, 5'd5, 3'b000, 5'd6, 7'b0110011});
    checks++;
    if (!illegal && regs[6] == 32'h1234_5678) n_foreign++;
    else fail("base-ISA instruction was taken by the accelerator");

    $display("operations: EXP %0d INVERT %0d GELU %0d TO_FIXED %0d TO_FLOAT %0d",
             n_exp, n_inv, n_gelu, n_fix, n_flt);
    $display("mechanisms: exp_sat %0d inv_clamp %0d gelu_identity %0d gelu_zero %0d gelu_table %0d fix_sat %0d illegal %0d foreign %0d",
             n_exp_sat, n_inv_clamp, n_gelu_id, n_gelu_zero, n_gelu_lut, n_fix_sat, n_illegal, n_foreign);
    $display("custom instructions issued %0d in %0d cycles", issued, cycles);
    begin
      int counts [13];
      counts = '{n_exp, n_inv, n_gelu, n_fix, n_flt, n_exp_sat, n_inv_clamp,
                 n_gelu_id, n_gelu_zero, n_gelu_lut, n_fix_sat, n_illegal, n_foreign};
      foreach (counts[m]) begin
        checks++;
        if (counts[m] == 0) fail($sformatf("mechanism %0d never happened", m));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
