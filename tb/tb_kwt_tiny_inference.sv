// tb_kwt_tiny_inference: complete KWT-Tiny inferences with softmax and GELU
// executed on the accelerator.
//
// The testbench acts as the RV32 core around kwt_accel_top (register file,
// one instruction per cycle) and runs the whole KWT-Tiny network in the
// post-norm layout of the Keyword Transformer:
//   16 x 26 spectrogram -> 26 patches of 16 -> linear 16->12, class token,
//   position embeddings (27 x 12) -> single-head attention (QKV 12->3x8 without
//   bias, softmax of 27 x 27 scores / sqrt(8), output 8->12) -> residual +
//   LayerNorm -> MLP 12->24, GELU, 24->12 -> residual + LayerNorm -> head
//   LayerNorm + linear 12->2 on the class token.
// With these sizes the network has exactly 1646 parameters, the published
// count, which the testbench verifies. Weights are random (the trained
// ones are not available), quantised to INT8 with a scale of 2^6 as
// W_int = floor(W * 64). Everything except softmax and GELU is done in
// real arithmetic, standing in for the core's software.
//
// Each inference is run twice: once with exact softmax/GELU (reference) and
// once with every softmax and GELU evaluated by accelerator instructions
// (TO_FIXED, EXP, INVERT, integer multiply, TO_FLOAT; TO_FIXED, GELU,
// TO_FLOAT). Checked per inference: the number of accelerator instructions
// (27 rows x 82 + 27 x 24 x 3 = 4158), one cycle each, and that the two
// logits stay near the reference: within 1.0 each and on their difference,
// and the predicted class agrees in at least 90 % of the inferences. These
// are loose sanity bounds that a broken operator violates, not a
// model-accuracy claim: with random weights most attention rows are flat,
// their softmax sums exceed the INVERT table's range of 10 and are clamped
// to 1/10, and that clamp dominates the error (about 0.5 at worst over 40
// inferences). The number of clamped rows is reported.
module tb_kwt_tiny_inference;
  localparam int F = 16, T = 26, SEQ = 27, DIM = 12, DH = 8, MLP = 24, NCLS = 2;
  localparam int N_INF = 40;

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
  int cycles = 0, issued = 0, inv_clamps = 0;

  always_ff @(posedge clk) begin
    cycles <= cycles + 1;
    if (rd_we && rd_addr != 5'd0) regs[rd_addr] <= rd_wdata;
  end
  assign rs1_rdata = regs[rs1_addr];

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ model state
  real wp [F][DIM];   real bp [DIM];
  real cls [DIM];     real pos [SEQ][DIM];
  real wqkv [DIM][3*DH];
  real wo [DH][DIM];  real bo [DIM];
  real g1 [DIM], be1 [DIM], g2 [DIM], be2 [DIM], g3 [DIM], be3 [DIM];
  real w1 [DIM][MLP]; real b1 [MLP];
  real w2 [MLP][DIM]; real b2 [DIM];
  real wh [DIM][NCLS]; real bh [NCLS];
  int  n_params = 0;

  function automatic real rnd(real a);
    return a * (2.0 * real'($urandom % 32'd1000000) / 1000000.0 - 1.0);
  endfunction

  // INT8 weight with scale 2^6: floor(w * 64) / 64, clipped to [-128, 127].
  function automatic real qw(real w);
    int q;
    q = $rtoi($floor(w * 64.0));
    if (q > 127) q = 127;
    if (q < -128) q = -128;
    return real'(q) / 64.0;
  endfunction

  task automatic init_weights();
    foreach (wp[i, j])   begin wp[i][j]   = qw(rnd(0.4)); n_params++; end
    foreach (bp[j])      begin bp[j]      = qw(rnd(0.2)); n_params++; end
    foreach (cls[j])     begin cls[j]     = qw(rnd(1.0)); n_params++; end
    foreach (pos[i, j])  begin pos[i][j]  = qw(rnd(0.5)); n_params++; end
    foreach (wqkv[i, j]) begin wqkv[i][j] = qw(rnd(0.6)); n_params++; end
    foreach (wo[i, j])   begin wo[i][j]   = qw(rnd(0.5)); n_params++; end
    foreach (bo[j])      begin bo[j]      = qw(rnd(0.2)); n_params++; end
    foreach (g1[j])      begin g1[j]  = qw(1.0 + rnd(0.2)); be1[j] = qw(rnd(0.2)); n_params += 2; end
    foreach (w1[i, j])   begin w1[i][j]   = qw(rnd(0.6)); n_params++; end
    foreach (b1[j])      begin b1[j]      = qw(rnd(0.3)); n_params++; end
    foreach (w2[i, j])   begin w2[i][j]   = qw(rnd(0.4)); n_params++; end
    foreach (b2[j])      begin b2[j]      = qw(rnd(0.2)); n_params++; end
    foreach (g2[j])      begin g2[j]  = qw(1.0 + rnd(0.2)); be2[j] = qw(rnd(0.2)); n_params += 2; end
    foreach (g3[j])      begin g3[j]  = qw(1.0 + rnd(0.2)); be3[j] = qw(rnd(0.2)); n_params += 2; end
    foreach (wh[i, j])   begin wh[i][j]   = qw(rnd(0.6)); n_params++; end
    foreach (bh[j])      begin bh[j]      = qw(rnd(0.2)); n_params++; end
  endtask

  // ------------------------------------------------------------ helpers
  function automatic logic [31:0] f32_of(real v);
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
    h = v / 400.0;
    s = 1.0 + $exp(-v * v);
    for (int k = 1; k < 400; k++) begin
      t  = k * h;
      s += ((k % 2) ? 4.0 : 2.0) * $exp(-t * t);
    end
    return s * h / 3.0 * 2.0 / $sqrt(3.14159265358979323846);
  endfunction

  // One accelerator instruction: rs1 = x5, rd = x6, one clock cycle.
  task automatic hw(logic [2:0] f3, logic [31:0] a, output logic [31:0] y);
    regs[5] = a;
    @(negedge clk);
    instr = {7'd0, 5'd0, 5'd5, f3, 5'd6, 7'b0101011};
    @(posedge clk);
    #1;
    issued++;
    y = regs[6];
  endtask

  task automatic softmax_row(bit accel, inout real x [SEQ]);
    if (!accel) begin
      real m, s;
      m = x[0];
      for (int i = 1; i < SEQ; i++) if (x[i] > m) m = x[i];
      s = 0.0;
      for (int i = 0; i < SEQ; i++) s += $exp(x[i] - m);
      for (int i = 0; i < SEQ; i++) x[i] = $exp(x[i] - m) / s;
    end else begin
      logic [31:0] xq [SEQ];
      logic [31:0] e  [SEQ];
      logic [31:0] mx, sum, inv, pf;
      for (int i = 0; i < SEQ; i++) hw(3'b100, f32_of(x[i]), xq[i]);
      mx = xq[0];
      for (int i = 1; i < SEQ; i++) if ($signed(xq[i]) > $signed(mx)) mx = xq[i];
      sum = 0;
      for (int i = 0; i < SEQ; i++) begin
        hw(3'b000, mx - xq[i], e[i]);
        sum += e[i];
      end
      hw(3'b001, sum, inv);
      if ($signed(sum) > $signed(32'h0A08_0000)) inv_clamps++;
      for (int i = 0; i < SEQ; i++) begin
        hw(3'b101, 32'((longint'(e[i]) * longint'(inv)) >>> 24), pf);
        x[i] = real_of_f32(pf);
      end
    end
  endtask

  task automatic gelu(bit accel, inout real v);
    if (!accel) begin
      v = 0.5 * v * (1.0 + erf_simpson(v / $sqrt(2.0)));
    end else begin
      logic [31:0] q, g, f;
      hw(3'b100, f32_of(v), q);
      hw(3'b011, q, g);
      hw(3'b101, g, f);
      v = real_of_f32(f);
    end
  endtask

  task automatic layer_norm(inout real x [DIM], input real g [DIM], input real b [DIM]);
    real mu, var_;
    mu = 0.0;
    foreach (x[j]) mu += x[j];
    mu /= DIM;
    var_ = 0.0;
    foreach (x[j]) var_ += (x[j] - mu) * (x[j] - mu);
    var_ /= DIM;
    foreach (x[j]) x[j] = g[j] * (x[j] - mu) / $sqrt(var_ + 1e-5) + b[j];
  endtask

  // ------------------------------------------------------------ network
  task automatic infer(bit accel, input real mfcc [F][T], output real logits [NCLS]);
    real x [SEQ][DIM];
    real q [SEQ][DH], k [SEQ][DH], v [SEQ][DH];
    real att [SEQ][DH];
    real row [SEQ];
    real tmp [DIM];
    real h [MLP];
    // Patch + position embeddings; token 0 is the class token.
    for (int t = 0; t < SEQ; t++)
      for (int j = 0; j < DIM; j++) begin
        if (t == 0) x[t][j] = cls[j];
        else begin
          x[t][j] = bp[j];
          for (int f = 0; f < F; f++) x[t][j] += mfcc[f][t-1] * wp[f][j];
        end
        x[t][j] += pos[t][j];
      end
    // Q, K, V.
    for (int t = 0; t < SEQ; t++)
      for (int d = 0; d < DH; d++) begin
        q[t][d] = 0.0; k[t][d] = 0.0; v[t][d] = 0.0;
        for (int j = 0; j < DIM; j++) begin
          q[t][d] += x[t][j] * wqkv[j][d];
          k[t][d] += x[t][j] * wqkv[j][DH + d];
          v[t][d] += x[t][j] * wqkv[j][2*DH + d];
        end
      end
    // Scaled dot-product attention, one softmax per query row.
    for (int t = 0; t < SEQ; t++) begin
      for (int s = 0; s < SEQ; s++) begin
        row[s] = 0.0;
        for (int d = 0; d < DH; d++) row[s] += q[t][d] * k[s][d];
        row[s] /= $sqrt(real'(DH));
      end
      softmax_row(accel, row);
      for (int d = 0; d < DH; d++) begin
        att[t][d] = 0.0;
        for (int s = 0; s < SEQ; s++) att[t][d] += row[s] * v[s][d];
      end
    end
    // Output projection, residual, post-norm; MLP, residual, post-norm.
    for (int t = 0; t < SEQ; t++) begin
      for (int j = 0; j < DIM; j++) begin
        tmp[j] = bo[j] + x[t][j];
        for (int d = 0; d < DH; d++) tmp[j] += att[t][d] * wo[d][j];
      end
      layer_norm(tmp, g1, be1);
      for (int m = 0; m < MLP; m++) begin
        h[m] = b1[m];
        for (int j = 0; j < DIM; j++) h[m] += tmp[j] * w1[j][m];
        gelu(accel, h[m]);
      end
      for (int j = 0; j < DIM; j++) begin
        x[t][j] = b2[j] + tmp[j];
        for (int m = 0; m < MLP; m++) x[t][j] += h[m] * w2[m][j];
      end
      for (int j = 0; j < DIM; j++) tmp[j] = x[t][j];
      layer_norm(tmp, g2, be2);
      for (int j = 0; j < DIM; j++) x[t][j] = tmp[j];
    end
    // Head on the class token.
    for (int j = 0; j < DIM; j++) tmp[j] = x[0][j];
    layer_norm(tmp, g3, be3);
    for (int c = 0; c < NCLS; c++) begin
      logits[c] = bh[c];
      for (int j = 0; j < DIM; j++) logits[c] += tmp[j] * wh[j][c];
    end
  endtask

  // ------------------------------------------------------------ main
  initial begin
    real mfcc [F][T];
    real lr [NCLS], la [NCLS];
    real worst, dd;
    int  agree, n0, c0;
    foreach (regs[i]) regs[i] = 32'h0;
    instr = 32'h0000_0013;
    init_weights();
    checks++;
    if (n_params != 1646) begin
      failures++;
      $display("FAIL model has %0d parameters, expected 1646", n_params);
    end
    @(posedge clk);
    worst = 0.0;
    agree = 0;
    for (int n = 0; n < N_INF; n++) begin
      // Spectrogram scaled to unit range, as after the 2^5 input scaling.
      foreach (mfcc[f, t]) mfcc[f][t] = rnd(1.0);
      infer(1'b0, mfcc, lr);
      #1;
      n0 = issued;
      c0 = cycles;
      infer(1'b1, mfcc, la);
      checks++;
      if (issued - n0 != SEQ * (3 * SEQ + 1) + SEQ * MLP * 3 || cycles - c0 != issued - n0) begin
        failures++;
        $display("FAIL inference %0d: %0d accelerator instructions in %0d cycles",
                 n, issued - n0, cycles - c0);
      end
      for (int c = 0; c < NCLS; c++) begin
        dd = la[c] - lr[c];
        if (dd < 0) dd = -dd;
        if (dd > worst) worst = dd;
        checks++;
        if (dd > 1.0) begin
          failures++;
          $display("FAIL inference %0d logit %0d: %f vs reference %f", n, c, la[c], lr[c]);
        end
      end
      dd = (la[0] - la[1]) - (lr[0] - lr[1]);
      checks++;
      if (dd > 1.0 || dd < -1.0) begin
        failures++;
        $display("FAIL inference %0d: logit margin %f vs reference %f", n, la[0] - la[1], lr[0] - lr[1]);
      end
      if ((la[0] > la[1]) == (lr[0] > lr[1])) agree++;
      $display("inference %0d: reference (%f, %f) accelerated (%f, %f)", n, lr[0], lr[1], la[0], la[1]);
    end
    $display("parameters %0d, class agreement %0d of %0d, worst logit error %f, softmax rows clamped by INVERT %0d of %0d",
             n_params, agree, N_INF, worst, inv_clamps, N_INF * SEQ);
    checks++;
    if (agree * 10 < N_INF * 9) begin
      failures++;
      $display("FAIL class agreement %0d of %0d", agree, N_INF);
    end
    $display("accelerator instructions per inference %0d", SEQ * (3 * SEQ + 1) + SEQ * MLP * 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
