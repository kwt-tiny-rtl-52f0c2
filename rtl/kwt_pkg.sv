// kwt_pkg: shared encodings, number formats and table-generation functions
// for the keyword-spotting transformer accelerator.
//
// The accelerator adds one R-type instruction to an RV32IMC core on the
// custom-1 major opcode (7'b0101011, from the RISC-V base specification).
// funct7 must be zero and funct3 selects one of five operators; the
// funct3 code points below follow the published encoding exactly.
//
// All arithmetic operators work on Q8.24 signed fixed point: a 32-bit two's
// complement word whose value is word / 2**24 (range [-128, 128)). The two
// conversion operators move between Q8.24 and IEEE-754 binary32.
//
// The real-valued functions here are used only at elaboration time to fill
// the look-up tables (constant functions); they generate no logic.
package kwt_pkg;

  // RISC-V custom-1 major opcode.
  localparam logic [6:0] OPCODE_CUSTOM1 = 7'b0101011;

  // Number of fraction bits of the Q8.24 format.
  localparam int unsigned QFRAC = 24;

  typedef logic [31:0] word_t;

  // Accelerator operators, encoded by their funct3 value.
  typedef enum logic [2:0] {
    OP_EXP      = 3'b000,   // exp(-z) by 320-entry table
    OP_INVERT   = 3'b001,   // 1/z by 320-entry table
    OP_GELU     = 3'b011,   // piecewise GELU with a 32-entry table
    OP_TO_FIXED = 3'b100,   // binary32 -> Q8.24
    OP_TO_FLOAT = 3'b101    // Q8.24 -> binary32
  } kwt_op_e;

  // Round a real to the nearest Q8.24 word (no saturation: callers keep
  // their values inside the format's range).
  function automatic word_t real_to_q(real v);
    return word_t'($rtoi($floor(v * 16777216.0 + 0.5)));
  endfunction

  // Gauss error function by its Maclaurin series; accurate to well below
  // one Q8.24 LSB for |x| < 2, which covers every argument used here.
  function automatic real erf_series(real x);
    real s, term;
    s    = 0.0;
    term = x;
    for (int n = 0; n < 80; n++) begin
      s    += term / real'(2 * n + 1);
      term  = -term * x * x / real'(n + 1);
    end
    return s * 2.0 / $sqrt(3.14159265358979323846);
  endfunction

  // GELU(x) = x/2 * (1 + erf(x/sqrt(2))).
  function automatic real gelu_real(real x);
    return 0.5 * x * (1.0 + erf_series(x / $sqrt(2.0)));
  endfunction

endpackage
