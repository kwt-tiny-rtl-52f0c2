// kwt_gelu_unit: ALU_GELU operator, a piecewise GELU approximation.
//
// GELU(x) = x/2 * (1 + erf(x/sqrt(2))) is approximated in three pieces:
//   x > HI          -> x            (GELU is already within 0.09 of x)
//   x < LO          -> 0            (GELU is already within 0.06 of 0)
//   LO <= x <= HI   -> TABLE[idx]   (ENTRIES equal-width segments)
// with the published thresholds LO = -1.857 and HI = 1.595 and a 32-entry
// table. Input and output are Q8.24.
//
// This design's choices: the segment address is
//   idx = floor((x - LO) * ENTRIES / (HI - LO)),
// formed with one constant multiplication ((x - LO) times a 16-bit-fraction
// reciprocal of the segment width) and clamped to ENTRIES-1 at x = HI; each
// entry holds GELU at the centre of its segment, rounded to Q8.24. The
// thresholds are rounded to the nearest Q8.24 word.
//
// Interface and timing: purely combinational, same-cycle result.
module kwt_gelu_unit
  import kwt_pkg::*;
#(
  parameter int unsigned ENTRIES = 32,
  parameter real         LO      = -1.857,
  parameter real         HI      = 1.595
) (
  input  word_t x_i,   // x, Q8.24
  output word_t y_o    // GELU(x), Q8.24
);

  localparam int unsigned IDX_W   = $clog2(ENTRIES);
  localparam int unsigned K_FRAC  = 16;
  localparam word_t       LO_Q    = real_to_q(LO);
  localparam word_t       HI_Q    = real_to_q(HI);
  // Segments per unit of x, with K_FRAC fraction bits.
  localparam longint      K       = longint'($rtoi($floor(
                                      real'(ENTRIES) / (HI - LO) * real'(longint'(1) << K_FRAC) + 0.5)));

  typedef word_t table_t [ENTRIES];

  function automatic table_t gen_table();
    table_t t;
    real    w;
    w = (HI - LO) / real'(ENTRIES);
    for (int i = 0; i < int'(ENTRIES); i++)
      t[i] = real_to_q(gelu_real(LO + (real'(i) + 0.5) * w));
    return t;
  endfunction

  localparam table_t TABLE = gen_table();

  logic [31:0]        offs;      // x - LO, non-negative inside the window
  logic [63:0]        scaled;    // offs * K, QFRAC + K_FRAC fraction bits
  logic [63:0]        seg;       // integer segment number
  logic [IDX_W-1:0]   idx;

  assign offs   = x_i - LO_Q;
  assign scaled = 64'(offs) * 64'(K);
  assign seg    = scaled >> (QFRAC + K_FRAC);

  always_comb begin
    idx = (seg >= 64'(ENTRIES)) ? IDX_W'(ENTRIES - 1) : IDX_W'(seg);
    if ($signed(x_i) > $signed(HI_Q))
      y_o = x_i;                      // identity region
    else if ($signed(x_i) < $signed(LO_Q))
      y_o = '0;                       // zero region
    else
      y_o = TABLE[idx];               // table region
  end

endmodule
