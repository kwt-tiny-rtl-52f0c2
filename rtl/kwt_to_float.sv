// kwt_to_float: ALU_TO_FLOAT operator, Q8.24 to IEEE-754 binary32.
//
// Returns a table result (or a product of them) to the floating-point
// domain of the software. The magnitude of the Q8.24 word is found, its
// leading one at bit p sets the exponent to p - 24 + 127, and the bits
// below it, left-aligned, give the 23-bit fraction.
//
// This design's choices, as the published description gives only the
// function: extra fraction bits are truncated (rounding toward zero); this
// only happens for magnitudes of 1.0 and above, where the Q8.24 word has
// more than 24 significant bits. Zero maps to +0.0.
//
// Interface and timing: purely combinational, same-cycle result.
module kwt_to_float
  import kwt_pkg::*;
(
  input  word_t q_i,   // Q8.24
  output word_t f_o    // IEEE-754 binary32
);

  logic        sign;
  logic [31:0] mag;
  logic [4:0]  lead;     // position of the leading one of mag
  logic [31:0] norm;     // mag shifted so that the leading one is at bit 31

  assign sign = q_i[31];
  assign mag  = sign ? (~q_i + 32'd1) : q_i;   // 0x80000000 -> 2^31

  always_comb begin
    lead = '0;
    for (int b = 0; b < 32; b++)
      if (mag[b]) lead = 5'(b);
  end

  assign norm = mag << (5'd31 - lead);

  always_comb begin
    if (mag == '0)
      f_o = '0;
    else
      f_o = {sign, 8'(lead) + 8'd103, norm[30:8]};
  end

endmodule
