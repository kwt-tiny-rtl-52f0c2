// kwt_to_fixed: ALU_TO_FIXED operator, IEEE-754 binary32 to Q8.24.
//
// The software keeps activations as floats; this operator moves a value
// into the Q8.24 domain of the table operators in one instruction. The
// value (-1)^s * 1.m * 2^(e-127) scaled by 2^24 equals the 24-bit
// significand {1,m} shifted left by e-126, so the conversion is one
// barrel shift and an optional negation.
//
// This design's choices, as the published description gives only the
// function: the magnitude is truncated (rounding toward zero); zeros and
// subnormals (e = 0) give 0; magnitudes of 128 and above, infinities and
// NaNs saturate to 0x7FFFFFFF or 0x80000000 by the sign bit.
//
// Interface and timing: purely combinational, same-cycle result.
module kwt_to_fixed
  import kwt_pkg::*;
(
  input  word_t f_i,   // IEEE-754 binary32
  output word_t q_o    // Q8.24
);

  logic        sign;
  logic [7:0]  expo;
  logic [23:0] signif;
  logic [31:0] mag;

  assign sign   = f_i[31];
  assign expo   = f_i[30:23];
  assign signif = {1'b1, f_i[22:0]};

  always_comb begin
    mag = '0;
    q_o = '0;
    if (expo == 8'd0) begin
      q_o = '0;                                         // zero, subnormal
    end else if (expo >= 8'd134) begin                  // |v| >= 128, inf, NaN
      q_o = sign ? 32'h8000_0000 : 32'h7FFF_FFFF;
    end else begin
      if (expo >= 8'd126)
        mag = {8'd0, signif} << (expo - 8'd126);        // shift 0..7
      else if (expo > 8'd102)
        mag = {8'd0, signif} >> (8'd126 - expo);        // shift 1..23
      else
        mag = '0;                                       // below 2^-24
      q_o = sign ? (~mag + 32'd1) : mag;
    end
  end

endmodule
