// kwt_exp_lut: ALU_EXP operator, a read-only table giving exp(-z).
//
// Softmax is evaluated in its max-shifted form, so each exponential the
// software needs is exp(-(max - x_i)) with a non-negative argument z. This
// unit receives z in Q8.24 and returns exp(-z) in Q8.24 from a table with
// DIVS_PER_UNIT entries per unit of z: entry i holds exp(-i/DIVS_PER_UNIT),
// rounded to the nearest Q8.24 word, and the address is floor(z *
// DIVS_PER_UNIT), which is a plain bit slice of z. With the default 320
// entries of 32 bits the table spans z in [0, 10).
//
// Out-of-range inputs (this design's choice): z < 0 reads entry 0 (1.0);
// z >= ENTRIES/DIVS_PER_UNIT returns 0, the limit of exp(-z).
//
// Interface and timing: purely combinational, x_i to y_o in the same cycle,
// as an operator inside a single-cycle ALU. The table is computed at
// elaboration time; synthesis maps it to a ROM in logic.
module kwt_exp_lut
  import kwt_pkg::*;
#(
  parameter int unsigned ENTRIES       = 320,
  parameter int unsigned DIVS_PER_UNIT = 32    // must be a power of two
) (
  input  word_t x_i,   // z, Q8.24
  output word_t y_o    // exp(-z), Q8.24
);

  localparam int unsigned DIV_LOG2 = $clog2(DIVS_PER_UNIT);
  localparam int unsigned IDX_W    = $clog2(ENTRIES);

  typedef word_t table_t [ENTRIES];

  function automatic table_t gen_table();
    table_t t;
    for (int i = 0; i < int'(ENTRIES); i++)
      t[i] = real_to_q($exp(-real'(i) / real'(DIVS_PER_UNIT)));
    return t;
  endfunction

  localparam table_t TABLE = gen_table();

  // floor(z * DIVS_PER_UNIT): drop all but DIV_LOG2 fraction bits.
  logic [31-(QFRAC-DIV_LOG2):0] slot;
  assign slot = x_i[31:QFRAC-DIV_LOG2];

  logic [IDX_W-1:0] idx;

  always_comb begin
    idx = '0;
    y_o = '0;
    if (x_i[31]) begin
      y_o = TABLE[0];                       // negative z: clamp to exp(0)
    end else if (32'(slot) < ENTRIES) begin
      idx = IDX_W'(slot);
      y_o = TABLE[idx];
    end else begin
      y_o = '0;                             // beyond the table: exp(-z) ~ 0
    end
  end

endmodule
