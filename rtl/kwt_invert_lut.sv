// kwt_invert_lut: ALU_INVERT operator, a read-only table giving 1/z.
//
// It replaces the floating-point division at the end of softmax: software
// sums the exponentials, inverts the sum once with this operator and
// multiplies. The input z and the result are Q8.24. Entry i holds
// 1/z for z = (i+1)/DIVS_PER_UNIT, i.e. DIVS_PER_UNIT/(i+1) rounded to the
// nearest Q8.24 word, and the address is floor(z * DIVS_PER_UNIT) - 1.
// With the default 320 entries the table spans z in [1/32, 10].
//
// Out-of-range inputs (this design's choice): z below 1/DIVS_PER_UNIT,
// including zero and negative z, reads entry 0 (the largest value, 32.0);
// z above the table reads the last entry (0.1).
//
// Interface and timing: purely combinational, same-cycle result.
module kwt_invert_lut
  import kwt_pkg::*;
#(
  parameter int unsigned ENTRIES       = 320,
  parameter int unsigned DIVS_PER_UNIT = 32    // must be a power of two
) (
  input  word_t x_i,   // z, Q8.24
  output word_t y_o    // 1/z, Q8.24
);

  localparam int unsigned DIV_LOG2 = $clog2(DIVS_PER_UNIT);
  localparam int unsigned IDX_W    = $clog2(ENTRIES);

  typedef word_t table_t [ENTRIES];

  // DIVS_PER_UNIT/(i+1) in Q8.24 = 2**(QFRAC+DIV_LOG2)/(i+1), rounded.
  function automatic table_t gen_table();
    table_t    t;
    longint    num;
    num = longint'(1) << (QFRAC + DIV_LOG2);
    for (int i = 0; i < int'(ENTRIES); i++)
      t[i] = word_t'((num + (longint'(i) + 1) / 2) / (longint'(i) + 1));
    return t;
  endfunction

  localparam table_t TABLE = gen_table();

  logic [31-(QFRAC-DIV_LOG2):0] slot;   // floor(z * DIVS_PER_UNIT)
  assign slot = x_i[31:QFRAC-DIV_LOG2];

  logic [IDX_W-1:0] idx;

  always_comb begin
    if (x_i[31] || slot == '0)
      idx = '0;                           // z < 1/DIVS_PER_UNIT
    else if (32'(slot) > ENTRIES)
      idx = IDX_W'(ENTRIES - 1);          // z above the table
    else
      idx = IDX_W'(slot - 1'b1);
    y_o = TABLE[idx];
  end

endmodule
