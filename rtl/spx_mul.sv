// spx_mul: multiply an unsigned data element by one SPx-quantised weight.
//
// SPx quantisation writes a weight as w = +/- alpha * sum_i q_i, where every
// term q_i is 0 or a power of two 2^-k, k = 1 .. 2^TERM_BITS - 1. A weight
// code is {sign, c_{TERMS-1}, ..., c_0}: term i is 0 when c_i = 0 and
// 2^-c_i otherwise. Multiplying by a power of two is a shift, so the
// product needs no multiplier: the data element is shifted once per term and
// the shifted copies are added. To stay exact the result carries
// EMAX = 2^TERM_BITS - 1 extra fraction bits: term i contributes
// d << (EMAX - c_i), i.e. the output equals d * sum_i q_i * 2^EMAX with the
// weight's sign applied. The common factor alpha is applied once per dot
// product, later, in act_unit.
//
// Following the source: the SPx value set (one sign, x terms, each term a
// power of two of the form 1/2^k) and the shift-and-add multiplication.
// Own choices: all terms share one code width TERM_BITS (the source allows a
// different b_i per term), the mapping c -> 2^-c, and a single sign bit for
// the whole weight (the source's formula prints "+/-" both outside the sum
// and inside each term's value set; one sign is used).
//
// Interface: purely combinational, d and code in, signed product out.
module spx_mul #(
  parameter int unsigned D_W       = 8,  // data width, unsigned
  parameter int unsigned TERMS     = 3,  // x, number of power-of-two terms
  parameter int unsigned TERM_BITS = 2,  // b_i, code bits per term
  localparam int unsigned WB    = 1 + TERMS * TERM_BITS,
  localparam int unsigned EMAX  = (1 << TERM_BITS) - 1,
  localparam int unsigned PROD_W = D_W + EMAX + $clog2(TERMS) + 1
) (
  input  logic [D_W-1:0]           d,
  input  logic [WB-1:0]            code,
  output logic signed [PROD_W-1:0] prod
);

  logic [PROD_W-2:0] mag;

  always_comb begin
    mag = '0;
    for (int i = 0; i < TERMS; i++) begin
      logic [TERM_BITS-1:0] c, sh;
      c  = code[i*TERM_BITS +: TERM_BITS];
      sh = TERM_BITS'(EMAX) - c;     // shift left by EMAX - c
      if (c != '0)
        mag = mag + ((PROD_W-1)'(d) << sh);
    end
    prod = code[WB-1] ? -$signed({1'b0, mag}) : $signed({1'b0, mag});
  end

endmodule
