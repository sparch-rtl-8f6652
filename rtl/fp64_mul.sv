// fp64_mul: IEEE-754 double precision multiplier, combinational.
//
// The paper's multiplier array uses double precision floating point
// multipliers but does not design them; this is a compact implementation of
// the function. The 53x53-bit significand product is normalised by at most one
// place and rounded to nearest, ties to even. Simplifications (this design's
// choice): subnormal inputs and results are flushed to zero, an exponent
// overflow gives infinity, and an infinity or NaN input gives a quiet NaN.
//
// Interface: a_i * b_i -> p_o in the same cycle.
module fp64_mul (
  input  logic [63:0] a_i,
  input  logic [63:0] b_i,
  output logic [63:0] p_o
);
  always_comb begin
    logic         s;
    logic [10:0]  ea, eb;
    logic [105:0] prod;
    logic [52:0]  mant;      // 1.52 after normalisation, before rounding
    logic         rbit, sticky;
    logic [53:0]  rmant;
    logic signed [13:0] e;

    s    = a_i[63] ^ b_i[63];
    ea   = a_i[62:52];
    eb   = b_i[62:52];
    prod = {1'b1, a_i[51:0]} * {1'b1, b_i[51:0]};
    if (prod[105]) begin
      mant   = prod[105:53];
      rbit   = prod[52];
      sticky = |prod[51:0];
      e      = $signed({3'b0, ea}) + $signed({3'b0, eb}) - 14'sd1022;
    end else begin
      mant   = prod[104:52];
      rbit   = prod[51];
      sticky = |prod[50:0];
      e      = $signed({3'b0, ea}) + $signed({3'b0, eb}) - 14'sd1023;
    end
    rmant = {1'b0, mant} + {53'b0, rbit && (sticky || mant[0])};
    if (rmant[53]) begin
      rmant = rmant >> 1;
      e     = e + 14'sd1;
    end
    if (ea == 11'h7ff || eb == 11'h7ff)      p_o = {1'b0, 11'h7ff, 1'b1, 51'b0};
    else if (ea == 11'd0 || eb == 11'd0)     p_o = {s, 63'b0};
    else if (e <= 14'sd0)                    p_o = {s, 63'b0};
    else if (e >= 14'sd2047)                 p_o = {s, 11'h7ff, 52'b0};
    else                                     p_o = {s, e[10:0], rmant[51:0]};
  end
endmodule
