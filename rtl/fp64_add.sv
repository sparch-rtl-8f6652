// fp64_add: IEEE-754 double precision adder, combinational.
//
// The merger's adder slice sums two elements of the same coordinate; the paper
// names the adders but does not design them. This is a compact implementation:
// the smaller operand is aligned with guard, round and sticky bits, the
// significands are added or subtracted, the result is normalised with a
// leading-zero count and rounded to nearest, ties to even. Simplifications
// (this design's choice): subnormals are flushed to zero, an exact zero result
// is +0, exponent overflow gives infinity and an infinity or NaN input gives a
// quiet NaN.
//
// Interface: a_i + b_i -> s_o in the same cycle.
module fp64_add (
  input  logic [63:0] a_i,
  input  logic [63:0] b_i,
  output logic [63:0] s_o
);
  always_comb begin
    logic [63:0] x, y;
    logic        sx, sy;
    logic [10:0] ex, ey;
    logic [11:0] d;
    logic [56:0] mx, my;     // carry, hidden bit, 52 fraction, G, R, S
    logic [56:0] r;
    logic signed [13:0] e;
    logic [5:0]  lz;
    logic        found;
    logic        rup;
    logic [53:0] rm;
    logic        sticky;

    lz = 6'd0; found = 1'b0; rup = 1'b0; rm = '0; s_o = '0;
    // flush subnormals, then order by magnitude
    x = (a_i[62:52] == 11'd0) ? 64'd0 : a_i;
    y = (b_i[62:52] == 11'd0) ? 64'd0 : b_i;
    if (y[62:0] > x[62:0]) begin
      x = (b_i[62:52] == 11'd0) ? 64'd0 : b_i;
      y = (a_i[62:52] == 11'd0) ? 64'd0 : a_i;
    end
    sx = x[63]; sy = y[63];
    ex = x[62:52]; ey = y[62:52];
    mx = (ex == 11'd0) ? 57'd0 : {2'b01, x[51:0], 3'b000};
    my = (ey == 11'd0) ? 57'd0 : {2'b01, y[51:0], 3'b000};
    d  = {1'b0, ex} - {1'b0, ey};
    // align y, collecting shifted-out bits into the sticky position
    sticky = 1'b0;
    if (d >= 12'd57) begin
      sticky = |my;
      my     = 57'd0;
    end else begin
      for (int k = 0; k < 57; k++)
        if (k < int'(d) && my[k]) sticky = 1'b1;
      my = my >> d;
    end
    my[0] = my[0] | sticky;
    e = $signed({3'b0, ex});
    if (sx == sy) r = mx + my;
    else          r = mx - my;
    // normalise
    if (r[56]) begin
      r = {1'b0, r[56:2], r[1] | r[0]};
      e = e + 14'sd1;
    end else begin
      for (int k = 55; k >= 0; k--) begin
        if (!found && r[k]) found = 1'b1;
        else if (!found)    lz = lz + 6'd1;
      end
      r = r << lz;
      e = e - $signed({8'b0, lz});
    end
    // round to nearest even on G, R, S = r[2], r[1], r[0]
    rup = r[2] && (r[1] || r[0] || r[3]);
    rm  = {1'b0, r[55:3]} + {53'b0, rup};
    if (rm[53]) begin
      rm = rm >> 1;
      e  = e + 14'sd1;
    end
    if (ex == 11'h7ff || ey == 11'h7ff)  s_o = {1'b0, 11'h7ff, 1'b1, 51'b0};
    else if (r == 57'd0)                 s_o = 64'd0;
    else if (e <= 14'sd0)                s_o = {sx, 63'b0};
    else if (e >= 14'sd2047)             s_o = {sx, 11'h7ff, 52'b0};
    else                                 s_o = {sx, e[10:0], rm[51:0]};
  end
endmodule
