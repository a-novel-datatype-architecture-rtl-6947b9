// fp_mul: combinational IEEE-754 style multiplier, used by the float and
// double TEUs (EW exponent bits, MW fraction bits).
//
// Multiplies the two significands with their hidden bits, normalises the
// product (it lies in [1,4)), and rounds to nearest, ties to even.
// Subnormal inputs and results are flushed to zero; NaN inputs and inf * 0
// give the canonical quiet NaN; overflow gives infinity.
//
// The paper names MUL for the float and double lines only; the format and
// rounding are this design's choices.
module fp_mul #(
  parameter int EW = 8,
  parameter int MW = 23,
  localparam int W = 1 + EW + MW
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic [W-1:0] y
);

  localparam int EMAX = (1 << EW) - 1;
  localparam int BIAS = (1 << (EW - 1)) - 1;

  logic                 s, a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;
  logic                 g, st, rnd;
  logic [EW-1:0]        ea, eb;
  logic [2*MW+1:0]      p;
  logic [MW:0]          m;
  logic [MW+1:0]        mr;
  logic signed [EW+2:0] e;

  always_comb begin
    s  = a[W-1] ^ b[W-1];
    ea = a[W-2:MW];
    eb = b[W-2:MW];
    a_zero = (ea == '0);
    b_zero = (eb == '0);
    a_nan  = (ea == EW'(EMAX)) && (a[MW-1:0] != '0);
    b_nan  = (eb == EW'(EMAX)) && (b[MW-1:0] != '0);
    a_inf  = (ea == EW'(EMAX)) && (a[MW-1:0] == '0);
    b_inf  = (eb == EW'(EMAX)) && (b[MW-1:0] == '0);

    p = {1'b1, a[MW-1:0]} * {1'b1, b[MW-1:0]};
    e = $signed({3'b000, ea}) + $signed({3'b000, eb}) - (EW+3)'(BIAS);
    if (p[2*MW+1]) begin
      m  = p[2*MW+1:MW+1];
      g  = p[MW];
      st = |p[MW-1:0];
      e  = e + 1;
    end else begin
      m  = p[2*MW:MW];
      g  = p[MW-1];
      st = |p[MW-2:0];
    end
    rnd = g & (st | m[0]);
    mr  = {1'b0, m} + (MW+2)'(rnd);
    if (mr[MW+1]) e = e + 1;

    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero))
      y = {1'b0, {EW{1'b1}}, 1'b1, {(MW-1){1'b0}}};
    else if (a_inf || b_inf)
      y = {s, {EW{1'b1}}, {MW{1'b0}}};
    else if (a_zero || b_zero)
      y = {s, {(W-1){1'b0}}};
    else if (e >= (EW+3)'(EMAX))
      y = {s, {EW{1'b1}}, {MW{1'b0}}};
    else if (e <= 0)
      y = {s, {(W-1){1'b0}}};
    else
      y = {s, e[EW-1:0], mr[MW-1:0]};
  end

endmodule
