// fp_add: combinational IEEE-754 style adder/subtractor, used by the float
// and double TEUs (EW exponent bits, MW fraction bits).
//
// y = a + b, or a - b when sub is set. The larger operand sets the
// exponent; the smaller is shifted right with a sticky bit, the magnitudes
// are added or subtracted, the sum is normalised with a leading-zero count
// and rounded to nearest, ties to even. Subnormal inputs and results are
// flushed to zero; NaN inputs and inf - inf give the canonical quiet NaN;
// overflow gives infinity. Exact cancellation gives +0.
//
// The paper names ADD and SUB for the float and double lines only; the
// number format, rounding and flush-to-zero are this design's choices.
module fp_add #(
  parameter int EW = 8,
  parameter int MW = 23,
  localparam int W = 1 + EW + MW
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic         sub,
  output logic [W-1:0] y
);

  localparam int XW   = MW + 4;          // hidden + fraction + G,R,S
  localparam int EMAX = (1 << EW) - 1;
  localparam int LZW  = $clog2(XW + 1);

  logic              sa, sb, sl, ss, a_big;
  logic [EW-1:0]     ea, eb, el, es;
  logic [MW-1:0]     fa, fb;
  logic [XW-1:0]     ml, ms, ms_al, m;
  logic [2*XW-1:0]   shifted;
  logic [EW-1:0]     d;
  logic [XW:0]       sum;
  logic [LZW-1:0]    lz;
  logic signed [EW+1:0] e;
  logic [MW+1:0]     mr;
  logic              rnd, a_nan, b_nan, a_inf, b_inf;

  always_comb begin
    sa = a[W-1];
    sb = b[W-1] ^ sub;
    ea = a[W-2:MW];
    eb = b[W-2:MW];
    fa = (ea == '0) ? '0 : a[MW-1:0];
    fb = (eb == '0) ? '0 : b[MW-1:0];
    a_nan = (ea == EW'(EMAX)) && (fa != '0);
    b_nan = (eb == EW'(EMAX)) && (fb != '0);
    a_inf = (ea == EW'(EMAX)) && (fa == '0);
    b_inf = (eb == EW'(EMAX)) && (fb == '0);

    a_big = {ea, fa} >= {eb, fb};
    sl = a_big ? sa : sb;
    ss = a_big ? sb : sa;
    el = a_big ? ea : eb;
    es = a_big ? eb : ea;
    ml = a_big ? {(ea != '0), fa, 3'b000} : {(eb != '0), fb, 3'b000};
    ms = a_big ? {(eb != '0), fb, 3'b000} : {(ea != '0), fa, 3'b000};

    d = el - es;
    if (d > EW'(XW)) d = EW'(XW);
    shifted = {ms, {XW{1'b0}}} >> d;
    ms_al = shifted[2*XW-1:XW];
    ms_al[0] = ms_al[0] | (|shifted[XW-1:0]);

    if (sl == ss) sum = {1'b0, ml} + {1'b0, ms_al};
    else          sum = {1'b0, ml} - {1'b0, ms_al};

    e  = {2'b00, el};
    lz = '0;
    m  = '0;
    if (sum[XW]) begin
      m = sum[XW:1];
      m[0] = m[0] | sum[0];
      e = e + 1;
    end else begin
      for (int i = 0; i < XW; i++)
        if (sum[XW-1-i] == 1'b0 && lz == LZW'(i)) lz = LZW'(i + 1);
      m = sum[XW-1:0] << lz;
      e = e - $signed({{(EW+2-LZW){1'b0}}, lz});
    end

    rnd = m[2] & (m[1] | m[0] | m[3]);
    mr  = {1'b0, 1'b0, m[XW-2:3]} + (MW+2)'(rnd);
    if (mr[MW]) e = e + 1;       // rounding carried out of the fraction

    if (a_nan || b_nan || (a_inf && b_inf && (sa != sb)))
      y = {1'b0, {EW{1'b1}}, 1'b1, {(MW-1){1'b0}}};
    else if (a_inf)
      y = {sa, {EW{1'b1}}, {MW{1'b0}}};
    else if (b_inf)
      y = {sb, {EW{1'b1}}, {MW{1'b0}}};
    else if (sum == '0)
      y = {sl & ss, {(W-1){1'b0}}};
    else if (e >= (EW+2)'(EMAX))
      y = {sl, {EW{1'b1}}, {MW{1'b0}}};
    else if (e <= 0)
      y = {sl, {(W-1){1'b0}}};
    else
      y = {sl, e[EW-1:0], mr[MW-1:0]};
  end

endmodule
