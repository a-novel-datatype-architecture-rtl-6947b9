// int2fp: combinational conversion of a signed IW-bit integer to an
// IEEE-754 style number with EW exponent and MW fraction bits, rounded to
// nearest, ties to even (exact when the fraction is wide enough, as for
// int to double). Part of the type conversion unit: the int->float and
// int->double converters the paper assigns to it.
module int2fp #(
  parameter int IW = 32,
  parameter int EW = 8,
  parameter int MW = 23,
  localparam int W = 1 + EW + MW
) (
  input  logic [IW-1:0] x,
  output logic [W-1:0]  y
);

  localparam int BIAS = (1 << (EW - 1)) - 1;
  localparam int LZW  = $clog2(IW + 1);

  logic                 s;
  logic [IW-1:0]        mag, norm;
  logic [LZW-1:0]       lz;
  logic [EW+1:0]        e;
  logic [MW-1:0]        frac;
  logic [MW:0]          fr;

  always_comb begin
    s   = x[IW-1];
    mag = s ? -x : x;
    lz  = '0;
    for (int i = 0; i < IW; i++)
      if (mag[IW-1-i] == 1'b0 && lz == LZW'(i)) lz = LZW'(i + 1);
    norm = mag << lz;
    e    = (EW+2)'(BIAS + IW - 1) - (EW+2)'(lz);
  end

  if (IW - 1 <= MW) begin : g_exact
    always_comb begin
      frac = MW'(norm[IW-2:0]) << (MW - (IW - 1));
      fr   = {1'b0, frac};
    end
  end else begin : g_round
    logic g, st, rnd;
    always_comb begin
      g    = norm[IW-2-MW];
      st   = (IW - 2 - MW > 0) ? |(norm & ((IW'(1) << (IW - 2 - MW)) - IW'(1))) : 1'b0;
      frac = norm[IW-2 -: MW];
      rnd  = g & (st | frac[0]);
      fr   = {1'b0, frac} + (MW+1)'(rnd);
    end
  end

  always_comb begin
    if (mag == '0)
      y = '0;
    else if (fr[MW])
      y = {s, EW'(e + 1'b1), {MW{1'b0}}};
    else
      y = {s, e[EW-1:0], fr[MW-1:0]};
  end

endmodule
