// fp_widen: exact combinational conversion of a narrow IEEE-754 style
// number (EW1/MW1) to a wider one (EW2/MW2): the float->double converter
// of the type conversion unit. The exponent is re-biased and the fraction
// padded with zeros; subnormals become signed zero, infinities and NaNs
// keep their class.
module fp_widen #(
  parameter int EW1 = 8,
  parameter int MW1 = 23,
  parameter int EW2 = 11,
  parameter int MW2 = 52,
  localparam int W1 = 1 + EW1 + MW1,
  localparam int W2 = 1 + EW2 + MW2
) (
  input  logic [W1-1:0] x,
  output logic [W2-1:0] y
);

  localparam int EMAX1 = (1 << EW1) - 1;
  localparam int BIAS1 = (1 << (EW1 - 1)) - 1;
  localparam int BIAS2 = (1 << (EW2 - 1)) - 1;

  logic [EW1-1:0] e1;
  logic [MW2-1:0] f2;

  always_comb begin
    e1 = x[W1-2:MW1];
    f2 = {x[MW1-1:0], {(MW2-MW1){1'b0}}};
    if (e1 == '0)
      y = {x[W1-1], {(W2-1){1'b0}}};
    else if (e1 == EW1'(EMAX1))
      y = {x[W1-1], {EW2{1'b1}}, f2};
    else
      y = {x[W1-1], EW2'(e1) + EW2'(BIAS2 - BIAS1), f2};
  end

endmodule
