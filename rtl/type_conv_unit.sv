// type_conv_unit: the type conversion unit between the four register files
// and the four TEUs.
//
// Every TEU takes its first operand (a) through this unit. Normally the
// operand comes from the TEU's own register file (port A) unchanged. When
// the instruction names a register of another line (ft_foreign/db_foreign
// with the source line in ft_src/db_src), the operand is read from that
// line's conversion port (port C) and converted, all LANES lanes at once:
//   int -> float   allowed by conv[7]   (int2fp, rounded to nearest even)
//   int -> double  allowed by conv[6]   (int2fp, exact)
//   float -> double allowed by conv[5]  (fp_widen, exact)
// The remaining five control bits are reserved. A foreign source that the
// control bits do not allow, or for which no converter exists, raises
// ft_illegal/db_illegal and yields zero operands; the issue logic never
// dispatches such an instruction (it hands it to the host instead). The
// integer and char TEUs receive no conversions and get their port A.
//
// Timing: purely combinational.
//
// From the paper: the unit's place in the datapath, its 8 control bits set
// by CONV, and that only the three conversions above are performed. This
// design's own: the assignment of the three conversions to bits 7, 6 and 5
// (bit 7 = int->float matches the paper's example "CONV 80H" before a
// float division of an integer register), and that only operand a is
// converted.
module type_conv_unit
  import typeline_pkg::*;
#(
  parameter int NL = LANES
) (
  input  logic [7:0]                 conv,
  input  logic                       ft_foreign,
  input  line_e                      ft_src,
  input  logic                       db_foreign,
  input  line_e                      db_src,
  // operand-a ports of the register files (own line)
  input  logic [NL-1:0][INT_W-1:0]   int_a,
  input  logic [NL-1:0][FT_W-1:0]    ft_a,
  input  logic [NL-1:0][DB_W-1:0]    db_a,
  input  logic [NL-1:0][CH_W-1:0]    ch_a,
  // conversion ports of the register files that can be a source
  input  logic [NL-1:0][INT_W-1:0]   int_c,
  input  logic [NL-1:0][FT_W-1:0]    ft_c,
  // operand a of each TEU
  output logic [NL-1:0][INT_W-1:0]   int_op,
  output logic [NL-1:0][FT_W-1:0]    ft_op,
  output logic [NL-1:0][DB_W-1:0]    db_op,
  output logic [NL-1:0][CH_W-1:0]    ch_op,
  output logic                       ft_illegal,
  output logic                       db_illegal
);

  logic [NL-1:0][FT_W-1:0] i2f;
  logic [NL-1:0][DB_W-1:0] i2d, f2d;

  for (genvar i = 0; i < NL; i++) begin : g_lane
    int2fp   #(.IW(INT_W), .EW(8),  .MW(23)) u_i2f (.x(int_c[i]), .y(i2f[i]));
    int2fp   #(.IW(INT_W), .EW(11), .MW(52)) u_i2d (.x(int_c[i]), .y(i2d[i]));
    fp_widen #(.EW1(8), .MW1(23), .EW2(11), .MW2(52)) u_f2d (.x(ft_c[i]), .y(f2d[i]));
  end

  assign int_op = int_a;
  assign ch_op  = ch_a;

  always_comb begin
    ft_illegal = 1'b0;
    ft_op      = ft_a;
    if (ft_foreign) begin
      if (ft_src == L_INT && conv[CV_I2F]) ft_op = i2f;
      else begin
        ft_op      = '0;
        ft_illegal = 1'b1;
      end
    end

    db_illegal = 1'b0;
    db_op      = db_a;
    if (db_foreign) begin
      if (db_src == L_INT && conv[CV_I2D])      db_op = i2d;
      else if (db_src == L_FT && conv[CV_F2D])  db_op = f2d;
      else begin
        db_op      = '0;
        db_illegal = 1'b1;
      end
    end
  end

endmodule
