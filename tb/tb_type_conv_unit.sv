// tb_type_conv_unit: self-checking test of the type conversion unit.
//
// For random integers and floats on 16 lanes it checks the three
// conversions against the simulator's own real arithmetic: int->float
// (rounded to nearest even, via a double and one rounding step),
// int->double (exact) and float->double (exact). It checks that each
// conversion is taken only when its control bit (7, 6, 5) is set, that a
// forbidden or impossible source raises the illegal flag, and that own-line
// operands and the int and char lines pass through unchanged.
module tb_type_conv_unit;
  import typeline_pkg::*;

  localparam int NL = 16;

  logic [7:0]          conv;
  logic                ft_foreign, db_foreign, ft_ill, db_ill;
  line_e               ft_src, db_src;
  logic [NL-1:0][31:0] int_a, ft_a, int_c, ft_c, int_op, ft_op;
  logic [NL-1:0][63:0] db_a, db_op;
  logic [NL-1:0][7:0]  ch_a, ch_op;

  type_conv_unit #(.NL(NL)) dut (
    .conv, .ft_foreign, .ft_src, .db_foreign, .db_src,
    .int_a, .ft_a, .db_a, .ch_a, .int_c, .ft_c,
    .int_op, .ft_op, .db_op, .ch_op, .ft_illegal(ft_ill), .db_illegal(db_ill));

  int checks = 0, failures = 0;

  function automatic logic [31:0] d2f(logic [63:0] d);
    logic [52:0] m;
    logic [24:0] r;
    int e;
    if (d[62:0] == 0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    m = {1'b1, d[51:0]};
    r = {1'b0, m[52:29]} + 25'(m[28] & ((|m[27:0]) | m[29]));
    if (r[24]) begin r = r >> 1; e++; end
    return {d[63], 8'(e), r[22:0]};
  endfunction

  function automatic logic [63:0] f2d(logic [31:0] f);
    if (f[30:23] == 0) return {f[31], 63'd0};
    return {f[31], 11'(f[30:23]) + 11'd896, f[22:0], 29'd0};
  endfunction

  task automatic expect32(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %h expected %h", what, got, exp); end
  endtask
  task automatic expect64(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %h expected %h", what, got, exp); end
  endtask

  initial begin
    for (int t = 0; t < 60; t++) begin
      for (int i = 0; i < NL; i++) begin
        int_a[i] = $urandom; ft_a[i] = $urandom; db_a[i] = {$urandom, $urandom}; ch_a[i] = 8'($urandom);
        int_c[i] = (t % 3 == 0) ? 32'($urandom_range(0, 2000)) - 1000 : $urandom;
        ft_c[i]  = {1'($urandom), 8'($urandom_range(1, 254)), 23'($urandom)};
      end
      int_c[0] = 32'h80000000; int_c[1] = 0; int_c[2] = 32'h7fffffff;
      conv = 8'($urandom);
      ft_foreign = 1'($urandom); ft_src = line_e'($urandom);
      db_foreign = 1'($urandom); db_src = line_e'($urandom);
      #1;
      for (int i = 0; i < NL; i++) begin
        expect32("int pass", int_op[i], int_a[i]);
        checks++;
        if (ch_op[i] !== ch_a[i]) begin failures++; $display("FAIL char pass"); end
        // float TEU operand
        if (!ft_foreign)                         expect32("ft own", ft_op[i], ft_a[i]);
        else if (ft_src == L_INT && conv[7])     expect32("int->float", ft_op[i], d2f($realtobits(real'($signed(int_c[i])))));
        else                                     expect32("ft illegal zero", ft_op[i], 32'd0);
        // double TEU operand
        if (!db_foreign)                         expect64("db own", db_op[i], db_a[i]);
        else if (db_src == L_INT && conv[6])     expect64("int->double", db_op[i], $realtobits(real'($signed(int_c[i]))));
        else if (db_src == L_FT && conv[5])      expect64("float->double", db_op[i], f2d(ft_c[i]));
        else                                     expect64("db illegal zero", db_op[i], 64'd0);
      end
      checks += 2;
      if (ft_ill !== (ft_foreign && !(ft_src == L_INT && conv[7]))) begin failures++; $display("FAIL ft_illegal"); end
      if (db_ill !== (db_foreign && !((db_src == L_INT && conv[6]) || (db_src == L_FT && conv[5])))) begin
        failures++; $display("FAIL db_illegal");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
