// tb_teu_fp: self-checking test of the floating-point TEU in both of its
// configurations: float (8/23, with DIV) and double (11/52, without DIV).
//
// Random operands with exponents kept in a safe range, on all 16 lanes with
// random lane enables, are run through MOV, ADD, SUB, MUL, DIV (float only)
// and CMP. Expected values come from the simulator's own double-precision
// arithmetic: exact for the double unit, and for the float unit computed in
// double and rounded once to single (innocuous double rounding, since
// 53 >= 2*24+2). Directed cases cover signed zero, infinities, NaN and
// division by zero. Latency is checked: 1 cycle for the one-cycle
// operations, MW+6 = 29 cycles for a float DIV.
module tb_teu_fp;
  import typeline_pkg::*;

  localparam int NL = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                 fs_start, ds_start;
  op_e                  f_op, d_op;
  logic [NL-1:0]        f_en, d_en;
  logic [NL-1:0][31:0]  fa, fb, fr;
  logic [NL-1:0][63:0]  da, db, dr;
  logic                 f_busy, f_done, d_busy, d_done;

  teu_fp #(.EW(8),  .MW(23), .HAS_DIV(1'b1), .NL(NL)) u_f (
    .clk, .rst_n, .start(fs_start), .op(f_op), .lane_en(f_en), .a(fa), .b(fb),
    .busy(f_busy), .done(f_done), .result(fr));
  teu_fp #(.EW(11), .MW(52), .HAS_DIV(1'b0), .NL(NL)) u_d (
    .clk, .rst_n, .start(ds_start), .op(d_op), .lane_en(d_en), .a(da), .b(db),
    .busy(d_busy), .done(d_done), .result(dr));

  int checks = 0, failures = 0;

  // ---------------- reference helpers ----------------
  function automatic logic [63:0] f2d(logic [31:0] f);
    if (f[30:23] == 0)   return {f[31], 63'd0};
    if (f[30:23] == 255) return {f[31], 11'h7ff, f[22:0], 29'd0};
    return {f[31], 11'(f[30:23]) + 11'd896, f[22:0], 29'd0};
  endfunction

  function automatic logic [31:0] d2f(logic [63:0] d);
    logic [52:0] m;
    logic [24:0] r;
    int e;
    logic g, st;
    if (d[62:52] == 11'h7ff) return (d[51:0] != 0) ? 32'h7fc00000 : {d[63], 8'hff, 23'd0};
    if (d[62:52] == 0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    m = {1'b1, d[51:0]};
    g = m[28];
    st = |m[27:0];
    r = {1'b0, m[52:29]} + 25'(g & (st | m[29]));
    if (r[24]) begin r = r >> 1; e++; end
    if (e >= 255) return {d[63], 8'hff, 23'd0};
    if (e <= 0)   return {d[63], 31'd0};
    return {d[63], 8'(e), r[22:0]};
  endfunction

  function automatic logic [31:0] rand_f();
    return {1'($urandom), 8'(100 + $urandom_range(0, 50)), 23'($urandom)};
  endfunction
  function automatic logic [63:0] rand_d();
    return {1'($urandom), 11'(990 + $urandom_range(0, 60)), 20'($urandom), 32'($urandom)};
  endfunction

  function automatic logic is_nan_f(logic [31:0] x); return x[30:23] == 8'hff && x[22:0] != 0; endfunction
  function automatic logic is_nan_d(logic [63:0] x); return x[62:52] == 11'h7ff && x[51:0] != 0; endfunction

  function automatic logic [63:0] ref_d(op_e op, logic [63:0] x, logic [63:0] y);
    real rx, ry;
    rx = $bitstoreal(x);
    ry = $bitstoreal(y);
    case (op)
      OP_MOV: return x;
      OP_ADD: return $realtobits(rx + ry);
      OP_SUB: return $realtobits(rx - ry);
      OP_MUL: return $realtobits(rx * ry);
      OP_DIV: return $realtobits(rx / ry);
      OP_CMP: return (is_nan_d(x) || is_nan_d(y)) ? 64'h7ff8000000000000 :
                     (rx < ry) ? 64'hbff0000000000000 : (rx > ry) ? 64'h3ff0000000000000 : 64'd0;
      default: return 64'd0;
    endcase
  endfunction

  function automatic logic [31:0] ref_f(op_e op, logic [31:0] x, logic [31:0] y);
    logic [63:0] r;
    if (op == OP_MOV) return x;
    r = ref_d(op, f2d(x), f2d(y));
    if (op == OP_CMP) return is_nan_d(r) ? 32'h7fc00000 : (r == 0) ? 32'd0 : (r[63] ? 32'hbf800000 : 32'h3f800000);
    return d2f(r);
  endfunction

  // ---------------- drivers ----------------
  task automatic run_f(op_e op, output int cyc);
    @(negedge clk);
    f_op = op; fs_start = 1'b1;
    @(negedge clk);
    fs_start = 1'b0;
    cyc = 1;
    while (!f_done) begin @(negedge clk); cyc++; end
  endtask

  task automatic run_d(op_e op, output int cyc);
    @(negedge clk);
    d_op = op; ds_start = 1'b1;
    @(negedge clk);
    ds_start = 1'b0;
    cyc = 1;
    while (!d_done) begin @(negedge clk); cyc++; end
  endtask

  task automatic check_f(op_e op, int lat_exp);
    int cyc;
    logic [31:0] e;
    run_f(op, cyc);
    checks++;
    if (cyc != lat_exp) begin
      failures++; $display("FAIL float %s latency %0d expected %0d", op.name(), cyc, lat_exp);
    end
    for (int i = 0; i < NL; i++) begin
      e = f_en[i] ? ref_f(op, fa[i], fb[i]) : 32'd0;
      checks++;
      if (!(fr[i] == e || (f_en[i] && is_nan_f(e) && is_nan_f(fr[i])))) begin
        failures++;
        $display("FAIL float %s lane %0d a=%h b=%h got %h expected %h", op.name(), i, fa[i], fb[i], fr[i], e);
      end
    end
  endtask

  task automatic check_d(op_e op);
    int cyc;
    logic [63:0] e;
    run_d(op, cyc);
    checks++;
    if (cyc != 1) begin failures++; $display("FAIL double %s latency %0d", op.name(), cyc); end
    for (int i = 0; i < NL; i++) begin
      e = d_en[i] ? ref_d(op, da[i], db[i]) : 64'd0;
      checks++;
      if (!(dr[i] == e || (d_en[i] && is_nan_d(e) && is_nan_d(dr[i])))) begin
        failures++;
        $display("FAIL double %s lane %0d a=%h b=%h got %h expected %h", op.name(), i, da[i], db[i], dr[i], e);
      end
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    op_e ops_f[6] = '{OP_MOV, OP_ADD, OP_SUB, OP_MUL, OP_DIV, OP_CMP};
    op_e ops_d[5] = '{OP_MOV, OP_ADD, OP_SUB, OP_MUL, OP_CMP};
    fs_start = 0; ds_start = 0; f_op = OP_ADD; d_op = OP_ADD;
    f_en = '1; d_en = '1; fa = '0; fb = '0; da = '0; db = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    for (int t = 0; t < 12; t++) begin
      foreach (ops_f[k]) begin
        for (int i = 0; i < NL; i++) begin
          fa[i] = rand_f();
          fb[i] = (t % 3 == 0 && i < 4) ? fa[i] : rand_f();   // equal pairs for CMP / cancellation
        end
        f_en = (t == 0) ? '1 : NL'($urandom);
        check_f(ops_f[k], ops_f[k] == OP_DIV ? 29 : 1);
      end
      foreach (ops_d[k]) begin
        for (int i = 0; i < NL; i++) begin
          da[i] = rand_d();
          db[i] = (t % 3 == 0 && i < 4) ? da[i] : rand_d();
        end
        d_en = (t == 0) ? '1 : NL'($urandom);
        check_d(ops_d[k]);
      end
    end

    // directed special cases on the float unit
    f_en = '1;
    fa = '0; fb = '0;
    fa[0] = 32'h3f800000; fb[0] = 32'hbf800000;   //  1 + -1  -> +0
    fa[1] = 32'h7f800000; fb[1] = 32'h3f800000;   //  inf + 1 -> inf
    fa[2] = 32'h7f800000; fb[2] = 32'hff800000;   //  inf - inf -> NaN
    fa[3] = 32'h7fc00000; fb[3] = 32'h3f800000;   //  NaN
    fa[4] = 32'h00000000; fb[4] = 32'h80000000;   //  0 + -0  -> +0
    fa[5] = 32'h3f800000; fb[5] = 32'h00000000;   //  1 / 0
    fa[6] = 32'h7f7fffff; fb[6] = 32'h7f7fffff;   //  overflow
    fa[7] = 32'h3fc00000; fb[7] = 32'h40400000;   //  1.5, 3
    check_f(OP_ADD, 1);
    check_f(OP_MUL, 1);
    check_f(OP_DIV, 29);
    check_f(OP_CMP, 1);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
