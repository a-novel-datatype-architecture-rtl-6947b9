// tb_teu_int: self-checking test of the integer TEU (TEU 1).
//
// Random 32-bit operands on 16 lanes with random lane enables run through
// every integer operation; expected values are computed here with the
// simulator's own signed arithmetic. Directed division cases cover negative
// operands, the most negative number (whose quotient by -1 wraps to
// itself) and division by zero. Latency is
// checked: 1 cycle for every operation, W+3 = 35 cycles for DIV.
module tb_teu_int;
  import typeline_pkg::*;

  localparam int NL = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                start, busy, done;
  op_e                 op;
  logic [NL-1:0]       en;
  logic [NL-1:0][31:0] a, b, r;

  teu_int #(.W(32), .NL(NL)) dut (
    .clk, .rst_n, .start, .op, .lane_en(en), .a, .b, .busy, .done, .result(r));

  int checks = 0, failures = 0;

  function automatic logic [31:0] ref_op(op_e o, logic [31:0] x, logic [31:0] y);
    int sx, sy;
    sx = x; sy = y;
    case (o)
      OP_MOV:   return x;
      OP_ADD:   return x + y;
      OP_SUB:   return x - y;
      OP_MUL:   return x * y;
      OP_DIV:   return (y == 0) ? 32'hffffffff :
                       (x == 32'h80000000 && y == 32'hffffffff) ? x : 32'(sx / sy);
      OP_CMPE:  return 32'(sx == sy);
      OP_CMPEG: return 32'(sx >= sy);
      OP_CMPES: return 32'(sx <= sy);
      OP_CMPS:  return 32'(sx < sy);
      OP_AND:   return x & y;
      OP_OR:    return x | y;
      OP_XOR:   return x ^ y;
      OP_NOR:   return ~(x | y);
      OP_XNOR:  return ~(x ^ y);
      OP_SRA:   return 32'(sx >>> y[4:0]);
      OP_SRL:   return x >> y[4:0];
      default:  return 32'd0;
    endcase
  endfunction

  task automatic check(op_e o);
    int cyc, lat;
    logic [31:0] e;
    @(negedge clk);
    op = o; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    lat = (o == OP_DIV) ? 35 : 1;
    checks++;
    if (cyc != lat) begin failures++; $display("FAIL %s latency %0d expected %0d", o.name(), cyc, lat); end
    for (int i = 0; i < NL; i++) begin
      e = en[i] ? ref_op(o, a[i], b[i]) : 32'd0;
      checks++;
      if (r[i] !== e) begin
        failures++;
        $display("FAIL %s lane %0d a=%h b=%h got %h expected %h", o.name(), i, a[i], b[i], r[i], e);
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
    op_e ops[16] = '{OP_MOV, OP_ADD, OP_SUB, OP_MUL, OP_DIV, OP_CMPE, OP_CMPEG,
                     OP_CMPES, OP_CMPS, OP_AND, OP_OR, OP_XOR, OP_NOR, OP_XNOR,
                     OP_SRA, OP_SRL};
    start = 0; op = OP_ADD; en = '1; a = '0; b = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 8; t++) begin
      foreach (ops[k]) begin
        for (int i = 0; i < NL; i++) begin
          a[i] = $urandom;
          b[i] = (i < 3) ? a[i] : ((t & 1) ? 32'($urandom_range(0, 300)) - 150 : $urandom);
        end
        en = (t == 0) ? '1 : NL'($urandom);
        check(ops[k]);
      end
    end
    // directed divisions
    en = '1;
    for (int i = 0; i < NL; i++) begin a[i] = 32'(i * 37 - 200); b[i] = 32'(i - 5); end
    a[15] = 32'h80000000; b[15] = 32'hffffffff;
    a[14] = 32'h80000000; b[14] = 32'd7;
    check(OP_DIV);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
