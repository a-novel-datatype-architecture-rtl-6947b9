// tb_teu_char: self-checking test of the char TEU (TEU 4).
//
// Random 8-bit characters on 16 lanes with random lane enables run through
// every char operation; expected values are computed here. It also checks
// that the operations the char line lacks (MUL, DIV, shifts) produce
// nothing, and that every operation takes one cycle.
module tb_teu_char;
  import typeline_pkg::*;

  localparam int NL = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               start, busy, done;
  op_e                op;
  logic [NL-1:0]      en;
  logic [NL-1:0][7:0] a, b, r;

  teu_char #(.W(8), .NL(NL)) dut (
    .clk, .rst_n, .start, .op, .lane_en(en), .a, .b, .busy, .done, .result(r));

  int checks = 0, failures = 0;

  function automatic logic [7:0] ref_op(op_e o, logic [7:0] x, logic [7:0] y);
    case (o)
      OP_MOV:   return x;
      OP_ADD:   return x + y;
      OP_SUB:   return x - y;
      OP_CMPE:  return 8'(x == y);
      OP_CMPEG: return 8'(x >= y);
      OP_CMPES: return 8'(x <= y);
      OP_CMPS:  return 8'(x < y);
      OP_AND:   return x & y;
      OP_OR:    return x | y;
      OP_XOR:   return x ^ y;
      OP_NOR:   return ~(x | y);
      OP_XNOR:  return ~(x ^ y);
      default:  return 8'd0;
    endcase
  endfunction

  task automatic check(op_e o);
    int cyc;
    logic [7:0] e;
    @(negedge clk);
    op = o; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != 1) begin failures++; $display("FAIL %s latency %0d", o.name(), cyc); end
    for (int i = 0; i < NL; i++) begin
      e = en[i] ? ref_op(o, a[i], b[i]) : 8'd0;
      checks++;
      if (r[i] !== e) begin
        failures++;
        $display("FAIL %s lane %0d a=%h b=%h got %h expected %h", o.name(), i, a[i], b[i], r[i], e);
      end
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    op_e ops[15] = '{OP_MOV, OP_ADD, OP_SUB, OP_CMPE, OP_CMPEG, OP_CMPES, OP_CMPS,
                     OP_AND, OP_OR, OP_XOR, OP_NOR, OP_XNOR, OP_MUL, OP_DIV, OP_SRL};
    start = 0; op = OP_ADD; en = '1; a = '0; b = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 10; t++) begin
      foreach (ops[k]) begin
        for (int i = 0; i < NL; i++) begin
          a[i] = 8'($urandom);
          b[i] = (i < 3) ? a[i] : 8'($urandom);
        end
        en = (t == 0) ? '1 : NL'($urandom);
        check(ops[k]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
