// teu_char: TEU 4, the type execution unit of the char process line.
//
// Supports only what the paper gives this line: MOV, ADD and SUB, the four
// compares CMPE (==), CMPEG (>=), CMPES (<=), CMPS (<) and the logic
// operations AND, OR, XOR, NOR, XNOR, on W-bit characters, on up to NL
// characters at once in array mode. Compares write 1 or 0 and treat
// characters as unsigned; sums wrap modulo 2^W.
//
// Timing: start is a one-cycle pulse that latches the operands; done
// pulses on the next cycle with result valid, and result holds until the
// next start. Disabled lanes read as zero.
//
// From the paper: the reduced operation set ("only sum, subtraction and
// logical operation", plus the compares of the char row of the instruction
// table). This design's own: unsigned compares, one-cycle latency.
module teu_char
  import typeline_pkg::*;
#(
  parameter int W     = 8,
  parameter int NL = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  op_e                     op,
  input  logic [NL-1:0]        lane_en,
  input  logic [NL-1:0][W-1:0] a,
  input  logic [NL-1:0][W-1:0] b,
  output logic                    busy,
  output logic                    done,
  output logic [NL-1:0][W-1:0] result
);

  logic [NL-1:0][W-1:0] alu_res;

  always_comb begin
    for (int i = 0; i < NL; i++) begin
      case (op)
        OP_MOV:   alu_res[i] = a[i];
        OP_ADD:   alu_res[i] = a[i] + b[i];
        OP_SUB:   alu_res[i] = a[i] - b[i];
        OP_CMPE:  alu_res[i] = W'(a[i] == b[i]);
        OP_CMPEG: alu_res[i] = W'(a[i] >= b[i]);
        OP_CMPES: alu_res[i] = W'(a[i] <= b[i]);
        OP_CMPS:  alu_res[i] = W'(a[i] < b[i]);
        OP_AND:   alu_res[i] = a[i] & b[i];
        OP_OR:    alu_res[i] = a[i] | b[i];
        OP_XOR:   alu_res[i] = a[i] ^ b[i];
        OP_NOR:   alu_res[i] = ~(a[i] | b[i]);
        OP_XNOR:  alu_res[i] = ~(a[i] ^ b[i]);
        default:  alu_res[i] = '0;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done <= 1'b0; result <= '0;
    end else begin
      done <= start;
      if (start)
        for (int i = 0; i < NL; i++)
          result[i] <= lane_en[i] ? alu_res[i] : '0;
    end
  end

  assign busy = 1'b0;

endmodule
