// teu_int: TEU 1, the type execution unit of the integer process line.
//
// Executes the integer operations of the TYPELINE instruction set on up to
// LANES elements at once (array mode) or on lane 0 alone (single mode, the
// issue logic then enables lane 0 only): MOV, ADD, SUB, MUL, DIV, the four
// compares CMPE (==), CMPEG (>=), CMPES (<=), CMPS (<), the logic
// operations AND, OR, XOR, NOR, XNOR and the shifts SRA, SRL (shift amount
// from the low bits of operand b). Compares write 1 or 0. Arithmetic wraps
// modulo 2^W and compares are signed, as for C++ int.
//
// Timing: start is a one-cycle pulse that latches op, lane_en, a and b.
// Every operation except DIV finishes in one cycle: done pulses on the next
// cycle with result valid. DIV runs one iterative divider per lane and
// takes W+3 cycles from start to done (35 for W = 32). result holds until the next start;
// disabled lanes read as zero.
//
// From the paper: the operation list (Table 2) and array mode of 1..16
// elements. The paper says division is "skipped" in the TEUs for design
// space, yet lists DIV.in in its instruction table; this unit follows the
// table. The meaning of the compare mnemonics, the signedness and the
// latencies are this design's choices.
module teu_int
  import typeline_pkg::*;
#(
  parameter int W     = 32,
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

  localparam int SW = $clog2(W);

  logic [NL-1:0][W-1:0] alu_res, div_q;
  logic [NL-1:0]        div_done, div_busy;
  logic [NL-1:0]        lane_q;
  logic                    div_run;

  always_comb begin
    for (int i = 0; i < NL; i++) begin
      logic signed [W-1:0] sa, sb;
      sa = a[i];
      sb = b[i];
      case (op)
        OP_MOV:   alu_res[i] = a[i];
        OP_ADD:   alu_res[i] = a[i] + b[i];
        OP_SUB:   alu_res[i] = a[i] - b[i];
        OP_MUL:   alu_res[i] = a[i] * b[i];
        OP_CMPE:  alu_res[i] = W'(sa == sb);
        OP_CMPEG: alu_res[i] = W'(sa >= sb);
        OP_CMPES: alu_res[i] = W'(sa <= sb);
        OP_CMPS:  alu_res[i] = W'(sa < sb);
        OP_AND:   alu_res[i] = a[i] & b[i];
        OP_OR:    alu_res[i] = a[i] | b[i];
        OP_XOR:   alu_res[i] = a[i] ^ b[i];
        OP_NOR:   alu_res[i] = ~(a[i] | b[i]);
        OP_XNOR:  alu_res[i] = ~(a[i] ^ b[i]);
        OP_SRA:   alu_res[i] = W'(sa >>> b[i][SW-1:0]);
        OP_SRL:   alu_res[i] = a[i] >> b[i][SW-1:0];
        default:  alu_res[i] = '0;
      endcase
    end
  end

  for (genvar i = 0; i < NL; i++) begin : g_div
    int_div_iter #(.W(W)) u_div (
      .clk, .rst_n,
      .start (start && op == OP_DIV),
      .a     (a[i]),
      .b     (b[i]),
      .busy  (div_busy[i]),
      .done  (div_done[i]),
      .quot  (div_q[i])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done <= 1'b0; div_run <= 1'b0; lane_q <= '0; result <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        lane_q <= lane_en;
        if (op == OP_DIV) begin
          div_run <= 1'b1;
        end else begin
          done <= 1'b1;
          for (int i = 0; i < NL; i++)
            result[i] <= lane_en[i] ? alu_res[i] : '0;
        end
      end else if (div_run && div_done[0]) begin
        div_run <= 1'b0;
        done    <= 1'b1;
        for (int i = 0; i < NL; i++)
          result[i] <= lane_q[i] ? div_q[i] : '0;
      end
    end
  end

  assign busy = div_run;

endmodule
