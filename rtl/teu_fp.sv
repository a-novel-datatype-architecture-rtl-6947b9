// teu_fp: floating-point type execution unit. With the default parameters
// it is TEU 2 of the float process line (single precision, with DIV); with
// EW=11, MW=52, HAS_DIV=0 it is TEU 3 of the double process line.
//
// Operations: MOV, ADD, SUB, MUL, DIV (only when HAS_DIV) and CMP, on up to
// LANES elements at once in array mode. CMP is a three-way compare that
// writes, in the line's own format, -1.0 when a < b, +0.0 when a == b
// (+0 and -0 compare equal), +1.0 when a > b, and a quiet NaN when either
// operand is NaN. Each lane has its own adder, multiplier and, when
// HAS_DIV, iterative divider (fp_add, fp_mul, fp_div_iter).
//
// Timing: start is a one-cycle pulse that latches op, lane_en, a and b.
// MOV, ADD, SUB, MUL and CMP finish in one cycle (done pulses on the next
// cycle); DIV takes MW+6 cycles from start to done (29 for float). result holds until the
// next start; disabled lanes read as zero.
//
// From the paper: the float row (LD, ST, MOV, ADD, SUB, MUL, DIV, CMP) and
// the double row (the same without DIV) of the instruction table, and array
// mode of 1..16 elements. This design's own: IEEE-754 formats with
// flush-to-zero and round-to-nearest-even, the three-way CMP result, and
// the latencies.
module teu_fp
  import typeline_pkg::*;
#(
  parameter int EW      = 8,
  parameter int MW      = 23,
  parameter bit HAS_DIV = 1'b1,
  parameter int NL   = 16,
  localparam int W      = 1 + EW + MW
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

  localparam int EMAX = (1 << EW) - 1;
  localparam int BIAS = (1 << (EW - 1)) - 1;
  localparam logic [W-1:0] QNAN  = {1'b0, {EW{1'b1}}, 1'b1, {(MW-1){1'b0}}};
  localparam logic [W-1:0] ONE   = {1'b0, EW'(BIAS), {MW{1'b0}}};
  localparam logic [W-1:0] M_ONE = {1'b1, EW'(BIAS), {MW{1'b0}}};

  logic [NL-1:0][W-1:0] sum, prod, quo, alu_res;
  logic [NL-1:0]        div_done;
  logic [NL-1:0]        lane_q;
  logic                    div_run;

  // Three-way compare with flush-to-zero of subnormals: each operand is
  // mapped to a signed key (the magnitude, negated for a negative sign) so
  // that an ordinary signed compare orders them and +0 equals -0.
  function automatic logic [W-1:0] fcmp(logic [W-1:0] x, logic [W-1:0] z);
    logic [W-2:0]        mx, mz;
    logic signed [W-1:0] kx, kz;
    mx = (x[W-2:MW] == '0) ? '0 : x[W-2:0];
    mz = (z[W-2:MW] == '0) ? '0 : z[W-2:0];
    if ((x[W-2:MW] == EW'(EMAX) && x[MW-1:0] != '0) ||
        (z[W-2:MW] == EW'(EMAX) && z[MW-1:0] != '0))
      return QNAN;
    kx = x[W-1] ? -$signed({1'b0, mx}) : $signed({1'b0, mx});
    kz = z[W-1] ? -$signed({1'b0, mz}) : $signed({1'b0, mz});
    if (kx == kz) return '0;
    if (kx < kz)  return M_ONE;
    return ONE;
  endfunction

  for (genvar i = 0; i < NL; i++) begin : g_lane
    fp_add #(.EW(EW), .MW(MW)) u_add (.a(a[i]), .b(b[i]), .sub(op == OP_SUB), .y(sum[i]));
    fp_mul #(.EW(EW), .MW(MW)) u_mul (.a(a[i]), .b(b[i]), .y(prod[i]));
    if (HAS_DIV) begin : g_div
      logic div_busy;
      fp_div_iter #(.EW(EW), .MW(MW)) u_div (
        .clk, .rst_n,
        .start (start && op == OP_DIV),
        .a     (a[i]),
        .b     (b[i]),
        .busy  (div_busy),
        .done  (div_done[i]),
        .y     (quo[i])
      );
    end else begin : g_nodiv
      assign div_done[i] = 1'b0;
      assign quo[i]      = '0;
    end
  end

  always_comb begin
    for (int i = 0; i < NL; i++) begin
      case (op)
        OP_MOV:          alu_res[i] = a[i];
        OP_ADD, OP_SUB:  alu_res[i] = sum[i];
        OP_MUL:          alu_res[i] = prod[i];
        OP_CMP:          alu_res[i] = fcmp(a[i], b[i]);
        default:         alu_res[i] = '0;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done <= 1'b0; div_run <= 1'b0; lane_q <= '0; result <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        lane_q <= lane_en;
        if (HAS_DIV && op == OP_DIV) begin
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
          result[i] <= lane_q[i] ? quo[i] : '0;
      end
    end
  end

  assign busy = div_run;

endmodule
