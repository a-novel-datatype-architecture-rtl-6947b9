// int_div_iter: iterative signed integer divider used by the integer TEU.
//
// Restoring division, one quotient bit per cycle: start latches the
// operands, done pulses W+2 clock edges later with the quotient, which holds
// until the next start. Signed operands, quotient truncated toward zero as
// in C++. Division by zero gives an all-ones quotient, a choice of this
// design (the paper does not say).
module int_div_iter #(
  parameter int W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] quot
);

  localparam int CW = $clog2(W + 1);

  logic [W-1:0]  ua, ub, q, r;
  logic          neg_q, dz;
  logic [CW-1:0] cnt;
  logic [W:0]    trial;

  assign trial = {r[W-2:0], ua[W-1]} - {1'b0, ub};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; cnt <= '0;
      ua <= '0; ub <= '0; q <= '0; r <= '0;
      neg_q <= 1'b0; dz <= 1'b0;
      quot <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        ua    <= a[W-1] ? -a : a;
        ub    <= b[W-1] ? -b : b;
        neg_q <= a[W-1] ^ b[W-1];
        dz    <= (b == '0);
        q     <= '0;
        r     <= '0;
        cnt   <= CW'(W);
        busy  <= 1'b1;
      end else if (busy) begin
        if (cnt != '0) begin
          // shift the next dividend bit into the partial remainder
          if (!trial[W]) begin
            r <= trial[W-1:0];
            q <= {q[W-2:0], 1'b1};
          end else begin
            r <= {r[W-2:0], ua[W-1]};
            q <= {q[W-2:0], 1'b0};
          end
          ua  <= {ua[W-2:0], 1'b0};
          cnt <= cnt - 1'b1;
        end else begin
          busy <= 1'b0;
          done <= 1'b1;
          quot <= dz ? '1 : (neg_q ? -q : q);
        end
      end
    end
  end

endmodule
