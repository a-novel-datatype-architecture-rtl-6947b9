// fp_div_iter: iterative IEEE-754 style divider for the float TEU.
//
// Divides the significands by restoring division, one quotient bit per
// cycle, MW+3 bits in all (integer bit, MW fraction bits, guard and one
// spare for the case a < b), then normalises and rounds to nearest, ties
// to even, with the remainder as sticky bit. Subnormals are flushed to
// zero; NaN, 0/0 and inf/inf give the canonical quiet NaN, x/0 gives a
// signed infinity.
//
// Timing: start latches a and b; done pulses MW+5 clock edges later with
// y valid; y holds until the next start.
//
// The paper gives DIV.ft and, in its worked example, lets a float division
// outlast an integer addition; the algorithm and latency are this design's.
module fp_div_iter #(
  parameter int EW = 8,
  parameter int MW = 23,
  localparam int W = 1 + EW + MW
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] y
);

  localparam int QB   = MW + 3;
  localparam int CW   = $clog2(QB + 1);
  localparam int EMAX = (1 << EW) - 1;
  localparam int BIAS = (1 << (EW - 1)) - 1;

  logic [MW+1:0]        r;
  logic [MW:0]          mb;
  logic [QB-1:0]        q;
  logic [CW-1:0]        cnt;
  logic                 s, special;
  logic [W-1:0]         special_y;
  logic signed [EW+2:0] e0;

  // unpacking and special cases, evaluated on the start cycle
  logic [EW-1:0] ea, eb;
  logic a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;
  always_comb begin
    ea = a[W-2:MW];
    eb = b[W-2:MW];
    a_zero = (ea == '0);
    b_zero = (eb == '0);
    a_nan  = (ea == EW'(EMAX)) && (a[MW-1:0] != '0);
    b_nan  = (eb == EW'(EMAX)) && (b[MW-1:0] != '0);
    a_inf  = (ea == EW'(EMAX)) && (a[MW-1:0] == '0);
    b_inf  = (eb == EW'(EMAX)) && (b[MW-1:0] == '0);
  end

  // normalise and round the finished quotient
  logic                 g, st, rnd;
  logic [MW:0]          m;
  logic [MW+1:0]        mr;
  logic signed [EW+2:0] e;
  logic [W-1:0]         y_n;
  always_comb begin
    e = e0;
    if (q[QB-1]) begin
      m  = q[QB-1:2];
      g  = q[1];
      st = q[0] | (r != '0);
    end else begin
      m  = q[QB-2:1];
      g  = q[0];
      st = (r != '0);
      e  = e - 1;
    end
    rnd = g & (st | m[0]);
    mr  = {1'b0, m} + (MW+2)'(rnd);
    if (mr[MW+1]) e = e + 1;
    if (special)
      y_n = special_y;
    else if (e >= (EW+3)'(EMAX))
      y_n = {s, {EW{1'b1}}, {MW{1'b0}}};
    else if (e <= 0)
      y_n = {s, {(W-1){1'b0}}};
    else
      y_n = {s, e[EW-1:0], mr[MW-1:0]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r <= '0; mb <= '0; q <= '0; cnt <= '0; s <= 1'b0; e0 <= '0;
      special <= 1'b0; special_y <= '0; busy <= 1'b0; done <= 1'b0; y <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        r    <= {1'b0, 1'b1, a[MW-1:0]};
        mb   <= {1'b1, b[MW-1:0]};
        q    <= '0;
        cnt  <= CW'(QB);
        s    <= a[W-1] ^ b[W-1];
        e0   <= $signed({3'b000, ea}) - $signed({3'b000, eb}) + (EW+3)'(BIAS);
        busy <= 1'b1;
        special <= a_nan || b_nan || a_zero || b_zero || a_inf || b_inf;
        if (a_nan || b_nan || (a_zero && b_zero) || (a_inf && b_inf))
          special_y <= {1'b0, {EW{1'b1}}, 1'b1, {(MW-1){1'b0}}};
        else if (a_inf || b_zero)
          special_y <= {a[W-1] ^ b[W-1], {EW{1'b1}}, {MW{1'b0}}};
        else
          special_y <= {a[W-1] ^ b[W-1], {(W-1){1'b0}}};
      end else if (busy) begin
        if (cnt != '0) begin
          if (r >= {1'b0, mb}) begin
            q <= {q[QB-2:0], 1'b1};
            r <= (r - {1'b0, mb}) << 1;
          end else begin
            q <= {q[QB-2:0], 1'b0};
            r <= r << 1;
          end
          cnt <= cnt - 1'b1;
        end else begin
          busy <= 1'b0;
          done <= 1'b1;
          y    <= y_n;
        end
      end
    end
  end

endmodule
