// type_regfile: the register file at the head of one TYPELINE process line.
//
// Holds NREGS registers of one datatype (W bits). Three read ports each
// return LANES consecutive registers starting at their index (wrapping
// modulo NREGS): lane 0 is the scalar operand, lanes 1..LANES-1 are used in
// array (vector) mode. Ports A and B feed the line's own TEU; port C feeds
// the type conversion unit when another line takes an operand from here.
// The write port writes up to LANES registers in one cycle, each lane with
// its own index and enable: this is how a cluster of loads, or a vector
// result, lands in a single cycle. we is the line's bit of the 4-bit "load
// control" of the architecture figure.
//
// Timing: reads are combinational; writes take effect at the clock edge.
// If two enabled lanes name the same register, the higher lane wins.
// Reset clears all registers.
//
// From the paper: 32 registers per line, single and array load modes, 1 to
// 16 concurrent elements. This design's own: the three read ports, the
// per-lane write indices and the reset to zero.
module type_regfile #(
  parameter int W     = 32,
  parameter int NREGS = 32,
  parameter int LANES = 16,
  localparam int IW   = $clog2(NREGS)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [IW-1:0]           ra_idx,
  input  logic [IW-1:0]           rb_idx,
  input  logic [IW-1:0]           rc_idx,
  output logic [LANES-1:0][W-1:0] ra_data,
  output logic [LANES-1:0][W-1:0] rb_data,
  output logic [LANES-1:0][W-1:0] rc_data,
  input  logic                    we,
  input  logic [LANES-1:0]        wlane_en,
  input  logic [LANES-1:0][IW-1:0] widx,
  input  logic [LANES-1:0][W-1:0] wdata
);

  logic [W-1:0] regs [NREGS];

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      ra_data[i] = regs[IW'(ra_idx + IW'(i))];
      rb_data[i] = regs[IW'(rb_idx + IW'(i))];
      rc_data[i] = regs[IW'(rc_idx + IW'(i))];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < NREGS; r++) regs[r] <= '0;
    end else if (we) begin
      for (int i = 0; i < LANES; i++)
        if (wlane_en[i]) regs[widx[i]] <= wdata[i];
    end
  end

endmodule
