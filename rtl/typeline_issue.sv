// typeline_issue: instruction intake, control state and cluster dispatch of
// the TYPELINE unit.
//
// The host processor offers one TYPELINE instruction per cycle (valid/ready).
// This unit
//  * checks it: an operation a line does not support, an instruction for a
//    disabled line, or an operand from another line that the conversion
//    bits do not allow, is handed back to the host on reject_* (the paper's
//    "traditional" process line runs it);
//  * executes the control instructions: VEN/VDS (array mode per line and
//    vector length), PEN/PDS (parallel mode), FTEN/DBEN/CHEN and
//    FTDS/DBDS/CHDS (line enables; the integer line cannot be disabled) and
//    CONV (8 conversion bits);
//  * builds load clusters: in array mode, consecutive immediate loads into
//    the same line (up to LANES) are collected and written into the
//    register file in one cycle;
//  * builds operation clusters: in parallel mode, consecutive TEU
//    operations for different lines (at most one per line, so at most four)
//    are collected and started together; a CONV inside the cluster costs
//    one cycle before the start. Outside parallel mode each TEU operation is
//    a cluster of one. In array mode an operation works on vlen consecutive
//    registers (lanes);
//  * runs LD/ST with a memory address (integer base register + offset) on
//    the data memory port, and OBJ.n/OBJ.r on the object memory manager.
// A cluster is closed, and executed, when the next instruction cannot join
// it or when no instruction is offered. Execution is in order: the next
// instruction is accepted only when the previous cluster has written back.
//
// Timing: a load cluster costs one write cycle. An operation cluster costs
// 1 dispatch cycle, plus 1 if it holds a CONV, plus the longest TEU
// latency; last_cluster_cycles reports the CONV cycle plus that latency.
// Memory: mem_req/mem_we/mem_addr/mem_wdata are held until mem_gnt; a load
// then waits for mem_rvalid with mem_rdata.
//
// From the paper: the control instructions and what they switch, the four
// control bit groups, one-cycle loading of a cluster of loads in array mode,
// the cluster limit of four operations and of 16 loads, parallel clusters
// taking "1 + DIV.ft" cycles when they hold a CONV, and the hand-over of
// unsupported work to a traditional processor. This design's own: the
// instruction record, the join rules (one operation per line; same-line
// operations close the cluster), closing a cluster when the host is idle,
// the reset state (all lines enabled, single mode, parallel mode off,
// conversions off, vector length 16), the memory and host handshakes and
// the counters.
module typeline_issue
  import typeline_pkg::*;
#(
  parameter int NL = LANES
) (
  input  logic                               clk,
  input  logic                               rst_n,
  // host side
  input  logic                               instr_valid,
  input  instr_t                             instr,
  output logic                               instr_ready,
  output logic                               reject_valid,
  output instr_t                             reject_instr,
  // control state
  output logic [NLINES-1:0]                  vec_mode,
  output logic [NLINES-1:0]                  line_en,
  output logic                               par_mode,
  output logic [7:0]                         conv,
  output logic [4:0]                         vlen,
  // register file read indices and the data this unit needs
  output logic [NLINES-1:0][4:0]             ra_idx,
  output logic [NLINES-1:0][4:0]             rb_idx,
  output logic [NLINES-1:0][4:0]             rc_idx,
  input  logic [INT_W-1:0]                   int_ra0,
  input  logic [NLINES-1:0][DP_W-1:0]        rb0,
  // register file writes
  output logic [NLINES-1:0]                  rf_we,
  output logic [NLINES-1:0][NL-1:0]          rf_wlane,
  output logic [NLINES-1:0][NL-1:0][4:0]     rf_widx,
  output logic [NLINES-1:0]                  rf_wsel_teu,
  output logic [NL-1:0][DP_W-1:0]            rf_wdata,
  // type conversion unit
  output logic                               ft_foreign,
  output line_e                              ft_src,
  output logic                               db_foreign,
  output line_e                              db_src,
  // TEUs
  output logic [NLINES-1:0]                  teu_start,
  output op_e  [NLINES-1:0]                  teu_op,
  output logic [NLINES-1:0][NL-1:0]          teu_lane_en,
  output logic [NLINES-1:0]                  teu_use_imm,
  output logic [NLINES-1:0][DP_W-1:0]        teu_imm,
  input  logic [NLINES-1:0]                  teu_done,
  // data memory port (word addressed)
  output logic                               mem_req,
  output logic                               mem_we,
  output logic [31:0]                        mem_addr,
  output logic [DP_W-1:0]                    mem_wdata,
  input  logic                               mem_gnt,
  input  logic                               mem_rvalid,
  input  logic [DP_W-1:0]                    mem_rdata,
  // object memory manager
  output logic                               obj_alloc,
  input  logic [31:0]                        obj_handle,
  input  logic                               obj_full,
  output logic                               obj_release,
  output logic [31:0]                        obj_release_handle,
  // status
  output logic                               busy,
  output logic [7:0]                         last_cluster_cycles,
  output perf_t                              perf
);

  typedef enum logic [2:0] {
    S_ACCEPT, S_FLUSH, S_CONV, S_START, S_WAIT, S_MEM, S_MEMW
  } state_e;

  state_e                  state;
  // load cluster buffer
  logic [4:0]              lb_count;
  line_e                   lb_line;
  logic [NL-1:0][4:0]      lb_idx;
  logic [NL-1:0][DP_W-1:0] lb_data;
  // operation cluster
  logic [NLINES-1:0]       slot_v;
  instr_t [NLINES-1:0]     slot;
  logic                    has_conv;
  logic [NLINES-1:0]       pending;
  logic [7:0]              cl_cycles;
  // memory instruction in flight
  instr_t                  cur;
  // enables of the float, double and char lines (the integer line is
  // always enabled)
  logic [NLINES-1:1]       en_q;

  assign line_en = {en_q, 1'b1};

  // ------------------------------------------------------------------
  // lanes of a line: vlen lanes in array mode, lane 0 otherwise
  function automatic logic [NL-1:0] lane_mask(logic vec, logic [4:0] n);
    logic [NL-1:0] m;
    m = '0;
    for (int i = 0; i < NL; i++) m[i] = vec ? (5'(i) < n) : (i == 0);
    return m;
  endfunction

  // ------------------------------------------------------------------
  // decode of the offered instruction
  logic legal, foreign, teu_op_in, cl_empty, join_lb, join_cl;
  logic [NLINES-1:0] cport_used;

  always_comb begin
    teu_op_in = is_teu_op(instr.op);
    foreign   = teu_op_in && (instr.ra_line != instr.line);
    legal     = op_supported(instr.op, instr.line);
    if (!is_ctrl(instr.op) && instr.op != OP_OBJN && instr.op != OP_OBJR &&
        !line_en[instr.line])
      legal = 1'b0;
    if (teu_op_in && !conv_allowed(conv, instr.ra_line, instr.line))
      legal = 1'b0;

    cport_used = '0;
    for (int l = 0; l < NLINES; l++)
      if (slot_v[l] && slot[l].ra_line != line_e'(l))
        cport_used[slot[l].ra_line] = 1'b1;
    cl_empty = (slot_v == '0) && !has_conv;

    join_lb = (lb_count != '0) && legal && instr.op == OP_LD && !instr.mem &&
              instr.line == lb_line && vec_mode[instr.line] &&
              lb_count < 5'(NL);
    join_cl = par_mode &&
              ((instr.op == OP_CONV) ||
               (legal && teu_op_in && !slot_v[instr.line] &&
                !(foreign && cport_used[instr.ra_line])));
  end

  logic accept_now;
  always_comb begin
    accept_now = 1'b0;
    if (state == S_ACCEPT && instr_valid) begin
      if (lb_count != '0 && !join_lb)  accept_now = 1'b0;
      else if (!cl_empty && !join_cl)  accept_now = 1'b0;
      else                             accept_now = 1'b1;
    end
  end
  assign instr_ready = accept_now;

  // ------------------------------------------------------------------
  // register file and TEU control
  always_comb begin
    for (int l = 0; l < NLINES; l++) begin
      ra_idx[l]      = slot[l].ra;
      rb_idx[l]      = slot[l].rb;
      rc_idx[l]      = '0;
      teu_op[l]      = slot[l].op;
      teu_use_imm[l] = slot[l].use_imm;
      teu_imm[l]     = slot[l].imm;
      teu_lane_en[l] = lane_mask(vec_mode[l], vlen);
      teu_start[l]   = (state == S_START) && slot_v[l];
    end
    for (int l = 0; l < NLINES; l++)
      if (slot_v[l] && slot[l].ra_line != line_e'(l))
        rc_idx[slot[l].ra_line] = slot[l].ra;
    if (state == S_ACCEPT && instr.op == OP_OBJR)
      ra_idx[L_INT] = instr.ra;
    if (state == S_MEM || state == S_MEMW) begin
      ra_idx[L_INT]    = cur.ra;
      rb_idx[cur.line] = cur.rd;
    end

    ft_foreign = slot_v[L_FT] && slot[L_FT].ra_line != L_FT;
    ft_src     = slot[L_FT].ra_line;
    db_foreign = slot_v[L_DB] && slot[L_DB].ra_line != L_DB;
    db_src     = slot[L_DB].ra_line;
  end

  // register file writes
  always_comb begin
    rf_we       = '0;
    rf_wsel_teu = '0;
    rf_wlane    = '0;
    rf_wdata    = lb_data;
    for (int l = 0; l < NLINES; l++)
      for (int i = 0; i < NL; i++) rf_widx[l][i] = 5'(slot[l].rd + 5'(i));

    obj_alloc          = 1'b0;
    obj_release        = 1'b0;
    obj_release_handle = int_ra0;

    case (state)
      S_ACCEPT: if (accept_now && legal) begin
        if (instr.op == OP_LD && !instr.mem && !vec_mode[instr.line]) begin
          rf_we[instr.line]       = 1'b1;
          rf_wlane[instr.line][0] = 1'b1;
          rf_widx[instr.line][0]  = instr.rd;
          rf_wdata[0]             = instr.imm;
        end else if (instr.op == OP_OBJN) begin
          obj_alloc          = 1'b1;
          rf_we[L_INT]       = 1'b1;
          rf_wlane[L_INT][0] = 1'b1;
          rf_widx[L_INT][0]  = instr.rd;
          rf_wdata[0]        = DP_W'(obj_handle);
        end else if (instr.op == OP_OBJR) begin
          obj_release = 1'b1;
        end
      end
      S_FLUSH: begin
        rf_we[lb_line]   = 1'b1;
        rf_wlane[lb_line] = lane_mask(1'b1, lb_count);
        rf_widx[lb_line] = lb_idx;
      end
      S_WAIT: begin
        for (int l = 0; l < NLINES; l++)
          if (pending[l] && teu_done[l]) begin
            rf_we[l]       = 1'b1;
            rf_wsel_teu[l] = 1'b1;
            rf_wlane[l]    = lane_mask(vec_mode[l], vlen);
          end
      end
      S_MEMW: if (mem_rvalid && cur.op == OP_LD) begin
        rf_we[cur.line]       = 1'b1;
        rf_wlane[cur.line][0] = 1'b1;
        rf_widx[cur.line][0]  = cur.rd;
        rf_wdata[0]           = mem_rdata;
      end
      default: ;
    endcase
  end

  // memory port
  always_comb begin
    mem_req   = (state == S_MEM);
    mem_we    = (cur.op == OP_ST);
    mem_addr  = int_ra0 + cur.imm[31:0];
    mem_wdata = rb0[cur.line];
  end

  assign reject_valid = accept_now && !legal;
  assign reject_instr = instr;
  assign busy = (state != S_ACCEPT) || (lb_count != '0) || !cl_empty;

  // ------------------------------------------------------------------
  // sequential part
  logic [3:0] mask_in;
  assign mask_in = (instr.imm[3:0] == '0) ? 4'hF : instr.imm[3:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_ACCEPT;
      vec_mode <= '0; en_q <= '1; par_mode <= 1'b0; conv <= '0;
      vlen <= 5'(NL);
      lb_count <= '0; lb_line <= L_INT; lb_idx <= '0; lb_data <= '0;
      slot_v <= '0; slot <= '0; has_conv <= 1'b0; pending <= '0;
      cl_cycles <= '0; last_cluster_cycles <= '0;
      cur <= '0;
      perf <= '0;
    end else begin
      if (instr_valid && !accept_now) perf.issue_stalls <= perf.issue_stalls + 1;
      case (state)
        S_ACCEPT: begin
          if (instr_valid && !accept_now) begin
            // close the open cluster first
            if (lb_count != '0) state <= S_FLUSH;
            else                state <= has_conv ? S_CONV : S_START;
            cl_cycles <= '0;
          end else if (!instr_valid) begin
            if (lb_count != '0) state <= S_FLUSH;
            else if (!cl_empty) begin
              state     <= has_conv ? S_CONV : S_START;
              cl_cycles <= '0;
            end
          end else begin
            perf.instrs <= perf.instrs + 1;
            if (!legal) begin
              perf.rejects <= perf.rejects + 1;
            end else begin
              case (instr.op)
                OP_LD: if (instr.mem) begin
                  cur   <= instr;
                  state <= S_MEM;
                end else if (vec_mode[instr.line]) begin
                  lb_line           <= instr.line;
                  lb_idx[lb_count]  <= instr.rd;
                  lb_data[lb_count] <= instr.imm;
                  lb_count          <= lb_count + 1'b1;
                end
                OP_ST: begin
                  cur   <= instr;
                  state <= S_MEM;
                end
                OP_CONV: begin
                  conv <= instr.imm[7:0];
                  if (par_mode) has_conv <= 1'b1;
                end
                OP_VEN: begin
                  vec_mode <= vec_mode | mask_in;
                  vlen     <= (instr.imm[8:4] == '0 || instr.imm[8:4] > 5'(NL))
                              ? 5'(NL) : instr.imm[8:4];
                end
                OP_VDS:  vec_mode <= vec_mode & ~mask_in;
                OP_PEN:  par_mode <= 1'b1;
                OP_PDS:  par_mode <= 1'b0;
                OP_FTEN: en_q[L_FT] <= 1'b1;
                OP_DBEN: en_q[L_DB] <= 1'b1;
                OP_CHEN: en_q[L_CH] <= 1'b1;
                OP_FTDS: en_q[L_FT] <= 1'b0;
                OP_DBDS: en_q[L_DB] <= 1'b0;
                OP_CHDS: en_q[L_CH] <= 1'b0;
                OP_OBJN: begin
                  if (obj_full) perf.obj_fails  <= perf.obj_fails + 1;
                  else          perf.obj_allocs <= perf.obj_allocs + 1;
                end
                OP_OBJR: perf.obj_releases <= perf.obj_releases + 1;
                default: begin
                  // a TEU operation
                  slot_v[instr.line] <= 1'b1;
                  slot[instr.line]   <= instr;
                  if (!par_mode) begin
                    state     <= S_START;
                    cl_cycles <= '0;
                  end
                end
              endcase
            end
          end
        end

        S_FLUSH: begin
          perf.load_clusters <= perf.load_clusters + 1;
          if (lb_count > 5'd1)
            perf.merged_loads <= perf.merged_loads + 32'(lb_count);
          lb_count <= '0;
          state    <= S_ACCEPT;
        end

        S_CONV: begin
          perf.conv_cycles <= perf.conv_cycles + 1;
          cl_cycles <= cl_cycles + 1'b1;
          state     <= S_START;
        end

        S_START: begin
          pending <= slot_v;
          if (slot_v == '0) begin
            // a cluster that only held a CONV
            has_conv            <= 1'b0;
            last_cluster_cycles <= cl_cycles;
            state               <= S_ACCEPT;
          end else begin
            perf.op_clusters <= perf.op_clusters + 1;
            if ($countones(slot_v) > 1) perf.par_clusters <= perf.par_clusters + 1;
            if ((slot_v & vec_mode) != '0 && vlen > 5'd1)
              perf.vector_ops <= perf.vector_ops + 32'($countones(slot_v & vec_mode));
            state <= S_WAIT;
          end
        end

        S_WAIT: begin
          cl_cycles <= cl_cycles + 1'b1;
          pending   <= pending & ~teu_done;
          if ((pending & ~teu_done) == '0) begin
            slot_v              <= '0;
            has_conv            <= 1'b0;
            last_cluster_cycles <= cl_cycles + 1'b1;
            state               <= S_ACCEPT;
          end
        end

        S_MEM: begin
          if (mem_gnt) begin
            perf.mem_ops <= perf.mem_ops + 1;
            state <= (cur.op == OP_LD) ? S_MEMW : S_ACCEPT;
          end else begin
            perf.mem_stalls <= perf.mem_stalls + 1;
          end
        end

        S_MEMW: if (mem_rvalid) state <= S_ACCEPT;

        default: state <= S_ACCEPT;
      endcase
    end
  end

  // ------------------------------------------------------------------
  // handshake rules
  a_instr_stable: assert property (@(posedge clk) disable iff (!rst_n)
    instr_valid && !instr_ready |=> instr_valid && $stable(instr))
    else $error("host changed an offered instruction before it was accepted");
  a_mem_hold: assert property (@(posedge clk) disable iff (!rst_n)
    mem_req && !mem_gnt |=> mem_req && $stable(mem_addr) && $stable(mem_we))
    else $error("memory request dropped before grant");
  a_no_illegal_conv: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_START) |-> !(ft_foreign && !conv_allowed(conv, ft_src, L_FT)) &&
                           !(db_foreign && !conv_allowed(conv, db_src, L_DB)))
    else $error("cluster dispatched with a conversion the control bits forbid");

endmodule
