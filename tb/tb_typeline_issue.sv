// tb_typeline_issue: self-checking test of the issue and control unit on
// its own, with behavioural TEUs that finish after a set latency.
//
// Checks: control instructions set the state (array mode and vector length,
// parallel mode, line enables, conversion bits); unsupported, disabled-line
// and forbidden-conversion instructions are rejected; four array-mode loads
// become one register-file write with four lanes and their indices; in
// parallel mode, operations for different lines start in the same cycle
// and a CONV adds one cycle; a second operation for a line already in the
// cluster starts a new cluster; a memory store holds its request until
// granted; OBJ.n writes the handle into the integer file.
module tb_typeline_issue;
  import typeline_pkg::*;

  localparam int NL = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                          instr_valid, instr_ready, reject_valid;
  instr_t                        instr, reject_instr;
  logic [3:0]                    vec_mode, line_en;
  logic                          par_mode;
  logic [7:0]                    conv, last_cc;
  logic [4:0]                    vlen;
  logic [3:0][4:0]               ra_idx, rb_idx, rc_idx;
  logic [31:0]                   int_ra0;
  logic [3:0][63:0]              rb0;
  logic [3:0]                    rf_we, rf_wsel_teu;
  logic [3:0][NL-1:0]            rf_wlane;
  logic [3:0][NL-1:0][4:0]       rf_widx;
  logic [NL-1:0][63:0]           rf_wdata;
  logic                          ft_foreign, db_foreign;
  line_e                         ft_src, db_src;
  logic [3:0]                    teu_start, teu_use_imm, teu_done;
  op_e  [3:0]                    teu_op;
  logic [3:0][NL-1:0]            teu_lane_en;
  logic [3:0][63:0]              teu_imm;
  logic                          mem_req, mem_we, mem_gnt, mem_rvalid;
  logic [31:0]                   mem_addr;
  logic [63:0]                   mem_wdata, mem_rdata;
  logic                          obj_alloc, obj_full, obj_release;
  logic [31:0]                   obj_handle, obj_release_handle;
  logic                          busy;
  perf_t                         perf;

  typeline_issue #(.NL(NL)) dut (.*, .last_cluster_cycles(last_cc));

  // behavioural TEUs: DIV finishes 10 cycles after its start, everything
  // else 1 cycle after (done visible after the edge that ends the latency)
  int remaining [4];
  always @(posedge clk)
    for (int l = 0; l < 4; l++) begin
      if (teu_start[l]) begin
        remaining[l] = (teu_op[l] == OP_DIV) ? 10 : 1;
        teu_done[l] <= (remaining[l] == 1);
      end else if (remaining[l] > 1) begin
        remaining[l]--;
        teu_done[l] <= (remaining[l] == 1);
      end else begin
        remaining[l] = 0;
        teu_done[l] <= 1'b0;
      end
    end

  // event log
  int start_cycle [4];
  int cyc = 0;
  always @(posedge clk) begin
    cyc++;
    for (int l = 0; l < 4; l++) if (teu_start[l]) start_cycle[l] = cyc;
  end

  int checks = 0, failures = 0, rejects = 0, flush_lanes = -1;
  logic [NL-1:0][4:0] flush_idx;
  always @(posedge clk)
    if (rf_we[L_INT] && !rf_wsel_teu[L_INT] && $countones(rf_wlane[L_INT]) > 1) begin
      flush_lanes = $countones(rf_wlane[L_INT]);
      flush_idx   = rf_widx[L_INT];
    end

  function automatic instr_t mk(op_e op, line_e l, int rd = 0, int ra = 0, int rb = 0,
                                line_e ra_l = l, logic [63:0] imm = 0, bit m = 0);
    instr_t i;
    i = '0;
    i.op = op; i.line = l; i.rd = 5'(rd); i.ra = 5'(ra); i.rb = 5'(rb);
    i.ra_line = ra_l; i.imm = imm; i.mem = m;
    return i;
  endfunction

  task automatic send(instr_t i);
    @(negedge clk);
    instr_valid = 1'b1;
    instr = i;
    #1;
    while (!instr_ready) begin @(negedge clk); #1; end
    if (reject_valid) rejects++;
  endtask

  task automatic drain();
    @(negedge clk);
    instr_valid = 1'b0;
    #1;
    while (busy) begin @(negedge clk); #1; end
  endtask

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) mem_gnt <= mem_req && !mem_gnt && ($urandom_range(0, 1) == 1);

  initial begin
    instr_valid = 0; instr = '0; int_ra0 = 32'd40; rb0 = '0; rb0[L_CH] = 64'h41;
    mem_gnt = 0; teu_done = '0; mem_rvalid = 0; mem_rdata = '0;
    obj_handle = 32'h1230; obj_full = 0;
    for (int l = 0; l < 4; l++) remaining[l] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    chk("reset: lines enabled", line_en, 4'hF);
    chk("reset: single mode", vec_mode, 0);

    // control state
    send(mk(OP_VEN, L_INT, .imm({55'd0, 5'd6, 4'b0101})));
    send(mk(OP_CHDS, L_INT));
    send(mk(OP_CONV, L_INT, .imm(8'h80)));
    drain();
    chk("VEN mask", vec_mode, 4'b0101);
    chk("VEN length", vlen, 6);
    chk("CHDS", line_en, 4'b0111);
    chk("CONV", conv, 8'h80);
    chk("lane mask of a vector line", teu_lane_en[L_INT], 16'h003F);
    chk("lane mask of a scalar line", teu_lane_en[L_FT], 16'h0001);

    // rejections
    send(mk(OP_ADD, L_CH, 1, 2, 3));          // char line disabled
    send(mk(OP_SRA, L_FT, 1, 2, 3));          // float has no shifts
    send(mk(OP_ADD, L_DB, 1, 2, 3, L_INT));   // int->double not enabled
    send(mk(OP_ADD, L_INT, 1, 2, 3, L_FT));   // nothing converts into int
    drain();
    chk("rejects", rejects, 4);

    // load cluster: four loads, one write of four lanes
    send(mk(OP_LD, L_INT, 7, .imm(1)));
    send(mk(OP_LD, L_INT, 3, .imm(2)));
    send(mk(OP_LD, L_INT, 9, .imm(3)));
    send(mk(OP_LD, L_INT, 4, .imm(4)));
    drain();
    chk("cluster write lanes", flush_lanes, 4);
    chk("cluster idx 0", flush_idx[0], 7);
    chk("cluster idx 1", flush_idx[1], 3);
    chk("cluster idx 2", flush_idx[2], 9);
    chk("cluster idx 3", flush_idx[3], 4);
    send(mk(OP_VDS, L_INT));

    // parallel cluster: ADD.in, CONV, DIV.ft from an int register
    send(mk(OP_PEN, L_INT));
    send(mk(OP_ADD, L_INT, 2, 1, 0));
    send(mk(OP_CONV, L_INT, .imm(8'h80)));
    send(mk(OP_DIV, L_FT, 0, 3, 0, L_INT));
    send(mk(OP_PDS, L_INT));
    drain();
    chk("same start cycle", start_cycle[L_INT], start_cycle[L_FT]);
    chk("cluster cycles = 1 + 10", last_cc, 11);
    chk("par_clusters", perf.par_clusters, 1);

    // two operations for one line: two clusters
    send(mk(OP_PEN, L_INT));
    send(mk(OP_ADD, L_INT, 2, 1, 0));
    send(mk(OP_SUB, L_INT, 3, 1, 0));
    send(mk(OP_PDS, L_INT));
    drain();
    chk("op_clusters", perf.op_clusters, 3);

    // store with a slow grant, OBJ.n
    send(mk(OP_CHEN, L_INT));
    send(mk(OP_ST, L_CH, 5, 2, .imm(7), .m(1)));
    drain();
    chk("store reached memory", perf.mem_ops, 1);
    chk("store stalled", perf.mem_stalls > 0, 1);
    send(mk(OP_OBJN, L_INT, 6));
    drain();
    chk("OBJ.n counted", perf.obj_allocs, 1);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // store request checks
  always @(posedge clk) if (mem_req && mem_gnt) begin
    checks++;
    if (!(mem_we && mem_addr == 32'd47 && mem_wdata == 64'h41)) begin
      failures++; $display("FAIL store request addr=%0d data=%h", mem_addr, mem_wdata);
    end
  end
  // OBJ.n writes the handle into integer register 6
  always @(posedge clk) if (obj_alloc) begin
    checks++;
    if (!(rf_we[L_INT] && rf_wlane[L_INT][0] && rf_widx[L_INT][0] == 5'd6 &&
          rf_wdata[0] == 64'h1230)) begin
      failures++; $display("FAIL OBJ.n write");
    end
  end
endmodule
