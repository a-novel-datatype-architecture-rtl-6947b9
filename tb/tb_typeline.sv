// tb_typeline: end-to-end test of the TYPELINE unit at its default sizes.
//
// A host model sends instruction sequences back to back; a behavioural data
// memory grants requests after random delays. The sequences are:
//  1. the worked example of the architecture: a load cluster of four
//     integer loads written in one cycle, then a parallel cluster holding
//     ADD.in, CONV 80H and DIV.ft reading an integer register, which must
//     take 1 + (latency of DIV.ft) cycles;
//  2. array-mode arithmetic on 8 lanes of the integer and char lines;
//  3. a parallel cluster using all four lines, and one broken in two by a
//     second operation for the same line;
//  4. conversions int->double and float->double, and one the control bits
//     forbid;
//  5. instructions handed back to the host: unsupported operations and a
//     disabled line;
//  6. LD/ST through the memory port, with stalls;
//  7. OBJ.n until the heap is full, OBJ.r.
// Results are checked in the register files and in memory against values
// computed here. Each mechanism's counter must be non-zero at the end.
module tb_typeline;
  import typeline_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              instr_valid, instr_ready, reject_valid;
  instr_t            instr, reject_instr;
  logic              mem_req, mem_we, mem_gnt, mem_rvalid;
  logic [31:0]       mem_addr;
  logic [63:0]       mem_wdata, mem_rdata;
  logic              busy, par_mode, obj_full, obj_bad_release;
  logic [3:0]        vec_mode, line_en;
  logic [4:0]        vlen;
  logic [7:0]        conv, last_cc;
  logic [6:0]        obj_in_use;
  perf_t             perf;

  typeline dut (
    .clk, .rst_n, .instr_valid, .instr, .instr_ready, .reject_valid, .reject_instr,
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_gnt, .mem_rvalid, .mem_rdata,
    .busy, .vlen, .vec_mode, .line_en, .par_mode, .conv, .last_cluster_cycles(last_cc),
    .obj_full, .obj_bad_release, .obj_in_use, .perf);

  // ---------------- behavioural data memory ----------------
  logic [63:0] mem [logic [31:0]];
  always @(posedge clk) begin
    mem_gnt    <= ($urandom_range(0, 2) != 0);
    mem_rvalid <= 1'b0;
    if (mem_req && mem_gnt) begin
      if (mem_we) mem[mem_addr] = mem_wdata;
      else begin
        mem_rvalid <= 1'b1;
        mem_rdata  <= mem.exists(mem_addr) ? mem[mem_addr] : 64'd0;
      end
    end
  end

  int checks = 0, failures = 0, rejects_seen = 0;

  // ---------------- host model ----------------
  function automatic instr_t mk(op_e op, line_e l, int rd = 0, int ra = 0, int rb = 0,
                                line_e ra_l = l, bit use_imm = 0, bit m = 0, logic [63:0] imm = 0);
    instr_t i;
    i.op = op; i.line = l; i.rd = 5'(rd); i.ra = 5'(ra); i.rb = 5'(rb);
    i.ra_line = ra_l; i.use_imm = use_imm; i.mem = m; i.imm = imm;
    return i;
  endfunction

  task automatic send(instr_t i);
    @(negedge clk);
    instr_valid = 1'b1;
    instr = i;
    #1;
    while (!instr_ready) begin @(negedge clk); #1; end
    if (reject_valid) rejects_seen++;
  endtask

  task automatic drain();
    @(negedge clk);
    instr_valid = 1'b0;
    #1;
    while (busy) begin @(negedge clk); #1; end
  endtask

  task automatic chk(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h expected %h", what, got, exp); end
  endtask

  function automatic logic [31:0] fbits(real r);   // exact single for simple values
    logic [63:0] d;
    d = $realtobits(r);
    if (d[62:0] == 0) return {d[63], 31'd0};
    return {d[63], 8'(int'(d[62:52]) - 896), d[51:29]};
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lc0, div_alone;
    instr_valid = 0; instr = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // ---- 1. worked example: z = y / 3 beside sum = x + y ----
    // (the source listing loads 0 into I3; 21 is loaded here so that the
    //  division has a non-zero quotient to check)
    lc0 = perf.load_clusters;
    send(mk(OP_VEN, L_INT));
    send(mk(OP_LD, L_INT, 0, .imm(4)));
    send(mk(OP_LD, L_INT, 1, .imm(8)));
    send(mk(OP_LD, L_INT, 2, .imm(19)));
    send(mk(OP_LD, L_INT, 3, .imm(21)));
    send(mk(OP_VDS, L_INT));
    send(mk(OP_LD, L_FT, 0, .imm(0)));
    send(mk(OP_PEN, L_INT));
    send(mk(OP_ADD, L_INT, 2, 1, 0));
    send(mk(OP_CONV, L_INT, .imm(8'h80)));
    send(mk(OP_DIV, L_FT, 0, 3, 0, L_INT, 1'b1, .imm(64'(fbits(3.0)))));
    send(mk(OP_PDS, L_INT));
    drain();
    chk("I2 = I1 + I0", 64'(dut.u_rf_int.regs[2]), 12);
    chk("f0 = I3 / 3.0", 64'(dut.u_rf_ft.regs[0]), 64'(fbits(7.0)));
    chk("four loads in one register-file write", 64'(perf.load_clusters - lc0), 1);
    chk("merged loads", 64'(perf.merged_loads), 4);
    chk("parallel clusters", 64'(perf.par_clusters), 1);
    // the same division alone (not in parallel mode): its own latency
    send(mk(OP_DIV, L_FT, 1, 3, 0, L_INT, 1'b1, .imm(64'(fbits(3.0)))));
    drain();
    div_alone = last_cc;
    chk("DIV.ft latency", 64'(div_alone), 29);
    send(mk(OP_PEN, L_INT));
    send(mk(OP_ADD, L_INT, 4, 1, 0));
    send(mk(OP_CONV, L_INT, .imm(8'h80)));
    send(mk(OP_DIV, L_FT, 2, 1, 0, L_INT, 1'b1, .imm(64'(fbits(4.0)))));
    send(mk(OP_PDS, L_INT));
    drain();
    chk("cluster cycles = 1 + DIV.ft", 64'(last_cc), 64'(1 + div_alone));
    chk("f2 = I1 / 4.0", 64'(dut.u_rf_ft.regs[2]), 64'(fbits(2.0)));

    // ---- 2. array mode: 8 lanes on the integer and char lines ----
    send(mk(OP_VEN, L_INT, .imm({55'd0, 5'd8, 4'b1001})));
    for (int i = 0; i < 8; i++) send(mk(OP_LD, L_INT, 8 + i, .imm(64'(100 * i + 1))));
    for (int i = 0; i < 8; i++) send(mk(OP_LD, L_INT, 16 + i, .imm(64'(3 * i))));
    for (int i = 0; i < 8; i++) send(mk(OP_LD, L_CH, i, .imm(64'(65 + i))));
    send(mk(OP_MUL, L_INT, 24, 8, 16));
    send(mk(OP_ADD, L_CH, 8, 0, 0, .use_imm(1), .imm(32)));   // to lower case
    send(mk(OP_VDS, L_INT, .imm(4'b1001)));
    drain();
    for (int i = 0; i < 8; i++) begin
      chk("vector MUL.in", 64'(dut.u_rf_int.regs[24 + i]), 64'((100 * i + 1) * 3 * i));
      chk("vector ADD.ch", 64'(dut.u_rf_ch.regs[8 + i]), 64'(97 + i));
    end
    chk("lane 8 untouched", 64'(dut.u_rf_int.regs[0]), 4);

    // ---- 3. parallel cluster on all four lines ----
    send(mk(OP_LD, L_DB, 0, .imm($realtobits(1.5))));
    send(mk(OP_LD, L_DB, 1, .imm($realtobits(-2.25))));
    send(mk(OP_LD, L_FT, 3, .imm(64'(fbits(0.5)))));
    send(mk(OP_LD, L_FT, 4, .imm(64'(fbits(6.0)))));
    send(mk(OP_PEN, L_INT));
    send(mk(OP_SUB, L_INT, 5, 1, 0));
    send(mk(OP_MUL, L_FT, 5, 3, 4));
    send(mk(OP_MUL, L_DB, 2, 0, 1));
    send(mk(OP_CMPS, L_CH, 20, 0, 1));
    send(mk(OP_XOR, L_INT, 6, 1, 0));      // same line again: a second cluster
    send(mk(OP_PDS, L_INT));
    drain();
    chk("SUB.in", 64'(dut.u_rf_int.regs[5]), 4);
    chk("XOR.in", 64'(dut.u_rf_int.regs[6]), 64'(8 ^ 4));
    chk("MUL.ft", 64'(dut.u_rf_ft.regs[5]), 64'(fbits(3.0)));
    chk("MUL.db", dut.u_rf_db.regs[2], $realtobits(1.5 * -2.25));
    chk("CMPS.ch", 64'(dut.u_rf_ch.regs[20]), 1);
    chk("parallel clusters", 64'(perf.par_clusters), 3);

    // ---- 4. conversions ----
    send(mk(OP_CONV, L_INT, .imm(8'h60)));                        // int->double, float->double
    send(mk(OP_ADD, L_DB, 3, 2, 0, L_INT));                       // I2 (12) + 1.5
    send(mk(OP_MUL, L_DB, 4, 4, 0, L_FT));                        // f4 (6.0) * 1.5
    send(mk(OP_ADD, L_FT, 6, 2, 3, L_INT));                       // int->float now off: rejected
    drain();
    chk("int->double ADD.db", dut.u_rf_db.regs[3], $realtobits(13.5));
    chk("float->double MUL.db", dut.u_rf_db.regs[4], $realtobits(9.0));
    chk("conversion refused", 64'(rejects_seen), 1);

    // ---- 5. work for the host's traditional line ----
    send(mk(OP_MUL, L_CH, 1, 2, 3));                              // char has no MUL
    send(mk(OP_DIV, L_DB, 1, 2, 3));                              // double has no DIV
    send(mk(OP_FTDS, L_INT));
    send(mk(OP_ADD, L_FT, 7, 3, 4));                              // float line disabled
    send(mk(OP_FTEN, L_INT));
    send(mk(OP_ADD, L_FT, 7, 3, 4));
    drain();
    chk("rejected in all", 64'(rejects_seen), 4);
    chk("rejects counted", 64'(perf.rejects), 4);
    chk("ADD.ft after FTEN", 64'(dut.u_rf_ft.regs[7]), 64'(fbits(6.5)));

    // ---- 6. memory ----
    mem[32'd200] = $realtobits(0.125);
    send(mk(OP_ST, L_INT, 2, 0, .m(1), .imm(96)));                // MEM[I0 + 96] = I2
    send(mk(OP_ST, L_CH, 8, 0, .m(1), .imm(97)));
    send(mk(OP_LD, L_DB, 9, 0, .m(1), .imm(196)));                // d9 = MEM[200]
    send(mk(OP_LD, L_INT, 30, 0, .m(1), .imm(96)));
    drain();
    chk("ST.in", mem[32'd100], 12);
    chk("ST.ch", mem[32'd101], 97);
    chk("LD.db from memory", dut.u_rf_db.regs[9], $realtobits(0.125));
    chk("LD.in from memory", 64'(dut.u_rf_int.regs[30]), 12);

    // ---- 7. object memory ----
    for (int i = 0; i < 65; i++) send(mk(OP_OBJN, L_INT, 10));
    drain();
    chk("heap full", 64'(obj_full), 1);
    chk("null handle", 64'(dut.u_rf_int.regs[10]), 0);
    send(mk(OP_LD, L_INT, 11, .imm(32'h0001_0000 + 5 * 16)));
    send(mk(OP_OBJR, L_INT, 0, 11));
    send(mk(OP_OBJN, L_INT, 12));
    drain();
    chk("reused handle", 64'(dut.u_rf_int.regs[12]), 32'h0001_0000 + 5 * 16);
    chk("objects in use", 64'(obj_in_use), 64);

    // ---- mechanisms seen ----
    chk("load clusters seen",  64'(perf.load_clusters != 0), 1);
    chk("merged loads seen",   64'(perf.merged_loads  != 0), 1);
    chk("parallel clusters",   64'(perf.par_clusters  != 0), 1);
    chk("CONV cycles seen",    64'(perf.conv_cycles   != 0), 1);
    chk("vector ops seen",     64'(perf.vector_ops    != 0), 1);
    chk("memory ops seen",     64'(perf.mem_ops       != 0), 1);
    chk("memory stalls seen",  64'(perf.mem_stalls    != 0), 1);
    chk("issue stalls seen",   64'(perf.issue_stalls  != 0), 1);
    chk("OBJ.n seen",          64'(perf.obj_allocs    != 0), 1);
    chk("OBJ.n full seen",     64'(perf.obj_fails     != 0), 1);
    chk("OBJ.r seen",          64'(perf.obj_releases  != 0), 1);
    $display("mechanisms: load_clusters=%0d merged_loads=%0d op_clusters=%0d par_clusters=%0d conv_cycles=%0d vector_ops=%0d mem_ops=%0d mem_stalls=%0d issue_stalls=%0d obj_allocs=%0d obj_fails=%0d obj_releases=%0d rejects=%0d",
             perf.load_clusters, perf.merged_loads, perf.op_clusters, perf.par_clusters,
             perf.conv_cycles, perf.vector_ops, perf.mem_ops, perf.mem_stalls,
             perf.issue_stalls, perf.obj_allocs, perf.obj_fails, perf.obj_releases, perf.rejects);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
