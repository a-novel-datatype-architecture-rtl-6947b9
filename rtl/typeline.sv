// typeline: the TYPELINE datatype unit, top level.
//
// Four process lines, one per significant datatype (integer, float,
// double, char). Each line is a 32-entry register file of its datatype
// followed by a type execution unit (TEU). Between the register files and
// the TEUs sits the type conversion unit, which lets the float and double
// TEUs take an operand from a lower-precision line. The issue logic takes
// instructions from the host processor, keeps the control state (array
// mode, parallel mode, line enables, conversion bits), collects load and
// operation clusters and starts the TEUs; results go back to the register
// files, or through the data memory port to memory (the global data path).
// The object memory manager serves OBJ.n/OBJ.r.
//
//   host --instr--> typeline_issue --ctrl--> RF1..RF4 --> type_conv_unit
//                                                          --> TEU1..TEU4
//   TEU results --> RF write ports;  LD/ST --> mem_*;  OBJ.n/r --> obj_mem_mgr
//
// Interface: instr_valid/instr/instr_ready from the host; reject_valid with
// reject_instr for work the host must run itself; a word-addressed data
// memory port of DP_W bits (request held until mem_gnt, load data on
// mem_rvalid); status and event counters. Timing: see typeline_issue.
//
// From the paper: the four lines and their order, 32 registers per file,
// 1..16 lanes, the conversion unit with 8 control bits between files and
// TEUs, the instruction set, object memory instructions. This design's
// own: widths, the instruction record, the memory handshake and the object
// allocator's sizes (see the submodules).
module typeline
  import typeline_pkg::*;
#(
  parameter int          NOBJ       = 64,
  parameter int          SLOT_WORDS = 16,
  parameter logic [31:0] HEAP_BASE  = 32'h0001_0000
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               instr_valid,
  input  instr_t             instr,
  output logic               instr_ready,
  output logic               reject_valid,
  output instr_t             reject_instr,
  output logic               mem_req,
  output logic               mem_we,
  output logic [31:0]        mem_addr,
  output logic [DP_W-1:0]    mem_wdata,
  input  logic               mem_gnt,
  input  logic               mem_rvalid,
  input  logic [DP_W-1:0]    mem_rdata,
  output logic               busy,
  output logic [NLINES-1:0]  vec_mode,
  output logic [NLINES-1:0]  line_en,
  output logic               par_mode,
  output logic [7:0]         conv,
  output logic [4:0]         vlen,
  output logic [7:0]         last_cluster_cycles,
  output logic               obj_full,
  output logic               obj_bad_release,
  output logic [$clog2(NOBJ+1)-1:0] obj_in_use,
  output perf_t              perf
);

  localparam int NL = LANES;

  // issue <-> datapath
  logic [NLINES-1:0][4:0]            ra_idx, rb_idx, rc_idx;
  logic [NLINES-1:0][DP_W-1:0]       rb0;
  logic [NLINES-1:0]                 rf_we, rf_wsel_teu;
  logic [NLINES-1:0][NL-1:0]         rf_wlane;
  logic [NLINES-1:0][NL-1:0][4:0]    rf_widx;
  logic [NL-1:0][DP_W-1:0]           rf_wdata;
  logic                              ft_foreign, db_foreign, ft_illegal, db_illegal;
  line_e                             ft_src, db_src;
  logic [NLINES-1:0]                 teu_start, teu_use_imm, teu_done, teu_busy;
  op_e  [NLINES-1:0]                 teu_op;
  logic [NLINES-1:0][NL-1:0]         teu_lane_en;
  logic [NLINES-1:0][DP_W-1:0]       teu_imm;
  logic                              obj_alloc, obj_release;
  logic [31:0]                       obj_handle, obj_release_handle;

  // register file ports
  logic [NL-1:0][INT_W-1:0] int_ra, int_rb, int_rc, int_wd, int_op, int_b, int_res;
  logic [NL-1:0][FT_W-1:0]  ft_ra,  ft_rb,  ft_rc,  ft_wd,  ft_op,  ft_b,  ft_res;
  logic [NL-1:0][DB_W-1:0]  db_ra,  db_rb,  db_rc,  db_wd,  db_op,  db_b,  db_res;
  logic [NL-1:0][CH_W-1:0]  ch_ra,  ch_rb,  ch_rc,  ch_wd,  ch_op,  ch_b,  ch_res;

  typeline_issue #(.NL(NL)) u_issue (
    .clk, .rst_n,
    .instr_valid, .instr, .instr_ready, .reject_valid, .reject_instr,
    .vec_mode, .line_en, .par_mode, .conv, .vlen,
    .ra_idx, .rb_idx, .rc_idx,
    .int_ra0 (int_ra[0]),
    .rb0,
    .rf_we, .rf_wlane, .rf_widx, .rf_wsel_teu, .rf_wdata,
    .ft_foreign, .ft_src, .db_foreign, .db_src,
    .teu_start, .teu_op, .teu_lane_en, .teu_use_imm, .teu_imm, .teu_done,
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_gnt, .mem_rvalid, .mem_rdata,
    .obj_alloc, .obj_handle, .obj_full, .obj_release, .obj_release_handle,
    .busy, .last_cluster_cycles, .perf
  );

  assign rb0[L_INT] = DP_W'(int_rb[0]);
  assign rb0[L_FT]  = DP_W'(ft_rb[0]);
  assign rb0[L_DB]  = DP_W'(db_rb[0]);
  assign rb0[L_CH]  = DP_W'(ch_rb[0]);

  // write data: TEU result or the issue unit's data (loads, OBJ.n)
  always_comb begin
    for (int i = 0; i < NL; i++) begin
      int_wd[i] = rf_wsel_teu[L_INT] ? int_res[i] : rf_wdata[i][INT_W-1:0];
      ft_wd[i]  = rf_wsel_teu[L_FT]  ? ft_res[i]  : rf_wdata[i][FT_W-1:0];
      db_wd[i]  = rf_wsel_teu[L_DB]  ? db_res[i]  : rf_wdata[i][DB_W-1:0];
      ch_wd[i]  = rf_wsel_teu[L_CH]  ? ch_res[i]  : rf_wdata[i][CH_W-1:0];
      // operand b: register or the instruction's immediate
      int_b[i]  = teu_use_imm[L_INT] ? teu_imm[L_INT][INT_W-1:0] : int_rb[i];
      ft_b[i]   = teu_use_imm[L_FT]  ? teu_imm[L_FT][FT_W-1:0]   : ft_rb[i];
      db_b[i]   = teu_use_imm[L_DB]  ? teu_imm[L_DB][DB_W-1:0]   : db_rb[i];
      ch_b[i]   = teu_use_imm[L_CH]  ? teu_imm[L_CH][CH_W-1:0]   : ch_rb[i];
    end
  end

  // ---------------- process line 1: integer ----------------
  type_regfile #(.W(INT_W), .NREGS(NREGS), .LANES(NL)) u_rf_int (
    .clk, .rst_n,
    .ra_idx (ra_idx[L_INT]), .rb_idx (rb_idx[L_INT]), .rc_idx (rc_idx[L_INT]),
    .ra_data (int_ra), .rb_data (int_rb), .rc_data (int_rc),
    .we (rf_we[L_INT]), .wlane_en (rf_wlane[L_INT]), .widx (rf_widx[L_INT]),
    .wdata (int_wd)
  );
  teu_int #(.W(INT_W), .NL(NL)) u_teu_int (
    .clk, .rst_n, .start (teu_start[L_INT]), .op (teu_op[L_INT]),
    .lane_en (teu_lane_en[L_INT]), .a (int_op), .b (int_b),
    .busy (teu_busy[L_INT]), .done (teu_done[L_INT]), .result (int_res)
  );

  // ---------------- process line 2: float ----------------
  type_regfile #(.W(FT_W), .NREGS(NREGS), .LANES(NL)) u_rf_ft (
    .clk, .rst_n,
    .ra_idx (ra_idx[L_FT]), .rb_idx (rb_idx[L_FT]), .rc_idx (rc_idx[L_FT]),
    .ra_data (ft_ra), .rb_data (ft_rb), .rc_data (ft_rc),
    .we (rf_we[L_FT]), .wlane_en (rf_wlane[L_FT]), .widx (rf_widx[L_FT]),
    .wdata (ft_wd)
  );
  teu_fp #(.EW(8), .MW(23), .HAS_DIV(1'b1), .NL(NL)) u_teu_ft (
    .clk, .rst_n, .start (teu_start[L_FT]), .op (teu_op[L_FT]),
    .lane_en (teu_lane_en[L_FT]), .a (ft_op), .b (ft_b),
    .busy (teu_busy[L_FT]), .done (teu_done[L_FT]), .result (ft_res)
  );

  // ---------------- process line 3: double ----------------
  type_regfile #(.W(DB_W), .NREGS(NREGS), .LANES(NL)) u_rf_db (
    .clk, .rst_n,
    .ra_idx (ra_idx[L_DB]), .rb_idx (rb_idx[L_DB]), .rc_idx (rc_idx[L_DB]),
    .ra_data (db_ra), .rb_data (db_rb), .rc_data (db_rc),
    .we (rf_we[L_DB]), .wlane_en (rf_wlane[L_DB]), .widx (rf_widx[L_DB]),
    .wdata (db_wd)
  );
  teu_fp #(.EW(11), .MW(52), .HAS_DIV(1'b0), .NL(NL)) u_teu_db (
    .clk, .rst_n, .start (teu_start[L_DB]), .op (teu_op[L_DB]),
    .lane_en (teu_lane_en[L_DB]), .a (db_op), .b (db_b),
    .busy (teu_busy[L_DB]), .done (teu_done[L_DB]), .result (db_res)
  );

  // ---------------- process line 4: char ----------------
  type_regfile #(.W(CH_W), .NREGS(NREGS), .LANES(NL)) u_rf_ch (
    .clk, .rst_n,
    .ra_idx (ra_idx[L_CH]), .rb_idx (rb_idx[L_CH]), .rc_idx (rc_idx[L_CH]),
    .ra_data (ch_ra), .rb_data (ch_rb), .rc_data (ch_rc),
    .we (rf_we[L_CH]), .wlane_en (rf_wlane[L_CH]), .widx (rf_widx[L_CH]),
    .wdata (ch_wd)
  );
  teu_char #(.W(CH_W), .NL(NL)) u_teu_ch (
    .clk, .rst_n, .start (teu_start[L_CH]), .op (teu_op[L_CH]),
    .lane_en (teu_lane_en[L_CH]), .a (ch_op), .b (ch_b),
    .busy (teu_busy[L_CH]), .done (teu_done[L_CH]), .result (ch_res)
  );

  // ---------------- type conversion unit ----------------
  type_conv_unit #(.NL(NL)) u_tcu (
    .conv, .ft_foreign, .ft_src, .db_foreign, .db_src,
    .int_a (int_ra), .ft_a (ft_ra), .db_a (db_ra), .ch_a (ch_ra),
    .int_c (int_rc), .ft_c (ft_rc),
    .int_op, .ft_op, .db_op, .ch_op,
    .ft_illegal, .db_illegal
  );

  // ---------------- object memory manager ----------------
  obj_mem_mgr #(.NOBJ(NOBJ), .SLOT_WORDS(SLOT_WORDS), .HEAP_BASE(HEAP_BASE)) u_obj (
    .clk, .rst_n,
    .alloc (obj_alloc), .alloc_handle (obj_handle), .full (obj_full),
    .release_req (obj_release), .release_handle (obj_release_handle),
    .bad_release (obj_bad_release), .in_use (obj_in_use)
  );

  a_conv_legal: assert property (@(posedge clk) disable iff (!rst_n)
    |teu_start |-> !ft_illegal && !db_illegal)
    else $error("TEU started on an operand the conversion unit rejected");

endmodule
