// tb_obj_mem_mgr: self-checking test of the object memory manager.
//
// Uses 8 slots of 4 words at base 0x100. Allocates until the heap is full
// (handles must be base + slot*4, lowest free first, then the null handle
// 0 with full raised), releases some objects and checks that the freed
// slots are reused lowest first, that bad handles (not allocated, not a
// slot base, outside the heap) are refused, and that in_use follows. A
// random phase compares against a model bitmap.
module tb_obj_mem_mgr;

  localparam int NOBJ = 8, SW = 4;
  localparam logic [31:0] BASE = 32'h100;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        alloc, full, rel, bad;
  logic [31:0] handle, rel_h;
  logic [3:0]  in_use;
  logic [NOBJ-1:0] used;

  obj_mem_mgr #(.NOBJ(NOBJ), .SLOT_WORDS(SW), .HEAP_BASE(BASE)) dut (
    .clk, .rst_n, .alloc, .alloc_handle(handle), .full, .release_req(rel),
    .release_handle(rel_h), .bad_release(bad), .in_use);

  int checks = 0, failures = 0;

  function automatic int lowest_free();
    for (int i = 0; i < NOBJ; i++) if (!used[i]) return i;
    return -1;
  endfunction

  task automatic chk(string what, logic c);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  // one cycle with the given requests; checks the combinational outputs
  task automatic step(logic a, logic r, logic [31:0] h);
    int lf, rs;
    logic ok;
    alloc = a; rel = r; rel_h = h;
    #1;
    lf = lowest_free();
    chk("full flag", full == (lf < 0));
    chk("alloc handle", handle == ((lf < 0) ? 32'd0 : BASE + 32'(lf * SW)));
    rs = int'((h - BASE) / SW);
    ok = (h >= BASE) && ((h - BASE) % SW == 0) && rs < NOBJ && used[rs];
    chk("bad_release", bad == (r && !ok));
    chk("in_use", int'(in_use) == $countones(used));
    @(negedge clk);
    if (r && ok) used[rs] = 1'b0;
    if (a && lf >= 0) used[lf] = 1'b1;
    alloc = 0; rel = 0;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    alloc = 0; rel = 0; rel_h = 0; used = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < NOBJ + 2; i++) step(1, 0, 0);      // fill, then two failures
    step(0, 1, BASE + 3 * SW);                              // free slot 3
    step(0, 1, BASE + 3 * SW);                              // double free: refused
    step(0, 1, BASE + 5 * SW + 1);                          // not a slot base
    step(0, 1, BASE + NOBJ * SW);                           // outside the heap
    step(0, 1, 32'h10);                                     // below the heap
    step(0, 1, BASE + 6 * SW);                              // free slot 6
    step(1, 0, 0);                                          // gets slot 3
    step(1, 1, BASE + 0);                                   // gets 6, frees 0
    step(1, 0, 0);                                          // gets 0
    for (int t = 0; t < 300; t++)
      step(1'($urandom), 1'($urandom), BASE + 32'($urandom_range(0, NOBJ * SW + 3)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
