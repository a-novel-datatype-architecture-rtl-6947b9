// obj_mem_mgr: object memory manager behind the OBJ.n and OBJ.r
// instructions.
//
// The heap is divided into NOBJ object slots of SLOT_WORDS data-path words
// each, starting at word address HEAP_BASE. A bitmap records which slots
// are in use. OBJ.n (alloc) takes the lowest free slot and returns its
// handle, the word address HEAP_BASE + slot * SLOT_WORDS; when every slot is
// taken it returns the null handle 0 and raises full. OBJ.r (release)
// frees the slot named by a handle; a handle that is not the base of a slot
// in use is ignored and raises bad_release for that cycle.
//
// Timing: alloc_handle/full are combinational from the bitmap, so the
// handle is written to the integer register file in the same cycle as
// alloc; the bitmap updates at the clock edge. alloc and release in the
// same cycle are both performed. in_use counts the slots in use.
//
// From the paper: that OBJ.n allocates new object space in the heap and
// OBJ.r removes objects no longer used, in hardware rather than through
// messages. The paper gives neither object sizes nor an allocation scheme:
// the fixed-size slots, the lowest-free-slot policy, the sizes and the null
// handle are this design's own.
module obj_mem_mgr #(
  parameter int          NOBJ       = 64,
  parameter int          SLOT_WORDS = 16,
  parameter logic [31:0] HEAP_BASE  = 32'h0001_0000,
  localparam int         SW         = $clog2(NOBJ),
  localparam int         CW         = $clog2(NOBJ + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          alloc,
  output logic [31:0]   alloc_handle,
  output logic          full,
  input  logic          release_req,
  input  logic [31:0]   release_handle,
  output logic          bad_release,
  output logic [CW-1:0] in_use
);

  localparam int OW = $clog2(SLOT_WORDS);

  logic [NOBJ-1:0] used;
  logic [SW-1:0]   free_slot;
  logic [31:0]     off;
  logic [31:0]     rel_slot;
  logic            rel_ok;

  // lowest free slot
  always_comb begin
    free_slot = '0;
    full      = 1'b1;
    for (int i = NOBJ - 1; i >= 0; i--)
      if (!used[i]) begin
        free_slot = SW'(i);
        full      = 1'b0;
      end
    alloc_handle = full ? 32'd0 : HEAP_BASE + 32'(free_slot) * 32'(SLOT_WORDS);
  end

  // decode a released handle back to its slot
  always_comb begin
    off      = release_handle - HEAP_BASE;
    rel_slot = off >> OW;
    rel_ok   = (release_handle >= HEAP_BASE) && (off[OW-1:0] == '0) &&
               (rel_slot < 32'(NOBJ)) && used[SW'(rel_slot)];
    bad_release = release_req && !rel_ok;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      used <= '0;
    end else begin
      if (release_req && rel_ok) used[SW'(rel_slot)] <= 1'b0;
      if (alloc && !full)        used[free_slot]     <= 1'b1;
    end
  end

  always_comb begin
    in_use = '0;
    for (int i = 0; i < NOBJ; i++) in_use = in_use + CW'(used[i]);
  end

endmodule
