// typeline_pkg: types and constants shared by the TYPELINE datatype unit.
//
// TYPELINE executes programs split by datatype into four process lines:
// integer, float, double and char. Each line is a register file of 32
// registers followed by a type execution unit (TEU). This package holds the
// line and operation enumerations, the instruction record and the decode
// rules (which operation each line supports, which conversions the conversion
// unit may apply).
//
// What follows the paper: four lines in the order integer, float, double,
// char; 32 registers per line; 1..16 lanes in array (vector) mode; the
// operation list of each line; the three conversions int->float, int->double,
// float->double; the control and object-memory instructions.
// This design's own choices: the instruction record below (the paper gives
// mnemonics only, no encoding), the bit widths of the lines (C++ int, float,
// double and char on a 64-bit data path), and the assignment of conversion
// bits: bit 7 int->float (the paper's example uses "CONV 80H" before a float
// division of an integer register), bit 6 int->double, bit 5 float->double,
// bits 4..0 reserved.
package typeline_pkg;

  localparam int NLINES  = 4;    // process lines (paper: four SDTs)
  localparam int NREGS   = 32;   // registers per register file (paper)
  localparam int LANES   = 16;   // array-mode lanes (paper: 1 to 16)
  localparam int DP_W    = 64;   // global data path width (assumed)

  localparam int INT_W   = 32;
  localparam int FT_W    = 32;
  localparam int DB_W    = 64;
  localparam int CH_W    = 8;

  typedef enum logic [1:0] {
    L_INT = 2'd0,
    L_FT  = 2'd1,
    L_DB  = 2'd2,
    L_CH  = 2'd3
  } line_e;

  // Every mnemonic of the TYPELINE instruction set. The datatype suffix
  // (.in .ft .db .ch) is carried separately in instr_t.line.
  typedef enum logic [5:0] {
    OP_LD, OP_ST, OP_MOV, OP_ADD, OP_SUB, OP_MUL, OP_DIV,
    OP_CMPE, OP_CMPEG, OP_CMPES, OP_CMPS, OP_CMP,
    OP_AND, OP_OR, OP_XOR, OP_NOR, OP_XNOR, OP_SRA, OP_SRL,
    OP_VEN, OP_VDS, OP_PEN, OP_PDS,
    OP_FTEN, OP_DBEN, OP_CHEN, OP_FTDS, OP_DBDS, OP_CHDS,
    OP_CONV, OP_OBJN, OP_OBJR
  } op_e;

  // Conversion control bits (CONV operand).
  localparam int CV_I2F = 7;
  localparam int CV_I2D = 6;
  localparam int CV_F2D = 5;

  // One TYPELINE instruction as delivered by the host's decoder.
  //   LD   rd <- imm                          (mem = 0, load immediate)
  //   LD   rd <- MEM[int reg ra + imm]        (mem = 1)
  //   ST   MEM[int reg ra + imm] <- rd
  //   ALU  rd <- (line ra_line reg ra) op (use_imm ? imm : reg rb)
  //   VEN  imm[3:0] line mask (0 = all), imm[8:4] vector length (0 = 16)
  //   VDS  imm[3:0] line mask (0 = all)
  //   CONV imm[7:0] conversion bits
  //   OBJ.n  int reg rd <- handle of a new object
  //   OBJ.r  release the object whose handle is in int reg ra
  typedef struct packed {
    op_e              op;
    line_e            line;
    logic [4:0]       rd;
    logic [4:0]       ra;
    logic [4:0]       rb;
    line_e            ra_line;
    logic             use_imm;
    logic             mem;
    logic [DP_W-1:0]  imm;
  } instr_t;

  // Event counters kept by the issue logic; they show how often each
  // mechanism of the architecture was used.
  typedef struct packed {
    logic [31:0] instrs;        // instructions accepted from the host
    logic [31:0] rejects;       // handed back to the host (traditional line)
    logic [31:0] load_clusters; // register-file writes of a load cluster
    logic [31:0] merged_loads;  // loads written as part of such a cluster
    logic [31:0] op_clusters;   // operation clusters dispatched to the TEUs
    logic [31:0] par_clusters;  // ... of them with two or more lines at once
    logic [31:0] conv_cycles;   // cycles spent on a CONV inside a cluster
    logic [31:0] vector_ops;    // TEU operations issued with more than 1 lane
    logic [31:0] mem_ops;       // LD/ST through the data memory port
    logic [31:0] mem_stalls;    // cycles a memory request waited for grant
    logic [31:0] obj_allocs;    // OBJ.n that obtained an object
    logic [31:0] obj_fails;     // OBJ.n with the heap full (null handle)
    logic [31:0] obj_releases;  // OBJ.r executed
    logic [31:0] issue_stalls;  // cycles an offered instruction was held
  } perf_t;

  function automatic int line_width(line_e l);
    case (l)
      L_INT:   return INT_W;
      L_FT:    return FT_W;
      L_DB:    return DB_W;
      default: return CH_W;
    endcase
  endfunction

  function automatic logic is_ctrl(op_e op);
    return op inside {OP_VEN, OP_VDS, OP_PEN, OP_PDS, OP_FTEN, OP_DBEN,
                      OP_CHEN, OP_FTDS, OP_DBDS, OP_CHDS, OP_CONV};
  endfunction

  // Operations executed by a TEU (everything except loads, stores, control
  // and object-memory instructions).
  function automatic logic is_teu_op(op_e op);
    return op inside {OP_MOV, OP_ADD, OP_SUB, OP_MUL, OP_DIV, OP_CMPE,
                      OP_CMPEG, OP_CMPES, OP_CMPS, OP_CMP, OP_AND, OP_OR,
                      OP_XOR, OP_NOR, OP_XNOR, OP_SRA, OP_SRL};
  endfunction

  // Table 2 of the instruction set: which operation each line supports.
  function automatic logic op_supported(op_e op, line_e l);
    if (is_ctrl(op) || op == OP_OBJN || op == OP_OBJR) return 1'b1;
    case (l)
      L_INT: return op inside {OP_LD, OP_ST, OP_MOV, OP_ADD, OP_SUB, OP_MUL,
                               OP_DIV, OP_CMPE, OP_CMPEG, OP_CMPES, OP_CMPS,
                               OP_AND, OP_OR, OP_XOR, OP_NOR, OP_XNOR,
                               OP_SRA, OP_SRL};
      L_FT:  return op inside {OP_LD, OP_ST, OP_MOV, OP_ADD, OP_SUB, OP_MUL,
                               OP_DIV, OP_CMP};
      L_DB:  return op inside {OP_LD, OP_ST, OP_MOV, OP_ADD, OP_SUB, OP_MUL,
                               OP_CMP};
      default: return op inside {OP_LD, OP_ST, OP_MOV, OP_ADD, OP_SUB,
                               OP_CMPE, OP_CMPEG, OP_CMPES, OP_CMPS, OP_AND,
                               OP_OR, OP_XOR, OP_NOR, OP_XNOR};
    endcase
  endfunction

  // May an operand of line src feed the TEU of line dst under conv bits cv?
  function automatic logic conv_allowed(logic [7:0] cv, line_e src, line_e dst);
    if (src == dst) return 1'b1;
    if (src == L_INT && dst == L_FT) return cv[CV_I2F];
    if (src == L_INT && dst == L_DB) return cv[CV_I2D];
    if (src == L_FT  && dst == L_DB) return cv[CV_F2D];
    return 1'b0;
  endfunction

endpackage
