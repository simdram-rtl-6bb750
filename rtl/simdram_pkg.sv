// simdram_pkg: types and constants shared by the SIMDRAM control unit and
// the data transposition unit.
//
// The uOp encoding (16-bit uOps, 3-bit opcode, 5-bit uRegister fields, 8-bit
// immediate), the opcode values 000..111, the uRegister numbering B0..B31
// and the subarray split (1006 D-group rows, C0/C1, 16 B-group addresses)
// follow the paper. The row numbers given to the C-group and B-group inside
// a subarray, the physical address width and the address-to-row mapping are
// this design's own choices and are described next to each constant.
package simdram_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned UOP_W        = 16;    // one uOp
  localparam int unsigned UPROG_UOPS   = 64;    // 128-byte uProgram
  localparam int unsigned UPROG_BITS   = UOP_W * UPROG_UOPS;  // 1024
  localparam int unsigned UREG_W       = 32;    // uRegister width
  localparam int unsigned PA_W         = 32;    // physical address bits
  localparam int unsigned LINE_BYTES   = 64;    // cache line
  localparam int unsigned LINE_BITS    = 8 * LINE_BYTES;      // 512
  localparam int unsigned ROW_BYTES    = 8192;  // 8 kB DRAM row
  localparam int unsigned LANES        = 8 * ROW_BYTES;       // 65536 SIMD lanes
  localparam int unsigned LINES_PER_ROW = ROW_BYTES / LINE_BYTES; // 128
  localparam int unsigned ROW_ADDR_W   = PA_W - $clog2(ROW_BYTES); // 19
  localparam int unsigned SA_ROWS      = 1024;  // rows per subarray
  localparam int unsigned SA_ROW_W     = $clog2(SA_ROWS);     // 10
  localparam int unsigned MAX_N        = 64;    // largest element size
  localparam int unsigned N_W          = 7;     // holds 1..64
  localparam int unsigned BBOP_OP_W    = 4;     // 16 uPrograms

  // Row numbers inside one subarray. D-group rows are 0..1005; the two
  // constant rows and the sixteen B-group decoder addresses sit above them.
  localparam int unsigned D_ROWS       = 1006;
  localparam int unsigned ROW_C0       = 1006;
  localparam int unsigned ROW_C1       = 1007;
  localparam int unsigned ROW_B_BASE   = 1008;  // B-group address k is row 1008+k

  // ------------------------------------------------------------- uOps
  typedef enum logic [2:0] {
    UOP_AAP    = 3'b000,   // row copy:   AAP dst, src
    UOP_AP     = 3'b001,   // majority:   AP  reg (triple-row activation)
    UOP_ADDI   = 3'b010,   // reg += imm
    UOP_SUBI   = 3'b011,   // reg -= imm
    UOP_COMP   = 3'b100,   // reg = (reg < imm)
    UOP_MODULE = 3'b101,   // reg = reg % imm
    UOP_BNEZ   = 3'b110,   // if (reg != 0) uPC = imm
    UOP_DONE   = 3'b111    // end of one row-sized iteration
  } uop_op_e;

  // Bits 15:13 opcode, 12:8 first uRegister (destination for AAP),
  // 7:3 source uRegister (AAP only), 7:0 immediate (arithmetic, bnez).
  typedef struct packed {
    uop_op_e    op;
    logic [4:0] r1;
    logic [7:0] lo;
  } uop_t;

  function automatic logic [4:0] uop_src(input uop_t u);
    return u.lo[7:3];
  endfunction

  function automatic uop_t mk_aap(input int dst, input int src);
    return '{op: UOP_AAP, r1: 5'(dst), lo: {5'(src), 3'b000}};
  endfunction
  function automatic uop_t mk_ap(input int r);
    return '{op: UOP_AP, r1: 5'(r), lo: 8'h00};
  endfunction
  function automatic uop_t mk_ari(input uop_op_e op, input int r, input int imm);
    return '{op: op, r1: 5'(r), lo: 8'(imm)};
  endfunction
  function automatic uop_t mk_done();
    return '{op: UOP_DONE, r1: 5'd0, lo: 8'h00};
  endfunction

  // uRegister numbers with a fixed meaning.
  localparam int unsigned UREG_C0     = 16;
  localparam int unsigned UREG_C1     = 17;
  localparam int unsigned UREG_IN0    = 18;   // src_1
  localparam int unsigned UREG_IN1    = 19;   // src_2
  localparam int unsigned UREG_IN2    = 20;   // third input (select)
  localparam int unsigned UREG_OUT    = 21;   // dst
  localparam int unsigned UREG_ESIZE  = 22;   // element size
  localparam int unsigned UREG_GP_LO  = 23;   // B23..B31 general purpose

  // ------------------------------------------------------------ bbops
  typedef struct packed {
    logic [BBOP_OP_W-1:0] op;     // selects the uProgram
    logic [PA_W-1:0]      dst;
    logic [PA_W-1:0]      src1;
    logic [PA_W-1:0]      src2;
    logic [PA_W-1:0]      src3;   // select array of bbop_if_else
    logic [31:0]          size;   // number of elements
    logic [N_W-1:0]       n;      // bits per element
  } bbop_t;

  localparam int unsigned BBOP_W = $bits(bbop_t);

  // ----------------------------------------------------- DRAM commands
  typedef enum logic [0:0] {
    CMD_ACT = 1'b0,
    CMD_PRE = 1'b1
  } dram_cmd_e;

  typedef struct packed {
    dram_cmd_e             kind;
    logic [ROW_ADDR_W-1:0] row;   // {subarray, row in subarray}
  } dram_cmd_t;

  // ------------------------------------------- vertical layout addresses
  // A SIMDRAM object of n-bit elements is cut into slices of n cache lines
  // (512 elements). Horizontal line j of slice s lives at base+64*(s*n+j).
  // In DRAM the 128 slices that share one group of n rows are side by side:
  // vertical line i (bit i of all 512 elements) of slice s lives in row
  // i of group s/128, at cache-line column s%128. The object base must be
  // row-aligned; consecutive groups are n rows apart, which is how far the
  // control unit moves its base addresses after each iteration.
  function automatic logic [PA_W-1:0] vline_addr(input logic [PA_W-1:0] base,
                                                 input logic [PA_W-1:0] slice,
                                                 input logic [N_W-1:0]  bit_i,
                                                 input logic [N_W-1:0]  n);
    logic [PA_W-1:0] grp, col, line;
    grp  = slice / LINES_PER_ROW;
    col  = slice % LINES_PER_ROW;
    line = grp * PA_W'(LINES_PER_ROW) * PA_W'(n) + PA_W'(bit_i) * PA_W'(LINES_PER_ROW) + col;
    return base + line * PA_W'(LINE_BYTES);
  endfunction

  function automatic logic [PA_W-1:0] hline_addr(input logic [PA_W-1:0] base,
                                                 input logic [PA_W-1:0] slice,
                                                 input logic [N_W-1:0]  j,
                                                 input logic [N_W-1:0]  n);
    return base + (slice * PA_W'(n) + PA_W'(j)) * PA_W'(LINE_BYTES);
  endfunction

  function automatic logic [2:0] log2_n(input logic [N_W-1:0] n);
    logic [2:0] k;
    k = 3'd0;
    for (int b = 0; b < N_W; b++) if (n[b]) k = 3'(b);
    return k;
  endfunction

endpackage
