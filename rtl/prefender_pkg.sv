// prefender_pkg - shared widths, types and helper functions of the
// PREFENDER secure prefetcher.
//
// PREFENDER sits next to an L1 data cache and issues prefetches that make
// a cache side channel attacker see more than one "victim" cacheline. It is
// built from a Scale Tracker (ST), an Access Tracker (AT), a Record
// Protector (RP) and a prefetch controller. This package holds what they
// share:
//   * widths: 64-bit physical and instruction addresses, 16-bit fixed
//     values and scales (enough for one page, up to 64 KB), 20-bit DiffMin
//     arithmetic (enough for a 1 MB L1D), 64-byte lines and a 9-bit set
//     index, all as published for the design;
//   * the 4 KB page size and the 5-bit architectural register index, which
//     are this implementation's choice;
//   * the execute-stage instruction record seen by the calculation buffer;
//   * the prefetch-source encoding and the event flags of the top;
//   * pattern_hit(), the "(a - b) % sc == 0" test of the record protector.
//     As published, the modulus is taken only over the set-index part of
//     the difference (SET_BITS + LINE_BITS = 15 bits), which is exact when
//     the scale divides one cache way (32 KB) and an approximation
//     otherwise. It is combinational here.
package prefender_pkg;

  localparam int ADDR_W     = 64;
  localparam int PC_W       = 64;
  localparam int VAL_W      = 16;
  localparam int DIFF_W     = 20;
  localparam int LINE_BYTES = 64;
  localparam int LINE_BITS  = $clog2(LINE_BYTES);
  localparam int SET_BITS   = 9;
  localparam int MOD_W      = SET_BITS + LINE_BITS;
  localparam int PAGE_BYTES = 4096;
  localparam int PAGE_BITS  = $clog2(PAGE_BYTES);
  localparam int REG_W      = 5;

  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [PC_W-1:0]   pc_t;
  typedef logic [VAL_W-1:0]  val_t;
  typedef logic [DIFF_W-1:0] diff_t;
  typedef logic [REG_W-1:0]  reg_idx_t;

  // Instruction classes that the calculation buffer distinguishes.
  // OP_LOAD_IMM moves an immediate into rd; OP_LOAD_MEM loads rd from
  // memory at imm(rs0). Subtraction and shifts follow the addition and
  // multiplication rules.
  typedef enum logic [2:0] {
    OP_OTHER    = 3'd0,
    OP_LOAD_IMM = 3'd1,
    OP_LOAD_MEM = 3'd2,
    OP_ADD      = 3'd3,
    OP_SUB      = 3'd4,
    OP_MUL      = 3'd5,
    OP_SHL      = 3'd6,
    OP_SHR      = 3'd7
  } op_e;

  // One instruction as it leaves the execute stage. When b_imm is set the
  // second operand is imm, otherwise register rs1.
  typedef struct packed {
    op_e      op;
    reg_idx_t rd;
    reg_idx_t rs0;
    reg_idx_t rs1;
    logic     b_imm;
    val_t     imm;
  } ex_instr_t;

  typedef enum logic [1:0] {
    PF_ST    = 2'd0,   // scale tracker
    PF_AT    = 2'd1,   // access tracker, DiffMin policy
    PF_RP    = 2'd2,   // access tracker guided by the record protector
    PF_BASIC = 2'd3    // basic (tagged / stride) prefetcher
  } pf_src_e;

  typedef struct packed {
    addr_t   addr;
    pf_src_e src;
  } pf_req_t;

  // One-cycle event flags reported by the top for monitoring.
  typedef struct packed {
    logic st_pf;        // scale tracker produced a prefetch
    logic at_pf;        // access tracker produced a DiffMin prefetch
    logic rp_pf;        // access tracker produced a hit-scale prefetch
    logic sb_record;    // scale buffer gained or upgraded an entry
    logic sb_hit;       // load address hit the scale buffer
    logic prot_set;     // an access buffer became protected
    logic prot_clr;     // an access buffer lost its protection
    logic alloc_skip;   // LRU had to pass over a protected buffer
    logic no_alloc;     // every buffer protected: load not tracked
    logic pf_drop;      // prefetch dropped, queue full
  } pf_evt_t;

  function automatic addr_t line_of(addr_t a);
    return {a[ADDR_W-1:LINE_BITS], {LINE_BITS{1'b0}}};
  endfunction

  // True when b lies on the pattern {a + k*sc}, checked on the set-index
  // part of |a - b| only.
  function automatic logic pattern_hit(addr_t a, addr_t b, val_t sc);
    addr_t d;
    val_t  dl;
    d  = (a >= b) ? (a - b) : (b - a);
    dl = val_t'(d[MOD_W-1:0]);
    if (sc == '0) return 1'b0;
    return (dl % sc) == '0;
  endfunction

endpackage
