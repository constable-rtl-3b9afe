// constable_pkg: types, sizes and helper functions shared by the load
// elimination engine (SLD, RMT, AMT, xPRF and the top).
//
// Sizes follow the storage budget of the design: a 512-entry SLD (32 sets x
// 16 ways) whose entries hold a 24-bit tag, a 32-bit address, a 64-bit value,
// a 5-bit confidence and a can_eliminate flag; a 16-register RMT with 16 PC
// slots for RSP and RBP and 8 for the rest; a 256-entry AMT (32 sets x 8 ways)
// with a 32-bit line tag and four 24-bit hashed PCs per entry; a 32-entry xPRF;
// a 6-wide rename group; a 48-bit physical address space.
//
// Own choices (the source design leaves them open): the load PC is reduced to a
// 24-bit signature by XOR folding, and that signature is the only load
// identity used anywhere (SLD set = low 5 bits, SLD tag = all 24 bits, RMT and
// AMT slots store it). Cache lines are 64 bytes. Register numbers use the x86-64
// encoding (RSP = 4, RBP = 5).
package constable_pkg;

  // ---------------- global sizes ----------------
  parameter int unsigned PC_W      = 64;   // virtual PC of a load uop
  parameter int unsigned SIG_W     = 24;   // hashed load PC
  parameter int unsigned PA_W      = 48;   // physical address
  parameter int unsigned LINE_OFS  = 6;    // 64-byte cache line
  parameter int unsigned LINE_W    = PA_W - LINE_OFS;
  parameter int unsigned SADDR_W   = 32;   // load address kept in the SLD
  parameter int unsigned VAL_W     = 64;   // load value
  parameter int unsigned CONF_W    = 5;
  parameter int unsigned CONF_THR  = 30;
  parameter int unsigned NUM_AREGS = 16;   // x86-64 integer registers
  parameter int unsigned AREG_W    = 4;
  parameter int unsigned RENAME_W  = 6;
  parameter int unsigned NUM_SRC   = 2;    // base and index register
  parameter int unsigned XPRF_N    = 32;
  parameter int unsigned XPRF_IW   = $clog2(XPRF_N);
  // Per-register write counter width; 2**WSEQ_W must exceed the number of uops
  // that can be in flight behind a load (512-entry ROB), so a counter cannot
  // wrap to the same value while a load is in flight.
  parameter int unsigned WSEQ_W    = 10;
  // Store/snoop probe history: the last PHIST probed lines are kept with a
  // PSEQ_W-bit probe count, so a writeback can tell whether its line was
  // probed after the load was renamed.
  parameter int unsigned PHIST     = 16;
  parameter int unsigned PSEQ_W    = 16;


  typedef logic [SIG_W-1:0]  sig_t;
  typedef logic [PA_W-1:0]   paddr_t;
  typedef logic [LINE_W-1:0] line_t;
  typedef logic [VAL_W-1:0]  val_t;
  typedef logic [AREG_W-1:0] areg_t;

  // One uop of a rename group, as seen by the elimination engine.
  typedef struct packed {
    logic                     valid;
    logic                     is_load;   // eliminable load (data size <= 64 bits)
    logic [PC_W-1:0]          pc;
    logic                     dst_valid; // writes an architectural register
    areg_t                    dst;
    logic [NUM_SRC-1:0]       src_valid; // load source registers (none: RIP-relative)
    areg_t [NUM_SRC-1:0]      src;
  } ren_uop_t;

  // Outcome of the SLD check of one load uop at rename.
  typedef struct packed {
    logic                     valid;     // this uop's result is produced this cycle
    logic                     eliminate; // converted to a move from xPRF
    logic                     likely_stable; // execute normally, train with tracking
    logic [XPRF_IW-1:0]       xprf_idx;  // xPRF register holding the value
    logic [SADDR_W-1:0]       addr;      // last load address, for the load buffer
    logic [NUM_SRC-1:0][WSEQ_W-1:0] src_seq; // source write counters, carried to writeback
    logic [PSEQ_W-1:0]        probe_seq; // probe count at rename, carried to writeback
  } ren_res_t;

  // A completed, non-eliminated load at writeback.
  typedef struct packed {
    logic                     valid;
    logic [PC_W-1:0]          pc;
    paddr_t                   addr;
    val_t                     value;
    logic                     likely_stable;
    logic [NUM_SRC-1:0]       src_valid;
    areg_t [NUM_SRC-1:0]      src;
    logic [NUM_SRC-1:0][WSEQ_W-1:0] src_seq; // ren_res.src_seq of this load
    logic [PSEQ_W-1:0]        probe_seq; // ren_res.probe_seq of this load
  } wb_load_t;

  // 24-bit load signature: XOR fold of the PC (own choice).
  function automatic sig_t pc_sig(input logic [PC_W-1:0] pc);
    logic [71:0] ext;
    ext = {8'd0, pc};
    return ext[23:0] ^ ext[47:24] ^ ext[71:48];
  endfunction

  function automatic line_t pa_line(input paddr_t pa);
    return pa[PA_W-1:LINE_OFS];
  endfunction

endpackage
