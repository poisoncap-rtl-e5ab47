// poisoncap_pkg: types, constants and pure functions shared by the
// poison-aware memory pipeline.
//
// A memory word is one 128-bit capability-sized word plus its CHERI tag bit
// (cword_t). A poison capability is a tagged word whose POISON bit is set; it
// records the bounds (base and length) and the 1-bit memory version of the
// allocation that was freed. Capabilities used to access memory arrive from
// the core already decoded (cap_t): base, 64-bit length, version and the
// perm_poison permission, which is how the 64-bit length reaches the memory
// pipeline to be compared against the poison bounds found in memory.
//
// What follows the paper: one poison bit per capability word, detection from
// the tag and the POISON bit only, a 1-bit version shared between memory and
// poison capabilities, poison bounds recorded from the dereferenced
// capability, and the perm_poison permission. This design's own choices: the
// bit positions of the in-memory poison encoding (POISON at 127, version at
// 126, 62-bit length at 125:64, base at 63:0), and the 64-byte cache line.
package poisoncap_pkg;

  localparam int unsigned XLEN       = 64;   // address and bound width
  localparam int unsigned WORD_BYTES = 16;   // one capability word
  localparam int unsigned WORD_BITS  = 128;
  localparam int unsigned LINE_BYTES = 64;   // cache line (assumed)
  localparam int unsigned WPL        = LINE_BYTES / WORD_BYTES; // words per line

  // In-memory poison capability layout (assumed; see header)
  localparam int unsigned POISON_BIT  = 127;
  localparam int unsigned VERSION_BIT = 126;
  localparam int unsigned PLEN_HI     = 125;
  localparam int unsigned PLEN_LO     = 64;
  localparam int unsigned PLEN_W      = PLEN_HI - PLEN_LO + 1; // 62

  // One tagged memory word.
  typedef struct packed {
    logic                 tag;
    logic [WORD_BITS-1:0] data;
  } cword_t;

  typedef cword_t [WPL-1:0] cline_t;

  // Decoded capability presented with each memory request.
  typedef struct packed {
    logic            tag;
    logic            perm_poison;
    logic            version;
    logic [XLEN-1:0] base;
    logic [XLEN-1:0] length;
  } cap_t;

  // Memory operations that reach the data cache.
  typedef enum logic [1:0] {
    OP_LOAD      = 2'd0,  // read one word (data or capability)
    OP_STORE     = 2'd1,  // byte-masked write; a full-mask store may carry a tag
    OP_POISON    = 2'd2,  // the poison store: paint a poison capability
    OP_GETPOISON = 2'd3   // CGetPoison: report poison state, never trap
  } mem_op_e;

  typedef enum logic [1:0] {
    EXC_NONE   = 2'd0,
    EXC_UAF    = 2'd1,    // load of own-layer poison, same version
    EXC_UNINIT = 2'd2     // load of own-layer poison, other version
  } exc_e;

  // Poison policy controls.
  typedef struct packed {
    logic silent;         // UAF load returns zero instead of trapping
    logic init_trap;      // read-before-write traps instead of reading zero
  } poison_cfg_t;

  typedef struct packed {
    mem_op_e               op;
    cap_t                  cap;
    logic [XLEN-1:0]       addr;
    logic [WORD_BYTES-1:0] bmask;
    cword_t                wdata;
  } core_req_t;

  typedef struct packed {
    cword_t rdata;
    exc_e   exc;
    logic   store_cancelled;
    logic   poisoned;       // result of OP_GETPOISON
  } core_resp_t;

  // Line transfer between cache levels and to memory.
  typedef struct packed {
    logic            we;
    logic [XLEN-1:0] addr;   // line aligned
    cline_t          data;
  } line_req_t;

  // ---------------------------------------------------------------------
  // Functions
  // ---------------------------------------------------------------------

  // The memory system needs only the tag and the POISON bit.
  function automatic logic is_poison(cword_t w);
    return w.tag & w.data[POISON_BIT];
  endfunction

  function automatic logic [XLEN-1:0] poison_base(cword_t w);
    return w.data[XLEN-1:0];
  endfunction

  function automatic logic [XLEN-1:0] poison_len(cword_t w);
    return XLEN'(w.data[PLEN_HI:PLEN_LO]);
  endfunction

  function automatic logic poison_version(cword_t w);
    return w.data[VERSION_BIT];
  endfunction

  // Build the poison capability painted by the poison store: it keeps the
  // bounds and the version of the dereferenced capability.
  function automatic cword_t make_poison(cap_t c);
    cword_t w;
    w.tag                    = 1'b1;
    w.data                   = '0;
    w.data[POISON_BIT]       = 1'b1;
    w.data[VERSION_BIT]      = c.version;
    w.data[PLEN_HI:PLEN_LO]  = c.length[PLEN_W-1:0];
    w.data[XLEN-1:0]         = c.base;
    return w;
  endfunction

  // True when the bounds of c strictly contain the poison bounds of w:
  // the capability belongs to an upstream (broader) allocation layer.
  function automatic logic bounds_broader(cap_t c, cword_t w);
    logic [XLEN:0] ctop, ptop;
    logic          sup, same;
    ctop = {1'b0, c.base} + {1'b0, c.length};
    ptop = {1'b0, poison_base(w)} + {1'b0, poison_len(w)};
    sup  = (c.base <= poison_base(w)) && (ctop >= ptop);
    same = (c.base == poison_base(w)) && (ctop == ptop);
    return sup && !same;
  endfunction

  // Byte-mask merge of a write into a word.
  function automatic logic [WORD_BITS-1:0] merge_bytes(logic [WORD_BITS-1:0] old,
                                                       logic [WORD_BITS-1:0] nw,
                                                       logic [WORD_BYTES-1:0] bm);
    logic [WORD_BITS-1:0] r;
    for (int i = 0; i < WORD_BYTES; i++)
      r[i*8 +: 8] = bm[i] ? nw[i*8 +: 8] : old[i*8 +: 8];
    return r;
  endfunction

endpackage
