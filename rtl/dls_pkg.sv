// dls_pkg: types and constants shared by the DLS (directoryless shared LLC)
// chip multiprocessor. It fixes the system sizes (16 cores on a 4x4 mesh,
// 64-byte blocks, 128-bit network datapath), the cache-state encodings of the
// private caches (INV/SHD/SUS/EXC/MOD) and of the LLC (INV/EXC/MOD), the
// coherence message types and the flit and message formats.
// The state and message sets follow the protocol; the numeric encodings,
// the 32-bit physical address and the header layout are this design's choice.
package dls_pkg;

  // ---------------- system sizes ----------------
  localparam int unsigned NCORES    = 16;          // cores = LLC banks = tiles
  localparam int unsigned MESH_X    = 4;
  localparam int unsigned MESH_Y    = 4;
  localparam int unsigned ID_W      = 4;           // core / bank / node id width
  localparam int unsigned ADDR_W    = 32;          // physical byte address
  localparam int unsigned LINE_BYTES= 64;          // cache block
  localparam int unsigned OFF_W     = 6;
  localparam int unsigned LINE_W    = LINE_BYTES*8; // 512
  localparam int unsigned LADDR_W   = ADDR_W-OFF_W; // block address width (26)
  localparam int unsigned WORD_W    = 64;          // core load/store word
  localparam int unsigned WOFF_W    = 3;           // word index in a block
  localparam int unsigned FLIT_W    = 128;         // network datapath
  localparam int unsigned DATA_FLITS= LINE_W/FLIT_W; // 4 body flits per block

  typedef logic [ID_W-1:0]    id_t;
  typedef logic [LADDR_W-1:0] laddr_t;
  typedef logic [LINE_W-1:0]  line_t;
  typedef logic [WORD_W-1:0]  word_t;

  // ---------------- cache states ----------------
  typedef enum logic [2:0] {
    PC_INV = 3'd0,
    PC_SHD = 3'd1,
    PC_SUS = 3'd2,   // shared block suspected stale after a synchronization
    PC_EXC = 3'd3,
    PC_MOD = 3'd4
  } pc_state_e;

  typedef enum logic [1:0] {
    LLC_INV = 2'd0,
    LLC_EXC = 2'd1,  // LLC data is the newest
    LLC_MOD = 2'd2   // the owner core may hold newer data
  } llc_state_e;

  // Owner field of an LLC tag: "-1" (no owner) is valid = 0.
  typedef struct packed {
    logic valid;
    id_t  id;
  } owner_t;

  // ---------------- messages ----------------
  typedef enum logic [3:0] {
    M_READ       = 4'd0,  // core -> LLC, load miss or SUS load check
    M_RDEX       = 4'd1,  // core -> LLC, store miss
    M_UPGRADE    = 4'd2,  // core -> LLC, wants to write its EXC block
    M_REPLACE    = 4'd3,  // core -> LLC, evicts an EXC/MOD block (data if MOD)
    M_SHD_INT    = 4'd4,  // LLC -> owner, Read hit a MOD LLC block
    M_EXC_INT    = 4'd5,  // LLC -> owner, RdEx hit an owned block
    M_ACK_DATA   = 4'd6,  // owner -> LLC, reply to an intervention
    M_ACK_CHANGE = 4'd7,  // LLC -> core, reply to Upgrade/Replace
    M_REP_SHD    = 4'd8,  // LLC -> core, shared block
    M_REP_EXC    = 4'd9   // LLC -> core, exclusive block
  } msg_type_e;

  typedef struct packed {
    msg_type_e typ;
    id_t       src;
    id_t       dst;
    logic      dst_llc;   // 1: the LLC bank of tile dst, 0: its private cache
    logic      has_data;  // a 512-bit block follows in DATA_FLITS body flits
    laddr_t    addr;      // block address
  } hdr_t;

  localparam int unsigned HDR_W = $bits(hdr_t);

  typedef struct packed {
    hdr_t  hdr;
    line_t data;
  } msg_t;

  typedef struct packed {
    logic              head;
    logic              tail;
    logic [FLIT_W-1:0] payload;  // head flit: hdr_t in the low bits
  } flit_t;

  // ---------------- core interface ----------------
  typedef enum logic [1:0] {
    OP_LOAD  = 2'd0,
    OP_STORE = 2'd1,
    OP_SYNC  = 2'd2
  } core_op_e;

  // Bank that holds a block (S-NUCA, block-interleaved).
  function automatic id_t home_bank(laddr_t a);
    return a[ID_W-1:0];
  endfunction

  function automatic logic [WORD_W-1:0] get_word(line_t l, logic [WOFF_W-1:0] w);
    return l[w*WORD_W +: WORD_W];
  endfunction

endpackage
