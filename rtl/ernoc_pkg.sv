// ernoc_pkg: types and constants shared by the NoC-aware early-restart
// (ER-NoC) many-core design.
//
// A 64-byte cache block of eight 64-bit words travels as one reply packet of
// five 128-bit flits: a head flit H holding only the header, then B0, B1, B2
// and the tail T, each carrying two words (B0 = words 0-1, ..., T = words 6-7).
// A request is a single head-and-tail flit. The header carries the 2-bit
// critical flit identifier (CFI) naming which data flit holds the word the
// core is waiting for. Word, flit and block sizes, the flit counts and the
// 3 VCs per port follow the paper; the header layout, address width, buffer
// depth and VC classes are this design's own choices.
package ernoc_pkg;

  localparam int unsigned WORD_W          = 64;
  localparam int unsigned FLIT_W          = 128;
  localparam int unsigned WORDS_PER_FLIT  = FLIT_W / WORD_W;          // 2
  localparam int unsigned WORDS_PER_BLOCK = 8;
  localparam int unsigned BLOCK_W         = WORD_W * WORDS_PER_BLOCK; // 512
  localparam int unsigned BLOCK_BYTES     = BLOCK_W / 8;              // 64
  localparam int unsigned OFFSET_W        = $clog2(BLOCK_BYTES);      // 6
  localparam int unsigned DATA_FLITS      = BLOCK_W / FLIT_W;         // 4
  localparam int unsigned CFI_W           = $clog2(DATA_FLITS);       // 2

  // Physical byte address. 25 bits = 32 MiB = 64 banks x 512 KiB, so the
  // whole address space is held by the distributed LLC.
  localparam int unsigned ADDR_W   = 25;
  localparam int unsigned COORD_W  = 4;   // mesh coordinates up to 16x16

  localparam int unsigned NUM_VC   = 3;   // VC0: requests, VC1..2: replies
  localparam int unsigned VC_W     = 2;
  localparam int unsigned BUF_DEPTH = 4;  // flits per VC buffer
  localparam int unsigned NUM_PORTS = 5;

  // Router CFI counter C: 0..3 = flits still to pass before (and including)
  // the critical flit; NOPRI = no priority (critical flit already gone, or a
  // request packet).
  localparam int unsigned CNT_W = 3;
  localparam logic [CNT_W-1:0] NOPRI = 3'd4;

  typedef enum logic [2:0] {
    P_EAST  = 3'd0,
    P_SOUTH = 3'd1,
    P_WEST  = 3'd2,
    P_NORTH = 3'd3,
    P_LOCAL = 3'd4
  } port_e;

  typedef enum logic [1:0] {
    FT_HEAD     = 2'd0,
    FT_BODY     = 2'd1,
    FT_TAIL     = 2'd2,
    FT_HEADTAIL = 2'd3
  } ftype_e;

  typedef enum logic {
    MSG_REQ = 1'b0,
    MSG_REP = 1'b1
  } msg_e;

  typedef struct packed {
    msg_e               msg;
    logic [CFI_W-1:0]   cfi;
    logic [COORD_W-1:0] src_x;
    logic [COORD_W-1:0] src_y;
    logic [COORD_W-1:0] dst_x;
    logic [COORD_W-1:0] dst_y;
    logic [ADDR_W-1:0]  addr;
  } header_t;

  localparam int unsigned HDR_W = $bits(header_t);

  typedef struct packed {
    ftype_e            ftype;
    logic [VC_W-1:0]   vc;
    logic [FLIT_W-1:0] data;   // header_t in the low bits of a head flit
  } flit_t;

  function automatic logic is_head(ftype_e t);
    return (t == FT_HEAD) || (t == FT_HEADTAIL);
  endfunction

  function automatic logic is_tail(ftype_e t);
    return (t == FT_TAIL) || (t == FT_HEADTAIL);
  endfunction

  function automatic header_t flit_hdr(flit_t f);
    return header_t'(f.data[HDR_W-1:0]);
  endfunction

endpackage
