// htsp_pkg -- types, constants and helper functions shared by the HTSP core.
//
// HTSP (High Throughput Serial Protocol) carries up to 16 interleaved AXI4-Stream
// virtual channels (VCs) over one 100 Gb/s Ethernet MAC. Every stream inside the core
// is 512 bits (64 bytes) wide. A beat is a packed struct (data, byte keep, 8-bit user,
// last); valid and ready travel beside it.
//
// The header layout (one 64-byte word) and the 6-byte footer follow the published
// protocol tables. Choices of this implementation: multi-byte fields are little-endian
// inside the word (byte i = data[8i+7:8i]); the header checksum is the Internet
// (ones-complement) checksum over the 32 16-bit words of the header; the one-byte
// TKeepLast field holds the number of valid bytes in the last payload word.
package htsp_pkg;

  localparam int unsigned DATA_W    = 512;
  localparam int unsigned BYTES     = DATA_W / 8;   // 64
  localparam int unsigned USER_W    = 8;
  localparam int unsigned MAX_VC    = 16;           // width of the Pause field
  localparam int unsigned VC_W      = 4;
  localparam logic [7:0]  VERSION   = 8'h01;

  // TUSER bit conventions of this implementation.
  localparam int unsigned USER_FCS_ERR = 0;  // MAC RX: FCS error on the last beat
  localparam int unsigned USER_EOFE    = 1;  // core RX output: segment ended in error

  typedef struct packed {
    logic [DATA_W-1:0] data;
    logic [BYTES-1:0]  keep;
    logic [USER_W-1:0] user;
    logic              last;
  } beat_t;

  // Stream between the AXIS MUX and TX HTSP: one beat of a segment.
  //   b.last   : the application's TLAST (end of frame)
  //   seg_last : last beat of this segment (end of frame or burst limit reached)
  typedef struct packed {
    beat_t           b;
    logic [VC_W-1:0] vc;
    logic            seg_last;
  } seg_beat_t;

  // Header field byte offsets.
  localparam int unsigned H_DMAC   = 0;
  localparam int unsigned H_SMAC   = 6;
  localparam int unsigned H_ETYPE  = 12;
  localparam int unsigned H_VER    = 14;
  localparam int unsigned H_TID    = 15;
  localparam int unsigned H_PAUSE  = 16;
  localparam int unsigned H_VC     = 18;
  localparam int unsigned H_TUSER  = 19;
  localparam int unsigned H_OPEN   = 20;
  localparam int unsigned H_XSUM   = 30;
  localparam int unsigned H_OPDATA = 32;
  localparam int unsigned H_UDATA  = 48;

  typedef struct packed {
    logic [47:0]  dmac;
    logic [47:0]  smac;
    logic [15:0]  etype;
    logic [7:0]   tid;
    logic [15:0]  pause;
    logic [7:0]   vc;
    logic [7:0]   tuser_first;
    logic         op_en;
    logic [127:0] op_data;
    logic [127:0] user_data;
  } hdr_t;

  typedef struct packed {
    logic [7:0]  keep_bytes;   // valid bytes in the last payload word, 1..64
    logic [6:0]  tuser_last;   // TUSER[7:1] of the last payload word
    logic        tlast;        // application TLAST
    logic [15:0] pause;
    logic [15:0] size;         // payload bytes
  } ftr_t;

  // Ones-complement 16-bit sum of the 32 little-endian words of a 64-byte word.
  function automatic logic [15:0] ocsum(input logic [DATA_W-1:0] w);
    logic [20:0] s;
    s = '0;
    for (int i = 0; i < DATA_W / 16; i++) s += 21'(w[16*i +: 16]);
    s = 21'(s[15:0]) + 21'(s[20:16]);
    s = 21'(s[15:0]) + 21'(s[20:16]);
    return s[15:0];
  endfunction

  function automatic logic [DATA_W-1:0] pack_hdr(input hdr_t h);
    logic [DATA_W-1:0] w;
    w = '0;
    w[8*H_DMAC   +: 48]  = h.dmac;
    w[8*H_SMAC   +: 48]  = h.smac;
    w[8*H_ETYPE  +: 16]  = h.etype;
    w[8*H_VER    +: 8]   = VERSION;
    w[8*H_TID    +: 8]   = h.tid;
    w[8*H_PAUSE  +: 16]  = h.pause;
    w[8*H_VC     +: 8]   = h.vc;
    w[8*H_TUSER  +: 8]   = h.tuser_first;
    w[8*H_OPEN   +: 8]   = {7'd0, h.op_en};
    w[8*H_OPDATA +: 128] = h.op_data;
    w[8*H_UDATA  +: 128] = h.user_data;
    w[8*H_XSUM   +: 16]  = ~ocsum(w);
    return w;
  endfunction

  function automatic hdr_t unpack_hdr(input logic [DATA_W-1:0] w);
    hdr_t h;
    h.dmac        = w[8*H_DMAC   +: 48];
    h.smac        = w[8*H_SMAC   +: 48];
    h.etype       = w[8*H_ETYPE  +: 16];
    h.tid         = w[8*H_TID    +: 8];
    h.pause       = w[8*H_PAUSE  +: 16];
    h.vc          = w[8*H_VC     +: 8];
    h.tuser_first = w[8*H_TUSER  +: 8];
    h.op_en       = w[8*H_OPEN];
    h.op_data     = w[8*H_OPDATA +: 128];
    h.user_data   = w[8*H_UDATA  +: 128];
    return h;
  endfunction

  // A header is good when its version is 1 and its checksum sums to 0xFFFF.
  function automatic logic hdr_ok(input logic [DATA_W-1:0] w, input logic [15:0] etype);
    return (w[8*H_VER +: 8] == VERSION) && (ocsum(w) == 16'hFFFF) &&
           (w[8*H_ETYPE +: 16] == etype);
  endfunction

  // Footer sits in bytes 0..5 of its own word.
  function automatic logic [DATA_W-1:0] pack_ftr(input ftr_t f);
    logic [DATA_W-1:0] w;
    w = '0;
    w[7:0]   = f.keep_bytes;
    w[15:8]  = {f.tuser_last, f.tlast};
    w[31:16] = f.pause;
    w[47:32] = f.size;
    return w;
  endfunction

  function automatic ftr_t unpack_ftr(input logic [DATA_W-1:0] w);
    ftr_t f;
    f.keep_bytes = w[7:0];
    f.tuser_last = w[15:9];
    f.tlast      = w[8];
    f.pause      = w[31:16];
    f.size       = w[47:32];
    return f;
  endfunction

  // Number of set bits of a keep vector (0..64).
  function automatic logic [7:0] keep_count(input logic [BYTES-1:0] k);
    logic [7:0] n;
    n = '0;
    for (int i = 0; i < BYTES; i++) n += 8'(k[i]);
    return n;
  endfunction

  // Contiguous keep vector with n low bytes valid (n = 0..64).
  function automatic logic [BYTES-1:0] keep_from_count(input logic [7:0] n);
    logic [BYTES-1:0] k;
    for (int i = 0; i < BYTES; i++) k[i] = (8'(i) < n);
    return k;
  endfunction

endpackage
