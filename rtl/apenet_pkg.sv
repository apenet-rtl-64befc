// apenet_pkg: types and constants shared by the APELink network controller.
//
// A packet is a 64-bit header word, a payload of LEN 128-bit words (2*LEN
// 64-bit words) and a 64-bit footer word, so it occupies 2+2*LEN words in
// every buffer it passes through. Header and footer of one 64-bit word each
// and the 128-bit payload granule follow the paper; the field layout of the
// header, the XOR checksum in the footer and the 48-bit link-word format are
// this design's own choices. On a link the words of a packet are sent as a
// continuous bit stream cut into 40-bit chunks, one chunk per 48-bit link
// word; the last chunk of a packet is marked and padded.
package apenet_pkg;

  localparam int unsigned WORD_W   = 64;  // datapath width (paper: 64b)
  localparam int unsigned NLINKS   = 6;   // X+, X-, Y+, Y-, Z+, Z-
  localparam int unsigned NPORTS   = 7;   // six links + the local port
  localparam int unsigned COORD_W  = 4;   // up to 16 nodes per dimension
  localparam int unsigned LEN_W    = 10;  // payload length in 128-bit words
  localparam int unsigned LINK_W   = 48;  // serializer word (paper: 48bit)
  localparam int unsigned CREDIT_W = 6;   // credit-return field of a link word
  localparam int unsigned CHUNK_W  = 40;  // packet bits carried by one link word

  // Crossbar port numbering. Even = plus direction, odd = minus direction.
  typedef enum logic [2:0] {
    P_XP    = 3'd0,
    P_XM    = 3'd1,
    P_YP    = 3'd2,
    P_YM    = 3'd3,
    P_ZP    = 3'd4,
    P_ZM    = 3'd5,
    P_LOCAL = 3'd6
  } port_e;

  typedef struct packed {
    logic [COORD_W-1:0] z;
    logic [COORD_W-1:0] y;
    logic [COORD_W-1:0] x;
  } coord_t;

  // Header word. The host's command word has the same layout; the local
  // port fills in the source coordinates.
  typedef struct packed {
    logic [15:0]      tag;   // [63:48] free for software
    logic [3:0]       rsv1;  // [47:44]
    coord_t           src;   // [43:32]
    logic [3:0]       rsv0;  // [31:28]
    coord_t           dst;   // [27:16]
    logic [5:0]       rsv2;  // [15:10]
    logic [LEN_W-1:0] len;   // [9:0] payload length, 128-bit words
  } header_t;

  // A 64-bit word on its way through the crossbar, with packet framing.
  typedef struct packed {
    logic              sop;
    logic              eop;
    logic [WORD_W-1:0] data;
  } flit_t;

  // 48-bit word on a serializer: 40 bits of packet stream, least
  // significant bit first, plus a kind and a credit-return field.
  typedef enum logic [1:0] {
    LK_IDLE = 2'd0,   // no packet data
    LK_DATA = 2'd1,   // 40 bits of packet stream
    LK_END  = 2'd2    // last chunk of a packet; bits past the packet are pad
  } link_kind_e;

  typedef struct packed {
    link_kind_e           kind;    // [47:46]
    logic [CREDIT_W-1:0]  credit;  // [45:40] receive-buffer words freed
    logic [CHUNK_W-1:0]   data;    // [39:0]
  } link_word_t;

  // Routing configuration written by software.
  typedef struct packed {
    logic [2:0] ovr_dir;  // per dimension {z,y,x}: 1 = minus direction
    logic [2:0] ovr_en;   // per dimension: force ovr_dir instead of shortest
    coord_t     size;     // torus size per dimension (1..15, 0 means 16)
    coord_t     me;       // this node's coordinates
  } route_cfg_t;

  // Number of 64-bit words a packet occupies.
  function automatic int unsigned pkt_words(logic [LEN_W-1:0] len);
    return 2 + 2 * int'(len);
  endfunction

endpackage
