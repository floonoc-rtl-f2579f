// Shared types and constants of the narrow-wide NoC.
//
// Three physical links run in every direction between routers:
//   req  (119 bit)  narrow AW/W/AR and wide AR
//   rsp  (103 bit)  narrow R/B and wide B
//   wide (603 bit)  wide AW/W and wide R
// Each flit carries a 25-bit header on parallel wires next to a payload that
// holds one complete AXI4 beat, so a packet is never serialised over several
// flits. The header is in the low bits of a flit, the payload above it.
//
// The link sizes (119/103/603), the 48-bit address, the 64/512-bit data, the
// 578-bit wide payload and the 25-bit header come from the paper. The header
// field list (dstID 6, srcID 6, tail 1, rob 1, robIDx, atop 1, axi ch 4) is
// the paper's too, but its printed widths add up to 27 bits while the header
// is printed as 25 bits and 25 + 578 = 603 matches the wide link; this design
// keeps 25 bits by giving robIDx 6 bits instead of 8. AXI ID and user widths
// are this design's choice: narrow ID 5 + user 6 makes the narrow AW payload
// exactly 94 bits and the narrow R payload exactly 78 bits, which reproduces
// the 119-bit and 103-bit links.
package floo_pkg;

  // ------------------------------------------------------------------------
  // AXI4 parameters
  // ------------------------------------------------------------------------
  localparam int unsigned AddrW       = 48;
  localparam int unsigned NarrowDataW = 64;
  localparam int unsigned WideDataW   = 512;
  localparam int unsigned NarrowIdW   = 5;
  localparam int unsigned NarrowUserW = 6;
  localparam int unsigned WideIdW     = 3;
  localparam int unsigned WideUserW   = 1;

  // ------------------------------------------------------------------------
  // Node IDs: {y, x} coordinates, 3 bits each (6-bit dstID/srcID)
  // ------------------------------------------------------------------------
  localparam int unsigned CoordW = 3;
  typedef struct packed {
    logic [CoordW-1:0] y;
    logic [CoordW-1:0] x;
  } id_t;
  localparam int unsigned IdW = $bits(id_t);

  // Router port order (5x5 router)
  typedef enum logic [2:0] {
    North = 3'd0,
    East  = 3'd1,
    South = 3'd2,
    West  = 3'd3,
    Eject = 3'd4
  } route_dir_e;
  localparam int unsigned NumDirs = 5;

  // AXI channel carried by a flit (4-bit "axi ch" header field)
  typedef enum logic [3:0] {
    NarrowAw = 4'd0,
    NarrowW  = 4'd1,
    NarrowAr = 4'd2,
    WideAr   = 4'd3,
    NarrowB  = 4'd4,
    NarrowR  = 4'd5,
    WideB    = 4'd6,
    WideAw   = 4'd7,
    WideW    = 4'd8,
    WideR    = 4'd9
  } axi_ch_e;

  localparam int unsigned RobIdxW = 6;

  // 25-bit flit header
  typedef struct packed {
    axi_ch_e              axi_ch;
    logic                 atop;
    logic [RobIdxW-1:0]   rob_idx;
    logic                 rob_req;
    logic                 last;     // "tail": 0 keeps a wormhole lock open
    id_t                  src_id;
    id_t                  dst_id;
  } hdr_t;
  localparam int unsigned HdrW = $bits(hdr_t);

  // ------------------------------------------------------------------------
  // AXI4 channel structs
  // ------------------------------------------------------------------------
  typedef struct packed {
    logic [NarrowIdW-1:0]   id;
    logic [AddrW-1:0]       addr;
    logic [7:0]             len;
    logic [2:0]             size;
    logic [1:0]             burst;
    logic                   lock;
    logic [3:0]             cache;
    logic [2:0]             prot;
    logic [3:0]             qos;
    logic [3:0]             region;
    logic [5:0]             atop;
    logic [NarrowUserW-1:0] user;
  } n_aw_t;

  typedef struct packed {
    logic [NarrowDataW-1:0]   data;
    logic [NarrowDataW/8-1:0] strb;
    logic                     last;
    logic [NarrowUserW-1:0]   user;
  } n_w_t;

  typedef struct packed {
    logic [NarrowIdW-1:0]   id;
    logic [1:0]             resp;
    logic [NarrowUserW-1:0] user;
  } n_b_t;

  typedef struct packed {
    logic [NarrowIdW-1:0]   id;
    logic [AddrW-1:0]       addr;
    logic [7:0]             len;
    logic [2:0]             size;
    logic [1:0]             burst;
    logic                   lock;
    logic [3:0]             cache;
    logic [2:0]             prot;
    logic [3:0]             qos;
    logic [3:0]             region;
    logic [NarrowUserW-1:0] user;
  } n_ar_t;

  typedef struct packed {
    logic [NarrowIdW-1:0]   id;
    logic [NarrowDataW-1:0] data;
    logic [1:0]             resp;
    logic                   last;
    logic [NarrowUserW-1:0] user;
  } n_r_t;

  typedef struct packed {
    logic [WideIdW-1:0]   id;
    logic [AddrW-1:0]     addr;
    logic [7:0]           len;
    logic [2:0]           size;
    logic [1:0]           burst;
    logic                 lock;
    logic [3:0]           cache;
    logic [2:0]           prot;
    logic [3:0]           qos;
    logic [3:0]           region;
    logic [5:0]           atop;
    logic [WideUserW-1:0] user;
  } w_aw_t;

  typedef struct packed {
    logic [WideUserW-1:0]   user;
    logic                   last;
    logic [WideDataW/8-1:0] strb;
    logic [WideDataW-1:0]   data;
  } w_w_t;

  typedef struct packed {
    logic [WideIdW-1:0]   id;
    logic [1:0]           resp;
    logic [WideUserW-1:0] user;
  } w_b_t;

  typedef struct packed {
    logic [WideIdW-1:0]   id;
    logic [AddrW-1:0]     addr;
    logic [7:0]           len;
    logic [2:0]           size;
    logic [1:0]           burst;
    logic                 lock;
    logic [3:0]           cache;
    logic [2:0]           prot;
    logic [3:0]           qos;
    logic [3:0]           region;
    logic [WideUserW-1:0] user;
  } w_ar_t;

  typedef struct packed {
    logic [WideIdW-1:0]   id;
    logic [WideDataW-1:0] data;
    logic [1:0]           resp;
    logic                 last;
    logic [WideUserW-1:0] user;
  } w_r_t;

  // AXI4 request/response bundles (initiator drives *_req_t)
  typedef struct packed {
    n_aw_t aw; logic aw_valid;
    n_w_t  w;  logic w_valid;
    logic  b_ready;
    n_ar_t ar; logic ar_valid;
    logic  r_ready;
  } n_req_t;

  typedef struct packed {
    logic  aw_ready;
    logic  ar_ready;
    logic  w_ready;
    logic  b_valid; n_b_t b;
    logic  r_valid; n_r_t r;
  } n_rsp_t;

  typedef struct packed {
    w_aw_t aw; logic aw_valid;
    w_w_t  w;  logic w_valid;
    logic  b_ready;
    w_ar_t ar; logic ar_valid;
    logic  r_ready;
  } w_req_t;

  typedef struct packed {
    logic  aw_ready;
    logic  ar_ready;
    logic  w_ready;
    logic  b_valid; w_b_t b;
    logic  r_valid; w_r_t r;
  } w_rsp_t;

  // ------------------------------------------------------------------------
  // Physical links
  // ------------------------------------------------------------------------
  localparam int unsigned ReqPayloadW  = 94;   // max(n_aw, n_w, n_ar, w_ar)
  localparam int unsigned RspPayloadW  = 78;   // max(n_r, n_b, w_b)
  localparam int unsigned WidePayloadW = 578;  // max(w_aw, w_w, w_r)

  localparam int unsigned ReqFlitW  = HdrW + ReqPayloadW;   // 119
  localparam int unsigned RspFlitW  = HdrW + RspPayloadW;   // 103
  localparam int unsigned WideFlitW = HdrW + WidePayloadW;  // 603

  typedef struct packed {
    logic [ReqPayloadW-1:0] payload;
    hdr_t                   hdr;
  } req_flit_t;

  typedef struct packed {
    logic [RspPayloadW-1:0] payload;
    hdr_t                   hdr;
  } rsp_flit_t;

  typedef struct packed {
    logic [WidePayloadW-1:0] payload;
    hdr_t                    hdr;
  } wide_flit_t;

  // One direction of the three links between two neighbours: flits and
  // valids flow one way, readies travel in the opposite bundle.
  typedef struct packed {
    logic       req_valid;
    req_flit_t  req;
    logic       rsp_valid;
    rsp_flit_t  rsp;
    logic       wide_valid;
    wide_flit_t wide;
  } link_t;

  typedef struct packed {
    logic req_ready;
    logic rsp_ready;
    logic wide_ready;
  } link_rdy_t;

  // AXI ATOP: atop[5] set means the atomic also returns read data on R.
  function automatic logic atop_has_r(logic [5:0] atop);
    return atop[5];
  endfunction

  // Address decode: the destination node is held in address bits
  // [AddrDstOffset +: 6] as {y, x}.
  localparam int unsigned AddrDstOffset = 40;

endpackage
