// floo_pkg: shared types and constants of the narrow-wide network.
//
// The network carries AXI4 traffic of two AXI buses, a narrow one (64-bit data) and a wide one
// (512-bit data), over three physical links per direction: narrow_req, narrow_rsp and wide.
// Every flit is one header plus one payload and is sent in a single cycle; the header travels
// on its own wires beside the payload, so there are no separate header or tail flits.
//
// Header fields and their widths (dst id 6, src id 6, tail 1, rob 1, rob idx 8, atop 1,
// axi ch 4) and the wide W payload (user 1, last 1, strb 64, data 512) follow the published
// flit diagram. The published header total (25 bits) is smaller than the sum of its fields
// (27 bits); this package keeps the field widths, so the wide link is 605 bits instead of 603.
// The narrow links come out at the published 119 and 103 bits with the AXI ID and user widths
// chosen below (narrow ID 4 + user 5). Those ID/user widths, the node-id split into x and y,
// the address bits that select the destination tile and the channel encoding are this
// design's own choices.
package floo_pkg;

  // ---------------- AXI bus dimensions ----------------
  localparam int unsigned AddrWidth       = 48;
  localparam int unsigned NarrowDataWidth = 64;
  localparam int unsigned WideDataWidth   = 512;
  localparam int unsigned NarrowIdWidth   = 4;
  localparam int unsigned NarrowUserWidth = 5;
  localparam int unsigned WideIdWidth     = 3;
  localparam int unsigned WideUserWidth   = 1;

  // ---------------- network dimensions ----------------
  localparam int unsigned XWidth      = 3;
  localparam int unsigned YWidth      = 3;
  localparam int unsigned RobIdxWidth = 8;
  // Address bits that name the destination tile (x then y); each tile owns 1 MiB.
  localparam int unsigned AddrXOffset = 20;
  localparam int unsigned AddrYOffset = AddrXOffset + XWidth;

  typedef struct packed {
    logic [YWidth-1:0] y;
    logic [XWidth-1:0] x;
  } id_t;

  // AXI channel carried by a flit (4-bit field of the header).
  typedef enum logic [3:0] {
    NarrowAw = 4'd0,
    NarrowW  = 4'd1,
    NarrowAr = 4'd2,
    WideAr   = 4'd3,
    WideAw   = 4'd4,
    NarrowB  = 4'd5,
    NarrowR  = 4'd6,
    WideB    = 4'd7,
    WideW    = 4'd8,
    WideR    = 4'd9
  } axi_ch_e;

  typedef struct packed {
    id_t                    dst_id;
    id_t                    src_id;
    logic                   last;     // tail: ends a wormhole packet
    logic                   rob_req;  // response must go through the reorder buffer
    logic [RobIdxWidth-1:0] rob_idx;  // ROB slot, or the AXI ID when rob_req is 0
    logic                   atop;     // atomic transaction
    axi_ch_e                axi_ch;
  } hdr_t;

  // ---------------- AXI4 channel payloads ----------------
  typedef struct packed {
    logic [NarrowIdWidth-1:0]   id;
    logic [AddrWidth-1:0]       addr;
    logic [7:0]                 len;
    logic [2:0]                 size;
    logic [1:0]                 burst;
    logic                       lock;
    logic [3:0]                 cache;
    logic [2:0]                 prot;
    logic [3:0]                 qos;
    logic [3:0]                 region;
    logic [5:0]                 atop;
    logic [NarrowUserWidth-1:0] user;
  } narrow_aw_t;

  typedef struct packed {
    logic [NarrowIdWidth-1:0]   id;
    logic [AddrWidth-1:0]       addr;
    logic [7:0]                 len;
    logic [2:0]                 size;
    logic [1:0]                 burst;
    logic                       lock;
    logic [3:0]                 cache;
    logic [2:0]                 prot;
    logic [3:0]                 qos;
    logic [3:0]                 region;
    logic [NarrowUserWidth-1:0] user;
  } narrow_ar_t;

  typedef struct packed {
    logic [NarrowDataWidth-1:0]   data;
    logic [NarrowDataWidth/8-1:0] strb;
    logic                         last;
    logic [NarrowUserWidth-1:0]   user;
  } narrow_w_t;

  typedef struct packed {
    logic [NarrowIdWidth-1:0]   id;
    logic [1:0]                 resp;
    logic [NarrowUserWidth-1:0] user;
  } narrow_b_t;

  typedef struct packed {
    logic [NarrowIdWidth-1:0]   id;
    logic [NarrowDataWidth-1:0] data;
    logic [1:0]                 resp;
    logic                       last;
    logic [NarrowUserWidth-1:0] user;
  } narrow_r_t;

  typedef struct packed {
    logic [WideIdWidth-1:0]   id;
    logic [AddrWidth-1:0]     addr;
    logic [7:0]               len;
    logic [2:0]               size;
    logic [1:0]               burst;
    logic                     lock;
    logic [3:0]               cache;
    logic [2:0]               prot;
    logic [3:0]               qos;
    logic [3:0]               region;
    logic [5:0]               atop;
    logic [WideUserWidth-1:0] user;
  } wide_aw_t;

  typedef struct packed {
    logic [WideIdWidth-1:0]   id;
    logic [AddrWidth-1:0]     addr;
    logic [7:0]               len;
    logic [2:0]               size;
    logic [1:0]               burst;
    logic                     lock;
    logic [3:0]               cache;
    logic [2:0]               prot;
    logic [3:0]               qos;
    logic [3:0]               region;
    logic [WideUserWidth-1:0] user;
  } wide_ar_t;

  typedef struct packed {
    logic [WideDataWidth-1:0]   data;
    logic [WideDataWidth/8-1:0] strb;
    logic                       last;
    logic [WideUserWidth-1:0]   user;
  } wide_w_t;

  typedef struct packed {
    logic [WideIdWidth-1:0]   id;
    logic [1:0]               resp;
    logic [WideUserWidth-1:0] user;
  } wide_b_t;

  typedef struct packed {
    logic [WideIdWidth-1:0]   id;
    logic [WideDataWidth-1:0] data;
    logic [1:0]               resp;
    logic                     last;
    logic [WideUserWidth-1:0] user;
  } wide_r_t;

  // AXI4 request/response bundles (master drives req, slave drives rsp).
  typedef struct packed {
    narrow_aw_t aw; logic aw_valid;
    narrow_w_t  w;  logic w_valid;
    logic       b_ready;
    narrow_ar_t ar; logic ar_valid;
    logic       r_ready;
  } narrow_req_t;

  typedef struct packed {
    logic      aw_ready;
    logic      ar_ready;
    logic      w_ready;
    narrow_b_t b; logic b_valid;
    narrow_r_t r; logic r_valid;
  } narrow_rsp_t;

  typedef struct packed {
    wide_aw_t aw; logic aw_valid;
    wide_w_t  w;  logic w_valid;
    logic     b_ready;
    wide_ar_t ar; logic ar_valid;
    logic     r_ready;
  } wide_req_t;

  typedef struct packed {
    logic    aw_ready;
    logic    ar_ready;
    logic    w_ready;
    wide_b_t b; logic b_valid;
    wide_r_t r; logic r_valid;
  } wide_rsp_t;

  // ---------------- link flits ----------------
  function automatic int unsigned max2(int unsigned a, int unsigned b);
    return (a > b) ? a : b;
  endfunction

  localparam int unsigned NarrowReqPayloadW = max2(max2($bits(narrow_aw_t), $bits(narrow_ar_t)),
      max2($bits(narrow_w_t), max2($bits(wide_aw_t), $bits(wide_ar_t))));
  localparam int unsigned NarrowRspPayloadW = max2($bits(narrow_r_t),
      max2($bits(narrow_b_t), $bits(wide_b_t)));
  localparam int unsigned WidePayloadW = max2($bits(wide_w_t), $bits(wide_r_t));

  typedef struct packed {
    hdr_t                         hdr;
    logic [NarrowReqPayloadW-1:0] payload;
  } narrow_req_flit_t;

  typedef struct packed {
    hdr_t                         hdr;
    logic [NarrowRspPayloadW-1:0] payload;
  } narrow_rsp_flit_t;

  typedef struct packed {
    hdr_t                    hdr;
    logic [WidePayloadW-1:0] payload;
  } wide_flit_t;

  // Target-side record of a request: where and how its response is sent back.
  typedef struct packed {
    id_t                      src_id;
    logic                     rob_req;
    logic [RobIdxWidth-1:0]   rob_idx;
    logic [NarrowIdWidth-1:0] axi_id;   // AXI ID at the initiator (wide IDs zero-extended)
  } meta_t;

  // ---------------- router ports ----------------
  // Port order of the 5x5 router: four cardinal directions and the local (eject) port.
  typedef enum logic [2:0] {
    North = 3'd0,
    East  = 3'd1,
    South = 3'd2,
    West  = 3'd3,
    Eject = 3'd4
  } route_dir_e;

  localparam int unsigned NumDirections = 5;

  // Routing decision of a router: XY from the coordinates, or a static table indexed by the
  // destination id whose entries are output port numbers (3 bits each).
  typedef enum logic {
    XyRouting = 1'b0,
    IdTable   = 1'b1
  } route_algo_e;

  localparam int unsigned NumNodeIds = 2 ** (XWidth + YWidth);

  // Dimension-ordered XY routing: first along x, then along y. North is y+1, East is x+1.
  function automatic route_dir_e xy_route(id_t dst, id_t cur);
    if (dst.x > cur.x) return East;
    if (dst.x < cur.x) return West;
    if (dst.y > cur.y) return North;
    if (dst.y < cur.y) return South;
    return Eject;
  endfunction

  // Destination tile of an address.
  function automatic id_t addr_to_id(logic [AddrWidth-1:0] addr);
    id_t id;
    id.x = addr[AddrXOffset +: XWidth];
    id.y = addr[AddrYOffset +: YWidth];
    return id;
  endfunction

endpackage
