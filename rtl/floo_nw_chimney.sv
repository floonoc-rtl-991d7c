// floo_nw_chimney: narrow-wide AXI4 network interface (NI) of one tile.
//
// The NI converts between two AXI4 buses of the tile and the three physical links of the
// network. Each bus has an initiator side (a master of the tile issues requests into the
// network: the *_in_req_i / *_in_rsp_o ports) and a target side (requests from the network are
// issued to a slave of the tile: the *_out_req_o / *_out_rsp_i ports). Channels map to links as
// follows: narrow AW/W/AR and wide AW/AR travel on narrow_req; narrow R/B and wide B on
// narrow_rsp; wide W and wide R on wide. Every AXI beat becomes one flit and is sent in one
// cycle.
//
// Initiator side. The destination tile comes from address bits (floo_pkg::addr_to_id).
// Requests ask the matching reorder unit (floo_rob: narrow R, narrow B, wide R, wide B) for
// space and carry its rob_req/rob_idx in the header; a request waits until the unit accepts it
// (end-to-end flow control). The encoder is a round-robin arbiter over the narrow AW, narrow AR,
// wide AW and wide AR requests; after a narrow AW the arbiter stays on the narrow W channel
// until its last beat, so AW and W form one wormhole packet (tail bit on the last W beat). Wide
// W beats follow on the wide link to the destination of the wide AW they belong to. Responses
// from the network are decoded by their axi_ch field into the reorder units, which return
// them in AXI order with the original ID. R data of atomics (ATOP) bypass the R reorder unit.
//
// Target side. Requests from the network are decoded by axi_ch and issued to the local slave.
// floo_meta_buffer stores, per request, the source tile, rob_req/rob_idx and the initiator's
// AXI ID; non-atomic requests are issued with one common ID so the slave answers in order,
// atomics get unique IDs. Responses are encoded with the stored data and sent back. A wide AW
// arrives on narrow_req while its W beats arrive on the wide link, so wide AWs wait in a small
// buffer and are issued in the order in which the W bursts of their sources arrive, keeping
// AW and W order consistent on the AXI bus.
//
// Deadlock rule. Wide W (a request) and wide R (a response) share the wide link, as the
// channel mapping prescribes. A wide AR or AW that cannot be taken at the target (meta FIFO or
// AW buffer full) blocks narrow_req there; if the AW that some wide W burst on the wide link
// waits for is stuck behind it, wide R can no longer leave, and the target never frees space.
// The system must therefore keep the wide transactions in flight towards one target within
// MetaDepth (wide reads and writes) and WideAwBufDepth (wide writes). Read-only wide traffic
// is not limited.
//
// Timing: flits are formed and decoded combinationally. The narrow_req output has one
// register stage, so the NI adds one cycle to a round trip (the paper's figure); the reorder
// units add none to direct responses. Paper: the reorder
// table/ROB and meta FIFO organisation, rr arbiter + encoder / decoder structure, channel to
// link mapping, single-cycle beats, atomic meta buffers and address-based routing. This
// design's own: the AW+W packet, the wide AW/W matching buffer, the bypass of atomic R data,
// the B reorder buffer size, all depths and the channel encoding.
module floo_nw_chimney
  import floo_pkg::*;
#(
  parameter int unsigned NarrowRobSize  = 256,  // 2 KiB of 64-bit beats
  parameter int unsigned WideRobSize    = 128,  // 8 KiB of 512-bit beats
  parameter int unsigned BRobSize       = 32,
  parameter int unsigned TableDepth     = 4,
  parameter int unsigned MetaDepth      = 32,
  parameter int unsigned NumAtomics     = 4,
  parameter int unsigned WideAwBufDepth = 8,
  parameter int unsigned WideWDstDepth  = 4
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  id_t              id_i,
  // narrow AXI: initiator side (tile master -> network) and target side (network -> slave)
  input  narrow_req_t      narrow_in_req_i,
  output narrow_rsp_t      narrow_in_rsp_o,
  output narrow_req_t      narrow_out_req_o,
  input  narrow_rsp_t      narrow_out_rsp_i,
  // wide AXI
  input  wide_req_t        wide_in_req_i,
  output wide_rsp_t        wide_in_rsp_o,
  output wide_req_t        wide_out_req_o,
  input  wide_rsp_t        wide_out_rsp_i,
  // narrow_req link
  output logic             nreq_valid_o,
  input  logic             nreq_ready_i,
  output narrow_req_flit_t nreq_data_o,
  input  logic             nreq_valid_i,
  output logic             nreq_ready_o,
  input  narrow_req_flit_t nreq_data_i,
  // narrow_rsp link
  output logic             nrsp_valid_o,
  input  logic             nrsp_ready_i,
  output narrow_rsp_flit_t nrsp_data_o,
  input  logic             nrsp_valid_i,
  output logic             nrsp_ready_o,
  input  narrow_rsp_flit_t nrsp_data_i,
  // wide link
  output logic             wide_valid_o,
  input  logic             wide_ready_i,
  output wide_flit_t       wide_data_o,
  input  logic             wide_valid_i,
  output logic             wide_ready_o,
  input  wide_flit_t       wide_data_i
);
  typedef logic [NarrowDataWidth+2+NarrowUserWidth-1:0] nr_data_t;
  typedef logic [2+NarrowUserWidth-1:0]                 nb_data_t;
  typedef logic [WideDataWidth+2+WideUserWidth-1:0]     wr_data_t;
  typedef logic [2+WideUserWidth-1:0]                   wb_data_t;

  function automatic hdr_t mk_hdr(id_t dst, id_t src, logic last, logic rob_req,
                                  logic [RobIdxWidth-1:0] rob_idx, logic atop, axi_ch_e ch);
    hdr_t h;
    h.dst_id = dst; h.src_id = src; h.last = last; h.rob_req = rob_req;
    h.rob_idx = rob_idx; h.atop = atop; h.axi_ch = ch;
    return h;
  endfunction

  // =====================================================================
  // Initiator side: requests into the network
  // =====================================================================
  // reorder units
  logic                   nr_alloc_ready, nb_alloc_ready, wr_alloc_ready, wb_alloc_ready;
  logic                   nr_alloc_rob, nb_alloc_rob, wr_alloc_rob, wb_alloc_rob;
  logic [RobIdxWidth-1:0] nr_alloc_idx, nb_alloc_idx, wr_alloc_idx, wb_alloc_idx;
  logic                   nr_alloc, nb_alloc, wr_alloc, wb_alloc;

  id_t naw_dst, nar_dst, waw_dst, war_dst;
  assign naw_dst = addr_to_id(narrow_in_req_i.aw.addr);
  assign nar_dst = addr_to_id(narrow_in_req_i.ar.addr);
  assign waw_dst = addr_to_id(wide_in_req_i.aw.addr);
  assign war_dst = addr_to_id(wide_in_req_i.ar.addr);

  // request encoder: 0 narrow AW, 1 narrow AR, 2 wide AW, 3 wide AR
  localparam int unsigned NumReq = 4;
  logic [NumReq-1:0]  req_valid, req_ready;
  narrow_req_flit_t   req_flit [NumReq];
  logic               req_arb_valid, req_arb_ready;
  narrow_req_flit_t   req_arb_flit;
  logic [1:0]         req_arb_idx;
  logic               nw_mode_q;      // narrow W burst of the last AW is being sent
  logic               ww_dst_ready, ww_dst_valid;
  id_t                ww_dst;

  always_comb begin
    req_flit[0].hdr     = mk_hdr(naw_dst, id_i, 1'b0, nb_alloc_rob, nb_alloc_idx,
                                 narrow_in_req_i.aw.atop != '0, NarrowAw);
    req_flit[0].payload = NarrowReqPayloadW'(narrow_in_req_i.aw);
    req_flit[1].hdr     = mk_hdr(nar_dst, id_i, 1'b1, nr_alloc_rob, nr_alloc_idx, 1'b0, NarrowAr);
    req_flit[1].payload = NarrowReqPayloadW'(narrow_in_req_i.ar);
    req_flit[2].hdr     = mk_hdr(waw_dst, id_i, 1'b1, wb_alloc_rob, wb_alloc_idx,
                                 wide_in_req_i.aw.atop != '0, WideAw);
    req_flit[2].payload = NarrowReqPayloadW'(wide_in_req_i.aw);
    req_flit[3].hdr     = mk_hdr(war_dst, id_i, 1'b1, wr_alloc_rob, wr_alloc_idx, 1'b0, WideAr);
    req_flit[3].payload = NarrowReqPayloadW'(wide_in_req_i.ar);
  end

  assign req_valid[0] = !nw_mode_q && narrow_in_req_i.aw_valid && nb_alloc_ready;
  assign req_valid[1] = !nw_mode_q && narrow_in_req_i.ar_valid && nr_alloc_ready;
  assign req_valid[2] = !nw_mode_q && wide_in_req_i.aw_valid && wb_alloc_ready && ww_dst_ready;
  assign req_valid[3] = !nw_mode_q && wide_in_req_i.ar_valid && wr_alloc_ready;

  floo_rr_arb #(.N(NumReq), .T(narrow_req_flit_t), .Lock(1'b0)) i_req_arb (
    .clk_i, .rst_ni,
    .valid_i     (req_valid),
    .ready_o     (req_ready),
    .data_i      (req_flit),
    .last_i      ('1),
    .out_valid_o (req_arb_valid),
    .out_ready_i (req_arb_ready),
    .out_data_o  (req_arb_flit),
    .idx_o       (req_arb_idx)
  );

  // destination of the narrow W beats: that of the AW just sent
  id_t nw_dst_q;
  narrow_req_flit_t nw_flit;
  always_comb begin
    nw_flit.hdr     = mk_hdr(nw_dst_q, id_i, narrow_in_req_i.w.last, 1'b0, '0, 1'b0, NarrowW);
    nw_flit.payload = NarrowReqPayloadW'(narrow_in_req_i.w);
  end

  // One register stage (2-entry FIFO) cuts the request path into the network.
  logic             enc_valid, enc_ready;
  narrow_req_flit_t enc_flit;
  assign enc_valid     = nw_mode_q ? narrow_in_req_i.w_valid : req_arb_valid;
  assign enc_flit      = nw_mode_q ? nw_flit : req_arb_flit;
  assign req_arb_ready = !nw_mode_q && enc_ready;

  floo_fifo #(.T(narrow_req_flit_t), .Depth(2)) i_nreq_cut (
    .clk_i, .rst_ni,
    .in_valid_i  (enc_valid),
    .in_ready_o  (enc_ready),
    .in_data_i   (enc_flit),
    .out_valid_o (nreq_valid_o),
    .out_ready_i (nreq_ready_i),
    .out_data_o  (nreq_data_o)
  );

  assign nb_alloc = req_ready[0];
  assign nr_alloc = req_ready[1];
  assign wb_alloc = req_ready[2];
  assign wr_alloc = req_ready[3];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      nw_mode_q <= 1'b0;
      nw_dst_q  <= '0;
    end else if (nw_mode_q) begin
      if (narrow_in_req_i.w_valid && enc_ready && narrow_in_req_i.w.last) nw_mode_q <= 1'b0;
    end else if (req_ready[0]) begin
      nw_mode_q <= 1'b1;
      nw_dst_q  <= naw_dst;
    end
  end

  // destinations of wide W bursts, one per wide AW sent
  logic ww_valid, ww_ready;
  floo_fifo #(.T(id_t), .Depth(WideWDstDepth)) i_ww_dst_fifo (
    .clk_i, .rst_ni,
    .in_valid_i  (req_ready[2]),
    .in_ready_o  (ww_dst_ready),
    .in_data_i   (waw_dst),
    .out_valid_o (ww_dst_valid),
    .out_ready_i (ww_valid && ww_ready && wide_in_req_i.w.last),
    .out_data_o  (ww_dst)
  );
  assign ww_valid = ww_dst_valid && wide_in_req_i.w_valid;

  // wide link encoder: 0 initiator wide W, 1 target wide R
  wide_flit_t wlink_flit [2];
  logic [1:0] wlink_valid, wlink_ready, wlink_last;
  logic       wr_out_valid;
  wide_flit_t wr_out_flit;
  always_comb begin
    wlink_flit[0].hdr     = mk_hdr(ww_dst, id_i, wide_in_req_i.w.last, 1'b0, '0, 1'b0, WideW);
    wlink_flit[0].payload = WidePayloadW'(wide_in_req_i.w);
    wlink_flit[1]         = wr_out_flit;
  end
  assign wlink_valid = {wr_out_valid, ww_valid};
  assign wlink_last  = {wlink_flit[1].hdr.last, wlink_flit[0].hdr.last};
  assign ww_ready    = wlink_ready[0];

  floo_rr_arb #(.N(2), .T(wide_flit_t), .Lock(1'b1)) i_wide_arb (
    .clk_i, .rst_ni,
    .valid_i     (wlink_valid),
    .ready_o     (wlink_ready),
    .data_i      (wlink_flit),
    .last_i      (wlink_last),
    .out_valid_o (wide_valid_o),
    .out_ready_i (wide_ready_i),
    .out_data_o  (wide_data_o),
    .idx_o       ()
  );

  // =====================================================================
  // Initiator side: responses from the network
  // =====================================================================
  hdr_t rsp_hdr;
  assign rsp_hdr = nrsp_data_i.hdr;
  narrow_b_t rsp_nb;
  narrow_r_t rsp_nr;
  wide_b_t   rsp_wb;
  wide_r_t   rsp_wr;
  assign rsp_nb = narrow_b_t'(nrsp_data_i.payload[$bits(narrow_b_t)-1:0]);
  assign rsp_nr = narrow_r_t'(nrsp_data_i.payload[$bits(narrow_r_t)-1:0]);
  assign rsp_wb = wide_b_t'(nrsp_data_i.payload[$bits(wide_b_t)-1:0]);
  assign rsp_wr = wide_r_t'(wide_data_i.payload[$bits(wide_r_t)-1:0]);

  logic nb_rsp_v, nr_rsp_v, wb_rsp_v, wr_rsp_v, at_rsp_v;
  logic nb_rsp_r, nr_rsp_r, wb_rsp_r, wr_rsp_r, at_rsp_r;
  assign nb_rsp_v = nrsp_valid_i && rsp_hdr.axi_ch == NarrowB;
  assign nr_rsp_v = nrsp_valid_i && rsp_hdr.axi_ch == NarrowR && !rsp_hdr.atop;
  assign at_rsp_v = nrsp_valid_i && rsp_hdr.axi_ch == NarrowR && rsp_hdr.atop;
  assign wb_rsp_v = nrsp_valid_i && rsp_hdr.axi_ch == WideB;
  assign nrsp_ready_o = (nb_rsp_v && nb_rsp_r) || (nr_rsp_v && nr_rsp_r) ||
                        (at_rsp_v && at_rsp_r) || (wb_rsp_v && wb_rsp_r);

  // narrow B
  logic [NarrowIdWidth-1:0] nb_out_id;
  nb_data_t                 nb_out_data;
  logic                     nb_out_last;
  floo_rob #(.IdWidth(NarrowIdWidth), .TableDepth(TableDepth), .RobSize(BRobSize),
             .data_t(nb_data_t)) i_narrow_b_rob (
    .clk_i, .rst_ni,
    .req_valid_i   (nb_alloc),
    .req_ready_o   (nb_alloc_ready),
    .req_id_i      (narrow_in_req_i.aw.id),
    .req_dst_i     (naw_dst),
    .req_len_i     (8'd0),
    .req_rob_req_o (nb_alloc_rob),
    .req_rob_idx_o (nb_alloc_idx),
    .rsp_valid_i   (nb_rsp_v),
    .rsp_ready_o   (nb_rsp_r),
    .rsp_rob_req_i (rsp_hdr.rob_req),
    .rsp_rob_idx_i (rsp_hdr.rob_idx),
    .rsp_last_i    (1'b1),
    .rsp_data_i    ({rsp_nb.resp, rsp_nb.user}),
    .out_valid_o   (narrow_in_rsp_o.b_valid),
    .out_ready_i   (narrow_in_req_i.b_ready),
    .out_id_o      (nb_out_id),
    .out_last_o    (nb_out_last),
    .out_data_o    (nb_out_data)
  );
  assign narrow_in_rsp_o.b.id = nb_out_id;
  assign {narrow_in_rsp_o.b.resp, narrow_in_rsp_o.b.user} = nb_out_data;

  // narrow R (reordered), merged with the R data of atomics
  logic [NarrowIdWidth-1:0] nr_out_id;
  nr_data_t                 nr_out_data;
  logic                     nr_out_last, nr_out_valid;
  logic [1:0]               nrm_valid, nrm_ready, nrm_last;
  narrow_r_t                nrm_data [2];
  floo_rob #(.IdWidth(NarrowIdWidth), .TableDepth(TableDepth), .RobSize(NarrowRobSize),
             .data_t(nr_data_t)) i_narrow_r_rob (
    .clk_i, .rst_ni,
    .req_valid_i   (nr_alloc),
    .req_ready_o   (nr_alloc_ready),
    .req_id_i      (narrow_in_req_i.ar.id),
    .req_dst_i     (nar_dst),
    .req_len_i     (narrow_in_req_i.ar.len),
    .req_rob_req_o (nr_alloc_rob),
    .req_rob_idx_o (nr_alloc_idx),
    .rsp_valid_i   (nr_rsp_v),
    .rsp_ready_o   (nr_rsp_r),
    .rsp_rob_req_i (rsp_hdr.rob_req),
    .rsp_rob_idx_i (rsp_hdr.rob_idx),
    .rsp_last_i    (rsp_nr.last),
    .rsp_data_i    ({rsp_nr.data, rsp_nr.resp, rsp_nr.user}),
    .out_valid_o   (nr_out_valid),
    .out_ready_i   (nrm_ready[0]),
    .out_id_o      (nr_out_id),
    .out_last_o    (nr_out_last),
    .out_data_o    (nr_out_data)
  );
  always_comb begin
    nrm_data[0].id = nr_out_id;
    {nrm_data[0].data, nrm_data[0].resp, nrm_data[0].user} = nr_out_data;
    nrm_data[0].last = nr_out_last;
    nrm_data[1] = rsp_nr;
  end
  assign nrm_valid = {at_rsp_v, nr_out_valid};
  assign nrm_last  = {rsp_nr.last, nr_out_last};
  assign at_rsp_r  = nrm_ready[1];
  floo_rr_arb #(.N(2), .T(narrow_r_t), .Lock(1'b1)) i_narrow_r_arb (
    .clk_i, .rst_ni,
    .valid_i     (nrm_valid),
    .ready_o     (nrm_ready),
    .data_i      (nrm_data),
    .last_i      (nrm_last),
    .out_valid_o (narrow_in_rsp_o.r_valid),
    .out_ready_i (narrow_in_req_i.r_ready),
    .out_data_o  (narrow_in_rsp_o.r),
    .idx_o       ()
  );

  // wide B
  logic [WideIdWidth-1:0] wb_out_id;
  wb_data_t               wb_out_data;
  logic                   wb_out_last;
  floo_rob #(.IdWidth(WideIdWidth), .TableDepth(TableDepth), .RobSize(BRobSize),
             .data_t(wb_data_t)) i_wide_b_rob (
    .clk_i, .rst_ni,
    .req_valid_i   (wb_alloc),
    .req_ready_o   (wb_alloc_ready),
    .req_id_i      (wide_in_req_i.aw.id),
    .req_dst_i     (waw_dst),
    .req_len_i     (8'd0),
    .req_rob_req_o (wb_alloc_rob),
    .req_rob_idx_o (wb_alloc_idx),
    .rsp_valid_i   (wb_rsp_v),
    .rsp_ready_o   (wb_rsp_r),
    .rsp_rob_req_i (rsp_hdr.rob_req),
    .rsp_rob_idx_i (rsp_hdr.rob_idx),
    .rsp_last_i    (1'b1),
    .rsp_data_i    ({rsp_wb.resp, rsp_wb.user}),
    .out_valid_o   (wide_in_rsp_o.b_valid),
    .out_ready_i   (wide_in_req_i.b_ready),
    .out_id_o      (wb_out_id),
    .out_last_o    (wb_out_last),
    .out_data_o    (wb_out_data)
  );
  assign wide_in_rsp_o.b.id = wb_out_id;
  assign {wide_in_rsp_o.b.resp, wide_in_rsp_o.b.user} = wb_out_data;

  // wide R (the wide link also brings wide W beats for the target side)
  logic [WideIdWidth-1:0] wr_out_id;
  wr_data_t               wr_out_data;
  logic                   tw_v, tw_r;
  assign wr_rsp_v     = wide_valid_i && wide_data_i.hdr.axi_ch == WideR;
  assign tw_v         = wide_valid_i && wide_data_i.hdr.axi_ch == WideW;
  assign wide_ready_o = (wr_rsp_v && wr_rsp_r) || (tw_v && tw_r);
  floo_rob #(.IdWidth(WideIdWidth), .TableDepth(TableDepth), .RobSize(WideRobSize),
             .data_t(wr_data_t)) i_wide_r_rob (
    .clk_i, .rst_ni,
    .req_valid_i   (wr_alloc),
    .req_ready_o   (wr_alloc_ready),
    .req_id_i      (wide_in_req_i.ar.id),
    .req_dst_i     (war_dst),
    .req_len_i     (wide_in_req_i.ar.len),
    .req_rob_req_o (wr_alloc_rob),
    .req_rob_idx_o (wr_alloc_idx),
    .rsp_valid_i   (wr_rsp_v),
    .rsp_ready_o   (wr_rsp_r),
    .rsp_rob_req_i (wide_data_i.hdr.rob_req),
    .rsp_rob_idx_i (wide_data_i.hdr.rob_idx),
    .rsp_last_i    (rsp_wr.last),
    .rsp_data_i    ({rsp_wr.data, rsp_wr.resp, rsp_wr.user}),
    .out_valid_o   (wide_in_rsp_o.r_valid),
    .out_ready_i   (wide_in_req_i.r_ready),
    .out_id_o      (wr_out_id),
    .out_last_o    (wide_in_rsp_o.r.last),
    .out_data_o    (wr_out_data)
  );
  assign wide_in_rsp_o.r.id = wr_out_id;
  assign {wide_in_rsp_o.r.data, wide_in_rsp_o.r.resp, wide_in_rsp_o.r.user} = wr_out_data;

  assign narrow_in_rsp_o.aw_ready = req_ready[0];
  assign narrow_in_rsp_o.ar_ready = req_ready[1];
  assign narrow_in_rsp_o.w_ready  = nw_mode_q && enc_ready;
  assign wide_in_rsp_o.aw_ready   = req_ready[2];
  assign wide_in_rsp_o.ar_ready   = req_ready[3];
  assign wide_in_rsp_o.w_ready    = ww_dst_valid && wlink_ready[0];

  // =====================================================================
  // Target side: requests from the network to the local slaves
  // =====================================================================
  hdr_t       req_hdr;
  narrow_aw_t t_naw;
  narrow_ar_t t_nar;
  narrow_w_t  t_nw;
  wide_aw_t   t_waw;
  wide_ar_t   t_war;
  wide_w_t    t_ww;
  meta_t      t_meta;
  assign req_hdr = nreq_data_i.hdr;
  assign t_naw   = narrow_aw_t'(nreq_data_i.payload[$bits(narrow_aw_t)-1:0]);
  assign t_nar   = narrow_ar_t'(nreq_data_i.payload[$bits(narrow_ar_t)-1:0]);
  assign t_nw    = narrow_w_t'(nreq_data_i.payload[$bits(narrow_w_t)-1:0]);
  assign t_waw   = wide_aw_t'(nreq_data_i.payload[$bits(wide_aw_t)-1:0]);
  assign t_war   = wide_ar_t'(nreq_data_i.payload[$bits(wide_ar_t)-1:0]);
  assign t_ww    = wide_w_t'(wide_data_i.payload[$bits(wide_w_t)-1:0]);

  logic t_naw_v, t_nw_v, t_nar_v, t_waw_v, t_war_v;
  assign t_naw_v = nreq_valid_i && req_hdr.axi_ch == NarrowAw;
  assign t_nw_v  = nreq_valid_i && req_hdr.axi_ch == NarrowW;
  assign t_nar_v = nreq_valid_i && req_hdr.axi_ch == NarrowAr;
  assign t_waw_v = nreq_valid_i && req_hdr.axi_ch == WideAw;
  assign t_war_v = nreq_valid_i && req_hdr.axi_ch == WideAr;

  always_comb begin
    t_meta.src_id  = req_hdr.src_id;
    t_meta.rob_req = req_hdr.rob_req;
    t_meta.rob_idx = req_hdr.rob_idx;
    t_meta.axi_id  = (req_hdr.axi_ch == NarrowAw) ? t_naw.id :
                     (req_hdr.axi_ch == NarrowAr) ? t_nar.id :
                     (req_hdr.axi_ch == WideAw)   ? NarrowIdWidth'(t_waw.id) :
                                                    NarrowIdWidth'(t_war.id);
  end

  // ---- narrow target ----
  logic                     nm_aw_ready, nm_ar_ready;
  logic [NarrowIdWidth-1:0] nm_aw_id, nm_ar_id;
  meta_t                    nm_b_meta, nm_r_meta;
  logic                     nt_b_ready, nt_r_ready;

  floo_meta_buffer #(.AxiIdWidth(NarrowIdWidth), .MaxOutstanding(MetaDepth),
                     .NumAtomics(NumAtomics), .meta_t(meta_t)) i_narrow_meta (
    .clk_i, .rst_ni,
    .aw_ready_o (nm_aw_ready),
    .aw_push_i  (narrow_out_req_o.aw_valid && narrow_out_rsp_i.aw_ready),
    .aw_meta_i  (t_meta),
    .aw_atop_i  (t_naw.atop),
    .aw_id_o    (nm_aw_id),
    .ar_ready_o (nm_ar_ready),
    .ar_push_i  (narrow_out_req_o.ar_valid && narrow_out_rsp_i.ar_ready),
    .ar_meta_i  (t_meta),
    .ar_id_o    (nm_ar_id),
    .b_id_i     (narrow_out_rsp_i.b.id),
    .b_meta_o   (nm_b_meta),
    .b_pop_i    (narrow_out_rsp_i.b_valid && nt_b_ready),
    .r_id_i     (narrow_out_rsp_i.r.id),
    .r_meta_o   (nm_r_meta),
    .r_pop_i    (narrow_out_rsp_i.r_valid && nt_r_ready && narrow_out_rsp_i.r.last)
  );

  always_comb begin
    narrow_out_req_o          = '0;
    narrow_out_req_o.aw       = t_naw;
    narrow_out_req_o.aw.id    = nm_aw_id;
    narrow_out_req_o.aw_valid = t_naw_v && nm_aw_ready;
    narrow_out_req_o.w        = t_nw;
    narrow_out_req_o.w_valid  = t_nw_v;
    narrow_out_req_o.ar       = t_nar;
    narrow_out_req_o.ar.id    = nm_ar_id;
    narrow_out_req_o.ar_valid = t_nar_v && nm_ar_ready;
    narrow_out_req_o.b_ready  = nt_b_ready;
    narrow_out_req_o.r_ready  = nt_r_ready;
  end

  // ---- wide target: AW buffer matched against arriving W bursts ----
  typedef struct packed {
    wide_aw_t aw;
    meta_t    meta;
  } waw_entry_t;
  localparam int unsigned WabW = $clog2(WideAwBufDepth);
  waw_entry_t              wab_q [WideAwBufDepth];
  logic [WideAwBufDepth-1:0] wab_v_q;
  logic                    wab_full, wab_push, wab_pop, wab_hit;
  logic [WabW-1:0]         wab_sel, wab_cnt;
  logic                    tw_act_q;
  logic                    wm_aw_ready, wm_ar_ready;
  logic [WideIdWidth-1:0]  wm_aw_id, wm_ar_id;
  meta_t                   wm_b_meta, wm_r_meta;
  logic                    wt_b_ready, wt_r_ready;

  assign wab_full = wab_v_q[WideAwBufDepth-1];
  assign wab_push = t_waw_v && !wab_full;

  // oldest buffered AW from the source of the W burst waiting at the wide input
  always_comb begin
    wab_sel = '0;
    wab_hit = 1'b0;
    for (int unsigned k = 0; k < WideAwBufDepth; k++) begin
      if (!wab_hit && wab_v_q[k] && wab_q[k].meta.src_id == wide_data_i.hdr.src_id) begin
        wab_sel = WabW'(k);
        wab_hit = 1'b1;
      end
    end
  end

  always_comb begin
    wide_out_req_o          = '0;
    wide_out_req_o.aw       = wab_q[wab_sel].aw;
    wide_out_req_o.aw.id    = wm_aw_id;
    wide_out_req_o.aw_valid = !tw_act_q && tw_v && wab_hit && wm_aw_ready;
    wide_out_req_o.w        = t_ww;
    wide_out_req_o.w_valid  = tw_act_q && tw_v;
    wide_out_req_o.ar       = t_war;
    wide_out_req_o.ar.id    = wm_ar_id;
    wide_out_req_o.ar_valid = t_war_v && wm_ar_ready;
    wide_out_req_o.b_ready  = wt_b_ready;
    wide_out_req_o.r_ready  = wt_r_ready;
  end
  assign wab_pop = wide_out_req_o.aw_valid && wide_out_rsp_i.aw_ready;
  assign tw_r    = tw_act_q && wide_out_rsp_i.w_ready;

  // buffer kept compact: entries in age order from index 0
  always_comb begin
    wab_cnt = '0;
    for (int unsigned k = 0; k < WideAwBufDepth; k++) if (wab_v_q[k]) wab_cnt = WabW'(k + 1);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wab_v_q  <= '0;
      tw_act_q <= 1'b0;
    end else begin
      logic [WideAwBufDepth-1:0] v;
      v = wab_v_q;
      if (wab_pop) begin
        for (int unsigned k = 0; k < WideAwBufDepth; k++)
          if (k >= wab_sel) v[k] = (k + 1 < WideAwBufDepth) ? wab_v_q[k+1] : 1'b0;
      end
      if (wab_push) v[wab_pop ? 32'(wab_cnt) - 1 : 32'(wab_cnt)] = 1'b1;
      wab_v_q <= v;
      if (wab_pop) tw_act_q <= 1'b1;
      else if (tw_v && tw_r && t_ww.last) tw_act_q <= 1'b0;
    end
  end

  always_ff @(posedge clk_i) begin
    if (wab_pop) begin
      for (int unsigned k = 0; k < WideAwBufDepth - 1; k++)
        if (k >= wab_sel) wab_q[k] <= wab_q[k+1];
    end
    if (wab_push) wab_q[wab_pop ? 32'(wab_cnt) - 1 : 32'(wab_cnt)] <= '{aw: t_waw, meta: t_meta};
  end

  floo_meta_buffer #(.AxiIdWidth(WideIdWidth), .MaxOutstanding(MetaDepth),
                     .NumAtomics(NumAtomics), .meta_t(meta_t)) i_wide_meta (
    .clk_i, .rst_ni,
    .aw_ready_o (wm_aw_ready),
    .aw_push_i  (wab_pop),
    .aw_meta_i  (wab_q[wab_sel].meta),
    .aw_atop_i  (wab_q[wab_sel].aw.atop),
    .aw_id_o    (wm_aw_id),
    .ar_ready_o (wm_ar_ready),
    .ar_push_i  (wide_out_req_o.ar_valid && wide_out_rsp_i.ar_ready),
    .ar_meta_i  (t_meta),
    .ar_id_o    (wm_ar_id),
    .b_id_i     (wide_out_rsp_i.b.id),
    .b_meta_o   (wm_b_meta),
    .b_pop_i    (wide_out_rsp_i.b_valid && wt_b_ready),
    .r_id_i     (wide_out_rsp_i.r.id),
    .r_meta_o   (wm_r_meta),
    .r_pop_i    (wide_out_rsp_i.r_valid && wt_r_ready && wide_out_rsp_i.r.last)
  );

  // narrow_req decoder ready
  assign nreq_ready_o = (t_naw_v && narrow_out_req_o.aw_valid && narrow_out_rsp_i.aw_ready) ||
                        (t_nw_v  && narrow_out_rsp_i.w_ready) ||
                        (t_nar_v && narrow_out_req_o.ar_valid && narrow_out_rsp_i.ar_ready) ||
                        (t_waw_v && !wab_full) ||
                        (t_war_v && wide_out_req_o.ar_valid && wide_out_rsp_i.ar_ready);

  // =====================================================================
  // Target side: responses back into the network
  // =====================================================================
  // narrow_rsp encoder: 0 narrow B, 1 narrow R, 2 wide B
  narrow_rsp_flit_t trsp_flit [3];
  logic [2:0]       trsp_valid, trsp_ready, trsp_last;
  narrow_b_t        t_nb;
  narrow_r_t        t_nr;
  wide_b_t          t_wb;
  wide_r_t          t_wr;
  always_comb begin
    t_nb    = narrow_out_rsp_i.b;
    t_nb.id = nm_b_meta.axi_id;
    t_nr    = narrow_out_rsp_i.r;
    t_nr.id = nm_r_meta.axi_id;
    t_wb    = wide_out_rsp_i.b;
    t_wb.id = WideIdWidth'(wm_b_meta.axi_id);
    t_wr    = wide_out_rsp_i.r;
    t_wr.id = WideIdWidth'(wm_r_meta.axi_id);
    trsp_flit[0].hdr = mk_hdr(nm_b_meta.src_id, id_i, 1'b1, nm_b_meta.rob_req,
                              nm_b_meta.rob_idx, narrow_out_rsp_i.b.id != '0, NarrowB);
    trsp_flit[0].payload = NarrowRspPayloadW'(t_nb);
    // R data of an atomic bypasses the initiator's R reorder unit: no rob_req
    trsp_flit[1].hdr = mk_hdr(nm_r_meta.src_id, id_i, narrow_out_rsp_i.r.last,
                              (narrow_out_rsp_i.r.id == '0) && nm_r_meta.rob_req,
                              nm_r_meta.rob_idx, narrow_out_rsp_i.r.id != '0, NarrowR);
    trsp_flit[1].payload = NarrowRspPayloadW'(t_nr);
    trsp_flit[2].hdr = mk_hdr(wm_b_meta.src_id, id_i, 1'b1, wm_b_meta.rob_req,
                              wm_b_meta.rob_idx, wide_out_rsp_i.b.id != '0, WideB);
    trsp_flit[2].payload = NarrowRspPayloadW'(t_wb);
    wr_out_flit.hdr = mk_hdr(wm_r_meta.src_id, id_i, wide_out_rsp_i.r.last, wm_r_meta.rob_req,
                             wm_r_meta.rob_idx, 1'b0, WideR);
    wr_out_flit.payload = WidePayloadW'(t_wr);
  end
  assign trsp_valid   = {wide_out_rsp_i.b_valid, narrow_out_rsp_i.r_valid,
                         narrow_out_rsp_i.b_valid};
  assign trsp_last    = {1'b1, narrow_out_rsp_i.r.last, 1'b1};
  assign nt_b_ready   = trsp_ready[0];
  assign nt_r_ready   = trsp_ready[1];
  assign wt_b_ready   = trsp_ready[2];
  assign wr_out_valid = wide_out_rsp_i.r_valid;
  assign wt_r_ready   = wlink_ready[1];

  floo_rr_arb #(.N(3), .T(narrow_rsp_flit_t), .Lock(1'b1)) i_rsp_arb (
    .clk_i, .rst_ni,
    .valid_i     (trsp_valid),
    .ready_o     (trsp_ready),
    .data_i      (trsp_flit),
    .last_i      (trsp_last),
    .out_valid_o (nrsp_valid_o),
    .out_ready_i (nrsp_ready_i),
    .out_data_o  (nrsp_data_o),
    .idx_o       ()
  );

  // A wide atomic R would need the bypass of the narrow side; wide atomics must not return data.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
      wide_in_req_i.aw_valid |-> !wide_in_req_i.aw.atop[5]);
endmodule
