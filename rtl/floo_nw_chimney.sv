// Narrow-wide AXI4 network interface (NI), RoB-less configuration.
//
// The NI sits between a tile's two AXI4 buses (64-bit "narrow", 512-bit
// "wide") and the local port of the three-link router. It works in both
// directions at once:
//
// Initiator side (local AXI masters -> NoC -> remote targets)
//   * AW/AR: the destination node is taken from the address, bits
//     [AddrDstOffset +: 6] = {y, x}. A floo_rob_less ordering unit per AXI
//     direction and bus stalls a request whose ID still has transactions
//     outstanding to another destination. ATOPs bypass it.
//   * Each AXI beat becomes exactly one flit: a header (floo_pkg::hdr_t) on
//     parallel wires and the AXI beat as payload.
//   * Writes: AW is sent with last = 0 and the W beats follow on the same
//     link, the final one with last = 1. The link arbiter stays on that write
//     until the last beat, and the routers hold the path (wormhole), so the
//     W beats, which carry no ID, can never be interleaved with another
//     write.
//   * Responses (R/B) coming back are handed to the AXI bus unchanged,
//     without any reorder buffer; their completion decrements the ordering
//     unit's counters.
//
// Target side (NoC -> local AXI slaves, e.g. the tile's L1 or an HBM channel)
//   * AW/AR flits are issued on the local AXI port under a new ID from a
//     floo_meta_buffer: ID 0 for all non-atomic transactions (so the target
//     returns them in order) and a unique ID per ATOP. The source node and
//     original ID are stored and restored into the response flit, which is
//     sent back to the source.
//
// Link mapping (paper Table I):
//   req  link: narrow AW, narrow W, narrow AR, wide AR
//   rsp  link: narrow R, narrow B, wide B
//   wide link: wide AW, wide W, wide R
//
// Timing: one register stage (floo_fifo) on every link output and one on
// every link input, so AXI->flit and flit->AXI each take one cycle; full
// throughput of one flit per cycle per link. Candidates for a shared link are
// chosen by a round-robin tree arbiter.
// What follows the paper: the RoB-less ordering, the link mapping, the
// single-flit packets with parallel header, AW/W bundling with wormhole
// routing, the meta buffer with separate ATOP slots. This design's own
// choices: the address-to-node decode, buffer depths, the ATOP ID numbering,
// the requirement that a write's AW is handed over before its W beats.
module floo_nw_chimney
  import floo_pkg::*;
#(
  parameter int unsigned MaxTxns     = 8,  // outstanding per AXI ID (initiator)
  parameter int unsigned MetaDepth   = 8,  // outstanding non-atomics (target)
  parameter int unsigned NumAtop     = 4,  // outstanding ATOPs (target)
  parameter int unsigned LinkInDepth = 2,
  parameter int unsigned LinkOutDepth = 2
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  input  id_t       id_i,
  // local initiators (NI acts as AXI slave)
  input  n_req_t    n_in_req_i,
  output n_rsp_t    n_in_rsp_o,
  input  w_req_t    w_in_req_i,
  output w_rsp_t    w_in_rsp_o,
  // local targets (NI acts as AXI master)
  output n_req_t    n_out_req_o,
  input  n_rsp_t    n_out_rsp_i,
  output w_req_t    w_out_req_o,
  input  w_rsp_t    w_out_rsp_i,
  // router local port
  output link_t     floo_o,
  input  link_rdy_t floo_rdy_i,
  input  link_t     floo_i,
  output link_rdy_t floo_rdy_o
);

  function automatic id_t addr_dst(logic [AddrW-1:0] addr);
    return id_t'(addr[AddrDstOffset +: IdW]);
  endfunction

  function automatic hdr_t mk_hdr(id_t dst, id_t src, logic last, logic atop, axi_ch_e ch);
    hdr_t h;
    h         = '0;
    h.dst_id  = dst;
    h.src_id  = src;
    h.last    = last;
    h.atop    = atop;
    h.axi_ch  = ch;
    return h;
  endfunction

  // Link input side, declared ahead of use
  logic       req_in_valid, rsp_in_valid, wide_in_valid;
  logic       req_in_ready, rsp_in_ready, wide_in_ready;
  req_flit_t  req_in_flit;
  rsp_flit_t  rsp_in_flit;
  wide_flit_t wide_in_flit;
  logic rsp_in_is_nb, rsp_in_is_nr, rsp_in_is_wb, wide_in_is_r;
  logic [2:0]                 rspc_valid, rspc_gnt;

  // ===========================================================================
  // Initiator side: requests into the NoC
  // ===========================================================================
  id_t  n_aw_dst, n_ar_dst, w_aw_dst, w_ar_dst;
  logic n_aw_atop, w_aw_atop;
  logic n_aw_stall, n_ar_stall, w_aw_stall, w_ar_stall;
  logic n_aw_push, n_ar_push, w_aw_push, w_ar_push;
  logic n_b_pop, n_r_pop, w_b_pop, w_r_pop;

  assign n_aw_dst  = addr_dst(n_in_req_i.aw.addr);
  assign n_ar_dst  = addr_dst(n_in_req_i.ar.addr);
  assign w_aw_dst  = addr_dst(w_in_req_i.aw.addr);
  assign w_ar_dst  = addr_dst(w_in_req_i.ar.addr);
  assign n_aw_atop = (n_in_req_i.aw.atop != '0);
  assign w_aw_atop = (w_in_req_i.aw.atop != '0);

  floo_rob_less #(.AxiIdW(NarrowIdW), .MaxTxns(MaxTxns)) i_n_wr_order (
    .clk_i, .rst_ni,
    .req_id_i (n_in_req_i.aw.id), .req_dst_i (n_aw_dst), .req_atop_i (n_aw_atop),
    .stall_o  (n_aw_stall), .push_i (n_aw_push),
    .pop_i    (n_b_pop), .pop_id_i (n_in_rsp_o.b.id)
  );
  floo_rob_less #(.AxiIdW(NarrowIdW), .MaxTxns(MaxTxns)) i_n_rd_order (
    .clk_i, .rst_ni,
    .req_id_i (n_in_req_i.ar.id), .req_dst_i (n_ar_dst), .req_atop_i (1'b0),
    .stall_o  (n_ar_stall), .push_i (n_ar_push),
    .pop_i    (n_r_pop), .pop_id_i (n_in_rsp_o.r.id)
  );
  floo_rob_less #(.AxiIdW(WideIdW), .MaxTxns(MaxTxns)) i_w_wr_order (
    .clk_i, .rst_ni,
    .req_id_i (w_in_req_i.aw.id), .req_dst_i (w_aw_dst), .req_atop_i (w_aw_atop),
    .stall_o  (w_aw_stall), .push_i (w_aw_push),
    .pop_i    (w_b_pop), .pop_id_i (w_in_rsp_o.b.id)
  );
  floo_rob_less #(.AxiIdW(WideIdW), .MaxTxns(MaxTxns)) i_w_rd_order (
    .clk_i, .rst_ni,
    .req_id_i (w_in_req_i.ar.id), .req_dst_i (w_ar_dst), .req_atop_i (1'b0),
    .stall_o  (w_ar_stall), .push_i (w_ar_push),
    .pop_i    (w_r_pop), .pop_id_i (w_in_rsp_o.r.id)
  );

  // Write packet state: AW sent, W beats of the same packet still to go.
  logic n_wburst_q, w_wburst_q;
  id_t  n_wdst_q, w_wdst_q;

  // ---- req link candidates: 0 narrow AW/W, 1 narrow AR, 2 wide AR ----
  logic [2:0]                 reqc_valid, reqc_gnt;
  logic [2:0][ReqFlitW-1:0]   reqc_data;
  logic                       req_arb_valid, req_arb_ready;
  logic [ReqFlitW-1:0]        req_arb_data;
  logic [1:0]                 req_arb_idx;

  always_comb begin
    req_flit_t f0, f1, f2;
    f0 = '0; f1 = '0; f2 = '0;
    if (!n_wburst_q) begin
      f0.hdr     = mk_hdr(n_aw_dst, id_i, 1'b0, n_aw_atop, NarrowAw);
      f0.payload = ReqPayloadW'(n_in_req_i.aw);
      reqc_valid[0] = n_in_req_i.aw_valid && !n_aw_stall;
    end else begin
      f0.hdr     = mk_hdr(n_wdst_q, id_i, n_in_req_i.w.last, 1'b0, NarrowW);
      f0.payload = ReqPayloadW'(n_in_req_i.w);
      reqc_valid[0] = n_in_req_i.w_valid;
    end
    f1.hdr     = mk_hdr(n_ar_dst, id_i, 1'b1, 1'b0, NarrowAr);
    f1.payload = ReqPayloadW'(n_in_req_i.ar);
    reqc_valid[1] = n_in_req_i.ar_valid && !n_ar_stall && !n_wburst_q;
    f2.hdr     = mk_hdr(w_ar_dst, id_i, 1'b1, 1'b0, WideAr);
    f2.payload = ReqPayloadW'(w_in_req_i.ar);
    reqc_valid[2] = w_in_req_i.ar_valid && !w_ar_stall && !n_wburst_q;
    reqc_data = {f2, f1, f0};
  end

  floo_rr_arb_tree #(.NumIn(3), .DataW(ReqFlitW)) i_req_arb (
    .clk_i, .rst_ni,
    .req_i (reqc_valid), .gnt_o (reqc_gnt), .data_i (reqc_data),
    .valid_o (req_arb_valid), .ready_i (req_arb_ready), .data_o (req_arb_data),
    .idx_o (req_arb_idx)
  );

  assign n_aw_push = reqc_gnt[0] && !n_wburst_q;
  assign n_ar_push = reqc_gnt[1];
  assign w_ar_push = reqc_gnt[2];

  // ---- wide link candidates: 0 wide AW/W (initiator), 1 wide R (target) ----
  logic [1:0]                 widec_valid, widec_gnt;
  logic [1:0][WideFlitW-1:0]  widec_data;
  logic                       wide_arb_valid, wide_arb_ready;
  logic [WideFlitW-1:0]       wide_arb_data;
  logic                       wide_arb_idx;
  wide_flit_t                 wide_r_flit;
  logic                       wide_r_valid;

  always_comb begin
    wide_flit_t f0;
    f0 = '0;
    if (!w_wburst_q) begin
      f0.hdr     = mk_hdr(w_aw_dst, id_i, 1'b0, w_aw_atop, WideAw);
      f0.payload = WidePayloadW'(w_in_req_i.aw);
      widec_valid[0] = w_in_req_i.aw_valid && !w_aw_stall;
    end else begin
      f0.hdr     = mk_hdr(w_wdst_q, id_i, w_in_req_i.w.last, 1'b0, WideW);
      f0.payload = WidePayloadW'(w_in_req_i.w);
      widec_valid[0] = w_in_req_i.w_valid;
    end
    widec_valid[1] = wide_r_valid && !w_wburst_q;
    widec_data = {wide_r_flit, f0};
  end

  floo_rr_arb_tree #(.NumIn(2), .DataW(WideFlitW)) i_wide_arb (
    .clk_i, .rst_ni,
    .req_i (widec_valid), .gnt_o (widec_gnt), .data_i (widec_data),
    .valid_o (wide_arb_valid), .ready_i (wide_arb_ready), .data_o (wide_arb_data),
    .idx_o (wide_arb_idx)
  );

  assign w_aw_push = widec_gnt[0] && !w_wburst_q;

  always_comb begin
    n_in_rsp_o          = '0;
    n_in_rsp_o.aw_ready = reqc_gnt[0] && !n_wburst_q;
    n_in_rsp_o.w_ready  = reqc_gnt[0] &&  n_wburst_q;
    n_in_rsp_o.ar_ready = reqc_gnt[1];
    w_in_rsp_o          = '0;
    w_in_rsp_o.aw_ready = widec_gnt[0] && !w_wburst_q;
    w_in_rsp_o.w_ready  = widec_gnt[0] &&  w_wburst_q;
    w_in_rsp_o.ar_ready = reqc_gnt[2];
    // response fields are filled in below
    n_in_rsp_o.b_valid  = rsp_in_is_nb;
    n_in_rsp_o.b        = n_b_t'(rsp_in_flit.payload[$bits(n_b_t)-1:0]);
    n_in_rsp_o.r_valid  = rsp_in_is_nr;
    n_in_rsp_o.r        = n_r_t'(rsp_in_flit.payload[$bits(n_r_t)-1:0]);
    w_in_rsp_o.b_valid  = rsp_in_is_wb;
    w_in_rsp_o.b        = w_b_t'(rsp_in_flit.payload[$bits(w_b_t)-1:0]);
    w_in_rsp_o.r_valid  = wide_in_is_r;
    w_in_rsp_o.r        = w_r_t'(wide_in_flit.payload[$bits(w_r_t)-1:0]);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      n_wburst_q <= 1'b0;
      w_wburst_q <= 1'b0;
      n_wdst_q   <= '0;
      w_wdst_q   <= '0;
    end else begin
      if (reqc_gnt[0]) begin
        if (!n_wburst_q) begin
          n_wburst_q <= 1'b1;
          n_wdst_q   <= n_aw_dst;
        end else if (n_in_req_i.w.last) begin
          n_wburst_q <= 1'b0;
        end
      end
      if (widec_gnt[0]) begin
        if (!w_wburst_q) begin
          w_wburst_q <= 1'b1;
          w_wdst_q   <= w_aw_dst;
        end else if (w_in_req_i.w.last) begin
          w_wburst_q <= 1'b0;
        end
      end
    end
  end

  // ===========================================================================
  // Link inputs: register stage, then demultiplex by AXI channel
  // ===========================================================================

  floo_fifo #(.DataW(ReqFlitW), .Depth(LinkInDepth)) i_req_in (
    .clk_i, .rst_ni,
    .valid_i (floo_i.req_valid), .ready_o (floo_rdy_o.req_ready), .data_i (floo_i.req),
    .valid_o (req_in_valid), .ready_i (req_in_ready), .data_o (req_in_flit)
  );
  floo_fifo #(.DataW(RspFlitW), .Depth(LinkInDepth)) i_rsp_in (
    .clk_i, .rst_ni,
    .valid_i (floo_i.rsp_valid), .ready_o (floo_rdy_o.rsp_ready), .data_i (floo_i.rsp),
    .valid_o (rsp_in_valid), .ready_i (rsp_in_ready), .data_o (rsp_in_flit)
  );
  floo_fifo #(.DataW(WideFlitW), .Depth(LinkInDepth)) i_wide_in (
    .clk_i, .rst_ni,
    .valid_i (floo_i.wide_valid), .ready_o (floo_rdy_o.wide_ready), .data_i (floo_i.wide),
    .valid_o (wide_in_valid), .ready_i (wide_in_ready), .data_o (wide_in_flit)
  );

  assign rsp_in_is_nb = rsp_in_valid  && rsp_in_flit.hdr.axi_ch == NarrowB;
  assign rsp_in_is_nr = rsp_in_valid  && rsp_in_flit.hdr.axi_ch == NarrowR;
  assign rsp_in_is_wb = rsp_in_valid  && rsp_in_flit.hdr.axi_ch == WideB;
  assign wide_in_is_r = wide_in_valid && wide_in_flit.hdr.axi_ch == WideR;

  assign rsp_in_ready = (rsp_in_is_nb && n_in_req_i.b_ready) ||
                        (rsp_in_is_nr && n_in_req_i.r_ready) ||
                        (rsp_in_is_wb && w_in_req_i.b_ready);

  // Completion of initiator-side transactions (ATOPs never entered a counter)
  assign n_b_pop = rsp_in_is_nb && n_in_req_i.b_ready && !rsp_in_flit.hdr.atop;
  assign n_r_pop = rsp_in_is_nr && n_in_req_i.r_ready && !rsp_in_flit.hdr.atop &&
                   n_in_rsp_o.r.last;
  assign w_b_pop = rsp_in_is_wb && w_in_req_i.b_ready && !rsp_in_flit.hdr.atop;
  assign w_r_pop = wide_in_is_r && w_in_req_i.r_ready && !wide_in_flit.hdr.atop &&
                   w_in_rsp_o.r.last;

  // ===========================================================================
  // Target side: requests from the NoC to the local AXI slaves
  // ===========================================================================
  n_aw_t in_naw;
  n_ar_t in_nar;
  w_ar_t in_war;
  w_aw_t in_waw;
  assign in_naw = n_aw_t'(req_in_flit.payload[$bits(n_aw_t)-1:0]);
  assign in_nar = n_ar_t'(req_in_flit.payload[$bits(n_ar_t)-1:0]);
  assign in_war = w_ar_t'(req_in_flit.payload[$bits(w_ar_t)-1:0]);
  assign in_waw = w_aw_t'(wide_in_flit.payload[$bits(w_aw_t)-1:0]);

  logic is_naw, is_nw, is_nar, is_war, is_waw, is_ww;
  assign is_naw = req_in_valid  && req_in_flit.hdr.axi_ch == NarrowAw;
  assign is_nw  = req_in_valid  && req_in_flit.hdr.axi_ch == NarrowW;
  assign is_nar = req_in_valid  && req_in_flit.hdr.axi_ch == NarrowAr;
  assign is_war = req_in_valid  && req_in_flit.hdr.axi_ch == WideAr;
  assign is_waw = wide_in_valid && wide_in_flit.hdr.axi_ch == WideAw;
  assign is_ww  = wide_in_valid && wide_in_flit.hdr.axi_ch == WideW;

  // Meta buffers
  logic                 nwm_ready, nrm_ready, wwm_ready, wrm_ready;
  logic [NarrowIdW-1:0] nwm_out_id, nrm_out_id;
  logic [WideIdW-1:0]   wwm_out_id, wrm_out_id;
  logic [NarrowIdW-1:0] nwm_b_id, nwm_r_id, nrm_b_id;
  logic [WideIdW-1:0]   wwm_b_id, wwm_r_id, wrm_b_id;
  id_t                  nwm_b_src, nwm_r_src, nrm_b_src, wwm_b_src, wwm_r_src, wrm_b_src;
  logic                 nwm_b_atop, wwm_b_atop, nwm_b_valid, nrm_b_valid, wwm_b_valid, wrm_b_valid;
  logic                 nrm_b_atop_unused, wrm_b_atop_unused;
  logic [NarrowIdW-1:0] nrm_r_id_unused;
  logic [WideIdW-1:0]   wrm_r_id_unused;
  id_t                  nrm_r_src_unused, wrm_r_src_unused;
  logic                 nb_pop, nr_pop_fifo, nr_pop_atop, wb_pop, wr_pop_fifo, wr_pop_atop;

  floo_meta_buffer #(.AxiIdW(NarrowIdW), .OutIdW(NarrowIdW), .Depth(MetaDepth), .NumAtop(NumAtop))
  i_n_wr_meta (
    .clk_i, .rst_ni,
    .push_valid_i (n_out_req_o.aw_valid && n_out_rsp_i.aw_ready), .push_ready_o (nwm_ready),
    .push_id_i (in_naw.id), .push_src_i (req_in_flit.hdr.src_id),
    .push_atop_i (in_naw.atop != '0), .push_atop_r_i (atop_has_r(in_naw.atop)),
    .out_id_o (nwm_out_id),
    .b_id_i (n_out_rsp_i.b.id), .b_orig_id_o (nwm_b_id), .b_src_o (nwm_b_src),
    .b_is_atop_o (nwm_b_atop), .b_valid_o (nwm_b_valid), .b_pop_i (nb_pop),
    .r_id_i (n_out_rsp_i.r.id), .r_orig_id_o (nwm_r_id), .r_src_o (nwm_r_src),
    .r_pop_i (nr_pop_atop)
  );
  floo_meta_buffer #(.AxiIdW(NarrowIdW), .OutIdW(NarrowIdW), .Depth(MetaDepth), .NumAtop(0))
  i_n_rd_meta (
    .clk_i, .rst_ni,
    .push_valid_i (n_out_req_o.ar_valid && n_out_rsp_i.ar_ready), .push_ready_o (nrm_ready),
    .push_id_i (in_nar.id), .push_src_i (req_in_flit.hdr.src_id),
    .push_atop_i (1'b0), .push_atop_r_i (1'b0),
    .out_id_o (nrm_out_id),
    .b_id_i (n_out_rsp_i.r.id), .b_orig_id_o (nrm_b_id), .b_src_o (nrm_b_src),
    .b_is_atop_o (nrm_b_atop_unused), .b_valid_o (nrm_b_valid), .b_pop_i (nr_pop_fifo),
    .r_id_i ('0), .r_orig_id_o (nrm_r_id_unused), .r_src_o (nrm_r_src_unused), .r_pop_i (1'b0)
  );
  floo_meta_buffer #(.AxiIdW(WideIdW), .OutIdW(WideIdW), .Depth(MetaDepth), .NumAtop(NumAtop))
  i_w_wr_meta (
    .clk_i, .rst_ni,
    .push_valid_i (w_out_req_o.aw_valid && w_out_rsp_i.aw_ready), .push_ready_o (wwm_ready),
    .push_id_i (in_waw.id), .push_src_i (wide_in_flit.hdr.src_id),
    .push_atop_i (in_waw.atop != '0), .push_atop_r_i (atop_has_r(in_waw.atop)),
    .out_id_o (wwm_out_id),
    .b_id_i (w_out_rsp_i.b.id), .b_orig_id_o (wwm_b_id), .b_src_o (wwm_b_src),
    .b_is_atop_o (wwm_b_atop), .b_valid_o (wwm_b_valid), .b_pop_i (wb_pop),
    .r_id_i (w_out_rsp_i.r.id), .r_orig_id_o (wwm_r_id), .r_src_o (wwm_r_src),
    .r_pop_i (wr_pop_atop)
  );
  floo_meta_buffer #(.AxiIdW(WideIdW), .OutIdW(WideIdW), .Depth(MetaDepth), .NumAtop(0))
  i_w_rd_meta (
    .clk_i, .rst_ni,
    .push_valid_i (w_out_req_o.ar_valid && w_out_rsp_i.ar_ready), .push_ready_o (wrm_ready),
    .push_id_i (in_war.id), .push_src_i (req_in_flit.hdr.src_id),
    .push_atop_i (1'b0), .push_atop_r_i (1'b0),
    .out_id_o (wrm_out_id),
    .b_id_i (w_out_rsp_i.r.id), .b_orig_id_o (wrm_b_id), .b_src_o (wrm_b_src),
    .b_is_atop_o (wrm_b_atop_unused), .b_valid_o (wrm_b_valid), .b_pop_i (wr_pop_fifo),
    .r_id_i ('0), .r_orig_id_o (wrm_r_id_unused), .r_src_o (wrm_r_src_unused), .r_pop_i (1'b0)
  );

  always_comb begin
    n_out_req_o          = '0;
    n_out_req_o.aw       = in_naw;
    n_out_req_o.aw.id    = nwm_out_id;
    n_out_req_o.aw_valid = is_naw && nwm_ready;
    n_out_req_o.w        = n_w_t'(req_in_flit.payload[$bits(n_w_t)-1:0]);
    n_out_req_o.w_valid  = is_nw;
    n_out_req_o.ar       = in_nar;
    n_out_req_o.ar.id    = nrm_out_id;
    n_out_req_o.ar_valid = is_nar && nrm_ready;
    n_out_req_o.b_ready  = rspc_gnt[1];
    n_out_req_o.r_ready  = rspc_gnt[0];

    w_out_req_o          = '0;
    w_out_req_o.aw       = in_waw;
    w_out_req_o.aw.id    = wwm_out_id;
    w_out_req_o.aw_valid = is_waw && wwm_ready;
    w_out_req_o.w        = w_w_t'(wide_in_flit.payload[$bits(w_w_t)-1:0]);
    w_out_req_o.w_valid  = is_ww;
    w_out_req_o.ar       = in_war;
    w_out_req_o.ar.id    = wrm_out_id;
    w_out_req_o.ar_valid = is_war && wrm_ready;
    w_out_req_o.b_ready  = rspc_gnt[2];
    w_out_req_o.r_ready  = widec_gnt[1];
  end

  assign req_in_ready = (is_naw && nwm_ready && n_out_rsp_i.aw_ready) ||
                        (is_nw  && n_out_rsp_i.w_ready) ||
                        (is_nar && nrm_ready && n_out_rsp_i.ar_ready) ||
                        (is_war && wrm_ready && w_out_rsp_i.ar_ready);
  assign wide_in_ready = (is_waw && wwm_ready && w_out_rsp_i.aw_ready) ||
                         (is_ww  && w_out_rsp_i.w_ready) ||
                         (wide_in_is_r && w_in_req_i.r_ready);

  // ===========================================================================
  // Target side: responses back into the NoC
  // ===========================================================================
  // ---- rsp link candidates: 0 narrow R, 1 narrow B, 2 wide B ----
  logic [2:0][RspFlitW-1:0]   rspc_data;
  logic                       rsp_arb_valid, rsp_arb_ready;
  logic [RspFlitW-1:0]        rsp_arb_data;
  logic [1:0]                 rsp_arb_idx;
  logic                       n_r_is_atop, w_r_is_atop;

  assign n_r_is_atop = (n_out_rsp_i.r.id != '0);
  assign w_r_is_atop = (w_out_rsp_i.r.id != '0);

  always_comb begin
    rsp_flit_t f0, f1, f2;
    n_r_t r;
    n_b_t b;
    w_b_t wb;
    r  = n_out_rsp_i.r;
    r.id = n_r_is_atop ? nwm_r_id : nrm_b_id;
    b  = n_out_rsp_i.b;
    b.id = nwm_b_id;
    wb = w_out_rsp_i.b;
    wb.id = wwm_b_id;
    f0.hdr     = mk_hdr(n_r_is_atop ? nwm_r_src : nrm_b_src, id_i, 1'b1, n_r_is_atop, NarrowR);
    f0.payload = RspPayloadW'(r);
    f1.hdr     = mk_hdr(nwm_b_src, id_i, 1'b1, nwm_b_atop, NarrowB);
    f1.payload = RspPayloadW'(b);
    f2.hdr     = mk_hdr(wwm_b_src, id_i, 1'b1, wwm_b_atop, WideB);
    f2.payload = RspPayloadW'(wb);
    rspc_valid[0] = n_out_rsp_i.r_valid;
    rspc_valid[1] = n_out_rsp_i.b_valid;
    rspc_valid[2] = w_out_rsp_i.b_valid;
    rspc_data = {f2, f1, f0};
  end

  floo_rr_arb_tree #(.NumIn(3), .DataW(RspFlitW)) i_rsp_arb (
    .clk_i, .rst_ni,
    .req_i (rspc_valid), .gnt_o (rspc_gnt), .data_i (rspc_data),
    .valid_o (rsp_arb_valid), .ready_i (rsp_arb_ready), .data_o (rsp_arb_data),
    .idx_o (rsp_arb_idx)
  );

  assign nb_pop      = rspc_gnt[1];
  assign nr_pop_fifo = rspc_gnt[0] && n_out_rsp_i.r.last && !n_r_is_atop;
  assign nr_pop_atop = rspc_gnt[0] && n_out_rsp_i.r.last &&  n_r_is_atop;
  assign wb_pop      = rspc_gnt[2];
  assign wr_pop_fifo = widec_gnt[1] && w_out_rsp_i.r.last && !w_r_is_atop;
  assign wr_pop_atop = widec_gnt[1] && w_out_rsp_i.r.last &&  w_r_is_atop;

  // wide R response flit (wide link candidate 1)
  always_comb begin
    w_r_t r;
    r    = w_out_rsp_i.r;
    r.id = w_r_is_atop ? wwm_r_id : wrm_b_id;
    wide_r_flit.hdr     = mk_hdr(w_r_is_atop ? wwm_r_src : wrm_b_src, id_i, 1'b1,
                                 w_r_is_atop, WideR);
    wide_r_flit.payload = WidePayloadW'(r);
    wide_r_valid        = w_out_rsp_i.r_valid;
  end

  // ===========================================================================
  // Link output register stages
  // ===========================================================================
  floo_fifo #(.DataW(ReqFlitW), .Depth(LinkOutDepth)) i_req_out (
    .clk_i, .rst_ni,
    .valid_i (req_arb_valid), .ready_o (req_arb_ready), .data_i (req_arb_data),
    .valid_o (floo_o.req_valid), .ready_i (floo_rdy_i.req_ready), .data_o (floo_o.req)
  );
  floo_fifo #(.DataW(RspFlitW), .Depth(LinkOutDepth)) i_rsp_out (
    .clk_i, .rst_ni,
    .valid_i (rsp_arb_valid), .ready_o (rsp_arb_ready), .data_i (rsp_arb_data),
    .valid_o (floo_o.rsp_valid), .ready_i (floo_rdy_i.rsp_ready), .data_o (floo_o.rsp)
  );
  floo_fifo #(.DataW(WideFlitW), .Depth(LinkOutDepth)) i_wide_out (
    .clk_i, .rst_ni,
    .valid_i (wide_arb_valid), .ready_o (wide_arb_ready), .data_i (wide_arb_data),
    .valid_o (floo_o.wide_valid), .ready_i (floo_rdy_i.wide_ready), .data_o (floo_o.wide)
  );

  // ===========================================================================
  // Protocol checks
  // ===========================================================================
  a_resp_meta: assert property (@(posedge clk_i) disable iff (!rst_ni)
    n_out_rsp_i.b_valid |-> nwm_b_valid);
  a_rresp_meta: assert property (@(posedge clk_i) disable iff (!rst_ni)
    n_out_rsp_i.r_valid && !n_r_is_atop |-> nrm_b_valid);
  a_wresp_meta: assert property (@(posedge clk_i) disable iff (!rst_ni)
    w_out_rsp_i.b_valid |-> wwm_b_valid);
  a_wrresp_meta: assert property (@(posedge clk_i) disable iff (!rst_ni)
    w_out_rsp_i.r_valid && !w_r_is_atop |-> wrm_b_valid);
endmodule
