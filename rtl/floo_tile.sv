// NoC part of one compute tile: the AXI network interface and the
// three-link 5x5 router.
//
// The cluster's narrow (64-bit) and wide (512-bit) AXI buses connect to the
// NI, once as initiators (the cores' remote accesses and the DMA/I-cache
// traffic) and once as targets (remote access to the tile's L1 scratchpad).
// The NI drives the router's local (Eject) port; the four cardinal ports
// leave the tile as link bundles to the neighbours. The tile's coordinates
// are static inputs used by the NI as source ID and by the routers for XY
// routing. The cluster itself (cores, L1, DMA, cluster crossbars) is outside
// this module.
// Timing: AXI request to flit on the tile's outgoing link: 1 (NI) + 2 (router
// hop) cycles; flit arriving on an incoming link to the AXI bus: 2 + 1 cycles.
// Link directions index 0..3 = North, East, South, West.
// The NI-plus-5x5-router arrangement and the narrow/wide AXI ports follow the
// original tile; the port order and the bundling of the three links into one
// struct per direction are this design's choice.
module floo_tile
  import floo_pkg::*;
#(
  parameter int unsigned MaxTxns   = 8,
  parameter int unsigned MetaDepth = 8,
  parameter int unsigned NumAtop   = 4
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  id_t             id_i,
  input  n_req_t          n_in_req_i,
  output n_rsp_t          n_in_rsp_o,
  input  w_req_t          w_in_req_i,
  output w_rsp_t          w_in_rsp_o,
  output n_req_t          n_out_req_o,
  input  n_rsp_t          n_out_rsp_i,
  output w_req_t          w_out_req_o,
  input  w_rsp_t          w_out_rsp_i,
  input  link_t     [3:0] link_i,
  output link_rdy_t [3:0] link_rdy_o,
  output link_t     [3:0] link_o,
  input  link_rdy_t [3:0] link_rdy_i
);
  link_t     ni_to_rt, rt_to_ni;
  link_rdy_t ni_to_rt_rdy, rt_to_ni_rdy;
  link_t     [NumDirs-1:0] rt_in, rt_out;
  link_rdy_t [NumDirs-1:0] rt_in_rdy, rt_out_rdy;

  floo_nw_chimney #(.MaxTxns(MaxTxns), .MetaDepth(MetaDepth), .NumAtop(NumAtop)) i_ni (
    .clk_i, .rst_ni, .id_i,
    .n_in_req_i, .n_in_rsp_o, .w_in_req_i, .w_in_rsp_o,
    .n_out_req_o, .n_out_rsp_i, .w_out_req_o, .w_out_rsp_i,
    .floo_o (ni_to_rt), .floo_rdy_i (ni_to_rt_rdy),
    .floo_i (rt_to_ni), .floo_rdy_o (rt_to_ni_rdy)
  );

  always_comb begin
    for (int unsigned d = 0; d < 4; d++) begin
      rt_in[d]      = link_i[d];
      link_rdy_o[d] = rt_in_rdy[d];
      link_o[d]     = rt_out[d];
      rt_out_rdy[d] = link_rdy_i[d];
    end
    rt_in[Eject]      = ni_to_rt;
    ni_to_rt_rdy      = rt_in_rdy[Eject];
    rt_to_ni          = rt_out[Eject];
    rt_out_rdy[Eject] = rt_to_ni_rdy;
  end

  floo_nw_router i_router (
    .clk_i, .rst_ni,
    .xy_id_i   (id_i),
    .in_i      (rt_in),
    .in_rdy_o  (rt_in_rdy),
    .out_o     (rt_out),
    .out_rdy_i (rt_out_rdy)
  );
endmodule
