// Multilink router of the narrow-wide NoC: one floo_router per physical link.
//
// Instead of virtual channels the NoC uses three physically separate
// networks, so this wrapper holds three independent 5x5 XY routers for the
// req (119 bit), rsp (103 bit) and wide (603 bit) links. They share only the
// clock, reset and the static coordinates; a flit on one link never waits for
// another link. Ports are bundled per direction as floo_pkg::link_t (flits
// and valids) and floo_pkg::link_rdy_t (readies flowing back), in the port
// order North, East, South, West, Eject (local). Output buffers are enabled,
// as in the paper's compute tile; each hop costs two cycles.
module floo_nw_router
  import floo_pkg::*;
#(
  parameter int unsigned InDepth  = 2,
  parameter bit          EnOutBuf = 1'b1,
  parameter int unsigned OutDepth = 2
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  input  id_t                     xy_id_i,
  input  link_t     [NumDirs-1:0] in_i,
  output link_rdy_t [NumDirs-1:0] in_rdy_o,
  output link_t     [NumDirs-1:0] out_o,
  input  link_rdy_t [NumDirs-1:0] out_rdy_i
);
  logic [NumDirs-1:0]                 req_vi, req_ro, req_vo, req_ri;
  logic [NumDirs-1:0][ReqFlitW-1:0]   req_di, req_do;
  logic [NumDirs-1:0]                 rsp_vi, rsp_ro, rsp_vo, rsp_ri;
  logic [NumDirs-1:0][RspFlitW-1:0]   rsp_di, rsp_do;
  logic [NumDirs-1:0]                 wide_vi, wide_ro, wide_vo, wide_ri;
  logic [NumDirs-1:0][WideFlitW-1:0]  wide_di, wide_do;

  for (genvar d = 0; d < NumDirs; d++) begin : gen_map
    assign req_vi[d]  = in_i[d].req_valid;
    assign req_di[d]  = in_i[d].req;
    assign rsp_vi[d]  = in_i[d].rsp_valid;
    assign rsp_di[d]  = in_i[d].rsp;
    assign wide_vi[d] = in_i[d].wide_valid;
    assign wide_di[d] = in_i[d].wide;
    assign in_rdy_o[d].req_ready  = req_ro[d];
    assign in_rdy_o[d].rsp_ready  = rsp_ro[d];
    assign in_rdy_o[d].wide_ready = wide_ro[d];
    assign out_o[d].req_valid  = req_vo[d];
    assign out_o[d].req        = req_flit_t'(req_do[d]);
    assign out_o[d].rsp_valid  = rsp_vo[d];
    assign out_o[d].rsp        = rsp_flit_t'(rsp_do[d]);
    assign out_o[d].wide_valid = wide_vo[d];
    assign out_o[d].wide       = wide_flit_t'(wide_do[d]);
    assign req_ri[d]  = out_rdy_i[d].req_ready;
    assign rsp_ri[d]  = out_rdy_i[d].rsp_ready;
    assign wide_ri[d] = out_rdy_i[d].wide_ready;
  end

  floo_router #(.FlitW(ReqFlitW), .InDepth(InDepth), .EnOutBuf(EnOutBuf), .OutDepth(OutDepth))
  i_req_router (
    .clk_i, .rst_ni, .xy_id_i,
    .valid_i (req_vi), .ready_o (req_ro), .data_i (req_di),
    .valid_o (req_vo), .ready_i (req_ri), .data_o (req_do)
  );

  floo_router #(.FlitW(RspFlitW), .InDepth(InDepth), .EnOutBuf(EnOutBuf), .OutDepth(OutDepth))
  i_rsp_router (
    .clk_i, .rst_ni, .xy_id_i,
    .valid_i (rsp_vi), .ready_o (rsp_ro), .data_i (rsp_di),
    .valid_o (rsp_vo), .ready_i (rsp_ri), .data_o (rsp_do)
  );

  floo_router #(.FlitW(WideFlitW), .InDepth(InDepth), .EnOutBuf(EnOutBuf), .OutDepth(OutDepth))
  i_wide_router (
    .clk_i, .rst_ni, .xy_id_i,
    .valid_i (wide_vi), .ready_o (wide_ro), .data_i (wide_di),
    .valid_o (wide_vo), .ready_i (wide_ri), .data_o (wide_do)
  );
endmodule
