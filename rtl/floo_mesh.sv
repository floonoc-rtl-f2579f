// Compute mesh: NumY x NumX compute tiles (default 8 rows x 4 columns) joined
// by the three-link NoC, with one NoC-to-AXI network interface per row on the
// west boundary for the HBM channels.
//
// Node coordinates are {y, x}. The HBM-side interfaces sit at x = 0, the
// tiles at x = 1..NumX and y = 0..NumY-1, and the east boundary at x = NumX+1
// is left to the host, peripherals and system scratchpad: the east links of
// the last column are ports of this module. North and south boundary links
// carry no I/O here and are tied off (no flits in; XY routing never sends a
// flit there because no node lies beyond them, which an assertion checks).
// Each tile's four AXI ports are ports of this module (the clusters are not
// part of it), as are the AXI master ports of the HBM-side interfaces.
// An address selects its destination node by bits [40 +: 6] = {y, x}: a tile's
// L1 at x = 1..NumX, row y's HBM channel at x = 0, east-side devices at
// x = NumX+1. Because routing is x-first and the boundary interfaces have no
// router of their own, a tile reaches the HBM channel and the east-side
// devices of its own row only (checked by an assertion for the HBM side).
// Timing: neighbouring-tile read request, AXI to AXI: 1 + 2 + 2 + 1 = 6 cycles;
// each further hop adds 2 cycles per direction (4 per round trip).
// The 8x4 shape, one HBM interface per row, and the placement of HBM, host
// and chip-to-chip sides follow the paper; the coordinate scheme is this
// design's choice.
module floo_mesh
  import floo_pkg::*;
#(
  parameter int unsigned NumX = 4,
  parameter int unsigned NumY = 8
) (
  input  logic   clk_i,
  input  logic   rst_ni,
  // cluster AXI ports of every tile, [y][x-1]
  input  n_req_t [NumY-1:0][NumX-1:0] n_in_req_i,
  output n_rsp_t [NumY-1:0][NumX-1:0] n_in_rsp_o,
  input  w_req_t [NumY-1:0][NumX-1:0] w_in_req_i,
  output w_rsp_t [NumY-1:0][NumX-1:0] w_in_rsp_o,
  output n_req_t [NumY-1:0][NumX-1:0] n_out_req_o,
  input  n_rsp_t [NumY-1:0][NumX-1:0] n_out_rsp_i,
  output w_req_t [NumY-1:0][NumX-1:0] w_out_req_o,
  input  w_rsp_t [NumY-1:0][NumX-1:0] w_out_rsp_i,
  // HBM channel AXI ports of the west interfaces, one per row
  output n_req_t [NumY-1:0] hbm_n_req_o,
  input  n_rsp_t [NumY-1:0] hbm_n_rsp_i,
  output w_req_t [NumY-1:0] hbm_w_req_o,
  input  w_rsp_t [NumY-1:0] hbm_w_rsp_i,
  // east boundary links, one per row
  output link_t     [NumY-1:0] east_o,
  input  link_rdy_t [NumY-1:0] east_rdy_i,
  input  link_t     [NumY-1:0] east_i,
  output link_rdy_t [NumY-1:0] east_rdy_o
);
  localparam int unsigned N = 0, E = 1, S = 2, W = 3;

  // Links leaving each tile, [y][x-1][dir], and readies coming back
  link_t     [NumY-1:0][NumX-1:0][3:0] t_out;
  link_rdy_t [NumY-1:0][NumX-1:0][3:0] t_out_rdy;
  link_t     [NumY-1:0][NumX-1:0][3:0] t_in;
  link_rdy_t [NumY-1:0][NumX-1:0][3:0] t_in_rdy;

  // West (HBM) interfaces
  link_t     [NumY-1:0] hbm_to_mesh, mesh_to_hbm;
  link_rdy_t [NumY-1:0] hbm_to_mesh_rdy, mesh_to_hbm_rdy;

  for (genvar y = 0; y < NumY; y++) begin : gen_y
    floo_nw_chimney i_hbm_ni (
      .clk_i, .rst_ni,
      .id_i        ('{y: CoordW'(y), x: '0}),
      .n_in_req_i  ('0),
      .n_in_rsp_o  (),
      .w_in_req_i  ('0),
      .w_in_rsp_o  (),
      .n_out_req_o (hbm_n_req_o[y]),
      .n_out_rsp_i (hbm_n_rsp_i[y]),
      .w_out_req_o (hbm_w_req_o[y]),
      .w_out_rsp_i (hbm_w_rsp_i[y]),
      .floo_o      (hbm_to_mesh[y]),
      .floo_rdy_i  (hbm_to_mesh_rdy[y]),
      .floo_i      (mesh_to_hbm[y]),
      .floo_rdy_o  (mesh_to_hbm_rdy[y])
    );
    // With x-first routing a flit reaches x = 0 in its sender's row, so only
    // the row's own HBM channel can be addressed from a tile.
    a_hbm_row: assert property (@(posedge clk_i) disable iff (!rst_ni)
      (mesh_to_hbm[y].req_valid  -> mesh_to_hbm[y].req.hdr.dst_id.y  == CoordW'(y)) &&
      (mesh_to_hbm[y].rsp_valid  -> mesh_to_hbm[y].rsp.hdr.dst_id.y  == CoordW'(y)) &&
      (mesh_to_hbm[y].wide_valid -> mesh_to_hbm[y].wide.hdr.dst_id.y == CoordW'(y)));

    for (genvar x = 0; x < NumX; x++) begin : gen_x
      floo_tile i_tile (
        .clk_i, .rst_ni,
        .id_i        ('{y: CoordW'(y), x: CoordW'(x + 1)}),
        .n_in_req_i  (n_in_req_i[y][x]),
        .n_in_rsp_o  (n_in_rsp_o[y][x]),
        .w_in_req_i  (w_in_req_i[y][x]),
        .w_in_rsp_o  (w_in_rsp_o[y][x]),
        .n_out_req_o (n_out_req_o[y][x]),
        .n_out_rsp_i (n_out_rsp_i[y][x]),
        .w_out_req_o (w_out_req_o[y][x]),
        .w_out_rsp_i (w_out_rsp_i[y][x]),
        .link_i      (t_in[y][x]),
        .link_rdy_o  (t_in_rdy[y][x]),
        .link_o      (t_out[y][x]),
        .link_rdy_i  (t_out_rdy[y][x])
      );

      // ---- west side ----
      if (x == 0) begin : gen_w_hbm
        assign t_in[y][x][W]         = hbm_to_mesh[y];
        assign hbm_to_mesh_rdy[y]    = t_in_rdy[y][x][W];
        assign mesh_to_hbm[y]        = t_out[y][x][W];
        assign t_out_rdy[y][x][W]    = mesh_to_hbm_rdy[y];
      end else begin : gen_w_tile
        assign t_in[y][x][W]         = t_out[y][x-1][E];
        assign t_out_rdy[y][x-1][E]  = t_in_rdy[y][x][W];
      end

      // ---- east side ----
      if (x == NumX - 1) begin : gen_e_port
        assign east_o[y]             = t_out[y][x][E];
        assign t_out_rdy[y][x][E]    = east_rdy_i[y];
        assign t_in[y][x][E]         = east_i[y];
        assign east_rdy_o[y]         = t_in_rdy[y][x][E];
      end else begin : gen_e_tile
        assign t_in[y][x][E]         = t_out[y][x+1][W];
        assign t_out_rdy[y][x+1][W]  = t_in_rdy[y][x][E];
      end

      // ---- north side (y grows to the north) ----
      if (y == NumY - 1) begin : gen_n_tie
        assign t_in[y][x][N]         = '0;
        assign t_out_rdy[y][x][N]    = '{default: 1'b1};
        a_no_north: assert property (@(posedge clk_i) disable iff (!rst_ni)
          !(t_out[y][x][N].req_valid || t_out[y][x][N].rsp_valid || t_out[y][x][N].wide_valid));
      end else begin : gen_n_tile
        assign t_in[y][x][N]         = t_out[y+1][x][S];
        assign t_out_rdy[y+1][x][S]  = t_in_rdy[y][x][N];
      end

      // ---- south side ----
      if (y == 0) begin : gen_s_tie
        assign t_in[y][x][S]         = '0;
        assign t_out_rdy[y][x][S]    = '{default: 1'b1};
        a_no_south: assert property (@(posedge clk_i) disable iff (!rst_ni)
          !(t_out[y][x][S].req_valid || t_out[y][x][S].rsp_valid || t_out[y][x][S].wide_valid));
      end else begin : gen_s_tile
        assign t_in[y][x][S]         = t_out[y-1][x][N];
        assign t_out_rdy[y-1][x][N]  = t_in_rdy[y][x][S];
      end
    end
  end
endmodule
