// Single-link 5x5 NoC router with XY routing and wormhole support.
//
// Every input port has a small FIFO. The flit at the head of each input FIFO
// is routed by floo_route_xy using the destination ID in its header and the
// router's own coordinates (xy_id_i). Each output port has a round-robin tree
// arbiter (floo_rr_arb_tree) that chooses among the inputs whose head flit
// wants that output; the crossbar connections that XY routing can never use
// (U-turns, and turns from the y dimension back into x) are left out.
// Wormhole routing is enabled per flit by the header's "last" bit: when a
// flit with last = 0 passes an output, that output stays reserved for the
// same input until a flit with last = 1 has passed, so the beats of one
// write burst are never interleaved with other traffic. An optional output
// FIFO (EnOutBuf) registers the outputs for long inter-tile wires.
// Timing: with EnOutBuf = 1 a flit written into an input at cycle t leaves
// the output register at cycle t+2, i.e. two cycles per hop, one flit per
// cycle per port at full throughput. Without output buffers a hop is one
// cycle. Flits are not reordered per source/destination pair.
// Port order, buffer depths and the arbiter lock are this design's choice;
// the structure (input buffers, switch, routing from external static info,
// optional output buffers, RR tree, wormhole per flit) follows the paper.
module floo_router
  import floo_pkg::*;
#(
  parameter int unsigned FlitW    = ReqFlitW,
  parameter int unsigned InDepth  = 2,
  parameter bit          EnOutBuf = 1'b1,
  parameter int unsigned OutDepth = 2
) (
  input  logic                             clk_i,
  input  logic                             rst_ni,
  input  id_t                              xy_id_i,
  input  logic [NumDirs-1:0]               valid_i,
  output logic [NumDirs-1:0]               ready_o,
  input  logic [NumDirs-1:0][FlitW-1:0]    data_i,
  output logic [NumDirs-1:0]               valid_o,
  input  logic [NumDirs-1:0]               ready_i,
  output logic [NumDirs-1:0][FlitW-1:0]    data_o
);
  localparam int unsigned N = NumDirs;

  logic [N-1:0]            in_valid, in_pop;
  logic [N-1:0][FlitW-1:0] in_data;
  logic [N-1:0][N-1:0]     in_route;     // [in][out]
  logic [N-1:0][N-1:0]     arb_req;      // [out][in]
  logic [N-1:0][N-1:0]     arb_gnt;      // [out][in]
  logic [N-1:0]            sw_valid, sw_ready;
  logic [N-1:0][FlitW-1:0] sw_data;
  logic [N-1:0][$clog2(N)-1:0] sw_idx;
  logic [N-1:0]            lock_q;
  logic [N-1:0][$clog2(N)-1:0] lock_in_q;

  // Crossbar connections usable under XY routing.
  function automatic logic conn_ok(int unsigned i, int unsigned o);
    if (i == o) return 1'b0;                                  // no loopback
    if ((i == int'(North) || i == int'(South)) && (o == int'(East) || o == int'(West))) return 1'b0;
    return 1'b1;
  endfunction

  for (genvar i = 0; i < N; i++) begin : gen_in
    floo_fifo #(.DataW(FlitW), .Depth(InDepth)) i_in_fifo (
      .clk_i, .rst_ni,
      .valid_i (valid_i[i]),
      .ready_o (ready_o[i]),
      .data_i  (data_i[i]),
      .valid_o (in_valid[i]),
      .ready_i (in_pop[i]),
      .data_o  (in_data[i])
    );
    hdr_t hdr;
    assign hdr = hdr_t'(in_data[i][HdrW-1:0]);
    floo_route_xy i_route (
      .xy_id_i (xy_id_i),
      .dst_i   (hdr.dst_id),
      .port_o  (in_route[i])
    );
    a_route_legal: assert property (@(posedge clk_i) disable iff (!rst_ni)
      in_valid[i] |-> ((in_route[i] & ~conn_mask(i)) == '0));
  end

  function automatic logic [N-1:0] conn_mask(int unsigned i);
    logic [N-1:0] m;
    for (int unsigned o = 0; o < N; o++) m[o] = conn_ok(i, o);
    return m;
  endfunction

  always_comb begin
    arb_req = '0;
    for (int unsigned o = 0; o < N; o++) begin
      for (int unsigned i = 0; i < N; i++) begin
        arb_req[o][i] = in_valid[i] && in_route[i][o] && conn_ok(i, o) &&
                        (!lock_q[o] || (lock_in_q[o] == $clog2(N)'(i)));
      end
    end
  end

  always_comb begin
    in_pop = '0;
    for (int unsigned o = 0; o < N; o++) in_pop |= arb_gnt[o];
  end

  for (genvar o = 0; o < N; o++) begin : gen_out
    floo_rr_arb_tree #(.NumIn(N), .DataW(FlitW)) i_arb (
      .clk_i, .rst_ni,
      .req_i   (arb_req[o]),
      .gnt_o   (arb_gnt[o]),
      .data_i  (in_data),
      .valid_o (sw_valid[o]),
      .ready_i (sw_ready[o]),
      .data_o  (sw_data[o]),
      .idx_o   (sw_idx[o])
    );

    // Wormhole lock: held from a last = 0 flit up to and including last = 1.
    hdr_t sw_hdr;
    assign sw_hdr = hdr_t'(sw_data[o][HdrW-1:0]);
    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        lock_q[o]    <= 1'b0;
        lock_in_q[o] <= '0;
      end else if (sw_valid[o] && sw_ready[o]) begin
        lock_q[o]    <= !sw_hdr.last;
        lock_in_q[o] <= sw_idx[o];
      end
    end

    if (EnOutBuf) begin : gen_obuf
      floo_fifo #(.DataW(FlitW), .Depth(OutDepth)) i_out_fifo (
        .clk_i, .rst_ni,
        .valid_i (sw_valid[o]),
        .ready_o (sw_ready[o]),
        .data_i  (sw_data[o]),
        .valid_o (valid_o[o]),
        .ready_i (ready_i[o]),
        .data_o  (data_o[o])
      );
    end else begin : gen_no_obuf
      assign valid_o[o]  = sw_valid[o];
      assign sw_ready[o] = ready_i[o];
      assign data_o[o]   = sw_data[o];
    end
  end
endmodule
