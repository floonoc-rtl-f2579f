// RoB-less ordering unit of the network interface (one per AXI direction).
//
// AXI4 requires responses of transactions with the same ID to return in
// order. The NoC keeps flits of one source/destination pair in order
// (static routing), but responses from different destinations may overtake
// each other. Instead of buffering responses in a reorder buffer, this unit
// keeps, for every AXI ID, a counter of outstanding transactions and the
// destination of those transactions. A new request is stalled when its ID
// already has transactions outstanding to a different destination (or the
// counter is saturated); it may go once they have all completed. Atomic
// transactions (ATOPs) carry an ID that is unique among all outstanding
// transactions and bypass the unit. This follows the paper's RoB-less NI.
// Interface: stall_o is combinational in req_id_i/req_dst_i/req_atop_i; push_i
// (the request's handshake into the NoC) increments the counter and stores
// the destination, pop_i with pop_id_i (last response beat handed to AXI)
// decrements it. The counter depth MaxTxns is this design's choice.
module floo_rob_less
  import floo_pkg::*;
#(
  parameter int unsigned AxiIdW  = NarrowIdW,
  parameter int unsigned MaxTxns = 8
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic [AxiIdW-1:0] req_id_i,
  input  id_t               req_dst_i,
  input  logic              req_atop_i,
  output logic              stall_o,
  input  logic              push_i,
  input  logic              pop_i,
  input  logic [AxiIdW-1:0] pop_id_i
);
  localparam int unsigned NumIds = 2 ** AxiIdW;
  localparam int unsigned CntW   = $clog2(MaxTxns + 1);

  logic [CntW-1:0] cnt_q [NumIds];
  id_t             dst_q [NumIds];

  always_comb begin
    stall_o = 1'b0;
    if (!req_atop_i && cnt_q[req_id_i] != '0) begin
      stall_o = (dst_q[req_id_i] != req_dst_i) ||
                (cnt_q[req_id_i] == CntW'(MaxTxns));
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int unsigned i = 0; i < NumIds; i++) begin
        cnt_q[i] <= '0;
        dst_q[i] <= '0;
      end
    end else begin
      for (int unsigned i = 0; i < NumIds; i++) begin
        automatic logic inc = push_i && !req_atop_i && (req_id_i == AxiIdW'(i));
        automatic logic dec = pop_i && (pop_id_i == AxiIdW'(i));
        cnt_q[i] <= cnt_q[i] + CntW'(inc) - CntW'(dec);
        if (inc) dst_q[i] <= req_dst_i;
      end
    end
  end

  a_no_stalled_push: assert property (@(posedge clk_i) disable iff (!rst_ni)
    push_i |-> !stall_o);
  a_no_underflow: assert property (@(posedge clk_i) disable iff (!rst_ni)
    pop_i |-> cnt_q[pop_id_i] != '0);
endmodule
