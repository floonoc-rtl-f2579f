// Meta buffer with TxnID selection, on the target side of the network
// interface (one per AXI direction).
//
// When a request arrives from the NoC it is issued on the local AXI port
// under a new ID (txnID'), and the information needed to return its response
// (source node and original AXI ID) is kept here:
//  * Non-atomic transactions are all issued with ID 0, so the target answers
//    them in order; their meta data is a FIFO, pushed on the request and
//    popped on the (last beat of the) response.
//  * ATOPs may be answered out of order. Each gets one of NumAtop slots and is
//    issued with ID slot+1, which is unique among outstanding transactions;
//    the response ID selects the slot. An ATOP that also returns read data
//    (atop[5]) keeps its slot until both its B and its R response are sent.
// This follows the paper's meta buffer (FIFO for non-atomics, separate
// buffers for ATOPs). Depth, NumAtop and the ID numbering are this design's.
// Interface: push side valid/ready with the request; out_id_o is the ID to
// issue, valid together with push_ready_o. Lookup port b_* (B or, in a read
// buffer, R responses) and port r_* (R responses of ATOPs, write buffer only)
// return the stored data combinationally; *_pop_i frees on the clock edge.
module floo_meta_buffer
  import floo_pkg::*;
#(
  parameter int unsigned AxiIdW    = NarrowIdW,
  parameter int unsigned OutIdW    = NarrowIdW,
  parameter int unsigned Depth     = 8,
  parameter int unsigned NumAtop   = 4
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  // request from the NoC
  input  logic              push_valid_i,
  output logic              push_ready_o,
  input  logic [AxiIdW-1:0] push_id_i,
  input  id_t               push_src_i,
  input  logic              push_atop_i,
  input  logic              push_atop_r_i,
  output logic [OutIdW-1:0] out_id_o,
  // response lookup: non-atomic FIFO head (id 0) or ATOP slot (id > 0)
  input  logic [OutIdW-1:0] b_id_i,
  output logic [AxiIdW-1:0] b_orig_id_o,
  output id_t               b_src_o,
  output logic              b_is_atop_o,
  output logic              b_valid_o,
  input  logic              b_pop_i,
  // R lookup of an ATOP slot
  input  logic [OutIdW-1:0] r_id_i,
  output logic [AxiIdW-1:0] r_orig_id_o,
  output id_t               r_src_o,
  input  logic              r_pop_i
);
  typedef struct packed {
    logic [AxiIdW-1:0] id;
    id_t               src;
  } meta_t;

  localparam int unsigned NA    = (NumAtop > 0) ? NumAtop : 1;
  localparam int unsigned SlotW = (NA > 1) ? $clog2(NA) : 1;

  // ---------------- non-atomic FIFO ----------------
  logic  fifo_push, fifo_full, fifo_empty;
  meta_t fifo_head;
  logic  fifo_ready, fifo_valid;

  floo_fifo #(.DataW($bits(meta_t)), .Depth(Depth)) i_fifo (
    .clk_i, .rst_ni,
    .valid_i (fifo_push),
    .ready_o (fifo_ready),
    .data_i  ({push_id_i, push_src_i}),
    .valid_o (fifo_valid),
    .ready_i (b_pop_i && b_id_i == '0),
    .data_o  (fifo_head)
  );
  assign fifo_full  = !fifo_ready;
  assign fifo_empty = !fifo_valid;

  // ---------------- ATOP slots ----------------
  meta_t         slot_q [NA];
  logic [NA-1:0] b_pend_q, r_pend_q;
  logic [NA-1:0] slot_busy;
  logic          slot_free_any;
  logic [SlotW-1:0] free_idx;

  assign slot_busy = b_pend_q | r_pend_q;

  always_comb begin
    slot_free_any = 1'b0;
    free_idx      = '0;
    for (int i = int'(NA) - 1; i >= 0; i--) begin
      if (!slot_busy[i] && NumAtop > 0) begin
        slot_free_any = 1'b1;
        free_idx      = SlotW'(i);
      end
    end
  end

  assign push_ready_o = push_atop_i ? slot_free_any : !fifo_full;
  assign fifo_push    = push_valid_i && !push_atop_i && !fifo_full;
  assign out_id_o     = push_atop_i ? OutIdW'(free_idx) + OutIdW'(1) : '0;

  // Lookups
  logic [SlotW-1:0] b_slot, r_slot;
  assign b_slot = SlotW'(b_id_i - OutIdW'(1));
  assign r_slot = SlotW'(r_id_i - OutIdW'(1));

  always_comb begin
    if (b_id_i == '0) begin
      b_orig_id_o = fifo_head.id;
      b_src_o     = fifo_head.src;
      b_is_atop_o = 1'b0;
      b_valid_o   = !fifo_empty;
    end else begin
      b_orig_id_o = slot_q[b_slot].id;
      b_src_o     = slot_q[b_slot].src;
      b_is_atop_o = 1'b1;
      b_valid_o   = b_pend_q[b_slot];
    end
  end
  assign r_orig_id_o = slot_q[r_slot].id;
  assign r_src_o     = slot_q[r_slot].src;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      b_pend_q <= '0;
      r_pend_q <= '0;
      for (int unsigned i = 0; i < NA; i++) slot_q[i] <= '0;
    end else begin
      if (push_valid_i && push_atop_i && slot_free_any) begin
        slot_q[free_idx]   <= '{id: push_id_i, src: push_src_i};
        b_pend_q[free_idx] <= 1'b1;
        r_pend_q[free_idx] <= push_atop_r_i;
      end
      if (b_pop_i && b_id_i != '0) b_pend_q[b_slot] <= 1'b0;
      if (r_pop_i && r_id_i != '0) r_pend_q[r_slot] <= 1'b0;
    end
  end

  a_b_pop_valid: assert property (@(posedge clk_i) disable iff (!rst_ni)
    b_pop_i |-> b_valid_o);
endmodule
