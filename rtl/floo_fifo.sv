// Flip-flop FIFO with valid/ready handshakes on both sides.
//
// Used as the router input and output buffers (the standard-cell-memory
// buffers of the router) and as the one-cycle register stages of the network
// interface. Storage is a register array with read and write pointers; the
// output is taken from the array, so a word written in cycle t can be read in
// cycle t+1 at the earliest (one cycle of latency, no fall-through). With
// Depth = 2 the FIFO sustains one transfer per cycle under back-pressure.
// Depth is this design's choice; the paper only calls the buffers minimal.
module floo_fifo #(
  parameter int unsigned DataW = 8,
  parameter int unsigned Depth = 2
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             valid_i,
  output logic             ready_o,
  input  logic [DataW-1:0] data_i,
  output logic             valid_o,
  input  logic             ready_i,
  output logic [DataW-1:0] data_o
);
  localparam int unsigned PtrW = (Depth > 1) ? $clog2(Depth) : 1;

  logic [DataW-1:0] mem_q [Depth];
  logic [PtrW-1:0]  rd_q, wr_q;
  logic [PtrW:0]    cnt_q;
  logic             push, pop;

  assign ready_o = (cnt_q != (PtrW+1)'(Depth));
  assign valid_o = (cnt_q != '0);
  assign data_o  = mem_q[rd_q];
  assign push    = valid_i && ready_o;
  assign pop     = valid_o && ready_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (push) wr_q <= (wr_q == PtrW'(Depth-1)) ? '0 : wr_q + 1'b1;
      if (pop)  rd_q <= (rd_q == PtrW'(Depth-1)) ? '0 : rd_q + 1'b1;
      cnt_q <= cnt_q + (PtrW+1)'(push) - (PtrW+1)'(pop);
    end
  end

  // Storage has no reset: a word is only read after it has been written.
  always_ff @(posedge clk_i) begin
    if (push) mem_q[wr_q] <= data_i;
  end

  // A producer must hold its word until it is accepted.
  a_stable_in: assert property (@(posedge clk_i) disable iff (!rst_ni)
    valid_i && !ready_o |=> valid_i && $stable(data_i));
endmodule
