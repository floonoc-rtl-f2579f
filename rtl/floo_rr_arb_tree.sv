// Round-robin arbiter built as a logarithmic tree of 2:1 selectors.
//
// The inputs are padded to a power of two and arranged as the leaves of a
// binary tree. Every leaf carries two requests: its plain request and a
// "priority" request, set when the leaf's index is at or above the
// round-robin pointer rr_q. Each 2:1 node forwards a priority request before
// a plain one and, among equals, its left (lower-index) child, so the root
// yields the first requester at or after rr_q, wrapping around to the lowest
// index. After every handshake at the output rr_q moves to the index just
// above the granted one, so an input that keeps requesting waits for at most
// NumIn-1 other grants. While the output is valid but not accepted, the
// decision is held (LockIn) so the forwarded word stays stable, as a
// valid/ready handshake requires.
// The paper states only "round-robin, implemented as a logarithmic tree";
// the node rule and the lock are this design's choice.
// Timing: combinational from req_i to gnt_o/valid_o/data_o; rr_q updates on
// the clock edge.
module floo_rr_arb_tree #(
  parameter int unsigned NumIn = 5,
  parameter int unsigned DataW = 8,
  parameter bit          LockIn = 1'b1
) (
  input  logic                         clk_i,
  input  logic                         rst_ni,
  input  logic [NumIn-1:0]             req_i,
  output logic [NumIn-1:0]             gnt_o,
  input  logic [NumIn-1:0][DataW-1:0]  data_i,
  output logic                         valid_o,
  input  logic                         ready_i,
  output logic [DataW-1:0]             data_o,
  output logic [$clog2(NumIn > 1 ? NumIn : 2)-1:0] idx_o
);
  localparam int unsigned Levels = $clog2(NumIn > 1 ? NumIn : 2);
  localparam int unsigned NumLeaves = 2 ** Levels;
  localparam int unsigned NumNodes  = NumLeaves - 1;

  logic [Levels-1:0] rr_q, rr_d;
  logic              lock_q;
  logic [Levels-1:0] lock_idx_q;

  // Tree nodes: node n has children 2n+1 and 2n+2; leaves follow the nodes.
  logic [NumNodes+NumLeaves-1:0]             t_req, t_pri;
  logic [NumNodes+NumLeaves-1:0][Levels-1:0] t_idx;
  logic [NumLeaves-1:0]                      req_eff;

  always_comb begin
    req_eff = '0;
    for (int unsigned i = 0; i < NumIn; i++) req_eff[i] = req_i[i];
    if (LockIn && lock_q) begin
      req_eff = '0;
      req_eff[lock_idx_q] = 1'b1;
    end
  end

  always_comb begin
    t_req = '0;
    t_pri = '0;
    t_idx = '0;
    for (int unsigned l = 0; l < NumLeaves; l++) begin
      t_req[NumNodes+l] = req_eff[l];
      t_pri[NumNodes+l] = req_eff[l] && (Levels'(l) >= rr_q);
      t_idx[NumNodes+l] = Levels'(l);
    end
    for (int n = int'(NumNodes) - 1; n >= 0; n--) begin
      automatic logic sel;   // 1: take the right child
      sel = t_pri[2*n+1] ? 1'b0 :
            t_pri[2*n+2] ? 1'b1 :
            !t_req[2*n+1];
      t_req[n] = t_req[2*n+1] || t_req[2*n+2];
      t_pri[n] = t_pri[2*n+1] || t_pri[2*n+2];
      t_idx[n] = sel ? t_idx[2*n+2] : t_idx[2*n+1];
    end
  end

  assign valid_o = t_req[0];
  assign idx_o   = t_idx[0];
  assign data_o  = data_i[t_idx[0]];

  always_comb begin
    gnt_o = '0;
    if (valid_o && ready_i) gnt_o[t_idx[0]] = 1'b1;
  end

  always_comb begin
    rr_d = rr_q;
    if (valid_o && ready_i)
      rr_d = (t_idx[0] == Levels'(NumIn-1)) ? '0 : t_idx[0] + 1'b1;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rr_q       <= '0;
      lock_q     <= 1'b0;
      lock_idx_q <= '0;
    end else begin
      rr_q       <= rr_d;
      lock_q     <= valid_o && !ready_i;
      lock_idx_q <= t_idx[0];
    end
  end

  a_onehot: assert property (@(posedge clk_i) disable iff (!rst_ni) $onehot0(gnt_o));
  a_gnt_req: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (gnt_o & ~req_i) == '0);
endmodule
