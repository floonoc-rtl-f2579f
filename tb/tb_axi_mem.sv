// Behavioural AXI4 memory used as the target in testbenches (a stand-in for a
// tile's L1 scratchpad or an HBM channel, which are outside the NoC).
// Writes are handled one at a time: AW, then its W beats, then B. Reads are
// queued and answered beat by beat in order. An ATOP is executed as a write;
// if it also returns data (atop[5]) one R beat with the old data is queued
// with the ATOP's ID. Ready/valid are randomly throttled when Random = 1; a
// raised valid is held until the handshake, as AXI requires.
// Bursts are INCR; the memory is sparse, one entry per DataW-bit word.
// The memory's timing and throttling are this testbench's own choices; the
// original system uses SRAM, HBM and devices that are not modelled here.
module tb_axi_mem #(
  parameter type         req_t  = floo_pkg::n_req_t,
  parameter type         rsp_t  = floo_pkg::n_rsp_t,
  parameter int unsigned DataW  = 64,
  parameter int unsigned IdW    = 5,
  parameter bit          Random = 1'b1
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  req_t req_i,
  output rsp_t rsp_o
);
  localparam int unsigned Bytes = DataW / 8;
  typedef struct { logic [IdW-1:0] id; logic [63:0] addr; int unsigned beats; logic data_only;
                   logic [DataW-1:0] data; } rd_t;

  logic [DataW-1:0] mem [logic [63:0]];
  rd_t              rq [$];
  int unsigned      wstate;   // 0 AW, 1 W, 2 B
  logic [63:0]      waddr;
  logic [IdW-1:0]   wid;
  logic             rnd_aw, rnd_w, rnd_ar, rnd_b, rnd_r;
  logic             b_hold_q, r_hold_q;   // a raised valid stays until accepted

  function automatic logic [DataW-1:0] rd_word(logic [63:0] a);
    logic [63:0] k = a / Bytes;
    if (mem.exists(k)) return mem[k];
    return '0;
  endfunction

  always_ff @(posedge clk_i) begin
    rnd_aw <= !Random || ($urandom_range(3) != 0);
    rnd_w  <= !Random || ($urandom_range(3) != 0);
    rnd_ar <= !Random || ($urandom_range(3) != 0);
    rnd_b  <= !Random || ($urandom_range(3) != 0);
    rnd_r  <= !Random || ($urandom_range(3) != 0);
  end

  always_comb begin
    rsp_o = '0;
    rsp_o.aw_ready = (wstate == 0) && rnd_aw;
    rsp_o.w_ready  = (wstate == 1) && rnd_w;
    rsp_o.ar_ready = rnd_ar;
    rsp_o.b_valid  = (wstate == 2) && (rnd_b || b_hold_q);
    rsp_o.b.id     = wid;
    rsp_o.r_valid  = (rq.size() > 0) && (rnd_r || r_hold_q);
    if (rq.size() > 0) begin
      rsp_o.r.id   = rq[0].id;
      rsp_o.r.data = rq[0].data_only ? rq[0].data : rd_word(rq[0].addr);
      rsp_o.r.last = (rq[0].beats == 1);
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wstate <= 0;
      rq.delete();
      waddr  <= '0;
      wid    <= '0;
      b_hold_q <= 1'b0;
      r_hold_q <= 1'b0;
    end else begin
      b_hold_q <= rsp_o.b_valid && !req_i.b_ready;
      r_hold_q <= rsp_o.r_valid && !req_i.r_ready;
      if (req_i.aw_valid && rsp_o.aw_ready) begin
        waddr  <= 64'(req_i.aw.addr);
        wid    <= req_i.aw.id;
        wstate <= 1;
        if (req_i.aw.atop[5])
          rq.push_back('{id: req_i.aw.id, addr: 64'(req_i.aw.addr), beats: 1, data_only: 1'b1,
                         data: rd_word(64'(req_i.aw.addr))});
      end
      if (req_i.w_valid && rsp_o.w_ready) begin
        logic [DataW-1:0] d;
        d = rd_word(waddr);
        for (int unsigned b = 0; b < Bytes; b++)
          if (req_i.w.strb[b]) d[8*b +: 8] = req_i.w.data[8*b +: 8];
        mem[waddr / Bytes] = d;
        waddr <= waddr + Bytes;
        if (req_i.w.last) wstate <= 2;
      end
      if (rsp_o.b_valid && req_i.b_ready) wstate <= 0;
      if (req_i.ar_valid && rsp_o.ar_ready)
        rq.push_back('{id: req_i.ar.id, addr: 64'(req_i.ar.addr), beats: int'(req_i.ar.len) + 1,
                       data_only: 1'b0, data: '0});
      if (rsp_o.r_valid && req_i.r_ready) begin
        if (rq[0].beats == 1) void'(rq.pop_front());
        else begin
          rq[0].beats = rq[0].beats - 1;
          rq[0].addr  = rq[0].addr + Bytes;
        end
      end
    end
  end
endmodule
