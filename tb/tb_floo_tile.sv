// Testbench of floo_tile: two tiles side by side, tile A at (x=1, y=0) and
// tile B at (x=2, y=0), A's East link wired to B's West link and back. The
// remaining links are tied off and watched: nothing may leave on them.
// Behavioural AXI memories sit on both tiles' target ports.
// Checks:
//   * neighbour latency: a narrow AR accepted at A's NI appears at B's
//     target port 6 cycles later (NI 1 + two router hops 2 + 2 + NI 1);
//   * narrow and wide write/read-back A -> B and B -> A at the same time;
//   * full round trip of a single-beat narrow read to the neighbour;
//   * no flit leaves through an unconnected port.
// The 6-cycle figure follows from the published per-hop cost of two cycles
// plus this design's one cycle per NI direction.
module tb_floo_tile;
  import floo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  n_req_t n_in_req [2], n_out_req [2];
  n_rsp_t n_in_rsp [2], n_out_rsp [2];
  w_req_t w_in_req [2], w_out_req [2];
  w_rsp_t w_in_rsp [2], w_out_rsp [2];
  link_t     [3:0] li [2], lo [2];
  link_rdy_t [3:0] lri [2], lro [2];
  id_t ids [2];

  // A.East <-> B.West; other ports tied off
  always_comb begin
    for (int t = 0; t < 2; t++) begin
      li[t]  = '0;
      lri[t] = '1;
    end
    li[1][West]  = lo[0][East];  lri[0][East] = lro[1][West];
    li[0][East]  = lo[1][West];  lri[1][West] = lro[0][East];
  end

  for (genvar t = 0; t < 2; t++) begin : g_t
    floo_tile i_tile (
      .clk_i(clk), .rst_ni(rst_n), .id_i(ids[t]),
      .n_in_req_i(n_in_req[t]), .n_in_rsp_o(n_in_rsp[t]),
      .w_in_req_i(w_in_req[t]), .w_in_rsp_o(w_in_rsp[t]),
      .n_out_req_o(n_out_req[t]), .n_out_rsp_i(n_out_rsp[t]),
      .w_out_req_o(w_out_req[t]), .w_out_rsp_i(w_out_rsp[t]),
      .link_i(li[t]), .link_rdy_o(lro[t]), .link_o(lo[t]), .link_rdy_i(lri[t]));
    tb_axi_mem #(.req_t(n_req_t), .rsp_t(n_rsp_t), .DataW(64), .IdW(NarrowIdW), .Random(1'b1))
      i_nmem (.clk_i(clk), .rst_ni(rst_n), .req_i(n_out_req[t]), .rsp_o(n_out_rsp[t]));
    tb_axi_mem #(.req_t(w_req_t), .rsp_t(w_rsp_t), .DataW(512), .IdW(WideIdW), .Random(1'b1))
      i_wmem (.clk_i(clk), .rst_ni(rst_n), .req_i(w_out_req[t]), .rsp_o(w_out_rsp[t]));
  end

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // stray traffic on unconnected ports
  int stray = 0;
  always @(negedge clk) begin
    for (int t = 0; t < 2; t++)
      for (int d = 0; d < 4; d++)
        if (!((t == 0 && d == East) || (t == 1 && d == West)))
          if (lo[t][d].req_valid || lo[t][d].rsp_valid || lo[t][d].wide_valid) stray++;
  end

  function automatic logic [AddrW-1:0] mk_addr(int x, int y, int off);
    logic [AddrW-1:0] a;
    a = AddrW'(off);
    a[AddrDstOffset +: IdW] = {3'(y), 3'(x)};
    return a;
  endfunction

  // narrow write of `beats` beats, then read-back and compare
  task automatic n_wr_rd(int t, int dx, logic [4:0] id, int off, int beats, logic [63:0] seed);
    int got;
    n_in_req[t].aw = '0; n_in_req[t].aw.id = id; n_in_req[t].aw.addr = mk_addr(dx, 0, off);
    n_in_req[t].aw.len = 8'(beats - 1); n_in_req[t].aw.size = 3'd3; n_in_req[t].aw.burst = 2'b01;
    n_in_req[t].aw_valid = 1;
    #2; while (!n_in_rsp[t].aw_ready) begin @(negedge clk); #2; end
    @(negedge clk); n_in_req[t].aw_valid = 0;
    for (int b = 0; b < beats; b++) begin
      n_in_req[t].w.data = seed + 64'(b); n_in_req[t].w.strb = '1; n_in_req[t].w.last = (b == beats - 1);
      n_in_req[t].w_valid = 1;
      #2; while (!n_in_rsp[t].w_ready) begin @(negedge clk); #2; end
      @(negedge clk);
    end
    n_in_req[t].w_valid = 0;
    #2; while (!n_in_rsp[t].b_valid) begin @(negedge clk); #2; end
    chk(n_in_rsp[t].b.id == id, $sformatf("tile %0d narrow B id", t));
    @(negedge clk);
    n_in_req[t].ar = '0; n_in_req[t].ar.id = id; n_in_req[t].ar.addr = mk_addr(dx, 0, off);
    n_in_req[t].ar.len = 8'(beats - 1); n_in_req[t].ar.size = 3'd3; n_in_req[t].ar.burst = 2'b01;
    n_in_req[t].ar_valid = 1;
    #2; while (!n_in_rsp[t].ar_ready) begin @(negedge clk); #2; end
    @(negedge clk); n_in_req[t].ar_valid = 0;
    got = 0;
    while (got < beats) begin
      #2;
      if (n_in_rsp[t].r_valid) begin
        chk(n_in_rsp[t].r.data == seed + 64'(got) && n_in_rsp[t].r.id == id &&
            n_in_rsp[t].r.last == (got == beats - 1), $sformatf("tile %0d narrow R beat %0d", t, got));
        got++;
      end
      @(negedge clk);
    end
  endtask

  task automatic w_wr_rd(int t, int dx, logic [2:0] id, int off, int beats, logic [31:0] seed);
    int got;
    w_in_req[t].aw = '0; w_in_req[t].aw.id = id; w_in_req[t].aw.addr = mk_addr(dx, 0, off);
    w_in_req[t].aw.len = 8'(beats - 1); w_in_req[t].aw.size = 3'd6; w_in_req[t].aw.burst = 2'b01;
    w_in_req[t].aw_valid = 1;
    #2; while (!w_in_rsp[t].aw_ready) begin @(negedge clk); #2; end
    @(negedge clk); w_in_req[t].aw_valid = 0;
    for (int b = 0; b < beats; b++) begin
      w_in_req[t].w.data = {16{seed + 32'(b)}}; w_in_req[t].w.strb = '1; w_in_req[t].w.last = (b == beats - 1);
      w_in_req[t].w_valid = 1;
      #2; while (!w_in_rsp[t].w_ready) begin @(negedge clk); #2; end
      @(negedge clk);
    end
    w_in_req[t].w_valid = 0;
    #2; while (!w_in_rsp[t].b_valid) begin @(negedge clk); #2; end
    chk(w_in_rsp[t].b.id == id, $sformatf("tile %0d wide B id", t));
    @(negedge clk);
    w_in_req[t].ar = '0; w_in_req[t].ar.id = id; w_in_req[t].ar.addr = mk_addr(dx, 0, off);
    w_in_req[t].ar.len = 8'(beats - 1); w_in_req[t].ar.size = 3'd6; w_in_req[t].ar.burst = 2'b01;
    w_in_req[t].ar_valid = 1;
    #2; while (!w_in_rsp[t].ar_ready) begin @(negedge clk); #2; end
    @(negedge clk); w_in_req[t].ar_valid = 0;
    got = 0;
    while (got < beats) begin
      #2;
      if (w_in_rsp[t].r_valid) begin
        chk(w_in_rsp[t].r.data == {16{seed + 32'(got)}} && w_in_rsp[t].r.id == id,
            $sformatf("tile %0d wide R beat %0d", t, got));
        got++;
      end
      @(negedge clk);
    end
  endtask

  initial begin
    int t0, t1;
    ids[0] = '{y: 3'd0, x: 3'd1};
    ids[1] = '{y: 3'd0, x: 3'd2};
    for (int t = 0; t < 2; t++) begin
      n_in_req[t] = '0; w_in_req[t] = '0;
      n_in_req[t].b_ready = 1; n_in_req[t].r_ready = 1;
      w_in_req[t].b_ready = 1; w_in_req[t].r_ready = 1;
    end
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk);

    // ---- neighbour latency ----
    n_in_req[0].ar = '0; n_in_req[0].ar.id = 5'd1; n_in_req[0].ar.addr = mk_addr(2, 0, 'h40);
    n_in_req[0].ar_valid = 1;
    #2; while (!n_in_rsp[0].ar_ready) begin @(negedge clk); #2; end
    t0 = cyc;
    @(negedge clk); n_in_req[0].ar_valid = 0;
    #2; while (!n_out_req[1].ar_valid) begin @(negedge clk); #2; end
    t1 = cyc;
    chk(t1 - t0 == 6, $sformatf("neighbour AR latency %0d cycles, expected 6", t1 - t0));
    while (!n_in_rsp[0].r_valid) begin @(negedge clk); #2; end
    chk(n_in_rsp[0].r.id == 5'd1 && n_in_rsp[0].r.last, "neighbour read response");
    $display("neighbour narrow read round trip: %0d cycles (memory adds its own delay)", cyc - t0);
    @(negedge clk);

    // ---- traffic both ways at once ----
    fork
      begin
        n_wr_rd(0, 2, 5'd3, 'h100, 4, 64'h1111_0000);
        w_wr_rd(0, 2, 3'd2, 'h8000, 8, 32'hAA00);
        n_wr_rd(0, 2, 5'd4, 'h180, 1, 64'h1111_1000);
      end
      begin
        w_wr_rd(1, 1, 3'd5, 'h9000, 16, 32'hBB00);
        n_wr_rd(1, 1, 5'd6, 'h200, 8, 64'h2222_0000);
      end
    join
    chk(stray == 0, $sformatf("no flits on unconnected ports (%0d)", stray));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
