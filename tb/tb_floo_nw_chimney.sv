// Testbench of floo_nw_chimney in loopback: the NI's three outgoing links are
// wired straight back into its incoming links, and behavioural AXI memories
// sit on its narrow and wide target ports. Every transaction therefore runs
// through both halves of the NI (initiator packing and target unpacking /
// meta buffer / response packing). Checks:
//   * narrow and wide write bursts followed by read-back of the same data;
//   * AW/W bundling: a wide burst occupies the wide link for consecutive
//     cycles, its header "last" bit set only on the final beat;
//   * the one-cycle-in, one-cycle-out latency of the NI (AR accepted ->
//     AR at the target two cycles later in loopback);
//   * RoB-less ordering: a second write with the same ID to another
//     destination is held until the first one's B response is back, while
//     one to the same destination is not;
//   * an ATOP (AtomicLoad) returns both R (old data) and B with its own ID;
//   * several wide read streams with different IDs are all answered.
// The checked behaviour (one beat per flit, AW/W bundling, RoB-less stall,
// ATOP handling) follows the original NoC description; the two-cycle loopback
// latency and the test addresses are this design's own.
module tb_floo_nw_chimney;
  import floo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  n_req_t n_in_req, n_out_req;
  n_rsp_t n_in_rsp, n_out_rsp;
  w_req_t w_in_req, w_out_req;
  w_rsp_t w_in_rsp, w_out_rsp;
  link_t  lnk;
  link_rdy_t lnk_rdy;
  id_t me;

  floo_nw_chimney dut (
    .clk_i(clk), .rst_ni(rst_n), .id_i(me),
    .n_in_req_i(n_in_req), .n_in_rsp_o(n_in_rsp), .w_in_req_i(w_in_req), .w_in_rsp_o(w_in_rsp),
    .n_out_req_o(n_out_req), .n_out_rsp_i(n_out_rsp), .w_out_req_o(w_out_req), .w_out_rsp_i(w_out_rsp),
    .floo_o(lnk), .floo_rdy_i(lnk_rdy), .floo_i(lnk), .floo_rdy_o(lnk_rdy));

  tb_axi_mem #(.req_t(n_req_t), .rsp_t(n_rsp_t), .DataW(64), .IdW(NarrowIdW), .Random(1'b1))
    i_nmem (.clk_i(clk), .rst_ni(rst_n), .req_i(n_out_req), .rsp_o(n_out_rsp));
  tb_axi_mem #(.req_t(w_req_t), .rsp_t(w_rsp_t), .DataW(512), .IdW(WideIdW), .Random(1'b0))
    i_wmem (.clk_i(clk), .rst_ni(rst_n), .req_i(w_out_req), .rsp_o(w_out_rsp));

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // response collectors (ready always high)
  n_b_t nb_q [$];  n_r_t nr_q [$];  w_b_t wb_q [$];  w_r_t wr_q [$];
  always @(negedge clk) begin
    #2;
    if (n_in_rsp.b_valid) nb_q.push_back(n_in_rsp.b);
    if (n_in_rsp.r_valid) nr_q.push_back(n_in_rsp.r);
    if (w_in_rsp.b_valid) wb_q.push_back(w_in_rsp.b);
    if (w_in_rsp.r_valid) wr_q.push_back(w_in_rsp.r);
  end

  // wide link monitor: consecutive W beats and header "last" bits
  int wide_w_run = 0, wide_w_max_run = 0, wide_last_err = 0;
  always @(negedge clk) begin
    #2;
    if (lnk.wide_valid && lnk_rdy.wide_ready && lnk.wide.hdr.axi_ch == WideW) begin
      w_w_t w;
      w = w_w_t'(lnk.wide.payload);
      if (lnk.wide.hdr.last != w.last) wide_last_err++;
      wide_w_run++;
      if (wide_w_run > wide_w_max_run) wide_w_max_run = wide_w_run;
    end else wide_w_run = 0;
  end

  function automatic logic [AddrW-1:0] mk_addr(int x, int y, int off);
    logic [AddrW-1:0] a;
    a = AddrW'(off);
    a[AddrDstOffset +: IdW] = {3'(y), 3'(x)};
    return a;
  endfunction

  // ---------------- narrow drivers ----------------
  task automatic n_aw(logic [4:0] id, logic [AddrW-1:0] addr, int len, logic [5:0] atop);
    n_in_req.aw = '0;
    n_in_req.aw.id = id; n_in_req.aw.addr = addr; n_in_req.aw.len = 8'(len);
    n_in_req.aw.size = 3'd3; n_in_req.aw.burst = 2'b01; n_in_req.aw.atop = atop;
    n_in_req.aw_valid = 1;
    #2; while (!n_in_rsp.aw_ready) begin @(negedge clk); #2; end
    @(negedge clk); n_in_req.aw_valid = 0;
  endtask
  task automatic n_w(int beats, logic [63:0] seed);
    for (int b = 0; b < beats; b++) begin
      n_in_req.w.data = seed + 64'(b); n_in_req.w.strb = '1; n_in_req.w.last = (b == beats - 1);
      n_in_req.w_valid = 1;
      #2; while (!n_in_rsp.w_ready) begin @(negedge clk); #2; end
      @(negedge clk); n_in_req.w_valid = 0;
    end
  endtask
  task automatic n_ar(logic [4:0] id, logic [AddrW-1:0] addr, int len);
    n_in_req.ar = '0;
    n_in_req.ar.id = id; n_in_req.ar.addr = addr; n_in_req.ar.len = 8'(len);
    n_in_req.ar.size = 3'd3; n_in_req.ar.burst = 2'b01;
    n_in_req.ar_valid = 1;
    #2; while (!n_in_rsp.ar_ready) begin @(negedge clk); #2; end
    @(negedge clk); n_in_req.ar_valid = 0;
  endtask
  task automatic wait_q(ref int unsigned sz, input int n);
    int t = 0;
    while (sz < n && t < 500) begin @(negedge clk); t++; end
  endtask

  // ---------------- wide drivers ----------------
  task automatic w_aw(logic [2:0] id, logic [AddrW-1:0] addr, int len);
    w_in_req.aw = '0;
    w_in_req.aw.id = id; w_in_req.aw.addr = addr; w_in_req.aw.len = 8'(len);
    w_in_req.aw.size = 3'd6; w_in_req.aw.burst = 2'b01;
    w_in_req.aw_valid = 1;
    #2; while (!w_in_rsp.aw_ready) begin @(negedge clk); #2; end
    @(negedge clk); w_in_req.aw_valid = 0;
  endtask
  task automatic w_w(int beats, logic [31:0] seed);
    for (int b = 0; b < beats; b++) begin
      w_in_req.w.data = {16{seed + 32'(b)}}; w_in_req.w.strb = '1; w_in_req.w.last = (b == beats - 1);
      w_in_req.w_valid = 1;
      #2; while (!w_in_rsp.w_ready) begin @(negedge clk); #2; end
      if (b == beats - 1) begin @(negedge clk); w_in_req.w_valid = 0; end
      else @(negedge clk);
    end
  endtask
  task automatic w_ar(logic [2:0] id, logic [AddrW-1:0] addr, int len);
    w_in_req.ar = '0;
    w_in_req.ar.id = id; w_in_req.ar.addr = addr; w_in_req.ar.len = 8'(len);
    w_in_req.ar.size = 3'd6; w_in_req.ar.burst = 2'b01;
    w_in_req.ar_valid = 1;
    #2; while (!w_in_rsp.ar_ready) begin @(negedge clk); #2; end
    @(negedge clk); w_in_req.ar_valid = 0;
  endtask

  initial begin
    int t0, stall_cycles, n;
    int unsigned sz;
    me = '{y: 3'd0, x: 3'd1};
    n_in_req = '0; w_in_req = '0;
    n_in_req.b_ready = 1; n_in_req.r_ready = 1;
    w_in_req.b_ready = 1; w_in_req.r_ready = 1;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk);

    // ---- narrow write + read-back ----
    n_aw(5'd2, mk_addr(1, 0, 'h100), 3, 6'd0);
    n_w(4, 64'hA000);
    for (int t = 0; t < 200 && nb_q.size() < 1; t++) @(negedge clk);
    chk(nb_q.size() == 1 && nb_q[0].id == 5'd2, "narrow B with original ID");
    nb_q.delete();
    n_ar(5'd7, mk_addr(1, 0, 'h100), 3);
    for (int t = 0; t < 200 && nr_q.size() < 4; t++) @(negedge clk);
    chk(nr_q.size() == 4, "narrow R beats");
    for (int b = 0; b < 4 && b < nr_q.size(); b++)
      chk(nr_q[b].data == 64'hA000 + 64'(b) && nr_q[b].id == 5'd7 && nr_q[b].last == (b == 3),
          $sformatf("narrow read-back beat %0d", b));
    nr_q.delete();

    // ---- NI latency: AR accepted -> AR at the target port ----
    n_in_req.ar = '0; n_in_req.ar.addr = mk_addr(1, 0, 'h100); n_in_req.ar.id = 5'd8;
    n_in_req.ar_valid = 1;
    #2; while (!n_in_rsp.ar_ready) begin @(negedge clk); #2; end
    t0 = cyc;
    @(negedge clk); n_in_req.ar_valid = 0;
    #2; while (!n_out_req.ar_valid) begin @(negedge clk); #2; end
    chk(cyc - t0 == 2, $sformatf("loopback AR latency %0d, expected 1 + 1", cyc - t0));
    for (int t = 0; t < 200 && nr_q.size() < 1; t++) @(negedge clk);
    nr_q.delete();

    // ---- wide write burst of 16 beats + read-back ----
    w_aw(3'd1, mk_addr(1, 0, 'h4000), 15);
    w_w(16, 32'hB000);
    for (int t = 0; t < 200 && wb_q.size() < 1; t++) @(negedge clk);
    chk(wb_q.size() == 1 && wb_q[0].id == 3'd1, "wide B with original ID");
    chk(wide_w_max_run == 16, $sformatf("16 W beats on consecutive link cycles (%0d)", wide_w_max_run));
    chk(wide_last_err == 0, "header last follows W last");
    wb_q.delete();
    // several streams with different IDs, issued back to back
    for (int s = 0; s < 4; s++) w_ar(3'(s), mk_addr(1, 0, 'h4000 + 64 * 4 * s), 3);
    for (int t = 0; t < 300 && wr_q.size() < 16; t++) @(negedge clk);
    chk(wr_q.size() == 16, $sformatf("four wide streams answered (%0d beats)", wr_q.size()));
    begin
      int beat_of [8];
      foreach (beat_of[i]) beat_of[i] = 0;
      foreach (wr_q[k]) begin
        int s;
        s = int'(wr_q[k].id);
        chk(wr_q[k].data[31:0] == 32'hB000 + 32'(4 * s + beat_of[s]), $sformatf("wide stream %0d data %h beat %0d", s, wr_q[k].data[31:0], beat_of[s]));
        beat_of[s]++;
      end
    end
    wr_q.delete();

    // ---- RoB-less ordering: same ID, other destination is stalled ----
    n_aw(5'd3, mk_addr(1, 0, 'h200), 0, 6'd0);
    n_w(1, 64'hC000);
    // same ID, same destination: accepted without waiting for B
    n_in_req.aw = '0; n_in_req.aw.id = 5'd3; n_in_req.aw.addr = mk_addr(1, 0, 'h208);
    n_in_req.aw.size = 3'd3; n_in_req.aw.burst = 2'b01; n_in_req.aw_valid = 1;
    stall_cycles = 0;
    #2;
    while (!n_in_rsp.aw_ready) begin stall_cycles++; @(negedge clk); #2; end
    chk(stall_cycles < 4 && nb_q.size() == 0,
        $sformatf("same destination accepted at once (%0d cycles, %0d B back)", stall_cycles, nb_q.size()));
    @(negedge clk); n_in_req.aw_valid = 0;
    n_w(1, 64'hC100);
    // same ID, other destination (2,0): must wait for both B responses
    n_in_req.aw = '0; n_in_req.aw.id = 5'd3; n_in_req.aw.addr = mk_addr(2, 0, 'h300);
    n_in_req.aw.size = 3'd3; n_in_req.aw.burst = 2'b01; n_in_req.aw_valid = 1;
    stall_cycles = 0;
    #2;
    while (!n_in_rsp.aw_ready) begin
      stall_cycles++;
      @(negedge clk); #2;
    end
    chk(stall_cycles > 0, $sformatf("other destination stalled %0d cycles", stall_cycles));
    chk(nb_q.size() == 2, $sformatf("both earlier B responses back before release (%0d)", nb_q.size()));
    @(negedge clk); n_in_req.aw_valid = 0;
    n_w(1, 64'hC200);
    for (int t = 0; t < 200 && nb_q.size() < 3; t++) @(negedge clk);
    chk(nb_q.size() == 3, "third B");
    nb_q.delete();

    // ---- ATOP (AtomicLoad, atop = 6'b100000) on the word written above ----
    n_aw(5'd9, mk_addr(1, 0, 'h200), 0, 6'b100000);
    n_w(1, 64'h5);
    for (int t = 0; t < 200 && (nb_q.size() < 1 || nr_q.size() < 1); t++) @(negedge clk);
    chk(nb_q.size() == 1 && nb_q[0].id == 5'd9, "ATOP B with its ID");
    chk(nr_q.size() == 1 && nr_q[0].id == 5'd9 && nr_q[0].data == 64'hC000, "ATOP R with old data");
    nb_q.delete(); nr_q.delete();

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
