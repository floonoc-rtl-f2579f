// Full-size testbench: floo_mesh with its default 8 x 4 tiles and eight
// HBM-side interfaces, no parameter overrides.
// Behavioural memories sit on every tile's narrow and wide target ports and
// on every HBM-side interface; the east boundary is left idle (no flits in,
// always ready) and must stay silent.
// One complete operation is run on the whole mesh:
//   * all 32 tiles at once write a 4-beat wide burst into their row's HBM
//     channel, wait for B and read it back, checking the data;
//   * a corner-to-corner narrow read from tile (x=1, y=0) to tile (x=4,
//     y=7) and back the other way, whose request latency from AXI to AXI
//     must be 2 + 2 * 11 = 24 cycles (NI 1 + 11 routers x 2 + NI 1);
//   * every tile writes a word into its east neighbour's L1 (west one for
//     the last column) and, at the end, all tiles read it back at once.
// The 8 x 4 shape and one HBM channel per row follow the original system;
// the 24-cycle figure is this design's (2 cycles per router, 1 per NI).
module tb_floo_mesh_full;
  import floo_pkg::*;
  localparam int unsigned NX = 4, NY = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  n_req_t [NY-1:0][NX-1:0] n_in_req, n_out_req;
  n_rsp_t [NY-1:0][NX-1:0] n_in_rsp, n_out_rsp;
  w_req_t [NY-1:0][NX-1:0] w_in_req, w_out_req;
  w_rsp_t [NY-1:0][NX-1:0] w_in_rsp, w_out_rsp;
  n_req_t [NY-1:0] hbm_n_req;  n_rsp_t [NY-1:0] hbm_n_rsp;
  w_req_t [NY-1:0] hbm_w_req;  w_rsp_t [NY-1:0] hbm_w_rsp;
  link_t  [NY-1:0] east_o, east_i;
  link_rdy_t [NY-1:0] east_rdy_i, east_rdy_o;

  assign east_i     = '0;
  assign east_rdy_i = '1;

  floo_mesh dut (
    .clk_i(clk), .rst_ni(rst_n),
    .n_in_req_i(n_in_req), .n_in_rsp_o(n_in_rsp), .w_in_req_i(w_in_req), .w_in_rsp_o(w_in_rsp),
    .n_out_req_o(n_out_req), .n_out_rsp_i(n_out_rsp), .w_out_req_o(w_out_req), .w_out_rsp_i(w_out_rsp),
    .hbm_n_req_o(hbm_n_req), .hbm_n_rsp_i(hbm_n_rsp), .hbm_w_req_o(hbm_w_req), .hbm_w_rsp_i(hbm_w_rsp),
    .east_o(east_o), .east_rdy_i(east_rdy_i), .east_i(east_i), .east_rdy_o(east_rdy_o));

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int cyc = 0;
  always @(posedge clk) cyc++;

  function automatic logic [AddrW-1:0] mk_addr(int x, int y, int off);
    logic [AddrW-1:0] a;
    a = AddrW'(off);
    a[AddrDstOffset +: IdW] = {3'(y), 3'(x)};
    return a;
  endfunction

  int n_east = 0;
  int done_cnt = 0;
  int phase = 0;   // 0: HBM traffic, 1: corner latency, 2: neighbour reads

  for (genvar y = 0; y < NY; y++) begin : g_row
    tb_axi_mem #(.req_t(n_req_t), .rsp_t(n_rsp_t), .DataW(64), .IdW(NarrowIdW), .Random(1'b0))
      i_hbm_n (.clk_i(clk), .rst_ni(rst_n), .req_i(hbm_n_req[y]), .rsp_o(hbm_n_rsp[y]));
    tb_axi_mem #(.req_t(w_req_t), .rsp_t(w_rsp_t), .DataW(512), .IdW(WideIdW), .Random(1'b0))
      i_hbm_w (.clk_i(clk), .rst_ni(rst_n), .req_i(hbm_w_req[y]), .rsp_o(hbm_w_rsp[y]));
    always @(negedge clk)
      if (east_o[y].req_valid || east_o[y].rsp_valid || east_o[y].wide_valid) n_east++;
  end

  for (genvar y = 0; y < NY; y++) begin : g_y
    for (genvar x = 0; x < NX; x++) begin : g_x
      localparam int Node = y * NX + x;
      n_req_t nreq; w_req_t wreq;
      assign n_in_req[y][x] = nreq;
      assign w_in_req[y][x] = wreq;
      tb_axi_mem #(.req_t(n_req_t), .rsp_t(n_rsp_t), .DataW(64), .IdW(NarrowIdW), .Random(1'b0))
        i_nmem (.clk_i(clk), .rst_ni(rst_n), .req_i(n_out_req[y][x]), .rsp_o(n_out_rsp[y][x]));
      tb_axi_mem #(.req_t(w_req_t), .rsp_t(w_rsp_t), .DataW(512), .IdW(WideIdW), .Random(1'b0))
        i_wmem (.clk_i(clk), .rst_ni(rst_n), .req_i(w_out_req[y][x]), .rsp_o(w_out_rsp[y][x]));

      task automatic n_write1(logic [AddrW-1:0] a, logic [63:0] d);
        nreq.aw = '0; nreq.aw.id = 5'd1; nreq.aw.addr = a; nreq.aw.size = 3'd3; nreq.aw.burst = 2'b01;
        nreq.aw_valid = 1;
        #2; while (!n_in_rsp[y][x].aw_ready) begin @(negedge clk); #2; end
        @(negedge clk); nreq.aw_valid = 0;
        nreq.w.data = d; nreq.w.strb = '1; nreq.w.last = 1; nreq.w_valid = 1;
        #2; while (!n_in_rsp[y][x].w_ready) begin @(negedge clk); #2; end
        @(negedge clk); nreq.w_valid = 0;
        #2; while (!n_in_rsp[y][x].b_valid) begin @(negedge clk); #2; end
        @(negedge clk);
      endtask

      // returns the read data and the AR-accept time
      task automatic n_read1(logic [AddrW-1:0] a, output logic [63:0] d, output int t_acc);
        nreq.ar = '0; nreq.ar.id = 5'd2; nreq.ar.addr = a; nreq.ar.size = 3'd3; nreq.ar.burst = 2'b01;
        nreq.ar_valid = 1;
        #2; while (!n_in_rsp[y][x].ar_ready) begin @(negedge clk); #2; end
        t_acc = cyc;
        @(negedge clk); nreq.ar_valid = 0;
        #2; while (!n_in_rsp[y][x].r_valid) begin @(negedge clk); #2; end
        d = n_in_rsp[y][x].r.data;
        chk(n_in_rsp[y][x].r.id == 5'd2 && n_in_rsp[y][x].r.last, $sformatf("node %0d R id/last", Node));
        @(negedge clk);
      endtask

      initial begin
        logic [63:0] d;
        int t_acc, got;
        nreq = '0; wreq = '0;
        nreq.b_ready = 1; nreq.r_ready = 1; wreq.b_ready = 1; wreq.r_ready = 1;
        @(posedge rst_n); @(negedge clk);
        // ---- phase 0: every tile to its row's HBM channel ----
        wreq.aw = '0; wreq.aw.id = 3'd1; wreq.aw.addr = mk_addr(0, y, Node * 'h1000);
        wreq.aw.len = 8'd3; wreq.aw.size = 3'd6; wreq.aw.burst = 2'b01; wreq.aw_valid = 1;
        #2; while (!w_in_rsp[y][x].aw_ready) begin @(negedge clk); #2; end
        @(negedge clk); wreq.aw_valid = 0;
        for (int b = 0; b < 4; b++) begin
          wreq.w.data = {16{32'(Node * 16 + b)}}; wreq.w.strb = '1; wreq.w.last = (b == 3);
          wreq.w_valid = 1;
          #2; while (!w_in_rsp[y][x].w_ready) begin @(negedge clk); #2; end
          @(negedge clk);
        end
        wreq.w_valid = 0;
        #2; while (!w_in_rsp[y][x].b_valid) begin @(negedge clk); #2; end
        chk(w_in_rsp[y][x].b.id == 3'd1, $sformatf("node %0d HBM B", Node));
        @(negedge clk);
        wreq.ar = '0; wreq.ar.id = 3'd4; wreq.ar.addr = mk_addr(0, y, Node * 'h1000);
        wreq.ar.len = 8'd3; wreq.ar.size = 3'd6; wreq.ar.burst = 2'b01; wreq.ar_valid = 1;
        #2; while (!w_in_rsp[y][x].ar_ready) begin @(negedge clk); #2; end
        @(negedge clk); wreq.ar_valid = 0;
        got = 0;
        while (got < 4) begin
          #2;
          if (w_in_rsp[y][x].r_valid) begin
            chk(w_in_rsp[y][x].r.data == {16{32'(Node * 16 + got)}} && w_in_rsp[y][x].r.id == 3'd4,
                $sformatf("node %0d HBM read beat %0d", Node, got));
            got++;
          end
          @(negedge clk);
        end
        // a word into the east neighbour's L1 (west one for the last column)
        n_write1(mk_addr(x == NX - 1 ? x : x + 2, y, 'h40 + Node * 8), 64'hC0DE_0000 + 64'(Node));
        done_cnt++;
        wait (phase == 1);
        // ---- phase 1: corner to corner (tiles (1,0) and (4,7)) ----
        if (Node == 0 || Node == NX * NY - 1) begin
          int tx, ty;
          tx = (Node == 0) ? NX : 1;
          ty = (Node == 0) ? NY - 1 : 0;
          if (Node == NX * NY - 1) repeat (60) @(negedge clk);
          n_read1(mk_addr(tx, ty, 'h10), d, t_acc);
        end
        wait (phase == 2);
        // ---- phase 2: read back the word written into the neighbour's L1 ----
        n_read1(mk_addr(x == NX - 1 ? x : x + 2, y, 'h40 + Node * 8), d, t_acc);
        chk(d == 64'hC0DE_0000 + 64'(Node), $sformatf("node %0d neighbour read-back", Node));
        done_cnt++;
      end
    end
  end

  // corner latency monitor: AR accepted at a corner -> AR at the other corner
  int t_ar0, t_ar1;
  initial begin
    wait (done_cnt == NX * NY);
    repeat (10) @(negedge clk);
    phase = 1;
    #2; while (!(n_in_req[0][0].ar_valid && n_in_rsp[0][0].ar_ready)) begin @(negedge clk); #2; end
    t_ar0 = cyc;
    while (!n_out_req[NY-1][NX-1].ar_valid) begin @(negedge clk); #2; end
    chk(cyc - t_ar0 == 24, $sformatf("corner-to-corner AR latency %0d, expected 24", cyc - t_ar0));
    while (!n_in_rsp[0][0].r_valid) begin @(negedge clk); #2; end
    $display("corner-to-corner narrow read round trip: %0d cycles", cyc - t_ar0);
    while (!(n_in_req[NY-1][NX-1].ar_valid && n_in_rsp[NY-1][NX-1].ar_ready)) begin @(negedge clk); #2; end
    t_ar1 = cyc;
    while (!n_out_req[0][0].ar_valid) begin @(negedge clk); #2; end
    chk(cyc - t_ar1 == 24, $sformatf("reverse corner AR latency %0d, expected 24", cyc - t_ar1));
    repeat (100) @(negedge clk);
    phase = 2;
    wait (done_cnt == 2 * NX * NY);
    chk(n_east == 0, "east boundary stays silent");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
  end
endmodule
