// Testbench of floo_mesh on a reduced 2 x 2 tile mesh (NumX = NumY = 2) with
// end-to-end random traffic. Every tile has a behavioural memory on each of
// its narrow and wide target ports, every row has memories on its HBM-side
// interface and, on the east boundary, a network interface with memories
// standing in for the east-side devices.
// Each tile runs a narrow and a wide traffic generator at the same time.
// A generator first issues a series of write bursts (random destination
// among the other tiles, its row's HBM channel and its row's east device;
// random length; AXI ID 0 or 1) without waiting for responses, collects all
// B responses, then reads every burst back with pipelined ARs and checks
// the data. R beats are matched per AXI ID in issue order, so this also
// checks that the network keeps same-ID responses ordered. The narrow
// generator ends with an AtomicLoad whose R must return the old data.
// The testbench counts, and requires to happen at least once: an ordering
// stall in an NI, a wormhole lock held in a router, two inputs contending
// for one router output, link back-pressure, HBM-side accesses and
// east-boundary traffic.
// The mechanisms come from the original NoC description; mesh size, traffic
// mix and address layout are this testbench's own choices.
module tb_floo_mesh;
  import floo_pkg::*;
  localparam int unsigned NX = 2, NY = 2;
  localparam int unsigned NumNW = 12, NumWW = 6;
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

  floo_mesh #(.NumX(NX), .NumY(NY)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .n_in_req_i(n_in_req), .n_in_rsp_o(n_in_rsp), .w_in_req_i(w_in_req), .w_in_rsp_o(w_in_rsp),
    .n_out_req_o(n_out_req), .n_out_rsp_i(n_out_rsp), .w_out_req_o(w_out_req), .w_out_rsp_i(w_out_rsp),
    .hbm_n_req_o(hbm_n_req), .hbm_n_rsp_i(hbm_n_rsp), .hbm_w_req_o(hbm_w_req), .hbm_w_rsp_i(hbm_w_rsp),
    .east_o(east_o), .east_rdy_i(east_rdy_i), .east_i(east_i), .east_rdy_o(east_rdy_o));

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [AddrW-1:0] mk_addr(int x, int y, int off);
    logic [AddrW-1:0] a;
    a = AddrW'(off);
    a[AddrDstOffset +: IdW] = {3'(y), 3'(x)};
    return a;
  endfunction

  // event counters
  int n_stall = 0, n_lock = 0, n_contend = 0, n_bp = 0, n_hbm = 0, n_east = 0;
  int done_cnt = 0;

  // ---------------- per-row HBM memories and east devices ----------------
  for (genvar y = 0; y < NY; y++) begin : g_row
    n_req_t e_n_out_req; n_rsp_t e_n_out_rsp;
    w_req_t e_w_out_req; w_rsp_t e_w_out_rsp;
    tb_axi_mem #(.req_t(n_req_t), .rsp_t(n_rsp_t), .DataW(64), .IdW(NarrowIdW), .Random(1'b1))
      i_hbm_n (.clk_i(clk), .rst_ni(rst_n), .req_i(hbm_n_req[y]), .rsp_o(hbm_n_rsp[y]));
    tb_axi_mem #(.req_t(w_req_t), .rsp_t(w_rsp_t), .DataW(512), .IdW(WideIdW), .Random(1'b1))
      i_hbm_w (.clk_i(clk), .rst_ni(rst_n), .req_i(hbm_w_req[y]), .rsp_o(hbm_w_rsp[y]));
    floo_nw_chimney i_east_ni (
      .clk_i(clk), .rst_ni(rst_n), .id_i('{y: 3'(y), x: 3'(NX + 1)}),
      .n_in_req_i('0), .n_in_rsp_o(), .w_in_req_i('0), .w_in_rsp_o(),
      .n_out_req_o(e_n_out_req), .n_out_rsp_i(e_n_out_rsp),
      .w_out_req_o(e_w_out_req), .w_out_rsp_i(e_w_out_rsp),
      .floo_o(east_i[y]), .floo_rdy_i(east_rdy_o[y]), .floo_i(east_o[y]), .floo_rdy_o(east_rdy_i[y]));
    tb_axi_mem #(.req_t(n_req_t), .rsp_t(n_rsp_t), .DataW(64), .IdW(NarrowIdW), .Random(1'b1))
      i_east_n (.clk_i(clk), .rst_ni(rst_n), .req_i(e_n_out_req), .rsp_o(e_n_out_rsp));
    tb_axi_mem #(.req_t(w_req_t), .rsp_t(w_rsp_t), .DataW(512), .IdW(WideIdW), .Random(1'b1))
      i_east_w (.clk_i(clk), .rst_ni(rst_n), .req_i(e_w_out_req), .rsp_o(e_w_out_rsp));

    always @(negedge clk) if (rst_n) begin
      if (hbm_n_req[y].aw_valid || hbm_n_req[y].ar_valid ||
          hbm_w_req[y].aw_valid || hbm_w_req[y].ar_valid) n_hbm++;
      if (east_o[y].req_valid || east_o[y].wide_valid) n_east++;
    end
  end

  // ---------------- per-tile memories, generators and probes ----------------
  for (genvar y = 0; y < NY; y++) begin : g_y
    for (genvar x = 0; x < NX; x++) begin : g_x
      localparam int Node = y * NX + x;
      n_req_t nreq; w_req_t wreq;
      assign n_in_req[y][x] = nreq;
      assign w_in_req[y][x] = wreq;

      tb_axi_mem #(.req_t(n_req_t), .rsp_t(n_rsp_t), .DataW(64), .IdW(NarrowIdW), .Random(1'b1))
        i_nmem (.clk_i(clk), .rst_ni(rst_n), .req_i(n_out_req[y][x]), .rsp_o(n_out_rsp[y][x]));
      tb_axi_mem #(.req_t(w_req_t), .rsp_t(w_rsp_t), .DataW(512), .IdW(WideIdW), .Random(1'b1))
        i_wmem (.clk_i(clk), .rst_ni(rst_n), .req_i(w_out_req[y][x]), .rsp_o(w_out_rsp[y][x]));

      // probes
      always @(negedge clk) if (rst_n) begin
        if ((dut.gen_y[y].gen_x[x].i_tile.i_ni.n_aw_stall && nreq.aw_valid) ||
            (dut.gen_y[y].gen_x[x].i_tile.i_ni.w_aw_stall && wreq.aw_valid) ||
            (dut.gen_y[y].gen_x[x].i_tile.i_ni.n_ar_stall && nreq.ar_valid) ||
            (dut.gen_y[y].gen_x[x].i_tile.i_ni.w_ar_stall && wreq.ar_valid)) n_stall++;
        if (dut.gen_y[y].gen_x[x].i_tile.i_router.i_wide_router.lock_q != '0 ||
            dut.gen_y[y].gen_x[x].i_tile.i_router.i_req_router.lock_q != '0) n_lock++;
        for (int o = 0; o < NumDirs; o++)
          if ($countones(dut.gen_y[y].gen_x[x].i_tile.i_router.i_wide_router.arb_req[o]) > 1 ||
              $countones(dut.gen_y[y].gen_x[x].i_tile.i_router.i_req_router.arb_req[o]) > 1 ||
              $countones(dut.gen_y[y].gen_x[x].i_tile.i_router.i_rsp_router.arb_req[o]) > 1)
            n_contend++;
        for (int d = 0; d < 4; d++)
          if ((dut.t_out[y][x][d].wide_valid && !dut.t_out_rdy[y][x][d].wide_ready) ||
              (dut.t_out[y][x][d].req_valid  && !dut.t_out_rdy[y][x][d].req_ready) ||
              (dut.t_out[y][x][d].rsp_valid  && !dut.t_out_rdy[y][x][d].rsp_ready))
            n_bp++;
      end

      typedef struct { int tx; int ty; int off; int beats; logic [63:0] seed; } txn_t;

      function automatic void pick_dst(output int tx, output int ty);
        int k;
        do begin
          k = $urandom_range(NX + 1);       // 0: HBM, 1..NX tiles, NX+1 east
          tx = k;
          ty = (k >= 1 && k <= NX) ? $urandom_range(NY - 1) : y;
        end while (tx == x + 1 && ty == y);
      endfunction

      // ---- narrow generator ----
      int nb_cnt = 0;
      typedef struct { logic [63:0] seed; int beats; } exp_t;
      exp_t n_exp [2][$];
      exp_t n_atop_exp [$];
      int n_r_beat [3] = '{0, 0, 0};
      int n_r_done = 0;
      always @(negedge clk) begin
        #2;
        if (n_in_rsp[y][x].b_valid) nb_cnt++;
        if (n_in_rsp[y][x].r_valid) begin
          int id;
          exp_t e;
          id = int'(n_in_rsp[y][x].r.id);
          if (id == 2) begin
            chk(n_atop_exp.size() > 0, "unexpected ATOP R");
            if (n_atop_exp.size() > 0) begin
              e = n_atop_exp.pop_front();
              chk(n_in_rsp[y][x].r.data == e.seed && n_in_rsp[y][x].r.last,
                  $sformatf("node %0d ATOP old data", Node));
              n_r_done++;
            end
          end else if (id < 2 && n_exp[id].size() > 0) begin
            e = n_exp[id][0];
            chk(n_in_rsp[y][x].r.data == e.seed + 64'(n_r_beat[id]) &&
                n_in_rsp[y][x].r.last == (n_r_beat[id] == e.beats - 1),
                $sformatf("node %0d narrow id %0d beat %0d", Node, id, n_r_beat[id]));
            if (n_r_beat[id] == e.beats - 1) begin
              void'(n_exp[id].pop_front()); n_r_beat[id] = 0; n_r_done++;
            end else n_r_beat[id]++;
          end else chk(1'b0, $sformatf("node %0d unexpected narrow R id %0d", Node, id));
        end
      end

      initial begin
        txn_t tl [NumNW];
        nreq = '0; nreq.b_ready = 1; nreq.r_ready = 1;
        @(posedge rst_n); @(negedge clk);
        for (int k = 0; k < NumNW; k++) begin
          pick_dst(tl[k].tx, tl[k].ty);
          tl[k].off = (Node << 16) + k * 'h100;
          tl[k].beats = $urandom_range(1, 4);
          tl[k].seed = {32'(Node), 16'(k), 16'h0};
          nreq.aw = '0; nreq.aw.id = 5'($urandom_range(1));
          nreq.aw.addr = mk_addr(tl[k].tx, tl[k].ty, tl[k].off);
          nreq.aw.len = 8'(tl[k].beats - 1); nreq.aw.size = 3'd3; nreq.aw.burst = 2'b01;
          nreq.aw_valid = 1;
          #2; while (!n_in_rsp[y][x].aw_ready) begin @(negedge clk); #2; end
          @(negedge clk); nreq.aw_valid = 0;
          for (int b = 0; b < tl[k].beats; b++) begin
            nreq.w.data = tl[k].seed + 64'(b); nreq.w.strb = '1; nreq.w.last = (b == tl[k].beats - 1);
            nreq.w_valid = 1;
            #2; while (!n_in_rsp[y][x].w_ready) begin @(negedge clk); #2; end
            @(negedge clk);
          end
          nreq.w_valid = 0;
        end
        while (nb_cnt < NumNW) @(negedge clk);
        for (int k = 0; k < NumNW; k++) begin
          int id;
          id = $urandom_range(1);
          n_exp[id].push_back('{seed: tl[k].seed, beats: tl[k].beats});
          nreq.ar = '0; nreq.ar.id = 5'(id);
          nreq.ar.addr = mk_addr(tl[k].tx, tl[k].ty, tl[k].off);
          nreq.ar.len = 8'(tl[k].beats - 1); nreq.ar.size = 3'd3; nreq.ar.burst = 2'b01;
          nreq.ar_valid = 1;
          #2; while (!n_in_rsp[y][x].ar_ready) begin @(negedge clk); #2; end
          @(negedge clk); nreq.ar_valid = 0;
        end
        while (n_r_done < NumNW) @(negedge clk);
        // AtomicLoad on the first word of the first burst
        n_atop_exp.push_back('{seed: tl[0].seed, beats: 1});
        nreq.aw = '0; nreq.aw.id = 5'd2; nreq.aw.addr = mk_addr(tl[0].tx, tl[0].ty, tl[0].off);
        nreq.aw.size = 3'd3; nreq.aw.burst = 2'b01; nreq.aw.atop = 6'b100000;
        nreq.aw_valid = 1;
        #2; while (!n_in_rsp[y][x].aw_ready) begin @(negedge clk); #2; end
        @(negedge clk); nreq.aw_valid = 0;
        nreq.w.data = 64'h1; nreq.w.strb = '1; nreq.w.last = 1; nreq.w_valid = 1;
        #2; while (!n_in_rsp[y][x].w_ready) begin @(negedge clk); #2; end
        @(negedge clk); nreq.w_valid = 0;
        while (nb_cnt < NumNW + 1 || n_r_done < NumNW + 1) @(negedge clk);
        done_cnt++;
      end

      // ---- wide generator ----
      int wb_cnt = 0;
      exp_t w_exp [2][$];
      int w_r_beat [2] = '{0, 0};
      int w_r_done = 0;
      always @(negedge clk) begin
        #2;
        if (w_in_rsp[y][x].b_valid) wb_cnt++;
        if (w_in_rsp[y][x].r_valid) begin
          int id;
          exp_t e;
          id = int'(w_in_rsp[y][x].r.id);
          if (id < 2 && w_exp[id].size() > 0) begin
            e = w_exp[id][0];
            chk(w_in_rsp[y][x].r.data == {8{e.seed + 64'(w_r_beat[id])}} &&
                w_in_rsp[y][x].r.last == (w_r_beat[id] == e.beats - 1),
                $sformatf("node %0d wide id %0d beat %0d", Node, id, w_r_beat[id]));
            if (w_r_beat[id] == e.beats - 1) begin
              void'(w_exp[id].pop_front()); w_r_beat[id] = 0; w_r_done++;
            end else w_r_beat[id]++;
          end else chk(1'b0, $sformatf("node %0d unexpected wide R id %0d", Node, id));
        end
      end

      initial begin
        txn_t tl [NumWW];
        wreq = '0; wreq.b_ready = 1; wreq.r_ready = 1;
        @(posedge rst_n); @(negedge clk);
        for (int k = 0; k < NumWW; k++) begin
          pick_dst(tl[k].tx, tl[k].ty);
          tl[k].off = (Node << 16) + 'h8000 + k * 'h400;
          tl[k].beats = $urandom_range(1, 8);
          tl[k].seed = {32'(Node), 16'(k), 16'hF000};
          wreq.aw = '0; wreq.aw.id = 3'($urandom_range(1));
          wreq.aw.addr = mk_addr(tl[k].tx, tl[k].ty, tl[k].off);
          wreq.aw.len = 8'(tl[k].beats - 1); wreq.aw.size = 3'd6; wreq.aw.burst = 2'b01;
          wreq.aw_valid = 1;
          #2; while (!w_in_rsp[y][x].aw_ready) begin @(negedge clk); #2; end
          @(negedge clk); wreq.aw_valid = 0;
          for (int b = 0; b < tl[k].beats; b++) begin
            wreq.w.data = {8{tl[k].seed + 64'(b)}}; wreq.w.strb = '1; wreq.w.last = (b == tl[k].beats - 1);
            wreq.w_valid = 1;
            #2; while (!w_in_rsp[y][x].w_ready) begin @(negedge clk); #2; end
            @(negedge clk);
          end
          wreq.w_valid = 0;
        end
        while (wb_cnt < NumWW) @(negedge clk);
        for (int k = 0; k < NumWW; k++) begin
          int id;
          id = $urandom_range(1);
          w_exp[id].push_back('{seed: tl[k].seed, beats: tl[k].beats});
          wreq.ar = '0; wreq.ar.id = 3'(id);
          wreq.ar.addr = mk_addr(tl[k].tx, tl[k].ty, tl[k].off);
          wreq.ar.len = 8'(tl[k].beats - 1); wreq.ar.size = 3'd6; wreq.ar.burst = 2'b01;
          wreq.ar_valid = 1;
          #2; while (!w_in_rsp[y][x].ar_ready) begin @(negedge clk); #2; end
          @(negedge clk); wreq.ar_valid = 0;
        end
        while (w_r_done < NumWW) @(negedge clk);
        done_cnt++;
      end
    end
  end

  initial begin
    wait (done_cnt == 2 * NX * NY);
    repeat (20) @(negedge clk);
    $display("events: stall=%0d lock=%0d contend=%0d backpressure=%0d hbm=%0d east=%0d",
             n_stall, n_lock, n_contend, n_bp, n_hbm, n_east);
    chk(n_stall > 0,   "an NI ordering stall happened");
    chk(n_lock > 0,    "a router wormhole lock was held");
    chk(n_contend > 0, "router output contention happened");
    chk(n_bp > 0,      "link back-pressure happened");
    chk(n_hbm > 0,     "HBM-side interface was accessed");
    chk(n_east > 0,    "east boundary was used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
  end
endmodule
