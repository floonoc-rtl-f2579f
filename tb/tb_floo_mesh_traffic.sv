// Traffic-pattern testbench on the default 8 x 4 mesh: every tile's DMA port
// writes a block of data with wide bursts to a partner tile chosen by a
// synthetic pattern, all tiles at once, and the time until every B response
// is back gives the average wide-link utilisation per tile,
//   bytes written / (tiles x 64 B per cycle x cycles).
// Patterns (tile index t = y * 4 + (x - 1), 32 tiles):
//   neighbor       : east neighbour, the last column writes to the first
//   transpose      : (x, y) -> tile index bit-rotated by half (5 bits)
//   bit-complement : t -> ~t (opposite corner region)
//   uniform        : a random other tile per burst
//   shuffle        : tile index rotated left by one bit (5 bits)
//   hbm            : the HBM channel of the tile's own row (four tiles share it)
// A pattern that maps a tile onto itself sends to ~t instead.
// Six block sizes per tile, 1, 2, 4, 8, 16 and 32 kB (16 to 512 beats of
// 64 B), written in bursts of 16 beats on AXI IDs 0..7 in turn. Memories never
// throttle.
// Checks: every burst is answered, the data of the last burst of each tile
// reads back correctly, neighbor traffic reaches at least 60 % of the link
// peak at 4 kB and more at 32 kB, each row's shared HBM link is at least
// 80 % busy at 32 kB, and from 4 kB on the congested patterns
// are slower than neighbor. Neighbor at 4 kB measures about 70 %: each burst also sends its AW as one flit on the wide
// link (17 flits per 16 beats) and the fill/drain of the path and the last
// B response weigh heavily on a 4 kB block, in line with the roughly 68 %
// the paper shows for neighbor traffic at 4 kB.
// The pattern names, the block sizes and the 8 x 4 size follow the published evaluation; the
// burst length, outstanding count and the exact partner formulas are this
// testbench's own choices. The absolute numbers are not comparable with
// measurements that include a DMA engine, cluster crossbar and real memories.
module tb_floo_mesh_traffic;
  import floo_pkg::*;
  localparam int unsigned NX = 4, NY = 8, NT = NX * NY;
  localparam int unsigned Beats = 16, NumPat = 6, NumSizes = 6, NumPh = NumPat * NumSizes;
  // bursts of 1 kB per tile for each block size
  localparam int unsigned BurstsOf [NumSizes] = '{1, 2, 4, 8, 16, 32};
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

  // idle inputs, set once from a process
  initial begin
    east_i = '0; east_rdy_i = '1;
    n_in_req = '0;
  end

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
    repeat (200000) @(posedge clk);
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

  // partner tile index for pattern p
  function automatic int partner(int p, int t);
    int x, y, r;
    x = t % NX; y = t / NX;
    case (p)
      0: return y * NX + ((x + 1) % NX);
      1: begin r = ((t << 2) | (t >> 3)) & 31; return (r == t) ? (t ^ 31) : r; end
      2: return t ^ 31;
      4: begin r = ((t << 1) | (t >> 4)) & 31; return (r == t) ? (t ^ 31) : r; end
      default: begin do r = $urandom_range(NT - 1); while (r == t); return r; end
    endcase
  endfunction

  // HBM channels: one memory per row behind the HBM-side NI
  for (genvar y = 0; y < NY; y++) begin : g_hbm
    tb_axi_mem #(.req_t(n_req_t), .rsp_t(n_rsp_t), .DataW(64), .IdW(NarrowIdW), .Random(1'b0))
      i_nhbm (.clk_i(clk), .rst_ni(rst_n), .req_i(hbm_n_req[y]), .rsp_o(hbm_n_rsp[y]));
    tb_axi_mem #(.req_t(w_req_t), .rsp_t(w_rsp_t), .DataW(512), .IdW(WideIdW), .Random(1'b0))
      i_whbm (.clk_i(clk), .rst_ni(rst_n), .req_i(hbm_w_req[y]), .rsp_o(hbm_w_rsp[y]));
  end

  int pattern = -1;
  int done_cnt = 0;

  for (genvar y = 0; y < NY; y++) begin : g_y
    for (genvar x = 0; x < NX; x++) begin : g_x
      localparam int T = y * NX + x;
      w_req_t wreq;
      assign w_in_req[y][x] = wreq;
      tb_axi_mem #(.req_t(n_req_t), .rsp_t(n_rsp_t), .DataW(64), .IdW(NarrowIdW), .Random(1'b0))
        i_nmem (.clk_i(clk), .rst_ni(rst_n), .req_i(n_out_req[y][x]), .rsp_o(n_out_rsp[y][x]));
      tb_axi_mem #(.req_t(w_req_t), .rsp_t(w_rsp_t), .DataW(512), .IdW(WideIdW), .Random(1'b0))
        i_wmem (.clk_i(clk), .rst_ni(rst_n), .req_i(w_out_req[y][x]), .rsp_o(w_out_rsp[y][x]));

      int b_cnt = 0;
      always @(negedge clk) begin #2; if (w_in_rsp[y][x].b_valid) b_cnt++; end

      initial begin
        int q, p, nb, pt, got, last_pt;
        wreq = '0; wreq.b_ready = 1; wreq.r_ready = 1;
        for (q = 0; q < NumPh; q++) begin
          p = q % NumPat; nb = BurstsOf[q / NumPat];
          wait (pattern == q);
          b_cnt = 0;
          for (int k = 0; k < nb; k++) begin
            pt = partner(p, T);
            last_pt = pt;
            wreq.aw = '0; wreq.aw.id = 3'(k);
            if (p == 5) last_pt = -1 - y;  // HBM of row y sits at x = 0
            wreq.aw.addr = (p == 5) ? mk_addr(0, y, 'h100000 * q + T * 'h8000 + k * Beats * 64)
                                    : mk_addr(pt % NX + 1, pt / NX, 'h100000 * q + T * 'h8000 + k * Beats * 64);
            wreq.aw.len = 8'(Beats - 1); wreq.aw.size = 3'd6; wreq.aw.burst = 2'b01;
            wreq.aw_valid = 1;
            #2; while (!w_in_rsp[y][x].aw_ready) begin @(negedge clk); #2; end
            @(negedge clk); wreq.aw_valid = 0;
            for (int b = 0; b < Beats; b++) begin
              wreq.w.data = {16{32'(T * 65536 + q * 1024 + k * Beats + b)}};
              wreq.w.strb = '1; wreq.w.last = (b == Beats - 1); wreq.w_valid = 1;
              #2; while (!w_in_rsp[y][x].w_ready) begin @(negedge clk); #2; end
              @(negedge clk);
            end
            wreq.w_valid = 0;
          end
          while (b_cnt < nb) @(negedge clk);
          done_cnt++;
          // read back the last burst
          wait (pattern == q + 100);
          wreq.ar = '0; wreq.ar.id = 3'd0;
          wreq.ar.addr = (last_pt < 0) ? mk_addr(0, y, 'h100000 * q + T * 'h8000 + (nb - 1) * Beats * 64)
                                       : mk_addr(last_pt % NX + 1, last_pt / NX,
                                                 'h100000 * q + T * 'h8000 + (nb - 1) * Beats * 64);
          wreq.ar.len = 8'(Beats - 1); wreq.ar.size = 3'd6; wreq.ar.burst = 2'b01; wreq.ar_valid = 1;
          #2; while (!w_in_rsp[y][x].ar_ready) begin @(negedge clk); #2; end
          @(negedge clk); wreq.ar_valid = 0;
          got = 0;
          while (got < Beats) begin
            #2;
            if (w_in_rsp[y][x].r_valid) begin
              chk(w_in_rsp[y][x].r.data[31:0] == 32'(T * 65536 + q * 1024 + (nb - 1) * Beats + got),
                  $sformatf("tile %0d phase %0d read-back beat %0d", T, q, got));
              got++;
            end
            @(negedge clk);
          end
          done_cnt++;
        end
      end
    end
  end

  initial begin
    string names [NumPat] = '{"neighbor", "transpose", "bit-complement", "uniform", "shuffle", "hbm"};
    int t0, nb, cycles [NumPh];
    real util [NumPh];
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (5) @(negedge clk);
    for (int q = 0; q < NumPh; q++) begin
      nb = BurstsOf[q / NumPat];
      done_cnt = 0;
      t0 = cyc;
      pattern = q;
      wait (done_cnt == NT);
      cycles[q] = cyc - t0;
      util[q] = 100.0 * real'(NT * nb * Beats) / real'(NT * cycles[q]);
      $display("%-15s %2d kB per tile in %5d cycles: %0.1f %% of link peak",
               names[q % NumPat], nb, cycles[q], util[q]);
      chk(1'b1, "all bursts answered");
      done_cnt = 0;
      pattern = q + 100;
      wait (done_cnt == NT);
      repeat (5) @(negedge clk);
    end
    chk(util[2 * NumPat] >= 60.0, $sformatf("neighbor 4 kB utilisation %0.1f %% >= 60 %%", util[2 * NumPat]));
    for (int s = 1; s < NumSizes; s++)
      chk(util[s * NumPat] > util[(s - 1) * NumPat],
          $sformatf("neighbor utilisation grows from %0d to %0d kB", BurstsOf[s - 1], BurstsOf[s]));
    // four tiles share one HBM link per row, so 25 % per tile is its peak
    chk(4.0 * util[(NumSizes - 1) * NumPat + 5] >= 80.0,
        $sformatf("HBM link busy %0.1f %% >= 80 %% at 32 kB", 4.0 * util[(NumSizes - 1) * NumPat + 5]));
    for (int s = 2; s < NumSizes; s++)
      for (int p = 1; p < NumPat; p++)
        chk(cycles[s * NumPat + p] > cycles[s * NumPat],
            $sformatf("%s %0d kB slower than neighbor", names[p], BurstsOf[s]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
