// Testbench of floo_nw_router at node (1,1): flits on the req, rsp and wide
// links enter from the West and leave to the East, one link at a time and
// all three together. While the req link's East output is blocked, rsp and
// wide flits must still get through (the three networks are independent),
// and each link must keep the two-cycle hop latency and its payload.
// Separate routers per physical link follow the original design; the buffer
// depths that set the accepted count are this design's own.
module tb_floo_nw_router;
  import floo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  link_t     [4:0] in, out;
  link_rdy_t [4:0] in_rdy, out_rdy;
  id_t me;
  int checks = 0, failures = 0;

  floo_nw_router dut (.clk_i(clk), .rst_ni(rst_n), .xy_id_i(me),
    .in_i(in), .in_rdy_o(in_rdy), .out_o(out), .out_rdy_i(out_rdy));

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    hdr_t h;
    int n_req, n_rsp, n_wide;
    int s_req = 0, s_rsp = 0, s_wide = 0;
    me = '{y: 3'd1, x: 3'd1};
    in = '0;
    out_rdy = '{default: '{default: 1'b1}};
    h = '0; h.dst_id = '{y: 3'd1, x: 3'd5}; h.last = 1'b1;
    repeat (3) @(posedge clk); rst_n = 1;
    // all three links at once, latency two cycles each
    @(negedge clk);
    in[West].req_valid = 1;  in[West].req.hdr = h;  in[West].req.payload = 94'h1111;
    in[West].rsp_valid = 1;  in[West].rsp.hdr = h;  in[West].rsp.payload = 78'h2222;
    in[West].wide_valid = 1; in[West].wide.hdr = h; in[West].wide.payload = 578'h3333;
    @(negedge clk); in = '0;
    #2 chk(!out[East].req_valid, "not yet after one cycle");
    @(negedge clk); #2;
    chk(out[East].req_valid  && out[East].req.payload  == 94'h1111,  "req after 2 cycles");
    chk(out[East].rsp_valid  && out[East].rsp.payload  == 78'h2222,  "rsp after 2 cycles");
    chk(out[East].wide_valid && out[East].wide.payload == 578'h3333, "wide after 2 cycles");
    @(negedge clk);
    // block req East output, stream 6 flits on each link
    out_rdy[East].req_ready = 0;
    n_req = 0; n_rsp = 0; n_wide = 0;
    for (int c = 0; c < 12; c++) begin
      in[West].req_valid = (s_req < 6); in[West].req.hdr = h;
      in[West].rsp_valid = (s_rsp < 6); in[West].rsp.hdr = h;
      in[West].wide_valid = (s_wide < 6); in[West].wide.hdr = h;
      #2;
      if (in[West].req_valid && in_rdy[West].req_ready) s_req++;
      if (in[West].rsp_valid && in_rdy[West].rsp_ready) s_rsp++;
      if (in[West].wide_valid && in_rdy[West].wide_ready) s_wide++;
      if (out[East].req_valid && out_rdy[East].req_ready) n_req++;
      if (out[East].rsp_valid) n_rsp++;
      if (out[East].wide_valid) n_wide++;
      @(negedge clk);
    end
    chk(n_req == 0, "blocked req link delivers nothing");
    chk(n_rsp == 6, $sformatf("rsp link unaffected (%0d of 6)", n_rsp));
    chk(n_wide == 6, $sformatf("wide link unaffected (%0d of 6)", n_wide));
    chk(!in_rdy[West].req_ready, "req input back-pressured");
    chk(s_req == 4, $sformatf("req link accepted only 4 flits into its buffers (%0d)", s_req));
    out_rdy[East].req_ready = 1;
    for (int c = 0; c < 12; c++) begin
      in[West].req_valid = (s_req < 6);
      #2;
      if (in[West].req_valid && in_rdy[West].req_ready) s_req++;
      if (out[East].req_valid) n_req++;
      @(negedge clk);
    end
    in = '0;
    chk(n_req == 6, $sformatf("req link delivers all 6 flits after unblocking (%0d)", n_req));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
