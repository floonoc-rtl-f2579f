// Testbench of floo_router (req-link width, output buffers on) at node (2,2).
// Checks: the two-cycle hop latency of a lone flit; random legal XY traffic
// on all five inputs with random back-pressure, every flit leaving on the
// port an independent XY rule predicts, in order per input/output pair, none
// lost; and wormhole routing: a four-flit packet (last = 0,0,0,1) that
// competes with single flits for the same output leaves without interleaving.
// The two-cycle hop and flit-level wormhole routing follow the original
// design; node position and traffic mix are this testbench's choices.
module tb_floo_router;
  import floo_pkg::*;
  localparam int unsigned W = ReqFlitW;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [4:0] vi, ro, vo, ri;
  logic [4:0][W-1:0] di, dout;
  id_t me;
  int checks = 0, failures = 0;

  floo_router #(.FlitW(W)) dut (.clk_i(clk), .rst_ni(rst_n), .xy_id_i(me),
    .valid_i(vi), .ready_o(ro), .data_i(di), .valid_o(vo), .ready_i(ri), .data_o(dout));

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  function automatic int xy_port(id_t d);
    if (d.x > 2) return 1; if (d.x < 2) return 3;
    if (d.y > 2) return 0; if (d.y < 2) return 2;
    return 4;
  endfunction

  // legal destination for a flit entering on input i
  function automatic id_t rand_dst(int i);
    id_t d;
    case (i)
      0: begin d.x = 2; d.y = 3'($urandom_range(2)); end          // from north
      2: begin d.x = 2; d.y = 3'($urandom_range(4, 2)); end       // from south
      1: begin d.x = 3'($urandom_range(2)); d.y = 3'($urandom_range(4)); end // from east
      3: begin d.x = 3'($urandom_range(4, 2)); d.y = 3'($urandom_range(4)); end
      default: begin
        do begin d.x = 3'($urandom_range(4)); d.y = 3'($urandom_range(4)); end
        while (d.x == 2 && d.y == 2);
      end
    endcase
    return d;
  endfunction

  function automatic logic [W-1:0] mk(id_t d, int src, int seq, logic last);
    req_flit_t f;
    f = '0;
    f.hdr.dst_id = d;
    f.hdr.last = last;
    f.payload[31:0] = 32'(seq);
    f.payload[35:32] = 4'(src);
    return W'(f);
  endfunction

  int exp_seq [5][5];   // next expected seq from input i at output o
  int sent = 0, rcvd = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // output monitor, called once per cycle while inputs are stable
  task automatic monitor();
    for (int o = 0; o < 5; o++) if (vo[o] && ri[o]) begin
      req_flit_t f; int src, seq;
      f = req_flit_t'(dout[o]);
      src = int'(f.payload[35:32]); seq = int'(f.payload[31:0]);
      chk(xy_port(f.hdr.dst_id) == o, $sformatf("flit from %0d on wrong port %0d", src, o));
      chk(seq > exp_seq[src][o], $sformatf("order %0d->%0d", src, o));
      exp_seq[src][o] = seq;
      rcvd++;
    end
  endtask

  initial begin
    int t0, seqn [5];
    logic [4:0] hs;
    me = '{y: 3'd2, x: 3'd2};
    vi = 0; ri = '1; di = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    // ---- latency of a lone flit: West in -> East out ----
    @(negedge clk);
    vi[3] = 1; di[3] = mk('{y: 3'd2, x: 3'd4}, 3, 0, 1'b1);
    @(posedge clk); t0 = cyc; #1 vi[3] = 0;
    while (!vo[1]) @(posedge clk);
    chk(cyc - t0 == 2, $sformatf("hop latency %0d cycles, expected 2", cyc - t0));
    @(negedge clk);
    // ---- wormhole: 4-flit packet from West to East vs single flits from Local ----
    begin
      int got [$];
      vi = 0;
      fork
        begin
          for (int k = 0; k < 4; k++) begin
            @(negedge clk); vi[3] = 1; di[3] = mk('{y: 3'd2, x: 3'd3}, 3, 100 + k, k == 3);
            @(posedge clk); while (!ro[3]) @(posedge clk);
          end
          @(negedge clk); vi[3] = 0;
        end
        begin
          for (int k = 0; k < 4; k++) begin
            @(negedge clk); vi[4] = 1; di[4] = mk('{y: 3'd2, x: 3'd3}, 4, 200 + k, 1'b1);
            @(posedge clk); while (!ro[4]) @(posedge clk);
          end
          @(negedge clk); vi[4] = 0;
        end
        begin
          repeat (30) begin
            @(posedge clk);
            if (vo[1]) begin req_flit_t f; f = req_flit_t'(dout[1]); got.push_back(int'(f.payload[31:0])); end
          end
        end
      join
      begin
        int first, ok;
        first = -1; ok = 1;
        for (int k = 0; k < got.size(); k++) if (got[k] == 100) first = k;
        chk(first >= 0 && first + 3 < got.size(), "wormhole packet delivered");
        if (first >= 0 && first + 3 < got.size())
          for (int k = 0; k < 4; k++) if (got[first + k] != 100 + k) ok = 0;
        chk(ok == 1, "wormhole packet not interleaved");
        chk(got.size() == 8, $sformatf("all 8 flits delivered (%0d)", got.size()));
      end
    end
    // ---- random traffic ----
    repeat (5) @(posedge clk);
    foreach (exp_seq[i, o]) exp_seq[i][o] = -1;
    foreach (seqn[i]) seqn[i] = 0;
    @(negedge clk);
    for (int c = 0; c < 3000; c++) begin
      for (int i = 0; i < 5; i++) begin
        if (!vi[i] && $urandom_range(1) == 1) begin
          vi[i] = 1; di[i] = mk(rand_dst(i), i, seqn[i]++, 1'b1);
        end
      end
      for (int o = 0; o < 5; o++) ri[o] = ($urandom_range(3) != 0);
      #2;
      monitor();
      for (int i = 0; i < 5; i++) if (vi[i] && ro[i]) begin hs[i] = 1; sent++; end else hs[i] = 0;
      @(negedge clk);
      for (int i = 0; i < 5; i++) if (hs[i]) vi[i] = 0;
    end
    vi = 0; ri = '1;
    repeat (20) begin #2; monitor(); @(negedge clk); end
    chk(sent == rcvd && sent > 1000, $sformatf("sent %0d received %0d", sent, rcvd));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
