// Testbench of floo_rr_arb_tree (5 inputs): rotation through all inputs when
// all request, a lone requester is served at once, grants only to
// requesters, the decision is held while the output is stalled, and under
// random traffic no input that keeps requesting waits for more than NumIn
// grants.
// Round-robin fairness is the published requirement; the exact pointer rule
// checked here is this design's own.
module tb_floo_rr_arb_tree;
  localparam int unsigned N = 5, DW = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [N-1:0] req, gnt;
  logic [N-1:0][DW-1:0] din;
  logic vo, ri;
  logic [DW-1:0] dout;
  logic [2:0] idx;
  int checks = 0, failures = 0;
  int wait_cnt [N];
  int grants [N];
  logic [N-1:0] g;

  floo_rr_arb_tree #(.NumIn(N), .DataW(DW)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req), .gnt_o(gnt), .data_i(din),
    .valid_o(vo), .ready_i(ri), .data_o(dout), .idx_o(idx));

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) din[i] = DW'(8'h10 + i);
    req = 0; ri = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    // all request, always ready: every input gets exactly 4 of 20 grants
    @(negedge clk);
    req = '1; ri = 1;
    foreach (grants[i]) grants[i] = 0;
    for (int c = 0; c < 20; c++) begin
      #1;
      chk($onehot(gnt), "one grant");
      chk(dout == din[idx], "data follows index");
      for (int i = 0; i < N; i++) if (gnt[i]) grants[i]++;
      @(negedge clk);
    end
    for (int i = 0; i < N; i++) chk(grants[i] == 4, $sformatf("fair share input %0d: %0d", i, grants[i]));
    // lone requester
    for (int i = 0; i < N; i++) begin
      req = 0; req[i] = 1; #1;
      chk(vo && gnt == (N'(1) << i), $sformatf("lone requester %0d", i));
      @(negedge clk);
    end
    // hold while stalled
    req = 5'b00100; ri = 0; #1;
    chk(vo && idx == 2, "valid without ready");
    @(negedge clk);
    req = 5'b00101; #1;
    chk(idx == 2 && gnt == 0, "held decision under stall");
    ri = 1; #1;
    chk(gnt == 5'b00100, "held decision granted");
    @(negedge clk);
    // random traffic: requests stay until granted
    req = 0;
    foreach (wait_cnt[i]) wait_cnt[i] = 0;
    for (int c = 0; c < 4000; c++) begin
      for (int i = 0; i < N; i++) if (!req[i]) req[i] = ($urandom_range(3) == 0);
      ri = ($urandom_range(3) != 0);
      #1;
      g = gnt;
      chk((gnt & ~req) == 0, "grant only to requester");
      chk(vo == (req != 0), "valid iff request");
      if (gnt != 0) begin
        for (int i = 0; i < N; i++) if (req[i] && !gnt[i]) wait_cnt[i]++;
        for (int i = 0; i < N; i++) if (gnt[i]) begin
          chk(wait_cnt[i] < N, $sformatf("starvation bound input %0d waited %0d", i, wait_cnt[i]));
          wait_cnt[i] = 0;
        end
      end
      @(negedge clk);
      req = req & ~g;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
