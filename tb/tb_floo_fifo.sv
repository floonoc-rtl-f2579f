// Testbench of floo_fifo: random valid/ready traffic against a queue model,
// fill level (Depth words accepted while the output is stalled), one-cycle
// latency, and throughput of one word per cycle.
// Depth and data width are this design's choices; the original design only
// asks for minimal buffers.
module tb_floo_fifo;
  localparam int unsigned DataW = 16, Depth = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic vi, ro, vo, ri;
  logic [DataW-1:0] di, dout;
  int checks = 0, failures = 0;
  logic [DataW-1:0] model [$];

  floo_fifo #(.DataW(DataW), .Depth(Depth)) dut (
    .clk_i(clk), .rst_ni(rst_n), .valid_i(vi), .ready_o(ro), .data_i(di),
    .valid_o(vo), .ready_i(ri), .data_o(dout));

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int n_out = 0, n_tp;
  logic ro_q = 1'b1;
  initial begin
    vi = 0; ri = 0; di = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    // fill with output stalled
    @(negedge clk);
    for (int i = 0; i < Depth; i++) begin
      vi = 1; di = DataW'(100 + i);
      #1 chk(ro, "ready while not full");
      @(posedge clk); model.push_back(di); @(negedge clk);
    end
    vi = 0; #1 chk(!ro, "not ready when full");
    // drain
    while (model.size() > 0) begin
      ri = 1; #1 chk(vo && dout == model[0], "drain order");
      @(posedge clk); void'(model.pop_front()); @(negedge clk);
    end
    ri = 0; #1 chk(!vo, "empty after drain");
    // latency: write at cycle t, visible at t+1
    vi = 1; di = 16'h1234; @(posedge clk); #1 vi = 0;
    chk(vo && dout == 16'h1234, "one-cycle latency");
    ri = 1; @(posedge clk); #1 ri = 0;
    // throughput: continuous stream with ready always high
    @(negedge clk);
    n_tp = 0;
    ri = 1;
    for (int i = 0; i < 50; i++) begin
      vi = 1; di = DataW'(i);
      @(posedge clk); if (vo) n_tp++;
      @(negedge clk);
    end
    vi = 0;
    chk(n_tp >= 49, $sformatf("throughput %0d/50", n_tp));
    @(posedge clk); @(negedge clk); ri = 0;
    // random traffic
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      if (!vi || ro_q) begin vi = ($urandom_range(1) == 1); di = DataW'($urandom); end
      ri = ($urandom_range(2) != 0);
      @(posedge clk);
      if (vo && ri) begin
        chk(model.size() > 0 && dout == model[0], "random order");
        if (model.size() > 0) void'(model.pop_front());
      end
      ro_q = ro;
      if (vi && ro) model.push_back(di);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
