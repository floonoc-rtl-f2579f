// Testbench of floo_rob_less (5-bit IDs, 8 outstanding per ID): directed
// cases (same destination passes, other destination stalls until all
// responses are back, ATOPs bypass, saturation), then random pushes and
// pops against an independent per-ID model of count and destination.
// The stall rule follows the published RoB-less NI; the saturation limit of
// 8 per ID is this design's own.
module tb_floo_rob_less;
  import floo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [4:0] id, pid;
  id_t dst;
  logic atop, stall, push, pop;
  int checks = 0, failures = 0;
  int mcnt [32];
  id_t mdst [32];

  floo_rob_less #(.AxiIdW(5), .MaxTxns(8)) dut (.clk_i(clk), .rst_ni(rst_n),
    .req_id_i(id), .req_dst_i(dst), .req_atop_i(atop), .stall_o(stall),
    .push_i(push), .pop_i(pop), .pop_id_i(pid));

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  task automatic step(); @(negedge clk); push = 0; pop = 0; endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    id = 0; pid = 0; dst = '0; atop = 0; push = 0; pop = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    id = 3; dst = 6'd9; #1 chk(!stall, "first request never stalls");
    push = 1; step();
    dst = 6'd9;  #1 chk(!stall, "same destination passes");
    dst = 6'd10; #1 chk(stall,  "other destination stalls");
    atop = 1;    #1 chk(!stall, "ATOP bypasses"); atop = 0;
    id = 4;      #1 chk(!stall, "other ID independent");
    id = 3; pid = 3; pop = 1; step();
    dst = 6'd10; #1 chk(!stall, "released after last response");
    for (int k = 0; k < 8; k++) begin push = 1; step(); end
    #1 chk(stall, "saturated counter stalls");
    for (int k = 0; k < 8; k++) begin pid = 3; pop = 1; step(); end
    // random
    foreach (mcnt[i]) begin mcnt[i] = 0; mdst[i] = '0; end
    for (int c = 0; c < 5000; c++) begin
      logic exp_stall;
      id = 5'($urandom_range(3)); dst = id_t'($urandom_range(2)); atop = ($urandom_range(9) == 0);
      exp_stall = !atop && mcnt[id] != 0 && (mdst[id] != dst || mcnt[id] == 8);
      #1 chk(stall == exp_stall, $sformatf("random stall id=%0d", id));
      push = !stall && ($urandom_range(1) == 1);
      pid = 5'($urandom_range(3));
      pop = (mcnt[pid] > 0) && ($urandom_range(1) == 1) && !(push && !atop && pid == id && 0);
      @(posedge clk);
      if (push && !atop) begin mcnt[id]++; mdst[id] = dst; end
      if (pop) mcnt[pid]--;
      step();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
