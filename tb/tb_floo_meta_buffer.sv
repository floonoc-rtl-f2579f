// Testbench of floo_meta_buffer (FIFO depth 4, 2 ATOP slots): non-atomic
// requests get ID 0 and return their source and ID in push order; the FIFO
// refuses a fifth entry; ATOPs get distinct IDs 1 and 2, can be looked up and
// freed out of order, and an ATOP with read data keeps its slot until both
// its B and its R response are gone.
// FIFO for non-atomics and separate ATOP storage follow the original design;
// the slot-to-ID mapping and depths are this design's own.
module tb_floo_meta_buffer;
  import floo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic pv, pr, patop, patop_r, bvalid, bpop, rpop, batop;
  logic [4:0] pid, oid, bid, bo, rid, ro;
  id_t psrc, bsrc, rsrc;
  int checks = 0, failures = 0;

  floo_meta_buffer #(.AxiIdW(5), .OutIdW(5), .Depth(4), .NumAtop(2)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .push_valid_i(pv), .push_ready_o(pr), .push_id_i(pid), .push_src_i(psrc),
    .push_atop_i(patop), .push_atop_r_i(patop_r), .out_id_o(oid),
    .b_id_i(bid), .b_orig_id_o(bo), .b_src_o(bsrc), .b_is_atop_o(batop), .b_valid_o(bvalid),
    .b_pop_i(bpop), .r_id_i(rid), .r_orig_id_o(ro), .r_src_o(rsrc), .r_pop_i(rpop));

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  task automatic step(); @(negedge clk); pv = 0; bpop = 0; rpop = 0; endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [4:0] a1, a2;
    pv = 0; pid = 0; psrc = '0; patop = 0; patop_r = 0; bid = 0; bpop = 0; rid = 0; rpop = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    for (int k = 0; k < 4; k++) begin
      pv = 1; pid = 5'(10 + k); psrc = id_t'(20 + k);
      #1 chk(pr && oid == 0, "non-atomic gets ID 0");
      step();
    end
    pv = 1; #1 chk(!pr, "fifo full refuses a fifth"); pv = 0;
    // ATOPs while the FIFO is full
    patop = 1; patop_r = 1; pv = 1; pid = 5'd1; psrc = id_t'(33);
    #1 chk(pr, "ATOP slot free"); a1 = oid; step();
    patop_r = 0; pv = 1; pid = 5'd2; psrc = id_t'(34);
    #1 chk(pr, "second ATOP slot"); a2 = oid; step();
    chk(a1 != 0 && a2 != 0 && a1 != a2, $sformatf("unique ATOP IDs %0d %0d", a1, a2));
    pv = 1; #1 chk(!pr, "no third ATOP slot"); pv = 0; patop = 0;
    // out-of-order ATOP B responses
    bid = a2; #1 chk(bvalid && batop && bo == 5'd2 && bsrc == id_t'(34), "ATOP 2 lookup");
    bpop = 1; step();
    bid = a1; #1 chk(bvalid && bo == 5'd1 && bsrc == id_t'(33), "ATOP 1 lookup");
    bpop = 1; step();
    patop = 1; pv = 1; #1 chk(pr, "slot of ATOP 2 free again"); pv = 0;
    rid = a1; #1 chk(ro == 5'd1 && rsrc == id_t'(33), "ATOP 1 R lookup");
    rpop = 1; step();
    pv = 1; #1 chk(pr, "slot of ATOP 1 free after R"); pv = 0; patop = 0;
    // non-atomic responses in order
    for (int k = 0; k < 4; k++) begin
      bid = 0; #1 chk(bvalid && !batop && bo == 5'(10 + k) && bsrc == id_t'(20 + k), "FIFO order");
      bpop = 1; step();
    end
    #1 chk(!bvalid, "FIFO empty");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
