// Testbench of floo_route_xy: exhaustive check of all 64 x 64 pairs of local
// and destination coordinates against an independently written XY rule
// (first correct x, then y; north is +y, east is +x).
// X-first dimension-ordered routing follows the original design; the port
// order and direction convention are this design's own.
module tb_floo_route_xy;
  import floo_pkg::*;
  id_t xy, dst;
  logic [NumDirs-1:0] port;
  int checks = 0, failures = 0;

  floo_route_xy dut (.xy_id_i(xy), .dst_i(dst), .port_o(port));

  initial begin
    #100000;
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int a = 0; a < 64; a++) begin
      for (int b = 0; b < 64; b++) begin
        int ex;
        xy = id_t'(a); dst = id_t'(b);
        #1;
        if (b % 8 > a % 8)       ex = 1;   // East
        else if (b % 8 < a % 8)  ex = 3;   // West
        else if (b / 8 > a / 8)  ex = 0;   // North
        else if (b / 8 < a / 8)  ex = 2;   // South
        else                     ex = 4;   // local
        checks++;
        if (port != (5'b1 << ex)) begin
          failures++;
          $display("FAIL xy=%0d dst=%0d port=%b exp=%0d", a, b, port, ex);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
