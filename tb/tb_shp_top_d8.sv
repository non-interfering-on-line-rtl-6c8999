// tb_shp_top_d8: end-to-end test of shp_top in the small configuration with
// D = 8 thread contexts (C = 4, R = 3): two redundant CRC threads (words 0, 2, 4
// and 1, 3, 5) and two single threads (words 6 and 7). Same scenario as
// tb_shp_top: random frames checked against an independent CRC, random
// single-bit upsets in the redundant copies, one double upset recovered by
// software, priority, stall, kill, and every mechanism counted.
module tb_shp_top_d8;
  import shp_pkg::*;
  localparam int unsigned D = 8;
  `include "shp_top_scenario.svh"
  shp_top #(.D(D)) dut (.*);
  initial begin
    @(run_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
