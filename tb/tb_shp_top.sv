// tb_shp_top: end-to-end test of the SHP Ethernet CRC block at its default
// size (D = 16 thread contexts, C = 4, R = 3).
//
// Six CRC threads share the block: five redundant threads (tids 0..4, whose
// three copies fill words 0..14) and one single thread (tid 15). Every thread
// checks a series of random Ethernet frames, one nibble per thread cycle,
// followed by their FCS. The FCS is computed here with the reflected byte-wise
// CRC-32, independently of the block. At the end of the body the thread's Crc
// must be the bit-reversed complement of the FCS, and after the FCS the 802.3
// residue 32'hc704dd7b with CrcError low. Meanwhile single-bit upsets are
// injected at random into the copies of the redundant threads, and now and
// then into a section register of the logic; the frames must still check out. One double upset (two copies of one thread) must be
// flagged as having no majority; the thread is then stalled and reloaded
// through the host port from its good copy. A priority insert, stalls, kills
// and a phase with fewer threads than pipeline sections are exercised, and
// each mechanism is counted: a mechanism that never occurred is a failure.
// The scenario itself is in shp_top_scenario.svh, shared with tb_shp_top_d8.
module tb_shp_top;
  import shp_pkg::*;
  localparam int unsigned D = 16;
  `include "shp_top_scenario.svh"
  shp_top dut (.*);
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
