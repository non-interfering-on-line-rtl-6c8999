// shp_pkg: constants, types and the CRC bit step shared by the SHP block.
//
// The example logic that is hyper-pipelined here is the CRC-32 register of an
// Ethernet MAC (eth_crc): a 32-bit Crc register that is set to all ones on
// Initialize, otherwise takes CrcNext, computed from four data bits per cycle,
// and an error flag CrcError = (Crc != 32'hc704dd7b), the residue left by a
// frame that ends with a correct FCS. The init value and the residue are the
// ones printed for that block in the coverage view of the reference SoC; the
// generator polynomial 0x04C11DB7 is the IEEE 802.3 one. Thread-controller
// command codes and the per-thread input bundle are defined here too.
package shp_pkg;

  localparam logic [31:0] CRC_INIT  = 32'hffff_ffff;
  localparam logic [31:0] CRC_MAGIC = 32'hc704_dd7b;
  localparam logic [31:0] CRC_POLY  = 32'h04c1_1db7;

  // Per-thread input of one CRC cycle (one MII nibble). data[3] is taken first.
  typedef struct packed {
    logic       init;    // Initialize: Crc <= CRC_INIT
    logic       enable;  // Enable: feed the data bits; 0 only shifts
    logic [3:0] data;
  } crc_in_t;

  // Load-balancing commands of the thread controller.
  typedef enum logic [1:0] {
    TC_INSERT = 2'd0,  // add a thread to the schedule (with its red/prio flags)
    TC_KILL   = 2'd1,  // remove a thread from the schedule
    TC_STALL  = 2'd2,  // keep the thread but do not issue it
    TC_RESUME = 2'd3   // let a stalled thread run again
  } tc_op_e;

  // One serial CRC step: shift left, feedback gated by enable.
  function automatic logic [31:0] crc_bit(logic [31:0] c, logic d, logic en);
    logic fb;
    fb = en & (c[31] ^ d);
    return {c[30:0], 1'b0} ^ (fb ? CRC_POLY : 32'h0);
  endfunction

endpackage
