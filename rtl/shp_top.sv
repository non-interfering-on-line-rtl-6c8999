// shp_top: a system-hyper-pipelined (SHP) Ethernet CRC block with on-line SEU
// detection and recovery.
//
// The block runs up to D independent CRC-32 threads (one per frame stream) on
// one copy of the eth_crc logic. The logic is C-slow retimed into C sections
// (shp_csr_crc), its design register is replaced by a thread state memory
// (shp_state_mem), and a thread controller (shp_thread_ctrl) picks the thread
// that enters the logic each cycle. Threads flagged redundant are kept as R
// copies; their start states are compared (shp_seu_compare) while the copies
// travel through the logic, and their results are stored only if all copies
// started alike. A mismatch suppresses the store, repairs the odd copy from a
// correct one and repeats the thread cycle, so an upset in the state memory is
// removed without interrupting the other threads.
//
// Interface and timing. The environment supplies each thread's input nibble
// (iss_din) in the cycle the thread is issued (iss_valid, iss_tid, iss_copy);
// it must give all copies of a redundant thread the same input, and move to the
// next input only after wb_commit for that thread: a cycle that is not
// committed is repeated with the same input. In the issue cycle of a thread's
// first copy, out_* present its Crc register and CrcError (Crc != 32'hc704dd7b);
// for a redundant thread these are to be trusted only if that cycle commits.
// The result is written back C-1 cycles after issue (wb_valid/wb_commit in that
// cycle). Thread states are loaded and read through the host port; host read
// data is valid one cycle after host_rready. inj_* flip bits of the state
// memory to model an upset and are tied low in a device.
//
// The structure (memory with write, read and compare pointers, retimed logic,
// comparator, TC) is the paper's SHP-with-SEU-recovery scheme; applying it to
// the Ethernet CRC, and all port conventions, are this design's choices.
module shp_top
  import shp_pkg::*;
#(
  parameter int unsigned D = 16,  // thread contexts (FPGA configuration)
  parameter int unsigned C = 4,   // C-slow factor
  parameter int unsigned R = 3,   // redundant copies
  localparam int unsigned W  = 32,
  localparam int unsigned AW = (D > 1) ? $clog2(D) : 1,
  localparam int unsigned RW = (R > 1) ? $clog2(R) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // load balancing
  input  logic          cmd_valid,
  input  tc_op_e        cmd_op,
  input  logic [AW-1:0] cmd_tid,
  input  logic          cmd_red,
  input  logic          cmd_prio,
  // thread input
  output logic          iss_valid,
  output logic [AW-1:0] iss_tid,
  output logic [RW-1:0] iss_copy,
  input  crc_in_t       iss_din,
  // thread output (eth_crc Crc and CrcError of the thread being issued)
  output logic          out_valid,
  output logic [AW-1:0] out_tid,
  output logic [W-1:0]  out_crc,
  output logic          out_crc_error,
  // host port
  input  logic          host_we,
  input  logic [AW-1:0] host_waddr,
  input  logic [W-1:0]  host_wdata,
  output logic          host_wready,
  input  logic          host_re,
  input  logic [AW-1:0] host_raddr,
  output logic          host_rready,
  output logic          host_rvalid,
  output logic [W-1:0]  host_rdata,
  // thread-cycle completion and SEU events
  output logic          wb_valid,
  output logic [AW-1:0] wb_tid,
  output logic          wb_commit,
  output logic          seu_detect,
  output logic          seu_recover,
  output logic [RW-1:0] seu_copy,
  output logic          seu_fatal,
  output logic [W/8-1:0] seu_diff,   // byte lanes that differed in the last compare
  output logic [D-1:0]  thr_active,
  output logic [D-1:0]  thr_busy,
  // upset model
  input  logic          inj_en,
  input  logic [AW-1:0] inj_addr,
  input  logic [W-1:0]  inj_mask
);

  logic          iss_red;
  logic [AW-1:0] rd_ptr, cmp_ptr, wr_ptr;
  logic [W-1:0]  rd_data, cmp_data, wdata, res_data;
  logic          cmp_en, cmp_valid, cmp_mismatch, we;

  shp_state_mem #(.D(D), .W(W)) u_mem (
    .clk, .we, .waddr(wr_ptr), .wdata,
    .raddr(rd_ptr), .rdata(rd_data),
    .caddr(cmp_ptr), .cdata(cmp_data),
    .inj_en, .inj_addr, .inj_mask
  );

  shp_csr_crc #(.C(C)) u_logic (
    .clk, .s_in(rd_data), .x_in(iss_din), .s_out(res_data)
  );

  shp_seu_compare #(.W(W), .CHUNK(8)) u_cmp (
    .clk, .rst_n, .en(cmp_en), .a(rd_data), .b(cmp_data),
    .valid(cmp_valid), .mismatch(cmp_mismatch), .diff(seu_diff)
  );

  shp_thread_ctrl #(.D(D), .C(C), .R(R), .W(W)) u_tc (
    .clk, .rst_n,
    .cmd_valid, .cmd_op, .cmd_tid, .cmd_red, .cmd_prio,
    .iss_valid, .iss_tid, .iss_copy, .iss_red, .rd_ptr, .rd_data,
    .cmp_en, .cmp_ptr, .cmp_valid, .cmp_mismatch,
    .res_data, .we, .wr_ptr, .wdata,
    .host_we, .host_waddr, .host_wdata, .host_wready,
    .host_re, .host_raddr, .host_rready,
    .wb_valid, .wb_tid, .wb_commit,
    .seu_detect, .seu_recover, .seu_copy, .seu_fatal,
    .thr_active, .thr_busy
  );

  // a redundant thread shows its state once, when its first copy is issued
  assign out_valid     = iss_valid && (!iss_red || iss_copy == '0);
  assign out_tid       = iss_tid;
  assign out_crc       = rd_data;
  assign out_crc_error = rd_data != CRC_MAGIC;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) host_rvalid <= 1'b0;
    else        host_rvalid <= host_rready;
  end

  always_ff @(posedge clk) begin
    if (host_rready) host_rdata <= cmp_data;
  end

endmodule
