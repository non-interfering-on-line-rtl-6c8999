// shp_state_mem: thread state memory of a system-hyper-pipelined block.
//
// Under the barrel technique the design registers become a memory that holds
// the state of D threads, one word per thread (or per redundant copy of a
// thread). It has one synchronous write port (the write pointer) and two
// asynchronous read ports: the read pointer fetches the start state of the
// thread that enters the pipeline, the compare pointer fetches the state of a
// redundant copy so that the two can be compared at the start of the thread
// cycle. The memory, the three pointers and the second read port follow the
// paper; asynchronous read (a register file / distributed RAM) is a choice of
// this design, so a word written at the end of cycle t is readable in t+1.
//
// inj_en/inj_addr/inj_mask model a single event upset for simulation: the mask
// is XORed into the addressed word at the clock edge (after a write to the same
// word in that cycle). Tie inj_en low in a real device.
//
// The memory has no reset: every word is loaded through the write port before
// its thread is scheduled.
module shp_state_mem #(
  parameter int unsigned D  = 16,
  parameter int unsigned W  = 32,
  localparam int unsigned AW = (D > 1) ? $clog2(D) : 1
) (
  input  logic          clk,
  // write port (write pointer)
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  // read port (read pointer)
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata,
  // second read port (compare pointer)
  input  logic [AW-1:0] caddr,
  output logic [W-1:0]  cdata,
  // upset model
  input  logic          inj_en,
  input  logic [AW-1:0] inj_addr,
  input  logic [W-1:0]  inj_mask
);

  logic [W-1:0] mem [D];

  always_ff @(posedge clk) begin
    for (int unsigned i = 0; i < D; i++) begin
      logic [W-1:0] v;
      v = mem[i];
      if (we && waddr == AW'(i)) v = wdata;
      if (inj_en && inj_addr == AW'(i)) v = v ^ inj_mask;
      mem[i] <= v;
    end
  end

  assign rdata = mem[raddr];
  assign cdata = mem[caddr];

endmodule
