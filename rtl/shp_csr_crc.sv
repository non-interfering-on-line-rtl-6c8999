// shp_csr_crc: the Ethernet CRC-32 register logic, C-slow retimed into C sections.
//
// The original circuit is the eth_crc block of an Ethernet MAC: per cycle
// Crc <= Initialize ? 32'hffffffff : CrcNext(Crc, Data[3:0], Enable), where
// CrcNext applies four serial steps of the 802.3 polynomial, Data[3] first,
// with the feedback gated by Enable. Here that combinational logic is cut into
// C sections (4/C data bits each) with a CSR register set between sections, as
// C-slow retiming does. The final design register is not in this module: it is
// the thread state memory, written with s_out. A thread issued in cycle t with
// start state s_in and input x_in finds its next state on s_out, combinationally,
// in cycle t+C-1; a new thread may enter every cycle. The section registers
// carry the partial CRC and the thread's input bits and need no reset, since
// the thread controller tracks which slots hold a valid thread.
// The function is eth_crc's; the cut into one-bit sections is this design's
// choice (it gives equal section depth for C = 4, the paper's C).
module shp_csr_crc
  import shp_pkg::*;
#(
  parameter int unsigned C = 4     // design copies / pipeline sections; 2 or 4
) (
  input  logic        clk,
  input  logic [31:0] s_in,   // Crc start state of the thread entering (cycle t)
  input  crc_in_t     x_in,   // that thread's input for this CRC cycle
  output logic [31:0] s_out   // its next Crc state (cycle t+C-1)
);

  localparam int unsigned BPS = 4 / C;   // data bits per section

  logic [31:0] cr [C-1];   // CSR registers CR0..CR(C-2): partial CRC
  crc_in_t     xr [C-1];   // thread input travelling with it

  logic [31:0] sec_in  [C];
  crc_in_t     sec_x   [C];
  logic [31:0] sec_out [C];

  always_comb begin
    for (int unsigned k = 0; k < C; k++) begin
      logic [31:0] c;
      if (k == 0) begin
        sec_in[k] = s_in;
        sec_x[k]  = x_in;
      end else begin
        sec_in[k] = cr[k-1];
        sec_x[k]  = xr[k-1];
      end
      c = sec_in[k];
      for (int unsigned j = 0; j < BPS; j++)
        c = crc_bit(c, sec_x[k].data[3 - k*BPS - j], sec_x[k].enable);
      sec_out[k] = c;
    end
  end

  always_ff @(posedge clk) begin
    for (int unsigned k = 0; k + 1 < C; k++) begin
      cr[k] <= sec_out[k];
      xr[k] <= sec_x[k];
    end
  end

  assign s_out = sec_x[C-1].init ? CRC_INIT : sec_out[C-1];

  initial begin
    assert (C >= 2 && 4 % C == 0)
      else $error("shp_csr_crc: C must be 2 or 4");
  end

endmodule
