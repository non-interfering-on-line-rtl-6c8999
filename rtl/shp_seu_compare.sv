// shp_seu_compare: pipelined start-state comparator (the "=" block that raises SEU).
//
// At the start of a redundant thread cycle the state read through the read
// pointer (a) is compared with the state of another copy of the same thread
// read through the compare pointer (b). The comparison is pipelined like the
// C-slow retimed logic: in the issue cycle the words are compared in CHUNK-bit
// slices and the per-slice inequality bits are registered; in the next cycle
// they are OR-reduced combinationally. So `valid`/`mismatch` refer to the
// compare issued one cycle earlier, and `diff` tells which slices differed.
// Comparing at the start of the cycle and pipelining the comparator follow the
// paper; the slice width and the single register stage are this design's
// choices (one stage keeps the verdict ahead of the first write-back when C > R).
module shp_seu_compare #(
  parameter int unsigned W     = 32,
  parameter int unsigned CHUNK = 8,
  localparam int unsigned NS   = (W + CHUNK - 1) / CHUNK
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,        // a compare is issued this cycle
  input  logic [W-1:0]  a,
  input  logic [W-1:0]  b,
  output logic          valid,     // result of the compare issued last cycle
  output logic          mismatch,
  output logic [NS-1:0] diff
);

  logic [NS-1:0] diff_d;

  always_comb begin
    for (int unsigned s = 0; s < NS; s++) begin
      logic ne;
      ne = 1'b0;
      for (int unsigned j = 0; j < CHUNK; j++)
        if (s * CHUNK + j < W) ne |= a[s*CHUNK+j] ^ b[s*CHUNK+j];
      diff_d[s] = en & ne;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= 1'b0;
      diff  <= '0;
    end else begin
      valid <= en;
      diff  <= diff_d;
    end
  end

  assign mismatch = valid & (|diff);

endmodule
