// tb_shp_csr_crc: self-checking test of the C-slow retimed eth_crc logic.
// Five interleaved threads (more than C) each compute the CRC of their own
// random Ethernet frame, one nibble per thread cycle; a thread enters the
// logic every cycle and its result is taken exactly C-1 cycles later, so a
// wrong latency or a mixed-up section shows as a wrong CRC. Expected values
// come from the reflected byte-wise CRC-32 (0xEDB88320) computed here, not
// from the shift form the module uses: after the frame body the register must
// hold the bit-reversed complement of the FCS, and after the FCS the 802.3
// residue 32'hc704dd7b. Initialize and a cycle with Enable low (pure shift by
// four) are checked as well.
module tb_shp_csr_crc;
  import shp_pkg::*;
  localparam int unsigned C = 4, T = 5, NB = 24;   // NB body bytes per frame
  logic clk = 0;
  logic [31:0] s_in, s_out;
  crc_in_t x_in;
  int checks = 0, failures = 0;

  shp_csr_crc #(.C(C)) dut (.*);
  always #5 clk = ~clk;

  logic [7:0]  frame [T][NB+4];
  logic [31:0] st [T];             // thread state (the design register)
  int          pos [T];            // next nibble step of each thread
  int          pipe_tid [C-1];     // thread in each section register
  bit          pipe_v [C-1];

  function automatic logic [3:0] rev4(logic [3:0] n);
    return {n[0], n[1], n[2], n[3]};
  endfunction

  function automatic logic [31:0] rev32(logic [31:0] v);
    logic [31:0] r;
    for (int i = 0; i < 32; i++) r[i] = v[31-i];
    return r;
  endfunction

  function automatic logic [31:0] fcs_of(int t);
    logic [31:0] c;
    c = 32'hffff_ffff;
    for (int i = 0; i < NB; i++) begin
      c ^= 32'(frame[t][i]);
      for (int k = 0; k < 8; k++) c = (c >> 1) ^ (c[0] ? 32'hedb8_8320 : 32'h0);
    end
    return ~c;
  endfunction

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  // step p of a thread: 0 = Initialize, 1..2(NB+4) = nibbles (low nibble first),
  // 2(NB+4)+1 = one shift with Enable low
  localparam int LAST = 2 * (NB + 4) + 1;

  initial begin
    logic [31:0] f;
    bit done;
    for (int t = 0; t < T; t++) begin
      for (int i = 0; i < NB; i++) frame[t][i] = 8'($urandom);
      f = fcs_of(t);
      for (int i = 0; i < 4; i++) frame[t][NB+i] = f[8*i +: 8];
      st[t]  = $urandom;
      pos[t] = 0;
    end
    for (int i = 0; i < C - 1; i++) pipe_v[i] = 0;
    done = 0;
    for (int cyc = 0; !done; cyc++) begin
      int t;
      int p;
      @(negedge clk);
      // write-back of the thread issued C-1 cycles ago
      if (pipe_v[C-2]) begin
        int wt;
        wt = pipe_tid[C-2];
        st[wt] = s_out;
        pos[wt]++;
        if (pos[wt] == 2 * NB + 1) check("after body", st[wt], rev32(~fcs_of(wt)));
        if (pos[wt] == 2 * (NB + 4) + 1) check("residue", st[wt], CRC_MAGIC);
      end
      // issue the next thread round robin (T > C-1 so it is never in flight)
      t = cyc % T;
      p = pos[t];
      s_in = st[t];
      if (p == 0)
        x_in = '{init: 1'b1, enable: 1'b0, data: 4'($urandom)};
      else if (p <= 2 * (NB + 4)) begin
        logic [7:0] b;
        b = frame[t][(p-1)/2];
        x_in = '{init: 1'b0, enable: 1'b1, data: rev4(((p - 1) % 2 == 0) ? b[3:0] : b[7:4])};
      end else
        x_in = '{init: 1'b0, enable: 1'b0, data: 4'($urandom)};
      for (int i = C - 2; i > 0; i--) begin
        pipe_v[i]   = pipe_v[i-1];
        pipe_tid[i] = pipe_tid[i-1];
      end
      pipe_v[0]   = (p <= LAST);
      pipe_tid[0] = t;
      if (p == 1) check("initialize", st[t], CRC_INIT);
      if (p == LAST + 1) check("shift with Enable low", st[t], {CRC_MAGIC[27:0], 4'h0});
      if (p > LAST) pipe_v[0] = 0;
      done = 1;
      for (int k = 0; k < T; k++) if (pos[k] <= LAST) done = 0;
    end
    // last shift result
    for (int k = 0; k < T; k++) check("final state", st[k], {CRC_MAGIC[27:0], 4'h0});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
