// tb_shp_state_mem: self-checking test of the thread state memory.
// Writes random words through the write port, reads every address through
// both read ports and compares with a model array; checks that a write is
// visible in the next cycle, that the upset port flips exactly the masked bits,
// and that an upset in the cycle of a write to the same word hits the new word.
module tb_shp_state_mem;
  localparam int unsigned D = 16, W = 32, AW = 4;
  logic clk = 0, we = 0, inj_en = 0;
  logic [AW-1:0] waddr = '0, raddr = '0, caddr = '0, inj_addr = '0;
  logic [W-1:0] wdata = '0, inj_mask = '0, rdata, cdata;
  logic [W-1:0] model [D];
  int checks = 0, failures = 0;

  shp_state_mem #(.D(D), .W(W)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(string what, logic [W-1:0] got, logic [W-1:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic read_all();
    for (int i = 0; i < D; i++) begin
      raddr = AW'(i);
      caddr = AW'(D - 1 - i);
      #1;
      check("read port", rdata, model[i]);
      check("compare port", cdata, model[D-1-i]);
    end
  endtask

  initial begin
    for (int pass = 0; pass < 3; pass++) begin
      for (int i = 0; i < D; i++) begin
        @(negedge clk);
        we = 1; waddr = AW'(i); wdata = $urandom; model[i] = wdata;
      end
      @(negedge clk); we = 0;
      read_all();
    end
    // write, readable next cycle
    @(negedge clk); we = 1; waddr = 4'd7; wdata = 32'hdead_beef;
    raddr = 4'd7; #1; check("before edge", rdata, model[7]);
    model[7] = wdata;
    @(negedge clk); we = 0; #1; check("after edge", rdata, 32'hdead_beef);
    // upset alone
    @(negedge clk); inj_en = 1; inj_addr = 4'd3; inj_mask = 32'h0001_0040; model[3] ^= inj_mask;
    @(negedge clk); inj_en = 0; read_all();
    // upset together with a write to the same word
    @(negedge clk); we = 1; waddr = 4'd9; wdata = 32'h1234_5678;
    inj_en = 1; inj_addr = 4'd9; inj_mask = 32'h8000_0000; model[9] = 32'h9234_5678;
    @(negedge clk); we = 0; inj_en = 0; read_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
