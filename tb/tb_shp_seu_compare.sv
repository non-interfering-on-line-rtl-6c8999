// tb_shp_seu_compare: self-checking test of the pipelined start-state comparator.
// Drives random word pairs (equal, one flipped bit, random) with random enables
// and checks valid, mismatch and the per-byte difference mask one cycle later
// against values computed here.
module tb_shp_seu_compare;
  localparam int unsigned W = 32;
  logic clk = 0, rst_n = 0, en = 0;
  logic [W-1:0] a = '0, b = '0;
  logic valid, mismatch;
  logic [3:0] diff;
  int checks = 0, failures = 0;
  logic exp_valid, exp_mis;
  logic [3:0] exp_diff;

  shp_seu_compare #(.W(W), .CHUNK(8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    int n_mis;
    int unsigned sel;
    n_mis = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      en = ($urandom % 4) != 0;
      a = $urandom;
      sel = $urandom % 3;
      unique case (sel)
        0: b = a;
        1: b = a ^ (32'h1 << ($urandom % 32));
        default: b = $urandom;
      endcase
      exp_valid = en;
      for (int s = 0; s < 4; s++) exp_diff[s] = en && (a[8*s +: 8] != b[8*s +: 8]);
      exp_mis = en && (a != b);
      @(negedge clk);
      checks++;
      if (valid !== exp_valid || mismatch !== exp_mis || diff !== exp_diff) begin
        failures++;
        $display("FAIL %0d: valid %b/%b mismatch %b/%b diff %b/%b", i,
                 valid, exp_valid, mismatch, exp_mis, diff, exp_diff);
      end
      if (exp_mis) n_mis++;
      en = 0;
    end
    checks++;
    if (n_mis == 0) failures++;
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
