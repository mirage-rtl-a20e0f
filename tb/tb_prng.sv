// tb_prng: compares the generator with an xorshift64 (13, 7, 17) sequence
// computed in the testbench, checks that it holds while en is low, and
// checks that the low bit is roughly balanced.
module tb_prng;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        en;
  logic [63:0] rnd;
  localparam logic [63:0] SEED = 64'h0123456789ABCDEF;
  prng #(.SEED(SEED)) dut (.*);

  initial begin
    logic [63:0] ref_s;
    int ones;
    en = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++; if (rnd != SEED) begin failures++; $display("FAIL: seed"); end
    ref_s = SEED;
    en = 1;
    ones = 0;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      ref_s ^= ref_s << 13; ref_s ^= ref_s >> 7; ref_s ^= ref_s << 17;
      checks++;
      if (rnd != ref_s) begin failures++; $display("FAIL: step %0d %h vs %h", i, rnd, ref_s); end
      ones += int'(rnd[0]);
    end
    en = 0;
    repeat (3) @(negedge clk);
    checks++; if (rnd != ref_s) begin failures++; $display("FAIL: not held"); end
    checks++; if (ones < 400 || ones > 600) begin failures++; $display("FAIL: bias %0d", ones); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
