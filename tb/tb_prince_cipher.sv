// tb_prince_cipher: checks the PRINCE pipeline against the five published
// PRINCE test vectors, back-to-back (one block per cycle), and checks that
// every result appears exactly 3 cycles after its input and carries its
// side-band tag.
module tb_prince_cipher;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic         in_valid;
  logic [63:0]  in_data, out_data;
  logic [127:0] in_key;
  logic [7:0]   in_user, out_user;
  logic         out_valid;

  prince_cipher #(.USER_W(8)) dut (.*);

  localparam int NV = 5;
  logic [63:0]  pt [NV] = '{64'h0000000000000000, 64'hffffffffffffffff, 64'h0000000000000000,
                            64'h0000000000000000, 64'h0123456789abcdef};
  logic [127:0] ky [NV] = '{128'h0, 128'h0, {64'hffffffffffffffff, 64'h0},
                            {64'h0, 64'hffffffffffffffff}, {64'h0, 64'hfedcba9876543210}};
  logic [63:0]  ct [NV] = '{64'h818665aa0d02dfda, 64'h604ae6ca03c20ada, 64'h9fb51935fc3df524,
                            64'h78a54cbe737bb7ef, 64'hae25ad3ca8fa9ccf};

  int cycle = 0;
  int in_cycle [NV];
  int got = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // Collect outputs.
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      int id;
      id = int'(out_user);
      checks++;
      if (id >= NV || out_data !== ct[id]) begin
        failures++;
        $display("FAIL vector %0d: got %h", id, out_data);
      end
      checks++;
      if (id < NV && cycle - in_cycle[id] != 3) begin
        failures++;
        $display("FAIL vector %0d latency %0d", id, cycle - in_cycle[id]);
      end
      got++;
    end
  end

  initial begin
    in_valid = 0; in_data = 0; in_key = 0; in_user = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int v = 0; v < NV; v++) begin
      in_valid = 1; in_data = pt[v]; in_key = ky[v]; in_user = 8'(v);
      in_cycle[v] = cycle;
      @(negedge clk);
    end
    in_valid = 0;
    repeat (8) @(negedge clk);
    checks++;
    if (got != NV) begin failures++; $display("FAIL: %0d outputs", got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
