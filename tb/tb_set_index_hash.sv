// tb_set_index_hash: checks the per-skew set indices against set indices
// sliced from published PRINCE test vectors (all-zero plaintext, i.e. SDID 0
// and line address 0, under three keys), checks the 3-cycle latency, and
// checks that changing the SDID or the address moves the line to other sets.
module tb_set_index_hash;
  import mirage_pkg::*;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int SET_W = 14;
  logic [127:0]     key [NUM_SKEWS];
  logic             in_valid, idx_valid;
  line_addr_t       in_addr;
  sdid_t            in_sdid;
  logic [3:0]       in_user, out_user;
  logic [SET_W-1:0] idx [NUM_SKEWS];

  set_index_hash #(.SET_W(SET_W), .USER_W(4)) dut (.*);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // hash one request and wait for the result; returns the latency
  task automatic hash(input line_addr_t a, input sdid_t s, output logic [SET_W-1:0] i0,
                      output logic [SET_W-1:0] i1, output int lat);
    @(negedge clk);
    in_valid = 1; in_addr = a; in_sdid = s; in_user = 4'hA;
    @(negedge clk);
    in_valid = 0;
    lat = 1;
    while (!idx_valid) begin @(negedge clk); lat++; end
    i0 = idx[0]; i1 = idx[1];
    check(out_user == 4'hA, "user tag");
  endtask

  initial begin
    logic [SET_W-1:0] a0, a1, b0, b1;
    int lat, moved;
    in_valid = 0; in_addr = '0; in_sdid = '0; in_user = '0;
    key[0] = 128'h0;
    key[1] = {64'hffffffffffffffff, 64'h0};
    repeat (2) @(posedge clk);
    rst_n = 1;
    hash('0, '0, a0, a1, lat);
    check(a0 == 14'(64'h818665aa0d02dfda), $sformatf("skew0 index %h", a0));
    check(a1 == 14'(64'h9fb51935fc3df524), $sformatf("skew1 index %h", a1));
    check(lat == 3, $sformatf("latency %0d", lat));
    key[1] = {64'h0, 64'hffffffffffffffff};
    hash('0, '0, a0, a1, lat);
    check(a1 == 14'(64'h78a54cbe737bb7ef), $sformatf("skew1 index k1 %h", a1));
    // SDID and address are part of the plaintext
    moved = 0;
    for (int t = 1; t <= 16; t++) begin
      hash(40'h12345, '0, a0, a1, lat);
      hash(40'h12345, sdid_t'(t), b0, b1, lat);
      if (a0 != b0 && a1 != b1) moved++;
    end
    check(moved >= 14, $sformatf("SDID moved only %0d of 16", moved));
    moved = 0;
    for (int t = 1; t <= 16; t++) begin
      hash(40'h1000 + 40'(t), 8'd3, a0, a1, lat);
      hash(40'h2000 + 40'(t), 8'd3, b0, b1, lat);
      if (a0 != b0) moved++;
    end
    check(moved >= 14, $sformatf("address moved only %0d of 16", moved));
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
