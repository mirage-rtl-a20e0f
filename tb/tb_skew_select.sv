// tb_skew_select: random valid vectors for the two indexed sets; checks the
// invalid-tag counts, that the set with more invalid tags is chosen, that a
// tie follows the random bit, that the chosen way is invalid (the lowest
// one) and that a full pair of sets raises sae with a victim way in range.
module tb_skew_select;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int WAYS = 14, WAY_W = 4, CNT_W = 4;
  logic [WAYS-1:0]  valid0, valid1;
  logic             rnd_tie;
  logic [15:0]      rnd_way;
  logic [CNT_W-1:0] inv_cnt0, inv_cnt1;
  logic             sel_skew, tie, sae;
  logic [WAY_W-1:0] sel_way;

  skew_select #(.WAYS(WAYS)) dut (.*);

  function automatic logic [WAYS-1:0] rand_valid();
    // mostly-full sets so that ties and full sets occur
    logic [WAYS-1:0] v;
    int k;
    v = '1;
    k = $urandom_range(3);
    for (int i = 0; i < k; i++) v[$urandom_range(WAYS - 1)] = 1'b0;
    return v;
  endfunction

  int nties = 0, nsae = 0;
  initial begin
    for (int t = 0; t < 3000; t++) begin
      int c0, c1, exp_skew, exp_way;
      logic [WAYS-1:0] vs;
      @(negedge clk);
      valid0 = rand_valid(); valid1 = rand_valid();
      rnd_tie = 1'($urandom); rnd_way = 16'($urandom);
      #1;
      c0 = 0; c1 = 0;
      for (int i = 0; i < WAYS; i++) begin c0 += !valid0[i]; c1 += !valid1[i]; end
      exp_skew = (c0 == c1) ? int'(rnd_tie) : (c1 > c0 ? 1 : 0);
      vs = exp_skew ? valid1 : valid0;
      exp_way = -1;
      for (int i = WAYS - 1; i >= 0; i--) if (!vs[i]) exp_way = i;
      checks++;
      if (int'(inv_cnt0) != c0 || int'(inv_cnt1) != c1) begin failures++; $display("FAIL: counts"); end
      checks++;
      if (int'(sel_skew) != exp_skew || tie != (c0 == c1)) begin failures++; $display("FAIL: skew"); end
      checks++;
      if (sae != (c0 == 0 && c1 == 0)) begin failures++; $display("FAIL: sae flag"); end
      checks++;
      if (sae) begin
        nsae++;
        if (int'(sel_way) != int'(rnd_way) % WAYS) begin failures++; $display("FAIL: sae way"); end
      end else if (int'(sel_way) != exp_way) begin
        failures++; $display("FAIL: way %0d exp %0d", sel_way, exp_way);
      end
      if (c0 == c1) nties++;
    end
    checks++;
    if (nties == 0 || nsae == 0) begin failures++; $display("FAIL: no ties or sae"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
