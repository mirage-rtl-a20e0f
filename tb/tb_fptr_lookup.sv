// tb_fptr_lookup: random indexed sets for both skews, with the looked-up
// address planted in zero or one valid way (sometimes with the wrong SDID or
// an invalid bit); the expected hit, skew, way, dirty bit and FPTR are
// computed by the testbench.
module tb_fptr_lookup;
  import mirage_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int WAYS = 14, FPTR_W = 18, WAY_W = 4;

  logic              check_en;
  line_addr_t        addr;
  sdid_t             sdid;
  line_addr_t        tag   [NUM_SKEWS][WAYS];
  logic              dirty [NUM_SKEWS][WAYS];
  logic [FPTR_W-1:0] fptr  [NUM_SKEWS][WAYS];
  sdid_t             tsdid [NUM_SKEWS][WAYS];
  logic [WAYS-1:0]   valid [NUM_SKEWS];
  logic              hit, hit_skew, hit_dirty;
  logic [WAY_W-1:0]  hit_way;
  logic [FPTR_W-1:0] hit_fptr;

  fptr_lookup #(.WAYS(WAYS), .FPTR_W(FPTR_W)) dut (.*);

  int nhit = 0;
  initial begin
    check_en = 0;
    for (int t = 0; t < 2000; t++) begin
      bit exp_hit;
      int ps, pw, kind;
      @(negedge clk);
      addr = {8'h0, 32'($urandom)};
      sdid = 8'($urandom);
      for (int s = 0; s < NUM_SKEWS; s++) begin
        valid[s] = WAYS'($urandom);
        for (int w = 0; w < WAYS; w++) begin
          tag[s][w]   = addr ^ (40'd1 << $urandom_range(39));   // always differs
          dirty[s][w] = 1'($urandom);
          fptr[s][w]  = FPTR_W'($urandom);
          tsdid[s][w] = 8'($urandom);
        end
      end
      ps = $urandom_range(1); pw = $urandom_range(WAYS - 1);
      kind = $urandom_range(3);          // 0: no plant, 1: hit, 2: wrong SDID, 3: invalid
      exp_hit = 0;
      if (kind != 0) begin
        tag[ps][pw] = addr;
        tsdid[ps][pw] = (kind == 2) ? sdid ^ 8'h01 : sdid;
        valid[ps][pw] = (kind != 3);
        exp_hit = (kind == 1);
      end
      check_en = 1;
      #1;
      checks++;
      if (hit != exp_hit) begin failures++; $display("FAIL: hit %0d kind %0d", hit, kind); end
      if (exp_hit) begin
        nhit++;
        checks++;
        if (hit_skew != 1'(ps) || hit_way != WAY_W'(pw) || hit_fptr != fptr[ps][pw] ||
            hit_dirty != dirty[ps][pw]) begin
          failures++;
          $display("FAIL: skew %0d way %0d fptr %h", hit_skew, hit_way, hit_fptr);
        end
      end
    end
    checks++;
    if (nhit < 300) begin failures++; $display("FAIL: few hits"); end
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
