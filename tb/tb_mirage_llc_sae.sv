// tb_mirage_llc_sae: rate of set-associative evictions (SAE) against the
// number of extra tag ways per skew.
//
// The published analysis of load-aware skew selection gives, for a base of
// 8 ways per skew and a data-store as large as the base tag capacity,
// about 4 installs per SAE with 1 extra way per skew (8 + 1) and about 60
// with 2 extra ways (8 + 2); it also states that the rate hardly depends on
// the number of sets. Larger configurations (8 + 3 gives one SAE in 8000
// installs, 8 + 6 one in 10^34) cannot be measured in simulation.
//
// Three caches with 64 sets per skew and 64 x 16 = 1024 data entries
// (= 2 skews x 64 sets x 8 base ways) run side by side:
//   g = 0 : 9 ways per skew  (8 + 1), no relocation
//   g = 1 : 10 ways per skew (8 + 2), no relocation
//   g = 2 : 10 ways per skew (8 + 2), up to 3 cuckoo relocations per SAE
// Each gets a stream of reads to distinct addresses, so every request is a
// miss and an install. After 4096 installs to reach the steady state, the
// SAEs of the next NMEAS installs are counted. The measured installs per SAE
// must lie within a factor of 2.5 of the published figure (the model is a
// small cache with a finite measurement, hence the tolerance), and
// relocation must remove most SAEs of the 8 + 2 cache. Every response must
// be a miss returning the memory data.
module tb_mirage_llc_sae;
  import mirage_pkg::*;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NWARM = 4096;
  localparam int NMEAS = 20000;
  localparam int NCFG  = 3;

  int  sae_meas [NCFG];
  bit  done     [NCFG];

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  for (genvar g = 0; g < NCFG; g++) begin : g_cfg
    localparam int unsigned WAYS_G  = (g == 0) ? 9 : 10;
    localparam int unsigned RELOC_G = (g == 2) ? 3 : 0;

    logic         req_valid, req_ready, resp_valid, resp_hit;
    op_e          req_op, resp_op;
    line_addr_t   req_addr;
    sdid_t        req_sdid;
    line_t        req_wdata, resp_rdata;
    logic         mem_rd_valid, mem_rd_ready, mem_rd_resp_valid;
    line_addr_t   mem_rd_addr, mem_wb_addr, evict_addr;
    line_t        mem_rd_resp_data, mem_wb_data;
    logic         mem_wb_valid, mem_wb_ready, evict_valid;
    evict_e       evict_kind;
    sdid_t        evict_sdid;
    logic [31:0]  sae_count;
    logic [127:0] key_skew0 = 128'h0f1e_2d3c_4b5a_6978_8796_a5b4_c3d2_e1f0 ^ 128'(g);
    logic [127:0] key_skew1 = 128'h1357_9bdf_0246_8ace_fdb9_7531_eca8_6420 ^ 128'(g);
    int           n_rd_stalls, n_wb_stalls;

    mirage_llc #(
      .SETS(64), .WAYS(WAYS_G), .DATA_SETS(64), .DATA_WAYS(16),
      .MAX_RELOC(RELOC_G), .PRNG_SEED(64'h2545_F491_4F6C_DD1D + 64'(g))
    ) dut (.*);

    dram_model #(.MIN_LAT(2), .MAX_LAT(6), .STALL_PCT(10)) u_mem (
      .clk, .rst_n,
      .rd_valid(mem_rd_valid), .rd_ready(mem_rd_ready), .rd_addr(mem_rd_addr),
      .rd_resp_valid(mem_rd_resp_valid), .rd_resp_data(mem_rd_resp_data),
      .wb_valid(mem_wb_valid), .wb_ready(mem_wb_ready), .wb_addr(mem_wb_addr),
      .wb_data(mem_wb_data), .n_rd_stalls(n_rd_stalls), .n_wb_stalls(n_wb_stalls)
    );

    initial begin
      int unsigned sae0;
      line_addr_t  a;
      int          bad;
      bad = 0;
      req_valid = 0; req_op = OP_READ; req_addr = '0; req_sdid = '0; req_wdata = '0;
      wait (rst_n);
      for (int i = 0; i < NWARM + NMEAS; i++) begin
        if (i == NWARM) sae0 = sae_count;
        // distinct addresses: an odd multiplier is a bijection on 40 bits
        a = 40'(64'(i + 1) * 64'h9E37_79B9_7F);
        @(negedge clk);
        while (!req_ready) @(negedge clk);
        req_valid = 1; req_addr = a;
        @(negedge clk);
        req_valid = 0;
        while (!resp_valid) @(negedge clk);
        if (resp_hit || resp_rdata != u_mem.peek(a)) bad++;
      end
      sae_meas[g] = int'(sae_count - sae0);
      check(bad == 0, $sformatf("cfg %0d: %0d responses were hits or had wrong data", g, bad));
      done[g] = 1'b1;
    end
  end

  initial begin
    real ipe [NCFG];
    foreach (done[i]) done[i] = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done[0] && done[1] && done[2]);
    foreach (ipe[i]) ipe[i] = (sae_meas[i] == 0) ? 1.0e9 : real'(NMEAS) / real'(sae_meas[i]);
    $display("8+1 ways/skew: %0d SAE in %0d installs, %0.1f installs per SAE (published: 4)",
             sae_meas[0], NMEAS, ipe[0]);
    $display("8+2 ways/skew: %0d SAE in %0d installs, %0.1f installs per SAE (published: 60)",
             sae_meas[1], NMEAS, ipe[1]);
    $display("8+2 ways/skew, 3 relocations: %0d SAE in %0d installs", sae_meas[2], NMEAS);
    check(ipe[0] >= 4.0 / 2.5 && ipe[0] <= 4.0 * 2.5, "8+1 installs per SAE near 4");
    check(ipe[1] >= 60.0 / 2.5 && ipe[1] <= 60.0 * 2.5, "8+2 installs per SAE near 60");
    check(sae_meas[1] > 0, "8+2 cache sees SAEs");
    check(sae_meas[2] * 4 < sae_meas[1], "relocation removes most SAEs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
