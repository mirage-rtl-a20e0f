// tb_mirage_llc_full: the Mirage cache at its full default size (16 MB data-
// store, 2 x 16,384 x 14 tags) taken through complete operations: a read
// miss that fills from memory, a read hit (5-cycle latency), a write hit, a
// read by a second domain of the same address (a separate copy), a flush
// that writes the dirty line back, and a read after the flush that misses
// and returns the written data from memory.
module tb_mirage_llc_full;
  import mirage_pkg::*;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

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
  logic [127:0] key_skew0 = 128'h0123_4567_89ab_cdef_0f1e_2d3c_4b5a_6978;
  logic [127:0] key_skew1 = 128'hdead_beef_0bad_cafe_1357_9bdf_2468_ace0;
  int           n_rd_stalls, n_wb_stalls;

  mirage_llc dut (.*);

  dram_model u_mem (
    .clk, .rst_n,
    .rd_valid(mem_rd_valid), .rd_ready(mem_rd_ready), .rd_addr(mem_rd_addr),
    .rd_resp_valid(mem_rd_resp_valid), .rd_resp_data(mem_rd_resp_data),
    .wb_valid(mem_wb_valid), .wb_ready(mem_wb_ready), .wb_addr(mem_wb_addr),
    .wb_data(mem_wb_data), .n_rd_stalls(n_rd_stalls), .n_wb_stalls(n_wb_stalls)
  );

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int n_wb = 0, n_flush = 0;
  line_addr_t last_wb_addr;
  line_t      last_wb_data;
  always @(posedge clk) if (rst_n) begin
    if (mem_wb_valid && mem_wb_ready) begin n_wb++; last_wb_addr = mem_wb_addr; last_wb_data = mem_wb_data; end
    if (evict_valid) begin
      check(evict_kind == EV_FLUSH, "only the flush may evict");
      n_flush++;
    end
  end

  task automatic do_req(input op_e op, input line_addr_t a, input sdid_t s, input line_t wd,
                        output bit hit, output line_t rd, output int lat);
    @(negedge clk);
    while (!req_ready) @(negedge clk);
    req_valid = 1; req_op = op; req_addr = a; req_sdid = s; req_wdata = wd;
    @(negedge clk);
    req_valid = 0;
    lat = 1;
    while (!resp_valid && lat < 1000) begin @(negedge clk); lat++; end
    check(resp_valid, "no response");
    hit = resp_hit; rd = resp_rdata;
  endtask

  initial begin
    bit hit;
    line_t rd, wd;
    int lat;
    line_addr_t a;
    req_valid = 0; req_op = OP_READ; req_addr = '0; req_sdid = '0; req_wdata = '0;
    a = 40'h12_3456_789a;
    for (int i = 0; i < LINE_W / 32; i++) wd[32*i +: 32] = 32'hC0DE_0000 + i;
    repeat (3) @(posedge clk);
    rst_n = 1;
    do_req(OP_READ, a, 8'd5, '0, hit, rd, lat);
    check(!hit && rd == u_mem.peek(a), "cold read miss returns memory data");
    do_req(OP_READ, a, 8'd5, '0, hit, rd, lat);
    check(hit && rd == u_mem.peek(a), "read hit");
    check(lat == 5, $sformatf("hit latency %0d", lat));
    do_req(OP_WRITE, a, 8'd5, wd, hit, rd, lat);
    check(hit && lat == 5, "write hit");
    do_req(OP_READ, a, 8'd9, '0, hit, rd, lat);
    check(!hit && rd == u_mem.peek(a), "other domain gets its own copy from memory");
    do_req(OP_READ, a, 8'd5, '0, hit, rd, lat);
    check(hit && rd == wd, "written data read back");
    do_req(OP_FLUSH, a, 8'd5, '0, hit, rd, lat);
    repeat (2) @(negedge clk);
    check(hit && n_flush == 1 && n_wb == 1 && last_wb_addr == a && last_wb_data == wd,
          "flush writes back the dirty line");
    do_req(OP_READ, a, 8'd5, '0, hit, rd, lat);
    check(!hit && rd == wd, "re-read after flush misses and returns written data");
    check(sae_count == 0, "no SAE");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
