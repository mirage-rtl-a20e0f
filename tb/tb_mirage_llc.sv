// tb_mirage_llc: end-to-end test of the Mirage cache at a reduced size
// (2 sets x 3 ways per skew, 8 data entries), small enough that the data-
// store fills, global evictions happen on most misses and both indexed sets
// are sometimes full, forcing set-associative evictions.
//
// The testbench keeps a reference model of the cache contents, keyed by
// {SDID, line address}. Lines enter it on misses and leave it when the cache
// reports an eviction, so it predicts every hit and miss exactly; read data
// is compared with the model or with memory, and every write-back with the
// evicted line's data. Checked as well: the 5-cycle hit latency, that the
// cache never holds more lines than data entries, that an eviction names a
// resident line, and sae_count. Each mechanism - read/write hit, miss during
// warm-up, global eviction, set-associative eviction, dirty write-back,
// flush, reuse of a flushed data entry, skew-selection tie and load-aware
// choice, memory back-pressure and per-domain duplication of shared lines -
// is counted, and one that never happens is a failure.
module tb_mirage_llc;
  import mirage_pkg::*;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int SETS = 2, WAYS = 3, DATA_SETS = 2, DATA_WAYS = 4;
  localparam int ENTRIES = DATA_SETS * DATA_WAYS;
  localparam int HIT_LAT = 5;
  localparam int NREQ = 4000;
  localparam int ST_VIC_RD = 5;   // encoding of mirage_ctrl state S_VIC_RD (declaration order)

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
  logic [127:0] key_skew0 = 128'h0011_2233_4455_6677_8899_aabb_ccdd_eeff;
  logic [127:0] key_skew1 = 128'hf0e1_d2c3_b4a5_9687_7869_5a4b_3c2d_1e0f;
  int           n_rd_stalls, n_wb_stalls;

  mirage_llc #(.SETS(SETS), .WAYS(WAYS), .DATA_SETS(DATA_SETS), .DATA_WAYS(DATA_WAYS)) dut (.*);

  dram_model u_mem (
    .clk, .rst_n,
    .rd_valid(mem_rd_valid), .rd_ready(mem_rd_ready), .rd_addr(mem_rd_addr),
    .rd_resp_valid(mem_rd_resp_valid), .rd_resp_data(mem_rd_resp_data),
    .wb_valid(mem_wb_valid), .wb_ready(mem_wb_ready), .wb_addr(mem_wb_addr),
    .wb_data(mem_wb_data), .n_rd_stalls(n_rd_stalls), .n_wb_stalls(n_wb_stalls)
  );

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // ---------------- reference model ----------------
  typedef struct { line_t data; bit dirty; } line_rec_t;
  line_rec_t model [logic [47:0]];
  typedef struct { line_addr_t addr; line_t data; } wb_rec_t;
  wb_rec_t   wb_q [$];
  logic [47:0] cur_key;
  bit          in_flight;

  int n_gle = 0, n_sae = 0, n_flush_ev = 0, n_wb = 0, n_rhit = 0, n_whit = 0, n_miss = 0;
  int n_warm = 0, n_reuse = 0, n_tie = 0, n_choice = 0, n_dup = 0, n_flush_miss = 0;

  // evictions and write-backs, observed every cycle
  always @(posedge clk) if (rst_n) begin
    if (evict_valid) begin
      logic [47:0] k;
      k = {evict_sdid, evict_addr};
      unique case (evict_kind)
        EV_GLE:   n_gle++;
        EV_SAE:   n_sae++;
        EV_FLUSH: n_flush_ev++;
        default:  check(0, "eviction of kind NONE reported");
      endcase
      check(model.exists(k), $sformatf("evicted line %h not resident", k));
      if (evict_kind != EV_FLUSH) check(k != cur_key, "evicted the line being installed");
      if (model.exists(k)) begin
        if (model[k].dirty) wb_q.push_back('{addr: evict_addr, data: model[k].data});
        model.delete(k);
      end
    end
    if (mem_wb_valid && mem_wb_ready) begin
      n_wb++;
      check(wb_q.size() > 0, "unexpected write-back");
      if (wb_q.size() > 0) begin
        wb_rec_t r;
        r = wb_q.pop_front();
        check(r.addr == mem_wb_addr && r.data == mem_wb_data, "write-back address/data");
      end
    end
    // internal events, counted only (their effects are checked via the model)
    if (dut.u_ctrl.u_lookup.check_en && !dut.u_ctrl.lk_hit &&
        dut.u_ctrl.op_q != OP_FLUSH && !dut.u_ctrl.sel_sae) begin
      if (dut.u_ctrl.sel_tie) n_tie++; else n_choice++;
      if (!dut.u_ctrl.fill_done) n_warm++;
    end
    if (int'(dut.u_ctrl.state_q) == ST_VIC_RD && dut.u_ctrl.vic_kind_q == EV_GLE &&
        dut.ds_rd_rptr[1:0] == 2'b11) n_reuse++;
  end

  // ---------------- request driver ----------------
  task automatic do_req(input op_e op, input line_addr_t a, input sdid_t s, input line_t wd);
    logic [47:0] k;
    bit exp_hit;
    line_t exp_data;
    int lat;
    k = {s, a};
    @(negedge clk);
    while (!req_ready) @(negedge clk);
    req_valid = 1; req_op = op; req_addr = a; req_sdid = s; req_wdata = wd;
    cur_key = k;
    exp_hit = model.exists(k);
    exp_data = exp_hit ? model[k].data : u_mem.peek(a);
    @(negedge clk);
    req_valid = 0;
    lat = 1;
    while (!resp_valid) begin @(negedge clk); lat++; if (lat > 500) break; end
    check(resp_valid, "no response");
    check(resp_hit == exp_hit, $sformatf("hit=%0d expected %0d op %0d key %h", resp_hit, exp_hit, op, k));
    check(resp_op == op, "response op");
    if (op == OP_READ) check(resp_rdata == exp_data, $sformatf("read data key %h", k));
    if (exp_hit && op != OP_FLUSH) check(lat == HIT_LAT, $sformatf("hit latency %0d", lat));
    // update the model
    unique case (op)
      OP_READ: begin
        if (exp_hit) n_rhit++;
        else begin
          n_miss++;
          model[k] = '{data: exp_data, dirty: 0};
        end
      end
      OP_WRITE: begin
        if (exp_hit) n_whit++; else n_miss++;
        model[k] = '{data: wd, dirty: 1};
      end
      default: if (!exp_hit) n_flush_miss++;     // flush: the hit case left via the evict port
    endcase
    check(model.size() <= ENTRIES, "more lines resident than data entries");
    @(negedge clk);   // let a flush write-back, if any, drain into the model checks
    cur_key = '1;
  endtask

  function automatic line_t rand_line();
    line_t l;
    for (int i = 0; i < LINE_W / 32; i++) l[32*i +: 32] = $urandom;
    return l;
  endfunction

  initial begin
    req_valid = 0; req_op = OP_READ; req_addr = '0; req_sdid = '0; req_wdata = '0;
    cur_key = '1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // per-domain duplication: the same address read by two domains is two lines
    do_req(OP_READ, 40'h77, 8'd1, '0);
    do_req(OP_READ, 40'h77, 8'd2, '0);
    check(model.exists({8'd1, 40'h77}) && model.exists({8'd2, 40'h77}), "duplicate copies");
    n_dup++;
    for (int i = 0; i < NREQ; i++) begin
      int r;
      op_e op;
      sdid_t s;
      line_addr_t a;
      r = $urandom_range(99);
      if (r < 60)      op = OP_READ;
      else if (r < 88) op = OP_WRITE;
      else             op = OP_FLUSH;
      // writable lines belong to domain 0; read-only lines are shared by domains 0-2
      if (op == OP_READ && $urandom_range(3) == 0) begin
        s = 8'($urandom_range(2));
        a = 40'h100 + 40'($urandom_range(5));
      end else begin
        s = 8'd0;
        a = 40'h200 + 40'($urandom_range(13));
      end
      do_req(op, a, s, rand_line());
    end
    repeat (20) @(negedge clk);
    check(wb_q.size() == 0, "write-backs missing");
    check(int'(sae_count) == n_sae, "sae_count");
    $display("mechanisms: rd_hit=%0d wr_hit=%0d miss=%0d warmup=%0d gle=%0d sae=%0d flush=%0d flush_miss=%0d",
             n_rhit, n_whit, n_miss, n_warm, n_gle, n_sae, n_flush_ev, n_flush_miss);
    $display("            writeback=%0d reuse_free=%0d tie=%0d load_aware=%0d rd_stall=%0d wb_stall=%0d dup=%0d",
             n_wb, n_reuse, n_tie, n_choice, n_rd_stalls, n_wb_stalls, n_dup);
    check(n_rhit > 0, "no read hit");       check(n_whit > 0, "no write hit");
    check(n_warm > 0, "no warm-up fill");   check(n_gle > 0, "no global eviction");
    check(n_sae > 0, "no SAE");             check(n_flush_ev > 0, "no flush");
    check(n_flush_miss > 0, "no flush miss"); check(n_wb > 0, "no write-back");
    check(n_reuse > 0, "no reuse of a freed entry");
    check(n_tie > 0, "no skew tie");        check(n_choice > 0, "no load-aware choice");
    check(n_rd_stalls > 0, "no read stall"); check(n_wb_stalls > 0, "no write-back stall");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
