// tb_tag_store_skew: random writes and reads against a model kept in the
// testbench; checks that reset clears all valid bits, that reads return the
// whole set one cycle later, and that a write touches only its own way.
module tb_tag_store_skew;
  import mirage_pkg::*;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int SETS = 8, WAYS = 3, FPTR_W = 5;
  localparam int SET_W = $clog2(SETS), WAY_W = $clog2(WAYS);

  logic              rd_en, wr_en, wr_valid, wr_dirty;
  logic [SET_W-1:0]  rd_set, wr_set;
  logic [WAY_W-1:0]  wr_way;
  line_addr_t        rd_tag [WAYS];
  logic              rd_dirty [WAYS];
  logic [FPTR_W-1:0] rd_fptr [WAYS];
  sdid_t             rd_sdid [WAYS];
  logic [WAYS-1:0]   rd_valid;
  line_addr_t        wr_tag;
  logic [FPTR_W-1:0] wr_fptr;
  sdid_t             wr_sdid;

  tag_store_skew #(.SETS(SETS), .WAYS(WAYS), .FPTR_W(FPTR_W)) dut (.*);

  typedef struct { bit v; bit d; line_addr_t t; logic [FPTR_W-1:0] f; sdid_t s; } ent_t;
  ent_t model [SETS][WAYS];

  task automatic do_read(input int s);
    @(negedge clk);
    rd_en = 1; rd_set = SET_W'(s);
    @(negedge clk);
    rd_en = 0;
    for (int w = 0; w < WAYS; w++) begin
      checks++;
      if (rd_valid[w] != model[s][w].v ||
          (model[s][w].v && (rd_tag[w] != model[s][w].t || rd_dirty[w] != model[s][w].d ||
                             rd_fptr[w] != model[s][w].f || rd_sdid[w] != model[s][w].s))) begin
        failures++;
        $display("FAIL: set %0d way %0d", s, w);
      end
    end
  endtask

  initial begin
    rd_en = 0; wr_en = 0; rd_set = 0; wr_set = 0; wr_way = 0; wr_valid = 0; wr_dirty = 0;
    wr_tag = 0; wr_fptr = 0; wr_sdid = 0;
    foreach (model[s, w]) model[s][w] = '{v: 0, d: 0, t: 0, f: 0, s: 0};
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < SETS; s++) do_read(s);
    for (int i = 0; i < 300; i++) begin
      int s, w;
      s = $urandom_range(SETS - 1);
      w = $urandom_range(WAYS - 1);
      @(negedge clk);
      wr_en = 1; wr_set = SET_W'(s); wr_way = WAY_W'(w);
      wr_valid = ($urandom_range(3) != 0); wr_dirty = 1'($urandom);
      wr_tag = {8'h0, 32'($urandom)}; wr_fptr = FPTR_W'($urandom); wr_sdid = 8'($urandom);
      model[s][w] = '{v: wr_valid, d: wr_dirty, t: wr_tag, f: wr_fptr, s: wr_sdid};
      @(negedge clk);
      wr_en = 0;
      do_read($urandom_range(SETS - 1));
    end
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
