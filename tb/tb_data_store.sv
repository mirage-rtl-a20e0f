// tb_data_store: random writes (with and without the line) and reads of a
// small data-store against a model; checks the one-cycle read latency and
// that the FPTR's low bits select the way bank.
module tb_data_store;
  import mirage_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int DATA_SETS = 4, DATA_WAYS = 4, RPTR_W = 7;
  localparam int FPTR_W = 4, N = DATA_SETS * DATA_WAYS;

  logic              rd_en, wr_en, wr_data_en;
  logic [FPTR_W-1:0] rd_fptr, wr_fptr;
  line_t             rd_data, wr_data;
  logic [RPTR_W-1:0] rd_rptr, wr_rptr;

  data_store #(.DATA_SETS(DATA_SETS), .DATA_WAYS(DATA_WAYS), .RPTR_W(RPTR_W)) dut (.*);

  line_t             mdata [N];
  logic [RPTR_W-1:0] mrptr [N];

  function automatic line_t rand_line();
    line_t l;
    for (int i = 0; i < LINE_W / 32; i++) l[32*i +: 32] = $urandom;
    return l;
  endfunction

  task automatic do_read(input int f);
    @(negedge clk);
    rd_en = 1; rd_fptr = FPTR_W'(f);
    @(negedge clk);
    rd_en = 0;
    checks++;
    if (rd_data != mdata[f] || rd_rptr != mrptr[f]) begin
      failures++;
      $display("FAIL: entry %0d", f);
    end
  endtask

  initial begin
    rd_en = 0; wr_en = 0; wr_data_en = 0; rd_fptr = 0; wr_fptr = 0; wr_data = '0; wr_rptr = 0;
    // fill every entry once with distinct contents
    for (int f = 0; f < N; f++) begin
      @(negedge clk);
      wr_en = 1; wr_data_en = 1; wr_fptr = FPTR_W'(f);
      wr_data = rand_line(); wr_rptr = RPTR_W'($urandom);
      mdata[f] = wr_data; mrptr[f] = wr_rptr;
    end
    @(negedge clk);
    wr_en = 0;
    for (int f = 0; f < N; f++) do_read(f);
    for (int i = 0; i < 200; i++) begin
      int f;
      f = $urandom_range(N - 1);
      @(negedge clk);
      wr_en = 1; wr_data_en = 1'($urandom); wr_fptr = FPTR_W'(f);
      wr_data = rand_line(); wr_rptr = RPTR_W'($urandom);
      if (wr_data_en) mdata[f] = wr_data;
      mrptr[f] = wr_rptr;
      @(negedge clk);
      wr_en = 0;
      do_read($urandom_range(N - 1));
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
