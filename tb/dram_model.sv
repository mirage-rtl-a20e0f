// dram_model: behavioural main memory for the cache testbenches (not part of
// the design). It accepts one line read at a time, answers after a random
// latency of MIN_LAT..MAX_LAT cycles, and accepts write-backs; ready signals
// drop at random so that the cache sees back-pressure. A line never written
// reads as a pattern derived from its address (init_line).
module dram_model
  import mirage_pkg::*;
#(
  parameter int MIN_LAT = 4,
  parameter int MAX_LAT = 16,
  parameter int STALL_PCT = 25
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rd_valid,
  output logic       rd_ready,
  input  line_addr_t rd_addr,
  output logic       rd_resp_valid,
  output line_t      rd_resp_data,
  input  logic       wb_valid,
  output logic       wb_ready,
  input  line_addr_t wb_addr,
  input  line_t      wb_data,
  output int         n_rd_stalls,
  output int         n_wb_stalls
);

  line_t      mem [line_addr_t];
  bit         busy;
  int         cnt;
  line_addr_t addr_q;

  function automatic line_t init_line(line_addr_t a);
    line_t l;
    for (int i = 0; i < LINE_W / 64; i++) l[64*i +: 64] = {24'(i), a} ^ 64'hA5A5_0000_5A5A_0000;
    return l;
  endfunction

  function automatic line_t peek(line_addr_t a);
    return mem.exists(a) ? mem[a] : init_line(a);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 0; rd_ready <= 0; wb_ready <= 0; rd_resp_valid <= 0; cnt <= 0;
      n_rd_stalls <= 0; n_wb_stalls <= 0;
    end else begin
      rd_ready <= !busy && ($urandom_range(99) >= STALL_PCT);
      wb_ready <= ($urandom_range(99) >= STALL_PCT);
      rd_resp_valid <= 1'b0;
      if (rd_valid && !rd_ready) n_rd_stalls <= n_rd_stalls + 1;
      if (wb_valid && !wb_ready) n_wb_stalls <= n_wb_stalls + 1;
      if (rd_valid && rd_ready && !busy) begin
        busy   <= 1'b1;
        addr_q <= rd_addr;
        cnt    <= $urandom_range(MAX_LAT, MIN_LAT);
        rd_ready <= 1'b0;
      end else if (busy) begin
        if (cnt <= 1) begin
          busy <= 1'b0;
          rd_resp_valid <= 1'b1;
          rd_resp_data  <= peek(addr_q);
        end else cnt <= cnt - 1;
      end
      if (wb_valid && wb_ready) mem[wb_addr] = wb_data;
    end
  end

endmodule
