// data_store: the global data-store of Mirage.
//
// Data entries are not tied to tag positions: any tag entry in either skew
// can point at any data entry through its forward pointer (FPTR), and each
// data entry records the tag that owns it in a reverse pointer (RPTR). This
// decoupling is what lets a miss evict a data entry chosen at random from
// the entire cache (a global eviction) and then find and invalidate that
// entry's tag through the RPTR.
//
// Organisation (follows the paper's lookup circuit): the FPTR's low
// $clog2(DATA_WAYS) bits go through a 4-to-16 decoder that enables one of
// DATA_WAYS way banks, the remaining bits are the set index inside the bank.
// Each entry is a 512-bit line plus a 19-bit RPTR = {skew, set, way}. The
// RPTR is "invalid" when its way field is all ones, a code no real way uses
// (this needs WAYS < 2**WAY_W, true for 14 ways in a 4-bit field); that
// encoding is this design's choice.
//
// Timing: synchronous read, rd_data/rd_rptr valid the cycle after rd_en.
// One write port: wr_en writes the RPTR, and the line too when wr_data_en.
module data_store
  import mirage_pkg::*;
#(
  parameter int unsigned DATA_SETS = 16384,
  parameter int unsigned DATA_WAYS = 16,
  parameter int unsigned RPTR_W    = 19,
  localparam int unsigned DWAY_W   = $clog2(DATA_WAYS),
  localparam int unsigned DSET_W   = $clog2(DATA_SETS),
  localparam int unsigned FPTR_W   = DSET_W + DWAY_W
) (
  input  logic               clk,
  input  logic               rd_en,
  input  logic [FPTR_W-1:0]  rd_fptr,
  output line_t              rd_data,
  output logic [RPTR_W-1:0]  rd_rptr,
  input  logic               wr_en,
  input  logic               wr_data_en,
  input  logic [FPTR_W-1:0]  wr_fptr,
  input  line_t              wr_data,
  input  logic [RPTR_W-1:0]  wr_rptr
);

  // 4-to-16 (generally DWAY_W-to-DATA_WAYS) way decoders.
  logic [DATA_WAYS-1:0] rd_way_oh, wr_way_oh, rd_way_oh_q;
  always_comb begin
    rd_way_oh = '0;
    wr_way_oh = '0;
    rd_way_oh[rd_fptr[DWAY_W-1:0]] = 1'b1;
    wr_way_oh[wr_fptr[DWAY_W-1:0]] = 1'b1;
  end

  logic [DSET_W-1:0] rd_set, wr_set;
  assign rd_set = rd_fptr[FPTR_W-1:DWAY_W];
  assign wr_set = wr_fptr[FPTR_W-1:DWAY_W];

  line_t             bank_data [DATA_WAYS];
  logic [RPTR_W-1:0] bank_rptr [DATA_WAYS];

  for (genvar b = 0; b < DATA_WAYS; b++) begin : g_bank
    line_t             dmem [DATA_SETS];
    logic [RPTR_W-1:0] rmem [DATA_SETS];
    line_t             dq;
    logic [RPTR_W-1:0] rq;
    always_ff @(posedge clk) begin
      if (wr_en && wr_way_oh[b]) begin
        rmem[wr_set] <= wr_rptr;
        if (wr_data_en) dmem[wr_set] <= wr_data;
      end
      if (rd_en && rd_way_oh[b]) begin
        dq <= dmem[rd_set];
        rq <= rmem[rd_set];
      end
    end
    assign bank_data[b] = dq;
    assign bank_rptr[b] = rq;
  end

  always_ff @(posedge clk) if (rd_en) rd_way_oh_q <= rd_way_oh;

  // AND-OR output selection of the bank that was read.
  always_comb begin
    rd_data = '0;
    rd_rptr = '0;
    for (int b = 0; b < DATA_WAYS; b++) begin
      rd_data |= bank_data[b] & {LINE_W{rd_way_oh_q[b]}};
      rd_rptr |= bank_rptr[b] & {RPTR_W{rd_way_oh_q[b]}};
    end
  end

endmodule
