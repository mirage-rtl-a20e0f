// tag_store_skew: one skew of the Mirage tag-store.
//
// A skew holds SETS sets of WAYS tag entries. Compared with a conventional
// 8-way-per-skew split of a 16-way cache, each set carries extra ways (6 in
// the default 8+6 = 14), so that an incoming line nearly always finds an
// invalid tag and never has to evict from its own set. Each entry holds the
// full 40-bit line address as tag (needed to rebuild write-back addresses
// because the set index is a cipher output), a dirty bit, the forward
// pointer FPTR to its data entry and the SDID of the domain that installed
// it. Valid bits are kept apart in flip-flops so that reset clears them and
// a whole set's valid vector is available to the skew-selection logic.
//
// Interface and timing (this design's choices): a synchronous read port
// (rd_en, rd_set) delivers the whole set - entries and valid bits - on the
// cycle after the request; one write port writes one way (entry and its
// valid bit) at the clock edge. A read and a write to the same set in the
// same cycle return the old contents.
module tag_store_skew
  import mirage_pkg::*;
#(
  parameter int unsigned SETS   = 16384,
  parameter int unsigned WAYS   = 14,
  parameter int unsigned FPTR_W = 18,
  localparam int unsigned SET_W = $clog2(SETS),
  localparam int unsigned WAY_W = $clog2(WAYS)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // read port
  input  logic                 rd_en,
  input  logic [SET_W-1:0]     rd_set,
  output line_addr_t           rd_tag   [WAYS],
  output logic                 rd_dirty [WAYS],
  output logic [FPTR_W-1:0]    rd_fptr  [WAYS],
  output sdid_t                rd_sdid  [WAYS],
  output logic [WAYS-1:0]      rd_valid,
  // write port
  input  logic                 wr_en,
  input  logic [SET_W-1:0]     wr_set,
  input  logic [WAY_W-1:0]     wr_way,
  input  logic                 wr_valid,
  input  logic                 wr_dirty,
  input  line_addr_t           wr_tag,
  input  logic [FPTR_W-1:0]    wr_fptr,
  input  sdid_t                wr_sdid
);

  typedef struct packed {
    line_addr_t        tag;
    logic              dirty;
    logic [FPTR_W-1:0] fptr;
    sdid_t             sdid;
  } entry_t;

  entry_t          mem     [SETS][WAYS];
  logic [WAYS-1:0] valid_q [SETS];

  entry_t          rd_q [WAYS];
  logic [WAYS-1:0] rd_valid_q;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_set][wr_way] <= '{tag: wr_tag, dirty: wr_dirty, fptr: wr_fptr, sdid: wr_sdid};
    if (rd_en) rd_q <= mem[rd_set];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) valid_q[s] <= '0;
      rd_valid_q <= '0;
    end else begin
      if (wr_en) valid_q[wr_set][wr_way] <= wr_valid;
      if (rd_en) rd_valid_q <= valid_q[rd_set];
    end
  end

  for (genvar w = 0; w < WAYS; w++) begin : g_out
    assign rd_tag[w]   = rd_q[w].tag;
    assign rd_dirty[w] = rd_q[w].dirty;
    assign rd_fptr[w]  = rd_q[w].fptr;
    assign rd_sdid[w]  = rd_q[w].sdid;
  end
  assign rd_valid = rd_valid_q;

  // A write addresses an existing way.
  assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> (32'(wr_way) < WAYS));

endmodule
