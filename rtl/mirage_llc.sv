// mirage_llc: the Mirage last-level cache (top level).
//
// Mirage gives a last-level cache the eviction behaviour of a fully
// associative cache with random replacement - every miss evicts a line
// drawn at random from the whole cache, so an eviction says nothing about
// the address that caused it and no eviction set can be built - while a
// lookup still reads only two small sets. Three mechanisms make this work:
//  1. indirection: tags point into a separate data-store (FPTR) and data
//     entries point back at their tags (RPTR), so the data victim can be
//     chosen globally (data_store, mirage_ctrl);
//  2. a skewed tag-store of two skews, each indexed through PRINCE with its
//     own secret key, with 6 extra ways per set (set_index_hash,
//     tag_store_skew);
//  3. load-aware skew selection, installing in whichever indexed set has
//     more invalid tags, which keeps invalid tags available everywhere
//     (skew_select).
//
// Default size: 16 MB of 64-byte lines = 262,144 data entries (16,384 sets
// x 16 ways for the FPTR decode) and a tag-store of 2 skews x 16,384 sets x
// 14 ways = 458,752 tag entries, 75% more tags than data entries.
//
// Interface: valid/ready request port (read, full-line write, flush) and a
// one-cycle response pulse; a memory read channel (request valid/ready, a
// response pulse with the line) and a write-back channel (valid/ready);
// evict_* reports each line removed (global, set-associative or flush
// eviction) so an inclusive hierarchy can back-invalidate the upper levels;
// sae_count counts set-associative evictions. The two 128-bit skew keys are
// inputs: the paper recommends generating them at boot inside the cache
// controller, and the generator is not part of this design. Changing a key
// requires a cache flush, which is left to the system.
//
// Timing: a hit answers 5 cycles after its request is accepted (3 cycles of
// cipher, 1 tag-store read, 1 data-store read); misses add the memory
// latency and, when an eviction is needed, a few cycles of RPTR handling
// that overlap the memory read. One request is served at a time.
module mirage_llc
  import mirage_pkg::*;
#(
  parameter int unsigned SETS      = 16384,   // sets per skew
  parameter int unsigned WAYS      = 14,      // ways per skew (8 base + 6 extra)
  parameter int unsigned DATA_SETS = 16384,   // data-store sets
  parameter int unsigned DATA_WAYS = 16,      // data-store ways (FPTR low bits)
  parameter int unsigned MAX_RELOC = 0,       // cuckoo relocation attempts (0 = default Mirage)
  parameter logic [63:0] PRNG_SEED = 64'h9E3779B97F4A7C15,
  localparam int unsigned SET_W    = $clog2(SETS),
  localparam int unsigned WAY_W    = $clog2(WAYS),
  localparam int unsigned FPTR_W   = $clog2(DATA_SETS) + $clog2(DATA_WAYS),
  localparam int unsigned RPTR_W   = 1 + SET_W + WAY_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [127:0] key_skew0,
  input  logic [127:0] key_skew1,
  input  logic         req_valid,
  output logic         req_ready,
  input  op_e          req_op,
  input  line_addr_t   req_addr,
  input  sdid_t        req_sdid,
  input  line_t        req_wdata,
  output logic         resp_valid,
  output op_e          resp_op,
  output logic         resp_hit,
  output line_t        resp_rdata,
  output logic         mem_rd_valid,
  input  logic         mem_rd_ready,
  output line_addr_t   mem_rd_addr,
  input  logic         mem_rd_resp_valid,
  input  line_t        mem_rd_resp_data,
  output logic         mem_wb_valid,
  input  logic         mem_wb_ready,
  output line_addr_t   mem_wb_addr,
  output line_t        mem_wb_data,
  output logic         evict_valid,
  output evict_e       evict_kind,
  output line_addr_t   evict_addr,
  output sdid_t        evict_sdid,
  output logic [31:0]  sae_count
);

  logic [127:0] keys [NUM_SKEWS];
  assign keys[0] = key_skew0;
  assign keys[1] = key_skew1;

  logic             hash_valid, idx_valid;
  line_addr_t       hash_addr;
  sdid_t            hash_sdid;
  logic [SET_W-1:0] idx [NUM_SKEWS];
  logic [0:0]       hash_user;

  set_index_hash #(.SET_W(SET_W), .USER_W(1)) u_hash (
    .clk      (clk),
    .rst_n    (rst_n),
    .key      (keys),
    .in_valid (hash_valid),
    .in_addr  (hash_addr),
    .in_sdid  (hash_sdid),
    .in_user  (1'b0),
    .idx_valid(idx_valid),
    .idx      (idx),
    .out_user (hash_user)
  );

  logic [63:0] rnd;
  prng #(.SEED(PRNG_SEED)) u_prng (
    .clk   (clk),
    .rst_n (rst_n),
    .en    (1'b1),
    .rnd   (rnd)
  );

  logic              ts_rd_en    [NUM_SKEWS];
  logic [SET_W-1:0]  ts_rd_set   [NUM_SKEWS];
  line_addr_t        ts_rd_tag   [NUM_SKEWS][WAYS];
  logic              ts_rd_dirty [NUM_SKEWS][WAYS];
  logic [FPTR_W-1:0] ts_rd_fptr  [NUM_SKEWS][WAYS];
  sdid_t             ts_rd_sdid  [NUM_SKEWS][WAYS];
  logic [WAYS-1:0]   ts_rd_valid [NUM_SKEWS];
  logic              ts_wr_en    [NUM_SKEWS];
  logic [SET_W-1:0]  ts_wr_set;
  logic [WAY_W-1:0]  ts_wr_way;
  logic              ts_wr_valid, ts_wr_dirty;
  line_addr_t        ts_wr_tag;
  logic [FPTR_W-1:0] ts_wr_fptr;
  sdid_t             ts_wr_sdid;

  for (genvar s = 0; s < NUM_SKEWS; s++) begin : g_skew
    tag_store_skew #(.SETS(SETS), .WAYS(WAYS), .FPTR_W(FPTR_W)) u_tags (
      .clk      (clk),
      .rst_n    (rst_n),
      .rd_en    (ts_rd_en[s]),
      .rd_set   (ts_rd_set[s]),
      .rd_tag   (ts_rd_tag[s]),
      .rd_dirty (ts_rd_dirty[s]),
      .rd_fptr  (ts_rd_fptr[s]),
      .rd_sdid  (ts_rd_sdid[s]),
      .rd_valid (ts_rd_valid[s]),
      .wr_en    (ts_wr_en[s]),
      .wr_set   (ts_wr_set),
      .wr_way   (ts_wr_way),
      .wr_valid (ts_wr_valid),
      .wr_dirty (ts_wr_dirty),
      .wr_tag   (ts_wr_tag),
      .wr_fptr  (ts_wr_fptr),
      .wr_sdid  (ts_wr_sdid)
    );
  end

  logic              ds_rd_en, ds_wr_en, ds_wr_data_en;
  logic [FPTR_W-1:0] ds_rd_fptr, ds_wr_fptr;
  line_t             ds_rd_data, ds_wr_data;
  logic [RPTR_W-1:0] ds_rd_rptr, ds_wr_rptr;

  data_store #(.DATA_SETS(DATA_SETS), .DATA_WAYS(DATA_WAYS), .RPTR_W(RPTR_W)) u_data (
    .clk       (clk),
    .rd_en     (ds_rd_en),
    .rd_fptr   (ds_rd_fptr),
    .rd_data   (ds_rd_data),
    .rd_rptr   (ds_rd_rptr),
    .wr_en     (ds_wr_en),
    .wr_data_en(ds_wr_data_en),
    .wr_fptr   (ds_wr_fptr),
    .wr_data   (ds_wr_data),
    .wr_rptr   (ds_wr_rptr)
  );

  mirage_ctrl #(.SETS(SETS), .WAYS(WAYS), .DATA_SETS(DATA_SETS), .DATA_WAYS(DATA_WAYS),
                .MAX_RELOC(MAX_RELOC)) u_ctrl (
    .clk, .rst_n,
    .req_valid, .req_ready, .req_op, .req_addr, .req_sdid, .req_wdata,
    .resp_valid, .resp_op, .resp_hit, .resp_rdata,
    .mem_rd_valid, .mem_rd_ready, .mem_rd_addr, .mem_rd_resp_valid, .mem_rd_resp_data,
    .mem_wb_valid, .mem_wb_ready, .mem_wb_addr, .mem_wb_data,
    .evict_valid, .evict_kind, .evict_addr, .evict_sdid, .sae_count,
    .hash_valid, .hash_addr, .hash_sdid, .idx_valid, .idx,
    .rnd,
    .ts_rd_en, .ts_rd_set, .ts_rd_tag, .ts_rd_dirty, .ts_rd_fptr, .ts_rd_sdid, .ts_rd_valid,
    .ts_wr_en, .ts_wr_set, .ts_wr_way, .ts_wr_valid, .ts_wr_dirty, .ts_wr_tag, .ts_wr_fptr,
    .ts_wr_sdid,
    .ds_rd_en, .ds_rd_fptr, .ds_rd_data, .ds_rd_rptr,
    .ds_wr_en, .ds_wr_data_en, .ds_wr_fptr, .ds_wr_data, .ds_wr_rptr
  );

endmodule
