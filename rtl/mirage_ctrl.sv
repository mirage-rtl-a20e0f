// mirage_ctrl: cache controller of the Mirage last-level cache.
//
// The controller serves one request at a time and sequences the lookup,
// the eviction and the install over the hash unit, the two tag-store skews
// and the data-store. It contains the hit logic (fptr_lookup) and the
// load-aware skew selection (skew_select).
//
// Lookup: the line address and SDID are hashed (3 cycles), both indexed sets
// are read (1 cycle) and compared; on a hit the FPTR of the hitting way reads
// the data entry (1 cycle). A read hit therefore answers 5 cycles after the
// request is accepted: 3 for the cipher and 2 for the serial tag and data
// access. Writes (full-line write-backs from the level above) hit in the same
// time and set the dirty bit.
//
// Miss: the memory read is issued at once and the eviction is done while it
// is outstanding. Skew selection picks the skew whose indexed set has more
// invalid tags and an invalid way in it. The data entry for the new line is
//  - during warm-up, the next never-used entry (a fill counter);
//  - afterwards, an entry drawn uniformly at random from the entire
//    data-store (global eviction, GLE): its RPTR names the owning tag, which
//    is read, written back if dirty and invalidated; an entry whose RPTR is
//    already invalid (freed by a flush) is reused without eviction;
//  - if both indexed sets are full, a set-associative eviction (SAE): a
//    random valid tag of the indexed sets is evicted and its data entry
//    reused. SAEs are counted (sae_count), since in normal operation they do
//    not occur and several of them point at a leaked mapping.
// Cuckoo relocation (MAX_RELOC > 0, for designs with fewer extra tags):
// before an SAE, a random line of the two full sets is hashed again to find
// its set in the other skew; if that set has an invalid tag the line moves
// there (tag copied, RPTR updated) and the new line takes its old tag. Up to
// MAX_RELOC candidates are tried, then the SAE is made. The default
// configuration, with 6 extra ways per skew, needs none (MAX_RELOC = 0).
// Flush: a hit is written back if dirty and its tag and RPTR invalidated.
// Every eviction is reported on the evict_* outputs, for the back-
// invalidation an inclusive hierarchy needs.
//
// The paper states what the controller must do; the state machine, the
// single outstanding request, the warm-up fill counter and the port
// protocols (valid/ready requests, a one-cycle response pulse that cannot be
// refused, one outstanding memory read) are this design's choices.
//
// With MAX_RELOC = 0 the relocation path is removed by constant folding:
// hash_addr/hash_sdid are then simply req_addr/req_sdid, and the
// relocation-count comparison is constant false. Both are intended.
module mirage_ctrl
  import mirage_pkg::*;
#(
  parameter int unsigned SETS      = 16384,
  parameter int unsigned WAYS      = 14,
  parameter int unsigned DATA_SETS = 16384,
  parameter int unsigned DATA_WAYS = 16,
  parameter int unsigned MAX_RELOC = 0,       // cuckoo relocations tried before an SAE
  localparam int unsigned SET_W    = $clog2(SETS),
  localparam int unsigned WAY_W    = $clog2(WAYS),
  localparam int unsigned FPTR_W   = $clog2(DATA_SETS) + $clog2(DATA_WAYS),
  localparam int unsigned RPTR_W   = 1 + SET_W + WAY_W,
  localparam int unsigned CNT_W    = $clog2(WAYS + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  // request / response
  input  logic               req_valid,
  output logic               req_ready,
  input  op_e                req_op,
  input  line_addr_t         req_addr,
  input  sdid_t              req_sdid,
  input  line_t              req_wdata,
  output logic               resp_valid,
  output op_e                resp_op,
  output logic               resp_hit,
  output line_t              resp_rdata,
  // memory read (fill) channel
  output logic               mem_rd_valid,
  input  logic               mem_rd_ready,
  output line_addr_t         mem_rd_addr,
  input  logic               mem_rd_resp_valid,
  input  line_t              mem_rd_resp_data,
  // memory write-back channel
  output logic               mem_wb_valid,
  input  logic               mem_wb_ready,
  output line_addr_t         mem_wb_addr,
  output line_t              mem_wb_data,
  // eviction report
  output logic               evict_valid,
  output evict_e             evict_kind,
  output line_addr_t         evict_addr,
  output sdid_t              evict_sdid,
  output logic [31:0]        sae_count,
  // hash unit
  output logic               hash_valid,
  output line_addr_t         hash_addr,
  output sdid_t              hash_sdid,
  input  logic               idx_valid,
  input  logic [SET_W-1:0]   idx [NUM_SKEWS],
  // random bits
  input  logic [63:0]        rnd,
  // tag-store skews
  output logic               ts_rd_en   [NUM_SKEWS],
  output logic [SET_W-1:0]   ts_rd_set  [NUM_SKEWS],
  input  line_addr_t         ts_rd_tag  [NUM_SKEWS][WAYS],
  input  logic               ts_rd_dirty[NUM_SKEWS][WAYS],
  input  logic [FPTR_W-1:0]  ts_rd_fptr [NUM_SKEWS][WAYS],
  input  sdid_t              ts_rd_sdid [NUM_SKEWS][WAYS],
  input  logic [WAYS-1:0]    ts_rd_valid[NUM_SKEWS],
  output logic               ts_wr_en   [NUM_SKEWS],
  output logic [SET_W-1:0]   ts_wr_set,
  output logic [WAY_W-1:0]   ts_wr_way,
  output logic               ts_wr_valid,
  output logic               ts_wr_dirty,
  output line_addr_t         ts_wr_tag,
  output logic [FPTR_W-1:0]  ts_wr_fptr,
  output sdid_t              ts_wr_sdid,
  // data-store
  output logic               ds_rd_en,
  output logic [FPTR_W-1:0]  ds_rd_fptr,
  input  line_t              ds_rd_data,
  input  logic [RPTR_W-1:0]  ds_rd_rptr,
  output logic               ds_wr_en,
  output logic               ds_wr_data_en,
  output logic [FPTR_W-1:0]  ds_wr_fptr,
  output line_t              ds_wr_data,
  output logic [RPTR_W-1:0]  ds_wr_rptr
);

  localparam int unsigned DATA_ENTRIES = DATA_SETS * DATA_WAYS;
  localparam logic [RPTR_W-1:0] RPTR_INVALID = {{(1 + SET_W){1'b0}}, {WAY_W{1'b1}}};

  initial assert (WAYS < (1 << WAY_W))
    else $error("mirage_ctrl: WAYS must leave a spare way code for the invalid RPTR");

  typedef enum logic [3:0] {
    S_IDLE, S_HASH, S_TAG, S_HIT_RD, S_FL_RD, S_VIC_RD, S_VIC_TAG,
    S_WB, S_FILL, S_INSTALL, S_RESP,
    S_RL_HASH, S_RL_TAG, S_RL_MOVE, S_RL_CLR, S_REREAD
  } state_e;

  state_e state_q, state_d, wb_ret_q;

  // request
  op_e               op_q;
  line_addr_t        addr_q;
  sdid_t             sdid_q;
  line_t             wdata_q;
  logic [SET_W-1:0]  idx_q [NUM_SKEWS];
  // lookup result
  logic              hit_q, hit_skew_q, hit_dirty_q;
  logic [WAY_W-1:0]  hit_way_q;
  logic [FPTR_W-1:0] hit_fptr_q;
  // install location
  logic              ins_skew_q;
  logic [WAY_W-1:0]  ins_way_q;
  logic [FPTR_W-1:0] ins_fptr_q;
  // victim
  evict_e            vic_kind_q;
  line_addr_t        vic_addr_q;
  sdid_t             vic_sdid_q;
  logic              vic_dirty_q;
  logic              vic_skew_q;
  logic [SET_W-1:0]  vic_set_q;
  logic [WAY_W-1:0]  vic_way_q;
  line_t             wb_data_q;
  line_addr_t        wb_addr_q;
  // memory fill
  logic              rd_pend_q, rd_got_q;
  line_t             fill_q;
  line_t             resp_data_q;
  // warm-up
  logic [FPTR_W:0]   fill_cnt_q;
  logic [31:0]       sae_cnt_q;
  logic              rd_issued_q;
  // cuckoo relocation
  logic [7:0]        rl_cnt_q;
  logic              cand_skew_q, cand_dirty_q;
  logic [WAY_W-1:0]  cand_way_q, alt_way_q, alt_free_way;
  line_addr_t        cand_tag_q;
  sdid_t             cand_sdid_q;
  logic [FPTR_W-1:0] cand_fptr_q;
  logic [SET_W-1:0]  alt_set_q;
  logic              alt_has_free;
  logic              reloc_try;

  // ---------------- lookup and skew selection ----------------
  logic              lk_hit, lk_skew, lk_dirty;
  logic [WAY_W-1:0]  lk_way;
  logic [FPTR_W-1:0] lk_fptr;

  fptr_lookup #(.WAYS(WAYS), .FPTR_W(FPTR_W)) u_lookup (
    .clk      (clk),
    .check_en (state_q == S_TAG),
    .addr     (addr_q),
    .sdid     (sdid_q),
    .tag      (ts_rd_tag),
    .dirty    (ts_rd_dirty),
    .fptr     (ts_rd_fptr),
    .tsdid    (ts_rd_sdid),
    .valid    (ts_rd_valid),
    .hit      (lk_hit),
    .hit_skew (lk_skew),
    .hit_way  (lk_way),
    .hit_dirty(lk_dirty),
    .hit_fptr (lk_fptr)
  );

  logic [CNT_W-1:0] inv_cnt0, inv_cnt1;
  logic             sel_skew, sel_tie, sel_sae;
  logic [WAY_W-1:0] sel_way;

  skew_select #(.WAYS(WAYS)) u_skew_select (
    .valid0   (ts_rd_valid[0]),
    .valid1   (ts_rd_valid[1]),
    .rnd_tie  (rnd[63]),
    .rnd_way  (rnd[62:47]),
    .inv_cnt0 (inv_cnt0),
    .inv_cnt1 (inv_cnt1),
    .sel_skew (sel_skew),
    .sel_way  (sel_way),
    .tie      (sel_tie),
    .sae      (sel_sae)
  );

  logic fill_done;
  assign fill_done = (fill_cnt_q == (FPTR_W+1)'(DATA_ENTRIES));

  // RPTR fields of the data entry just read
  logic             rp_skew;
  logic [SET_W-1:0] rp_set;
  logic [WAY_W-1:0] rp_way;
  assign {rp_skew, rp_set, rp_way} = ds_rd_rptr;

  assign reloc_try = (32'(rl_cnt_q) < MAX_RELOC);

  // first invalid way of the alternative set read during a relocation
  always_comb begin
    alt_has_free = 1'b0;
    alt_free_way = '0;
    for (int w = WAYS - 1; w >= 0; w--)
      if (!ts_rd_valid[!cand_skew_q][w]) begin
        alt_has_free = 1'b1;
        alt_free_way = WAY_W'(w);
      end
  end

  line_t fill_line;
  assign fill_line = (op_q == OP_WRITE) ? wdata_q : fill_q;

  // ---------------- next state and datapath controls ----------------
  always_comb begin
    state_d       = state_q;
    req_ready     = (state_q == S_IDLE);
    hash_valid    = 1'b0;
    hash_addr     = req_addr;
    hash_sdid     = req_sdid;
    for (int s = 0; s < NUM_SKEWS; s++) begin
      ts_rd_en[s]  = 1'b0;
      ts_rd_set[s] = idx_q[s];
      ts_wr_en[s]  = 1'b0;
    end
    ts_wr_set     = idx_q[0];
    ts_wr_way     = '0;
    ts_wr_valid   = 1'b0;
    ts_wr_dirty   = 1'b0;
    ts_wr_tag     = addr_q;
    ts_wr_fptr    = '0;
    ts_wr_sdid    = sdid_q;
    ds_rd_en      = 1'b0;
    ds_rd_fptr    = hit_fptr_q;
    ds_wr_en      = 1'b0;
    ds_wr_data_en = 1'b0;
    ds_wr_fptr    = hit_fptr_q;
    ds_wr_data    = wdata_q;
    ds_wr_rptr    = RPTR_INVALID;
    resp_valid    = 1'b0;
    resp_hit      = hit_q;
    resp_rdata    = resp_data_q;
    mem_wb_valid  = 1'b0;
    evict_valid   = 1'b0;
    evict_kind    = vic_kind_q;
    evict_addr    = vic_addr_q;
    evict_sdid    = vic_sdid_q;

    unique case (state_q)
      S_IDLE: if (req_valid) begin
        hash_valid = 1'b1;
        state_d    = S_HASH;
      end

      S_HASH: if (idx_valid) begin
        for (int s = 0; s < NUM_SKEWS; s++) begin
          ts_rd_en[s]  = 1'b1;
          ts_rd_set[s] = idx[s];
        end
        state_d = S_TAG;
      end

      S_TAG: begin
        if (lk_hit) begin
          unique case (op_q)
            OP_READ, OP_FLUSH: begin
              ds_rd_en   = 1'b1;
              ds_rd_fptr = lk_fptr;
              state_d    = (op_q == OP_READ) ? S_HIT_RD : S_FL_RD;
            end
            default: begin   // OP_WRITE hit: update line, mark dirty
              ds_wr_en      = 1'b1;
              ds_wr_data_en = 1'b1;
              ds_wr_fptr    = lk_fptr;
              ds_wr_rptr    = {lk_skew, idx_q[lk_skew], lk_way};
              ts_wr_en[lk_skew] = 1'b1;
              ts_wr_set     = idx_q[lk_skew];
              ts_wr_way     = lk_way;
              ts_wr_valid   = 1'b1;
              ts_wr_dirty   = 1'b1;
              ts_wr_fptr    = lk_fptr;
              state_d       = S_RESP;
            end
          endcase
        end else if (op_q == OP_FLUSH) begin
          state_d = S_RESP;
        end else if (sel_sae && reloc_try) begin
          // cuckoo relocation: hash the candidate to find its other set
          hash_valid = 1'b1;
          hash_addr  = ts_rd_tag[sel_skew][sel_way];
          hash_sdid  = ts_rd_sdid[sel_skew][sel_way];
          state_d    = S_RL_HASH;
        end else if (sel_sae) begin
          ds_rd_en   = 1'b1;
          ds_rd_fptr = ts_rd_fptr[sel_skew][sel_way];
          state_d    = S_VIC_RD;
        end else if (!fill_done) begin
          state_d = S_FILL;
        end else begin
          ds_rd_en   = 1'b1;
          ds_rd_fptr = rnd[FPTR_W-1:0];
          state_d    = S_VIC_RD;
        end
      end

      S_HIT_RD: begin
        resp_valid = 1'b1;
        resp_hit   = 1'b1;
        resp_rdata = ds_rd_data;
        state_d    = S_IDLE;
      end

      S_FL_RD: begin
        // invalidate the tag and the RPTR of the flushed line
        ts_wr_en[hit_skew_q] = 1'b1;
        ts_wr_set   = idx_q[hit_skew_q];
        ts_wr_way   = hit_way_q;
        ts_wr_valid = 1'b0;
        ds_wr_en    = 1'b1;
        ds_wr_fptr  = hit_fptr_q;
        ds_wr_rptr  = RPTR_INVALID;
        evict_valid = 1'b1;
        evict_kind  = EV_FLUSH;
        evict_addr  = addr_q;
        evict_sdid  = sdid_q;
        state_d     = hit_dirty_q ? S_WB : S_RESP;
      end

      S_VIC_RD: begin
        if (vic_kind_q == EV_SAE) begin
          evict_valid = 1'b1;
          state_d     = vic_dirty_q ? S_WB : S_FILL;
        end else if (ds_rd_rptr[WAY_W-1:0] == {WAY_W{1'b1}}) begin
          state_d = S_FILL;          // entry already free
        end else begin
          ts_rd_en[rp_skew]  = 1'b1;
          ts_rd_set[rp_skew] = rp_set;
          state_d = S_VIC_TAG;
        end
      end

      S_VIC_TAG: begin
        ts_wr_en[vic_skew_q] = 1'b1;
        ts_wr_set   = vic_set_q;
        ts_wr_way   = vic_way_q;
        ts_wr_valid = 1'b0;
        evict_valid = 1'b1;
        evict_kind  = EV_GLE;
        evict_addr  = ts_rd_tag[vic_skew_q][vic_way_q];
        evict_sdid  = ts_rd_sdid[vic_skew_q][vic_way_q];
        state_d     = ts_rd_dirty[vic_skew_q][vic_way_q] ? S_WB : S_FILL;
      end

      S_WB: begin
        mem_wb_valid = 1'b1;
        if (mem_wb_ready) state_d = wb_ret_q;
      end

      S_FILL: if (op_q == OP_WRITE || rd_got_q) state_d = S_INSTALL;

      S_INSTALL: begin
        ts_wr_en[ins_skew_q] = 1'b1;
        ts_wr_set     = idx_q[ins_skew_q];
        ts_wr_way     = ins_way_q;
        ts_wr_valid   = 1'b1;
        ts_wr_dirty   = (op_q == OP_WRITE);
        ts_wr_fptr    = ins_fptr_q;
        ds_wr_en      = 1'b1;
        ds_wr_data_en = 1'b1;
        ds_wr_fptr    = ins_fptr_q;
        ds_wr_data    = fill_line;
        ds_wr_rptr    = {ins_skew_q, idx_q[ins_skew_q], ins_way_q};
        state_d       = S_RESP;
      end

      S_RESP: begin
        resp_valid = 1'b1;
        state_d    = S_IDLE;
      end

      S_RL_HASH: if (idx_valid) begin
        ts_rd_en[!cand_skew_q]  = 1'b1;
        ts_rd_set[!cand_skew_q] = idx[!cand_skew_q];
        state_d = S_RL_TAG;
      end

      S_RL_TAG: state_d = alt_has_free ? S_RL_MOVE : S_REREAD;

      S_RL_MOVE: begin
        // write the candidate into the free way of its other set and
        // point its data entry's RPTR there
        ts_wr_en[!cand_skew_q] = 1'b1;
        ts_wr_set     = alt_set_q;
        ts_wr_way     = alt_way_q;
        ts_wr_valid   = 1'b1;
        ts_wr_dirty   = cand_dirty_q;
        ts_wr_tag     = cand_tag_q;
        ts_wr_fptr    = cand_fptr_q;
        ts_wr_sdid    = cand_sdid_q;
        ds_wr_en      = 1'b1;
        ds_wr_fptr    = cand_fptr_q;
        ds_wr_rptr    = {!cand_skew_q, alt_set_q, alt_way_q};
        state_d       = S_RL_CLR;
      end

      S_RL_CLR: begin
        // free the candidate's old tag; the new line goes there
        ts_wr_en[cand_skew_q] = 1'b1;
        ts_wr_set   = idx_q[cand_skew_q];
        ts_wr_way   = cand_way_q;
        ts_wr_valid = 1'b0;
        if (!fill_done) begin
          state_d = S_FILL;
        end else begin
          ds_rd_en   = 1'b1;
          ds_rd_fptr = rnd[FPTR_W-1:0];
          state_d    = S_VIC_RD;
        end
      end

      S_REREAD: begin
        for (int s = 0; s < NUM_SKEWS; s++) ts_rd_en[s] = 1'b1;
        state_d = S_TAG;
      end

      default: state_d = S_IDLE;
    endcase
  end

  assign resp_op      = op_q;
  assign mem_rd_valid = rd_pend_q;
  assign mem_rd_addr  = addr_q;
  assign mem_wb_addr  = wb_addr_q;
  assign mem_wb_data  = wb_data_q;
  assign sae_count    = sae_cnt_q;

  // ---------------- state and datapath registers ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      wb_ret_q   <= S_RESP;
      rd_pend_q  <= 1'b0;
      rd_got_q   <= 1'b0;
      fill_cnt_q <= '0;
      sae_cnt_q  <= '0;
      rd_issued_q <= 1'b0;
      rl_cnt_q   <= '0;
      hit_q      <= 1'b0;
      op_q       <= OP_READ;
      vic_kind_q <= EV_NONE;
    end else begin
      state_q <= state_d;

      // memory read handshake, independent of the state so that the
      // eviction proceeds while the fill is outstanding
      if (rd_pend_q && mem_rd_ready) rd_pend_q <= 1'b0;
      if (mem_rd_resp_valid) rd_got_q <= 1'b1;

      unique case (state_q)
        S_IDLE: if (req_valid) begin
          op_q     <= req_op;
          addr_q   <= req_addr;
          sdid_q   <= req_sdid;
          wdata_q  <= req_wdata;
          rd_got_q <= 1'b0;
          rd_issued_q <= 1'b0;
          rl_cnt_q <= '0;
        end

        S_HASH: if (idx_valid) idx_q <= idx;

        S_TAG: begin
          hit_q       <= lk_hit;
          hit_skew_q  <= lk_skew;
          hit_way_q   <= lk_way;
          hit_dirty_q <= lk_dirty;
          hit_fptr_q  <= lk_fptr;
          wb_addr_q   <= addr_q;
          wb_ret_q    <= S_RESP;
          if (!lk_hit && op_q != OP_FLUSH) begin
            if (op_q == OP_READ && !rd_issued_q) begin
              rd_pend_q   <= 1'b1;
              rd_issued_q <= 1'b1;
            end
            ins_skew_q <= sel_skew;
            ins_way_q  <= sel_way;
            wb_ret_q   <= S_FILL;
            if (sel_sae && reloc_try) begin
              cand_skew_q  <= sel_skew;
              cand_way_q   <= sel_way;
              cand_tag_q   <= ts_rd_tag[sel_skew][sel_way];
              cand_sdid_q  <= ts_rd_sdid[sel_skew][sel_way];
              cand_dirty_q <= ts_rd_dirty[sel_skew][sel_way];
              cand_fptr_q  <= ts_rd_fptr[sel_skew][sel_way];
            end else if (sel_sae) begin
              vic_kind_q  <= EV_SAE;
              vic_addr_q  <= ts_rd_tag[sel_skew][sel_way];
              vic_sdid_q  <= ts_rd_sdid[sel_skew][sel_way];
              vic_dirty_q <= ts_rd_dirty[sel_skew][sel_way];
              wb_addr_q   <= ts_rd_tag[sel_skew][sel_way];
              ins_fptr_q  <= ts_rd_fptr[sel_skew][sel_way];
              sae_cnt_q   <= sae_cnt_q + 32'd1;
            end else if (!fill_done) begin
              vic_kind_q  <= EV_NONE;
              ins_fptr_q  <= fill_cnt_q[FPTR_W-1:0];
              fill_cnt_q  <= fill_cnt_q + 1'b1;
            end else begin
              vic_kind_q  <= EV_GLE;
              ins_fptr_q  <= rnd[FPTR_W-1:0];
            end
          end
        end

        S_VIC_RD: begin
          wb_data_q  <= ds_rd_data;
          vic_skew_q <= rp_skew;
          vic_set_q  <= rp_set;
          vic_way_q  <= rp_way;
        end

        S_FL_RD: wb_data_q <= ds_rd_data;

        S_VIC_TAG: wb_addr_q <= ts_rd_tag[vic_skew_q][vic_way_q];

        S_INSTALL: resp_data_q <= fill_line;

        S_RL_HASH: if (idx_valid) alt_set_q <= idx[!cand_skew_q];

        S_RL_TAG: begin
          alt_way_q <= alt_free_way;
          if (!alt_has_free) rl_cnt_q <= rl_cnt_q + 8'd1;
        end

        S_RL_CLR: begin
          if (!fill_done) begin
            vic_kind_q <= EV_NONE;
            ins_fptr_q <= fill_cnt_q[FPTR_W-1:0];
            fill_cnt_q <= fill_cnt_q + 1'b1;
          end else begin
            vic_kind_q <= EV_GLE;
            ins_fptr_q <= rnd[FPTR_W-1:0];
          end
        end

        default: ;
      endcase

      if (mem_rd_resp_valid) fill_q <= mem_rd_resp_data;
    end
  end

  // ---------------- protocol and consistency checks ----------------
  // A global-eviction victim's tag must be valid and point back at the entry.
  assert property (@(posedge clk) disable iff (!rst_n)
    state_q == S_VIC_TAG |-> ts_rd_valid[vic_skew_q][vic_way_q] &&
                             ts_rd_fptr[vic_skew_q][vic_way_q] == ins_fptr_q)
    else $error("mirage_ctrl: RPTR and FPTR disagree");
  // Write-back request is held until accepted.
  assert property (@(posedge clk) disable iff (!rst_n)
    mem_wb_valid && !mem_wb_ready |=> mem_wb_valid && $stable(mem_wb_addr));
  // A memory read is held until accepted.
  assert property (@(posedge clk) disable iff (!rst_n)
    mem_rd_valid && !mem_rd_ready |=> mem_rd_valid && $stable(mem_rd_addr));
  // The install location chosen on a non-SAE miss is an invalid tag.
  assert property (@(posedge clk) disable iff (!rst_n)
    state_q == S_TAG && !lk_hit && op_q != OP_FLUSH && !sel_sae |->
      !ts_rd_valid[sel_skew][sel_way]);

endmodule
