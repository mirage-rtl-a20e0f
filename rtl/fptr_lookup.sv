// fptr_lookup: hit detection and FPTR indirection for a cache lookup.
//
// The tags of the indexed set in both skews are compared with the request's
// line address; a way hits only if it is valid, its tag matches and its
// stored SDID equals the requester's SDID (so a domain never hits on, or
// flushes, another domain's copy of a shared line). The FPTR of the hitting
// way is then selected with an AND-OR tree (each way's FPTR ANDed with its
// match signal, all ORed), as in the lookup circuit the paper synthesised;
// the data-store decodes its low bits into a way select.
//
// Purely combinational. At most one way may hit (an address lives in at
// most one place per domain); an assertion checks this.
module fptr_lookup
  import mirage_pkg::*;
#(
  parameter int unsigned WAYS   = 14,
  parameter int unsigned FPTR_W = 18,
  localparam int unsigned WAY_W = $clog2(WAYS)
) (
  input  logic              clk,          // for the assertion only
  input  logic              check_en,     // lookup result is being used
  input  line_addr_t        addr,
  input  sdid_t             sdid,
  input  line_addr_t        tag   [NUM_SKEWS][WAYS],
  input  logic              dirty [NUM_SKEWS][WAYS],
  input  logic [FPTR_W-1:0] fptr  [NUM_SKEWS][WAYS],
  input  sdid_t             tsdid [NUM_SKEWS][WAYS],
  input  logic [WAYS-1:0]   valid [NUM_SKEWS],
  output logic              hit,
  output logic              hit_skew,
  output logic [WAY_W-1:0]  hit_way,
  output logic              hit_dirty,
  output logic [FPTR_W-1:0] hit_fptr
);

  logic [WAYS-1:0] match [NUM_SKEWS];

  always_comb begin
    hit       = 1'b0;
    hit_skew  = 1'b0;
    hit_way   = '0;
    hit_dirty = 1'b0;
    hit_fptr  = '0;
    for (int s = 0; s < NUM_SKEWS; s++)
      for (int w = 0; w < WAYS; w++) begin
        match[s][w] = valid[s][w] && (tag[s][w] == addr) && (tsdid[s][w] == sdid);
        hit       |= match[s][w];
        hit_fptr  |= fptr[s][w] & {FPTR_W{match[s][w]}};
        hit_dirty |= dirty[s][w] & match[s][w];
        if (match[s][w]) begin
          hit_skew = 1'(s);
          hit_way  = WAY_W'(w);
        end
      end
  end

  assert property (@(posedge clk) check_en |-> $onehot0({match[1], match[0]}))
    else $error("fptr_lookup: more than one way hit");

endmodule
