// skew_select: load-aware skew selection for a line install.
//
// On a miss the line may go into its indexed set in skew 0 or in skew 1.
// Instead of picking a skew at random, Mirage counts the invalid tags of
// both indexed sets and installs in the set that has more of them; on a tie
// a random bit decides. This "power of two choices" keeps invalid tags
// spread evenly over all sets, which is what makes a full pair of sets - and
// with it a set-associative eviction (SAE) - practically impossible with 6
// extra ways per skew. The counts are population counts of the inverted
// valid vectors followed by one comparison, as the paper describes.
//
// Within the chosen set the lowest-numbered invalid way is used (the paper
// does not say which; any invalid way is equivalent). When neither set has an
// invalid tag, sae is raised and a victim tag is named: a random skew and a
// random way of it (rnd_way modulo WAYS); this choice is also this design's.
//
// Purely combinational.
module skew_select #(
  parameter int unsigned WAYS   = 14,
  localparam int unsigned WAY_W = $clog2(WAYS),
  localparam int unsigned CNT_W = $clog2(WAYS + 1)
) (
  input  logic [WAYS-1:0]  valid0,       // valid bits of the indexed set, skew 0
  input  logic [WAYS-1:0]  valid1,       // valid bits of the indexed set, skew 1
  input  logic             rnd_tie,      // tie-break / SAE skew choice
  input  logic [15:0]      rnd_way,      // SAE victim way choice
  output logic [CNT_W-1:0] inv_cnt0,
  output logic [CNT_W-1:0] inv_cnt1,
  output logic             sel_skew,     // skew to install into
  output logic [WAY_W-1:0] sel_way,      // way to install into
  output logic             tie,          // counts were equal (random choice made)
  output logic             sae           // both sets full: the way named is a valid victim
);

  function automatic logic [CNT_W-1:0] count_zeros(logic [WAYS-1:0] v);
    logic [CNT_W-1:0] c;
    c = '0;
    for (int i = 0; i < WAYS; i++) c += CNT_W'(!v[i]);
    return c;
  endfunction

  function automatic logic [WAY_W-1:0] first_zero(logic [WAYS-1:0] v);
    logic [WAY_W-1:0] r;
    r = '0;
    for (int i = WAYS - 1; i >= 0; i--) if (!v[i]) r = WAY_W'(i);
    return r;
  endfunction

  always_comb begin
    inv_cnt0 = count_zeros(valid0);
    inv_cnt1 = count_zeros(valid1);
    tie      = (inv_cnt0 == inv_cnt1);
    sae      = (inv_cnt0 == '0) && (inv_cnt1 == '0);
    if (tie)                       sel_skew = rnd_tie;
    else if (inv_cnt1 > inv_cnt0)  sel_skew = 1'b1;
    else                           sel_skew = 1'b0;
    if (sae)            sel_way = WAY_W'(32'(rnd_way) % WAYS);
    else if (sel_skew)  sel_way = first_zero(valid1);
    else                sel_way = first_zero(valid0);
  end

endmodule
