// set_index_hash: randomized set-index derivation for the two skews.
//
// Each skew maps a line to a set through its own secret 128-bit key: the
// plaintext {zero pad, SDID, 40-bit line address} is encrypted with PRINCE
// and the low SET_W bits of the ciphertext are the set index in that skew.
// Putting the security-domain ID into the plaintext makes a shared address
// land in unrelated sets for different domains, so each domain gets its own
// copy. Using one independent key per skew gives the two independent random
// choices that load-aware skew selection relies on. The zero padding and
// the choice of the low ciphertext bits are this design's choices.
//
// Timing: one PRINCE pipeline per skew; idx_valid and both indices follow
// in_valid by 3 cycles, one lookup may start every cycle. in_user rides along.
module set_index_hash
  import mirage_pkg::*;
#(
  parameter int unsigned SET_W  = 14,
  parameter int unsigned USER_W = 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [127:0]          key [NUM_SKEWS],
  input  logic                  in_valid,
  input  line_addr_t            in_addr,
  input  sdid_t                 in_sdid,
  input  logic [USER_W-1:0]     in_user,
  output logic                  idx_valid,
  output logic [SET_W-1:0]      idx [NUM_SKEWS],
  output logic [USER_W-1:0]     out_user
);

  localparam int unsigned PAD_W = 64 - SDID_W - LINE_ADDR_W;

  logic [63:0] plain;
  assign plain = {{PAD_W{1'b0}}, in_sdid, in_addr};

  logic              v   [NUM_SKEWS];
  logic [63:0]       ct  [NUM_SKEWS];
  logic [USER_W-1:0] usr [NUM_SKEWS];

  for (genvar s = 0; s < NUM_SKEWS; s++) begin : g_skew
    prince_cipher #(.USER_W(USER_W)) u_prince (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (in_valid),
      .in_data  (plain),
      .in_key   (key[s]),
      .in_user  (in_user),
      .out_valid(v[s]),
      .out_data (ct[s]),
      .out_user (usr[s])
    );
    assign idx[s] = ct[s][SET_W-1:0];
  end

  assign idx_valid = v[0];
  assign out_user  = usr[0];

endmodule
