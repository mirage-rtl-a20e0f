// prince_cipher: 12-round PRINCE block cipher (64-bit block, 128-bit key),
// pipelined in three register stages.
//
// Mirage derives the set index of each skew from a ciphertext, and uses
// PRINCE for it because it is a low-latency cipher; a 3-stage pipeline of
// about four rounds per stage, adding 3 cycles to the lookup, is the
// organisation the cache assumes. The cipher itself is the published PRINCE
// algorithm (it is not defined by the cache): the key is k0||k1,
// k0' = (k0 >>> 1) ^ (k0 >> 63); the state is whitened with k0, goes through
// an RC0 key add, five forward rounds (S-box, M = SR o M', key add with
// k1 ^ RCi), a middle layer (S, M', S^-1), five backward rounds (key add,
// M^-1, S^-1), an RC11 key add and a final whitening with k0'. Nibble 0 is
// bits [63:60].
//
// Stage split (this design's choice): stage 1 = whitening, RC0, rounds 1-3;
// stage 2 = rounds 4-5, middle layer, round 6; stage 3 = rounds 7-10, RC11
// and output whitening. Latency: out_valid/out_data follow in_valid/in_data
// by exactly 3 clock cycles; a new block can enter every cycle. Each block
// carries its own key and a USER_W-bit side-band tag through the pipeline.
module prince_cipher #(
  parameter int unsigned USER_W = 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [63:0]       in_data,
  input  logic [127:0]      in_key,
  input  logic [USER_W-1:0] in_user,
  output logic              out_valid,
  output logic [63:0]       out_data,
  output logic [USER_W-1:0] out_user
);

  typedef logic [63:0] blk_t;

  localparam blk_t RC [12] = '{
    64'h0000000000000000, 64'h13198a2e03707344, 64'ha4093822299f31d0,
    64'h082efa98ec4e6c89, 64'h452821e638d01377, 64'hbe5466cf34e90c6c,
    64'h7ef84f78fd955cb1, 64'h85840851f1ac43aa, 64'hc882d32f25323c54,
    64'h64a51195e0e3610d, 64'hd3b5a399ca0c2399, 64'hc0ac29b7c97c50dd
  };

  localparam logic [3:0] SBOX  [16] = '{4'hB, 4'hF, 4'h3, 4'h2, 4'hA, 4'hC, 4'h9, 4'h1,
                                        4'h6, 4'h7, 4'h8, 4'h0, 4'hE, 4'h5, 4'hD, 4'h4};
  localparam logic [3:0] SBOXI [16] = '{4'hB, 4'h7, 4'h3, 4'h2, 4'hF, 4'hD, 4'h8, 4'h9,
                                        4'hA, 4'h6, 4'h4, 4'h0, 4'h5, 4'hE, 4'hC, 4'h1};
  // ShiftRows on nibbles: output nibble i takes input nibble SR_PERM[i].
  localparam int SR_PERM [16] = '{0, 5, 10, 15, 4, 9, 14, 3, 8, 13, 2, 7, 12, 1, 6, 11};

  function automatic logic [3:0] nib(blk_t s, int i);
    return s[63-4*i -: 4];
  endfunction

  function automatic blk_t s_layer(blk_t s);
    blk_t r;
    for (int i = 0; i < 16; i++) r[63-4*i -: 4] = SBOX[nib(s, i)];
    return r;
  endfunction

  function automatic blk_t s_inv_layer(blk_t s);
    blk_t r;
    for (int i = 0; i < 16; i++) r[63-4*i -: 4] = SBOXI[nib(s, i)];
    return r;
  endfunction

  function automatic blk_t shift_rows(blk_t s);
    blk_t r;
    for (int i = 0; i < 16; i++) r[63-4*i -: 4] = nib(s, SR_PERM[i]);
    return r;
  endfunction

  function automatic blk_t shift_rows_inv(blk_t s);
    blk_t r;
    for (int i = 0; i < 16; i++) r[63-4*SR_PERM[i] -: 4] = nib(s, i);
    return r;
  endfunction

  // One 16x16 block of M'. Block (j,i) of M^0 is m_{(i+j)%4}, of M^1 it is
  // m_{(i+j+1)%4}; m_k is the 4x4 identity with diagonal entry k cleared.
  // Bit b of a nibble counts from its most significant bit.
  function automatic logic [15:0] m_hat(logic [15:0] x, int off);
    logic [15:0] r;
    for (int j = 0; j < 4; j++)
      for (int b = 0; b < 4; b++) begin
        logic acc;
        acc = 1'b0;
        for (int i = 0; i < 4; i++)
          if (((i + j + off) % 4) != b) acc ^= x[15-4*i-b];
        r[15-4*j-b] = acc;
      end
    return r;
  endfunction

  function automatic blk_t m_prime(blk_t s);
    return {m_hat(s[63:48], 0), m_hat(s[47:32], 1), m_hat(s[31:16], 1), m_hat(s[15:0], 0)};
  endfunction

  function automatic blk_t fwd_round(blk_t s, blk_t k1, int r);
    return shift_rows(m_prime(s_layer(s))) ^ k1 ^ RC[r];
  endfunction

  function automatic blk_t bwd_round(blk_t s, blk_t k1, int r);
    return s_inv_layer(m_prime(shift_rows_inv(s ^ k1 ^ RC[r])));
  endfunction

  // ---------------- stage 1 ----------------
  blk_t s1_c;
  always_comb begin
    blk_t k0, k1;
    k0 = in_key[127:64];
    k1 = in_key[63:0];
    s1_c = in_data ^ k0 ^ k1 ^ RC[0];
    for (int r = 1; r <= 3; r++) s1_c = fwd_round(s1_c, k1, r);
  end

  logic              v1, v2, v3;
  blk_t              s1_q, s2_q, s3_q;
  logic [127:0]      k1_q, k2_q;
  logic [USER_W-1:0] u1_q, u2_q, u3_q;

  // ---------------- stage 2 ----------------
  blk_t s2_c;
  always_comb begin
    blk_t k1;
    k1 = k1_q[63:0];
    s2_c = s1_q;
    for (int r = 4; r <= 5; r++) s2_c = fwd_round(s2_c, k1, r);
    s2_c = s_inv_layer(m_prime(s_layer(s2_c)));
    s2_c = bwd_round(s2_c, k1, 6);
  end

  // ---------------- stage 3 ----------------
  blk_t s3_c;
  always_comb begin
    blk_t k0, k1, k0p;
    k0  = k2_q[127:64];
    k1  = k2_q[63:0];
    k0p = {k0[0], k0[63:1]} ^ {63'd0, k0[63]};
    s3_c = s2_q;
    for (int r = 7; r <= 10; r++) s3_c = bwd_round(s3_c, k1, r);
    s3_c = s3_c ^ k1 ^ RC[11] ^ k0p;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      v2 <= 1'b0;
      v3 <= 1'b0;
    end else begin
      v1 <= in_valid;
      v2 <= v1;
      v3 <= v2;
    end
  end

  always_ff @(posedge clk) begin
    s1_q <= s1_c;  k1_q <= in_key; u1_q <= in_user;
    s2_q <= s2_c;  k2_q <= k1_q;   u2_q <= u1_q;
    s3_q <= s3_c;                  u3_q <= u2_q;
  end

  assign out_valid = v3;
  assign out_data  = s3_q;
  assign out_user  = u3_q;

endmodule
