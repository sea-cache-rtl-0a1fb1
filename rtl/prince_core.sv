// prince_core: the PRINCE lightweight block cipher (64-bit block, 128-bit key
// k0||k1), used by the SEA cache as its address-randomising index function.
//
// The cipher follows the published PRINCE specification: whitening with k0,
// PRINCEcore of five forward rounds (S-box, M' mixing, ShiftRows, round
// constant and k1), a middle S / M' / S^-1 layer, five inverse rounds, and
// output whitening with k0' = (k0 >>> 1) ^ (k0 >> 63). Nibble 0 is the most
// significant nibble of the 64-bit word.
//
// Timing: the twelve rounds are split over three register stages, so the
// ciphertext for the input presented with in_valid appears on out_data with
// out_valid exactly 3 clock cycles later; a new input may be given every cycle.
// The 3-cycle latency is the one the design assumes for PRINCE; where the
// stage boundaries fall (after round 4 and after round 7) is this design's choice.
module prince_core
  import sea_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [63:0]  in_data,   // plaintext
  input  logic [127:0] in_key,    // {k0, k1}
  output logic         out_valid,
  output logic [63:0]  out_data   // ciphertext
);

  localparam logic [3:0] SBOX [16] = '{4'hb, 4'hf, 4'h3, 4'h2, 4'ha, 4'hc, 4'h9, 4'h1,
                                       4'h6, 4'h7, 4'h8, 4'h0, 4'he, 4'h5, 4'hd, 4'h4};
  localparam logic [3:0] SBOX_INV [16] = '{4'hb, 4'h7, 4'h3, 4'h2, 4'hf, 4'hd, 4'h8, 4'h9,
                                           4'ha, 4'h6, 4'h4, 4'h0, 4'h5, 4'he, 4'hc, 4'h1};
  // ShiftRows: output nibble i takes input nibble SR[i].
  localparam int SR [16] = '{0, 5, 10, 15, 4, 9, 14, 3, 8, 13, 2, 7, 12, 1, 6, 11};

  function automatic logic [3:0] get_nib(input logic [63:0] s, input int i);
    return s[60-4*i +: 4];
  endfunction

  function automatic logic [63:0] s_layer(input logic [63:0] s, input logic inv);
    logic [63:0] r;
    for (int i = 0; i < 16; i++)
      r[60-4*i +: 4] = inv ? SBOX_INV[get_nib(s, i)] : SBOX[get_nib(s, i)];
    return r;
  endfunction

  // M' layer: block diagonal (M0^, M1^, M1^, M0^) over the four 16-bit chunks.
  // Output bit j of nibble r in a chunk is the XOR of bit j of the chunk's four
  // nibbles c, leaving out the one with (r + c + sel) mod 4 == j
  // (sel = 0 for M0^, 1 for M1^); bit 0 is the nibble's most significant bit.
  function automatic logic [63:0] m_prime(input logic [63:0] s);
    logic [63:0] r;
    logic [3:0]  v;
    logic        b;
    int          sel;
    for (int ch = 0; ch < 4; ch++) begin
      sel = (ch == 0 || ch == 3) ? 0 : 1;
      for (int row = 0; row < 4; row++) begin
        for (int j = 0; j < 4; j++) begin
          b = 1'b0;
          for (int c = 0; c < 4; c++)
            if (((row + c + sel) % 4) != j) b ^= get_nib(s, 4*ch + c)[3-j];
          v[3-j] = b;
        end
        r[60-4*(4*ch+row) +: 4] = v;
      end
    end
    return r;
  endfunction

  function automatic logic [63:0] shift_rows(input logic [63:0] s, input logic inv);
    logic [63:0] r;
    for (int i = 0; i < 16; i++) begin
      if (inv) r[60-4*SR[i] +: 4] = get_nib(s, i);
      else     r[60-4*i +: 4]     = get_nib(s, SR[i]);
    end
    return r;
  endfunction

  function automatic logic [63:0] fwd_round(input logic [63:0] s, input logic [63:0] k1, input int i);
    return shift_rows(m_prime(s_layer(s, 1'b0)), 1'b0) ^ PRINCE_RC[i] ^ k1;
  endfunction

  function automatic logic [63:0] inv_round(input logic [63:0] s, input logic [63:0] k1, input int i);
    return s_layer(m_prime(shift_rows(s ^ PRINCE_RC[i] ^ k1, 1'b1)), 1'b1);
  endfunction

  // Stage 1: whitening and rounds 1..4
  logic [63:0]  st1_d, st2_d, st3_d;
  logic [63:0]  st1_q, st2_q;
  logic [127:0] key1_q, key2_q;
  logic         v1_q, v2_q;

  always_comb begin
    logic [63:0] s;
    s = in_data ^ in_key[127:64] ^ in_key[63:0] ^ PRINCE_RC[0];
    for (int i = 1; i <= 4; i++) s = fwd_round(s, in_key[63:0], i);
    st1_d = s;
  end

  // Stage 2: round 5, middle layer, rounds 6 and 7
  always_comb begin
    logic [63:0] s;
    s = fwd_round(st1_q, key1_q[63:0], 5);
    s = s_layer(m_prime(s_layer(s, 1'b0)), 1'b1);
    for (int i = 6; i <= 7; i++) s = inv_round(s, key1_q[63:0], i);
    st2_d = s;
  end

  // Stage 3: rounds 8..10 and output whitening
  always_comb begin
    logic [63:0] s, k0p, k0;
    k0  = key2_q[127:64];
    k0p = {k0[0], k0[63:1]} ^ {63'd0, k0[63]};
    s = st2_q;
    for (int i = 8; i <= 10; i++) s = inv_round(s, key2_q[63:0], i);
    st3_d = s ^ PRINCE_RC[11] ^ key2_q[63:0] ^ k0p;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1_q <= 1'b0; v2_q <= 1'b0; out_valid <= 1'b0;
    end else begin
      v1_q <= in_valid; v2_q <= v1_q; out_valid <= v2_q;
    end
  end

  // Data registers carry no reset: they are qualified by the valid pipeline.
  always_ff @(posedge clk) begin
    st1_q <= st1_d;  key1_q <= in_key;
    st2_q <= st2_d;  key2_q <= key1_q;
    out_data <= st3_d;
  end

endmodule
