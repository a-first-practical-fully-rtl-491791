// kpu_codec_stage -- one stage of the 10-stage codec (encryption/decryption
// unit) that the user-mode pipeline threads its instructions through.
//
// Each stage does one round of a 64-bit Rijndael cipher, in either direction,
// chosen per instruction by dec_i. Ten consecutive stages with round_i = 1..10
// encrypt or decrypt one block, so the codec accepts one block per cycle and
// has a latency of ten stages, as the paper's "10-cycle (Rijndael) 64-bit
// encryption" does. The stage is combinational; the pipeline register that
// follows it belongs to the processor's pipeline, so a block only moves (and is
// only transformed) when its instruction advances.
//
//   encrypt, round i : [i==1: ^rk0] SubBytes, ShiftRows, [i<10: MixColumns], ^rk[i]
//   decrypt, round j : [j==1: ^rk10] InvShiftRows, InvSubBytes, ^rk[10-j], [j<10: InvMixColumns]
//
// Both directions share one GF(2^8) inverter per byte: encryption applies the
// affine map after it, decryption the inverse affine map before it.
module kpu_codec_stage
  import kpu_pkg::*;
(
  input  word_t             state_i,
  input  logic              dec_i,
  input  logic [3:0]        round_i,   // 1..10
  input  logic [10:0][63:0] rk,
  output word_t             state_o
);

  word_t t, u, v;
  logic [3:0] kidx;

  always_comb begin
    t = state_i;
    if (round_i == 4'd1) t = t ^ (dec_i ? rk[10] : rk[0]);
    for (int j = 0; j < 8; j++) begin
      logic [7:0] b, g;
      b = t[63-8*j -: 8];
      g = gf_inv(dec_i ? inv_affine(b) : b);
      u[63-8*j -: 8] = dec_i ? g : affine(g);
    end
    u = shift_rows(u);
    kidx = dec_i ? 4'd10 - round_i : round_i;
    if (!dec_i) begin
      v = (round_i != 4'd10) ? mix_columns(u, 1'b0) : u;
      v = v ^ rk[kidx];
    end else begin
      v = u ^ rk[kidx];
      if (round_i != 4'd10) v = mix_columns(v, 1'b1);
    end
    state_o = v;
  end

endmodule
