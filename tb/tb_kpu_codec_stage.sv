// tb_kpu_codec_stage -- chains ten codec stages (rounds 1..10) in each
// direction and compares whole encryptions and decryptions of random blocks
// under random keys with the reference cipher of kpu_tb_pkg. Also checks the
// reference against published AES S-box values.
module tb_kpu_codec_stage;
  import kpu_pkg::*;
  import kpu_tb_pkg::*;

  int checks = 0, failures = 0;
  logic [10:0][63:0] rk;
  word_t es [11];
  word_t ds [11];
  word_t pt, ct;
  logic [63:0] key;

  for (genvar r = 1; r <= 10; r++) begin : g
    kpu_codec_stage u_e (.state_i(es[r-1]), .dec_i(1'b0), .round_i(4'(r)), .rk, .state_o(es[r]));
    kpu_codec_stage u_d (.state_i(ds[r-1]), .dec_i(1'b1), .round_i(4'(r)), .rk, .state_o(ds[r]));
  end
  assign es[0] = pt;
  assign ds[0] = ct;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rk_t r;
    checks++;
    if (sbox_selftest() != 0) begin failures++; $display("reference S-box wrong"); end
    for (int t = 0; t < 24; t++) begin
      key = {$urandom, $urandom};
      if (t == 0) key = '0;
      r = r_expand(key);
      for (int i = 0; i < 11; i++) rk[i] = r[i];
      pt = {$urandom, $urandom};
      ct = r_encrypt(key, pt);
      #1;
      checks++;
      if (es[10] !== ct) begin
        failures++; $display("enc key=%h pt=%h got %h exp %h", key, pt, es[10], ct);
      end
      checks++;
      if (ds[10] !== pt) begin
        failures++; $display("dec key=%h ct=%h got %h exp %h", key, ct, ds[10], pt);
      end
      // the cipher must actually scramble
      checks++;
      if (es[10] == pt) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
