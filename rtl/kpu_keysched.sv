// kpu_keysched -- round-key expansion for the codec's 64-bit Rijndael cipher.
//
// The 64-bit key (two 32-bit words, Nk = 2) is expanded with the Rijndael key
// recurrence, w[i] = w[i-2] ^ t, where t = SubWord(RotWord(w[i-1])) ^ Rcon
// for even i and t = w[i-1] otherwise, into 22 words: eleven 64-bit round keys
// rk[0..10] for the ten rounds. The recurrence is Rijndael's; applying it with
// Nk = 2 and a 2-column state is this design's own choice, as the paper names
// a 64-bit Rijndael but does not define it.
//
// Timing: the key is sampled when key_load is high; the round keys are
// registered and valid from the next cycle (they are recomputed combinationally
// from the stored key). Keys are an input: how they are provisioned is outside
// this design.
module kpu_keysched
  import kpu_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              key_load,
  input  logic [63:0]       key,
  output logic [10:0][63:0] rk
);

  logic [63:0] key_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        key_q <= '0;
    else if (key_load) key_q <= key;
  end

  always_comb begin
    logic [31:0] w [22];
    logic [31:0] t;
    logic [7:0]  rc;
    w[0] = key_q[63:32];
    w[1] = key_q[31:0];
    rc   = 8'h01;
    for (int i = 2; i < 22; i++) begin
      t = w[i-1];
      if (i % 2 == 0) begin
        t = {sbox(t[23:16]), sbox(t[15:8]), sbox(t[7:0]), sbox(t[31:24])};
        t = t ^ {rc, 24'h0};
        rc = xtime(rc);
      end
      w[i] = w[i-2] ^ t;
    end
    for (int r = 0; r < 11; r++) rk[r] = {w[2*r], w[2*r+1]};
  end

endmodule
