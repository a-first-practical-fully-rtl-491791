// kpu_addr_scrambler -- turns a bare 32-bit user data address into the 64-bit
// address that leaves the processor.
//
// The paper's main design lets encrypted data addresses reach memory and
// remarks that the decrypted 32-bit address could instead be "hashed or
// encrypted in a different way to 64 bits". This design takes that route, so
// the memory side sees scattered 64-bit addresses (hence the word-granular TLB)
// while a load never has to wait for the codec to produce its address. The map
// is keyed and injective: the address is placed under half of the key and
// passed through two rounds of xor-shift and odd-constant multiply, each of
// which is invertible on 64 bits, so distinct addresses never collide.
// Combinational.
module kpu_addr_scrambler (
  input  logic [63:0] key,
  input  logic [31:0] addr,
  output logic [63:0] saddr
);

  always_comb begin
    logic [63:0] x;
    x = {addr ^ key[63:32], key[31:0]};
    x = x ^ (x >> 29);
    x = x * 64'h9e37_79b9_7f4a_7c15;
    x = x ^ (x >> 32);
    x = x * 64'hbf58_476d_1ce4_e5b9;
    x = x ^ (x >> 31);
    saddr = x;
  end

endmodule
