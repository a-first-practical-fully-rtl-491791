// kpu_alu -- the 32-bit OpenRISC ALU at the heart of the encrypted processor.
//
// In user mode it sees only decrypted 64-bit blocks {pad, value}: the codec
// has already stripped the encryption (the "D" units of the paper's Fig. 1)
// and will re-apply it later (the "E" unit), so the ALU proper is an ordinary
// 32-bit ALU. The result carries a new pad computed from the operands' pads
// and the operation (kpu_pkg::pad_mix), which keeps encryption one-to-many
// while staying deterministic. In supervisor mode the pad is zero.
//
// Operations: add, add-with-carry, subtract, and, or, xor, multiply (low 32
// bits), shifts and rotate, move-high, and the OpenRISC set-flag comparisons
// (cond: 0 eq, 1 ne, 2 gtu, 3 geu, 4 ltu, 5 leu, 10 gts, 11 ges, 12 lts,
// 13 les). Carry and overflow follow OpenRISC. Purely combinational.
module kpu_alu
  import kpu_pkg::*;
(
  input  aluop_e     op,
  input  logic [4:0] cond,
  input  logic       user,
  input  word_t      a,
  input  word_t      b,
  input  logic       cy_i,
  output word_t      res,
  output logic       cy_o,
  output logic       ov_o,
  output logic       flag_o
);

  logic [31:0] x, y, r;
  logic [32:0] sum;

  assign x = a[31:0];
  assign y = b[31:0];

  always_comb begin
    sum  = '0;
    cy_o = 1'b0;
    ov_o = 1'b0;
    unique case (op)
      A_ADD, A_ADDC: begin
        sum  = {1'b0, x} + {1'b0, y} + {32'h0, (op == A_ADDC) & cy_i};
        r    = sum[31:0];
        cy_o = sum[32];
        ov_o = (x[31] == y[31]) && (r[31] != x[31]);
      end
      A_SUB: begin
        sum  = {1'b0, x} - {1'b0, y};
        r    = sum[31:0];
        cy_o = sum[32];
        ov_o = (x[31] != y[31]) && (r[31] != x[31]);
      end
      A_AND:   r = x & y;
      A_OR:    r = x | y;
      A_XOR:   r = x ^ y;
      A_MUL:   r = x * y;
      A_SLL:   r = x << y[4:0];
      A_SRL:   r = x >> y[4:0];
      A_SRA:   r = 32'($signed(x) >>> y[4:0]);
      A_ROR:   r = (x >> y[4:0]) | (x << (6'd32 - {1'b0, y[4:0]}));
      A_MOVHI: r = user ? y : {y[15:0], 16'h0};
      default: r = '0;
    endcase
  end

  always_comb begin
    unique case (cond)
      5'd0:    flag_o = x == y;
      5'd1:    flag_o = x != y;
      5'd2:    flag_o = x >  y;
      5'd3:    flag_o = x >= y;
      5'd4:    flag_o = x <  y;
      5'd5:    flag_o = x <= y;
      5'd10:   flag_o = $signed(x) >  $signed(y);
      5'd11:   flag_o = $signed(x) >= $signed(y);
      5'd12:   flag_o = $signed(x) <  $signed(y);
      5'd13:   flag_o = $signed(x) <= $signed(y);
      default: flag_o = 1'b0;
    endcase
  end

  assign res = {user ? pad_mix(a[63:32], b[63:32], op) : 32'h0, r};

endmodule
