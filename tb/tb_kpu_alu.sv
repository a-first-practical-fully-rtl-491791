// tb_kpu_alu -- random operands for every operation and comparison; the
// expected value, carry, overflow, flag and pad are computed here.
module tb_kpu_alu;
  import kpu_pkg::*;

  int checks = 0, failures = 0;
  aluop_e op;
  logic [4:0] cond;
  logic user, cy_i, cy_o, ov_o, flag_o;
  word_t a, b, res;

  kpu_alu dut (.op, .cond, .user, .a, .b, .cy_i, .res, .cy_o, .ov_o, .flag_o);

  function automatic logic [31:0] ref_pad(input logic [31:0] pa, input logic [31:0] pb, input int o);
    logic [31:0] x;
    x = ((pa << 5) | (pa >> 27)) ^ pb ^ {8{4'(o)}} ^ 32'h9e3779b9;
    if (x[31:16] == 16'h7fff) x[31:16] = 16'h7ffe;
    return x;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      logic [31:0] x, y, e;
      logic [63:0] s;
      logic ec, eo, ef;
      int o, c;
      o = $urandom_range(0, 11);
      c = $urandom_range(0, 15);
      op = aluop_e'(o);
      cond = 5'(c);
      user = $urandom_range(0, 1);
      cy_i = $urandom_range(0, 1);
      a = {$urandom, $urandom};
      b = {$urandom, $urandom};
      if (t % 5 == 0) b[31:0] = a[31:0];
      x = a[31:0]; y = b[31:0];
      ec = 0; eo = 0;
      case (o)
        0, 1: begin s = 64'(x) + 64'(y) + 64'((o == 1) && cy_i); e = s[31:0]; ec = s[32];
                eo = (x[31] == y[31]) && (e[31] != x[31]); end
        2: begin e = x - y; ec = x < y; eo = (x[31] != y[31]) && (e[31] != x[31]); end
        3: e = x & y;
        4: e = x | y;
        5: e = x ^ y;
        6: begin s = 64'(x) * 64'(y); e = s[31:0]; end
        7: e = x << (y % 32);
        8: e = x >> (y % 32);
        9: e = $signed(x) >>> (y % 32);
        10: begin s = {x, x} >> (y % 32); e = s[31:0]; end
        default: e = user ? y : y << 16;
      endcase
      case (c)
        0: ef = x == y;   1: ef = x != y;   2: ef = x > y;   3: ef = x >= y;
        4: ef = x < y;    5: ef = x <= y;
        10: ef = $signed(x) > $signed(y);  11: ef = $signed(x) >= $signed(y);
        12: ef = $signed(x) < $signed(y);  13: ef = $signed(x) <= $signed(y);
        default: ef = 0;
      endcase
      #1;
      checks++;
      if (res[31:0] !== e) begin failures++; $display("op %0d %h %h -> %h exp %h", o, x, y, res[31:0], e); end
      checks++;
      if (res[63:32] !== (user ? ref_pad(a[63:32], b[63:32], o) : 32'h0)) begin
        failures++; $display("pad op %0d", o);
      end
      if (o <= 2) begin
        checks++;
        if (cy_o !== ec || ov_o !== eo) begin failures++; $display("cy/ov op %0d %h %h", o, x, y); end
      end
      checks++;
      if (flag_o !== ef) begin failures++; $display("cond %0d %h %h", c, x, y); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
