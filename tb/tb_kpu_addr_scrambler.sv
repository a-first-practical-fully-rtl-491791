// tb_kpu_addr_scrambler -- checks the map against the formula computed here,
// that a sample of consecutive addresses gives distinct, unclustered results,
// and that a different key gives a different map.
module tb_kpu_addr_scrambler;
  int checks = 0, failures = 0;
  logic [63:0] key, saddr;
  logic [31:0] addr;
  logic [63:0] seen [logic [63:0]];

  kpu_addr_scrambler dut (.key, .addr, .saddr);

  function automatic logic [63:0] model(input logic [63:0] k, input logic [31:0] a);
    logic [63:0] x;
    x = {a ^ k[63:32], k[31:0]};
    x ^= x >> 29;  x *= 64'h9e3779b97f4a7c15;
    x ^= x >> 32;  x *= 64'hbf58476d1ce4e5b9;
    x ^= x >> 31;
    return x;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] prev;
    key = 64'h0123_4567_89ab_cdef;
    for (int i = 0; i < 1000; i++) begin
      addr = 32'h1000 + 32'(4 * i);
      #1;
      checks++;
      if (saddr !== model(key, addr)) begin failures++; $display("addr %h", addr); end
      checks++;
      if (seen.exists(saddr)) failures++;
      seen[saddr] = 1;
      // neighbours must not stay neighbours
      if (i > 0) begin
        checks++;
        if ((saddr > prev ? saddr - prev : prev - saddr) < 64'h1_0000) failures++;
      end
      prev = saddr;
    end
    addr = 32'h1000;
    #1 prev = saddr;
    key = 64'hfedc_ba98_7654_3210;
    #1;
    checks++;
    if (saddr === prev) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
