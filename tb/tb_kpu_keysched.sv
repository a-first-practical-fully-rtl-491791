// tb_kpu_keysched -- loads random keys and compares the eleven round keys,
// one cycle after the load, with the reference expansion of kpu_tb_pkg;
// checks that the keys hold when key_load is low.
module tb_kpu_keysched;
  import kpu_tb_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, key_load = 0;
  logic [63:0] key;
  logic [10:0][63:0] rk;

  kpu_keysched dut (.clk, .rst_n, .key_load, .key, .rk);
  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rk_t r;
    logic [63:0] k0;
    key = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 10; t++) begin
      @(negedge clk);
      key = {$urandom, $urandom};
      k0 = key;
      key_load = 1;
      @(negedge clk);
      key_load = 0;
      key = ~key;
      r = r_expand(k0);
      for (int i = 0; i < 11; i++) begin
        checks++;
        if (rk[i] !== r[i]) begin failures++; $display("key %h rk%0d %h exp %h", k0, i, rk[i], r[i]); end
      end
      @(negedge clk);
      checks++;
      if (rk[10] !== r[10]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
