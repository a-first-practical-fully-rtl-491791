// tb_kpu_btb -- random updates from a small set of branch addresses against a
// model of a direct-mapped buffer with 2-bit counters; checks every lookup.
module tb_kpu_btb;
  localparam int E = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, lk_hit, lk_taken, up_en = 0, up_taken;
  logic [31:0] lk_pc, lk_target, up_pc, up_target;
  logic mv [E];
  logic [31:0] mt [E], mg [E];
  int mc [E];

  kpu_btb #(.ENTRIES(E)) dut (.clk, .rst_n, .lk_pc, .lk_hit, .lk_taken, .lk_target,
                              .up_en, .up_pc, .up_taken, .up_target);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < E; i++) mv[i] = 0;
    lk_pc = '0; up_pc = '0; up_target = '0; up_taken = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      int i;
      @(negedge clk);
      lk_pc = 32'h2000 + 4 * $urandom_range(0, 20);
      i = (lk_pc >> 2) % E;
      #1;
      checks++;
      if (lk_hit !== (mv[i] && mt[i] == lk_pc) ||
          (lk_hit && (lk_taken !== (mc[i] >= 2) || (lk_target !== mg[i])))) begin
        failures++; $display("lookup %h hit %b", lk_pc, lk_hit);
      end
      up_en = $urandom_range(0, 1);
      up_pc = 32'h2000 + 4 * $urandom_range(0, 20);
      up_taken = $urandom_range(0, 1);
      up_target = 32'h3000 + 4 * $urandom_range(0, 3);
      @(posedge clk);
      if (up_en) begin
        int j;
        j = (up_pc >> 2) % E;
        if (mv[j] && mt[j] == up_pc) begin
          if (up_taken) begin mg[j] = up_target; if (mc[j] < 3) mc[j]++; end
          else if (mc[j] > 0) mc[j]--;
        end else if (up_taken) begin
          mv[j] = 1; mt[j] = up_pc; mg[j] = up_target; mc[j] = 2;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
