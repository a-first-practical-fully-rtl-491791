// tb_kpu_user_dcache -- random stores and loads against a model of a
// direct-mapped cache; checks one-cycle read latency, hit/miss decisions,
// data, and the four statistics counters.
module tb_kpu_user_dcache;
  localparam int L = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, rd_en = 0, wr_en = 0, rd_hit;
  logic [31:0] rd_addr, wr_addr, rh, rm, wh, wm;
  logic [63:0] rd_data, wr_data;
  logic        mv [L];
  logic [31:0] mt [L];
  logic [63:0] md [L];
  int erh = 0, erm = 0, ewh = 0, ewm = 0;

  kpu_user_dcache #(.LINES(L)) dut (.clk, .rst_n, .rd_en, .rd_addr, .rd_hit, .rd_data,
    .wr_en, .wr_addr, .wr_data, .rd_hits(rh), .rd_misses(rm), .wr_hits(wh), .wr_misses(wm));
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < L; i++) mv[i] = 0;
    rd_addr = '0; wr_addr = '0; wr_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 1500; t++) begin
      logic eh;
      logic [63:0] ed;
      int i;
      @(negedge clk);
      // addresses from a small pool so that hits, misses and conflicts occur
      rd_en   = $urandom_range(0, 1);
      wr_en   = $urandom_range(0, 2) == 0;
      rd_addr = 32'h1000 + 4 * $urandom_range(0, 40);
      wr_addr = 32'h1000 + 4 * $urandom_range(0, 40);
      wr_data = {$urandom, $urandom};
      i  = (rd_addr >> 2) % L;
      eh = mv[i] && mt[i] == rd_addr;
      ed = md[i];
      if (rd_en) begin if (eh) erh++; else erm++; end
      @(posedge clk);
      if (wr_en) begin
        int j;
        j = (wr_addr >> 2) % L;
        if (mv[j] && mt[j] == wr_addr) ewh++; else ewm++;
        mv[j] = 1; mt[j] = wr_addr; md[j] = wr_data;
      end
      #1;
      if (rd_en) begin
        checks++;
        if (rd_hit !== eh || (eh && rd_data !== ed)) begin
          failures++; $display("read %h hit %b exp %b", rd_addr, rd_hit, eh);
        end
      end
    end
    @(negedge clk); rd_en = 0; wr_en = 0;
    @(posedge clk); #1;
    checks++;
    if (rh != erh || rm != erm || wh != ewh || wm != ewm) begin
      failures++; $display("counters %0d %0d %0d %0d exp %0d %0d %0d %0d", rh, rm, wh, wm, erh, erm, ewh, ewm);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
