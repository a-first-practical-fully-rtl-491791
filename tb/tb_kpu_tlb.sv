// tb_kpu_tlb -- random two-port accesses from a pool of 64-bit addresses
// against a model that hands out physical words first come, first served;
// covers both ports missing together (same and different addresses) and the
// buffer filling up.
module tb_kpu_tlb;
  localparam int E = 16;
  localparam logic [31:0] BASE = 32'h400;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, full;
  logic [1:0] req, ok, alloc;
  logic [1:0][63:0] vaddr;
  logic [1:0][31:0] paddr;
  logic [31:0] used;
  logic [63:0] pool [24];
  int map [logic [63:0]];
  int nxt = 0;

  kpu_tlb #(.ENTRIES(E), .PHYS_BASE(BASE)) dut (.clk, .rst_n, .req, .vaddr, .paddr, .ok, .alloc, .full, .used);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 24; i++) pool[i] = {$urandom, $urandom};
    req = '0; vaddr = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      req = 2'($urandom);
      // the pool grows slowly so that the buffer fills only late
      vaddr[0] = pool[$urandom_range(0, (t / 20 < 23) ? t / 20 + 1 : 23)];
      vaddr[1] = (t % 7 == 0) ? vaddr[0] : pool[$urandom_range(0, (t / 20 < 23) ? t / 20 + 1 : 23)];
      #1;
      for (int p = 0; p < 2; p++) if (req[p]) begin
        logic eok;
        int ea;
        if (map.exists(vaddr[p])) begin eok = 1; ea = map[vaddr[p]]; end
        else if (nxt < E) begin eok = 1; ea = nxt; map[vaddr[p]] = nxt; nxt++; end
        else begin eok = 0; ea = 0; end
        checks++;
        if (ok[p] !== eok || (eok && paddr[p] !== BASE + 32'(ea))) begin
          failures++; $display("t=%0d port %0d ok %b paddr %h exp %b %h", t, p, ok[p], paddr[p], eok, BASE + 32'(ea));
        end
      end
    end
    @(negedge clk); req = '0;
    @(posedge clk); #1;
    checks++;
    if (!full || used != E) begin failures++; $display("full %b used %0d", full, used); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
