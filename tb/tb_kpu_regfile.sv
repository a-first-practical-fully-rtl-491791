// tb_kpu_regfile -- random writes and reads against a model array; checks
// write-through bypass, register 0 and reset.
module tb_kpu_regfile;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, we = 0;
  logic [2:0][4:0]  raddr;
  logic [2:0][63:0] rdata;
  logic [4:0] waddr;
  logic [63:0] wdata;
  logic [31:0][63:0] regs;
  logic [63:0] m [32];

  kpu_regfile #(.NREAD(3)) dut (.clk, .rst_n, .raddr, .rdata, .we, .waddr, .wdata, .regs);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 32; i++) m[i] = '0;
    raddr = '0; waddr = '0; wdata = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      we = $urandom_range(0, 1);
      waddr = 5'($urandom);
      wdata = {$urandom, $urandom};
      for (int p = 0; p < 3; p++) raddr[p] = (p == 0 && t % 3 == 0) ? waddr : 5'($urandom);
      #1;
      for (int p = 0; p < 3; p++) begin
        logic [63:0] e;
        e = (raddr[p] == 0) ? 64'h0 : (we && waddr == raddr[p]) ? wdata : m[raddr[p]];
        checks++;
        if (rdata[p] !== e) begin failures++; $display("port %0d reg %0d %h exp %h", p, raddr[p], rdata[p], e); end
      end
      @(posedge clk);
      if (we && waddr != 0) m[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
