// tb_kpu_top -- end-to-end run of the processor at its default sizes.
//
// A supervisor boot sequence sets up a return into user mode; a user program
// then runs on encrypted immediates (each preceded by two prefix
// instructions), exercises forwarding, the load-use stall, the user data
// cache (hit and, after an eviction, a miss served by the codec), a loop
// through the branch prediction buffer, a call through jump-and-link, a system
// call and return (with the hidden user flags), and finally an illegal 64-bit
// instruction that ends in the supervisor. The program reports values with
// l.nop 2; the expected values are worked out below by hand. The testbench
// also checks that the real registers hold the encryptions of the shadow
// registers when the supervisor runs, that memory holds only cipher text for
// user data, and that every mechanism occurred at least once.
module tb_kpu_top;
  import kpu_pkg::*;
  import kpu_tb_pkg::*;

  localparam logic [63:0] KEY = 64'h2b7e_1516_28ae_d2a6;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, key_load = 0;
  logic [31:0] imem_addr, imem_rdata, mem_raddr, mem_waddr, report_data;
  logic [63:0] mem_rdata, mem_wdata;
  logic mem_re, mem_we, report_valid, halted, user_mode, tlb_full;
  logic [31:0][63:0] real_regs, shadow_regs;
  logic [15:0] sr;
  perf_t perf;
  logic [31:0] dc_rh, dc_rm, dc_wh, dc_wm, tlb_used, tlb_allocs;

  logic [31:0] imem [logic [31:0]];
  logic [63:0] dmem [logic [31:0]];

  kpu_top dut (
    .clk, .rst_n, .key_load, .key(KEY), .imem_addr, .imem_rdata,
    .mem_re, .mem_raddr, .mem_rdata, .mem_we, .mem_waddr, .mem_wdata,
    .report_valid, .report_data, .halted, .user_mode, .real_regs, .shadow_regs,
    .sr, .perf, .dc_rd_hits(dc_rh), .dc_rd_misses(dc_rm), .dc_wr_hits(dc_wh),
    .dc_wr_misses(dc_wm), .tlb_full, .tlb_used, .tlb_allocs
  );

  always #5 clk = ~clk;

  // behavioural memories
  assign imem_rdata = imem.exists(imem_addr >> 2) ? imem[imem_addr >> 2] : i_nop(16'h0);
  assign mem_rdata  = dmem.exists(mem_raddr) ? dmem[mem_raddr] : 64'h0;
  always @(posedge clk) if (mem_we) dmem[mem_waddr] = mem_wdata;

  // --------------------------------------------------------- program text
  logic [31:0] pc;
  int salt = 0;
  task automatic put(input logic [31:0] ins);
    imem[pc >> 2] = ins;
    pc += 4;
  endtask
  // user-mode immediate instruction: two prefixes and the instruction
  task automatic uimm(input logic [5:0] op, input int rd, input int ra, input logic [31:0] v);
    logic [63:0] c;
    c = kpu_enc(KEY, imm_block(v, salt++));
    put(i_pfx(c[63:40]));
    put(i_pfx(c[39:16]));
    put(i_ri(op, rd, ra, c[15:0]));
  endtask

  logic [31:0] expected [$];
  logic [31:0] l_loop, l_sub, l_ok, l_bad, a_call, a_bf;

  task automatic build();
    // supervisor boot
    pc = 32'h100;
    put(i_ri(OP_ORI, 2, 0, 16'h8000));  put(i_mtspr(0, 2, 16'd64));   // ESR: user
    put(i_ri(OP_ORI, 2, 0, 16'h2000));  put(i_mtspr(0, 2, 16'd32));   // EPCR
    put(i_ri(OP_ADDI, 3, 0, 16'd5));    put(i_nop(NOP_REPORT));        expected.push_back(5);
    put(i_sw(16'h40, 0, 3));            put(i_lwz(4, 16'h40, 0));
    put(i_rrr(4'h0, 3, 4, 4));          put(i_nop(NOP_REPORT));        expected.push_back(10);
    put(I_RFE);
    // user program
    pc = 32'h2000;
    uimm(OP_ADDI, 3, 0, 7);             put(i_nop(NOP_REPORT));        expected.push_back(7);
    uimm(OP_ADDI, 4, 0, 100);           put(i_rrr(4'h0, 3, 3, 4));
    put(i_nop(NOP_REPORT));                                            expected.push_back(107);
    put(i_sw(16'h0, 4, 3));             put(i_lwz(5, 16'h0, 4));
    put(i_rrr(4'h0, 3, 5, 3));          put(i_nop(NOP_REPORT));        expected.push_back(214);
    uimm(OP_ADDI, 6, 0, 3);
    l_loop = pc;
    put(i_rrr(4'h0, 3, 3, 6));          uimm(OP_ADDI, 6, 6, 32'hffff_ffff);
    put(i_sf(1, 6, 0));                 put(i_br(OP_BF, pc, l_loop));
    put(i_nop(NOP_REPORT));                                            expected.push_back(220);
    // evict address 100 from the cache (same line: +256), then reload it
    uimm(OP_ADDI, 7, 0, 356);           put(i_sw(16'h0, 7, 6));
    put(i_lwz(8, 16'h0, 4));            put(i_rrr(4'h0, 3, 8, 0));
    put(i_nop(NOP_REPORT));                                            expected.push_back(107);
    a_call = pc;
    put(32'h0);                         // jal l_sub, patched below
    put(i_nop(NOP_REPORT));                                            expected.push_back(108);
    put(i_sf(0, 0, 0));                 // F = 1 before the system call
    put(I_SYS);
    expected.push_back(0);              // supervisor sees the user flags cleared
    a_bf = pc;
    put(32'h0);                         // bf l_ok, patched below
    l_bad = pc;
    uimm(OP_ADDI, 3, 0, 32'hbad);       put(i_nop(NOP_REPORT));
    l_ok = pc;
    uimm(OP_ADDI, 3, 0, 32'h600d);      put(i_nop(NOP_REPORT));        expected.push_back(32'h600d);
    put({6'h20, 5'd3, 5'd0, 16'h0});    // l.ld: illegal in user mode
    expected.push_back(32'h700);
    l_sub = pc;
    uimm(OP_ADDI, 3, 3, 1);             put({6'h11, 10'h0, 5'd9, 11'h0});  // jr r9
    imem[a_call >> 2] = i_br(OP_JAL, a_call, l_sub);
    imem[a_bf >> 2]   = i_br(OP_BF, a_bf, l_ok);
    // system call handler: report the flags visible to the supervisor, return
    pc = SYSCALL_VEC;
    put(i_mfspr(3, 0, 16'd17));         put(i_ri(OP_ANDI, 3, 3, 16'h0e00));
    put(i_nop(NOP_REPORT));             put(I_RFE);
    // illegal instruction handler: report and stop
    pc = ILLEGAL_VEC;
    put(i_ri(OP_ORI, 3, 0, 16'h700));   put(i_nop(NOP_REPORT));   put(i_nop(NOP_EXIT));
  endtask

  // ---------------------------------------------------------------- checks
  int nrep = 0;
  always @(posedge clk) if (rst_n && report_valid) begin
    checks++;
    if (nrep >= expected.size() || report_data !== expected[nrep]) begin
      failures++;
      $display("report %0d: %h expected %h", nrep, report_data,
               nrep < expected.size() ? expected[nrep] : 32'hx);
    end
    // entering the system call handler: registers must be synchronised
    if (nrep == 8) begin
      // (registers never written keep their reset value 0 in both copies)
      for (int i = 1; i < 32; i++) if (i != 3 && (real_regs[i] != 0 || shadow_regs[i] != 0)) begin
        checks++;
        if (real_regs[i] !== kpu_enc(KEY, shadow_regs[i])) begin
          failures++; $display("r%0d real %h shadow %h", i, real_regs[i], shadow_regs[i]);
        end
      end
      checks++;
      if (user_mode) failures++;
    end
    nrep++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic mech(input string name, input logic [31:0] count);
    checks++;
    $display("  %-28s %0d", name, count);
    if (count == 0) begin failures++; $display("mechanism never occurred: %s", name); end
  endtask

  initial begin
    build();
    repeat (3) @(posedge clk);
    key_load = 1;
    rst_n = 1;
    @(posedge clk);
    key_load = 0;
    wait (halted);
    repeat (3) @(posedge clk);
    checks++;
    if (nrep != expected.size()) begin failures++; $display("%0d reports, expected %0d", nrep, expected.size()); end
    // user data in memory is cipher text and decrypts to what was stored
    foreach (dmem[a]) if (a >= 32'h0010_0000) begin
      logic [63:0] p;
      p = kpu_dec(KEY, dmem[a]);
      checks++;
      if (!(p[31:0] inside {32'd107, 32'd220, 32'd0}) || dmem[a] == p) begin
        failures++; $display("memory word %h = %h decrypts to %h", a, dmem[a], p);
      end
    end
    checks++;
    if (real_regs[9] !== {32'h0, a_call + 32'd4}) begin failures++; $display("real r9 %h", real_regs[9]); end
    $display("cycles %0d, user instructions %0d, supervisor instructions %0d",
             perf.cycles, perf.user_instr, perf.super_instr);
    mech("prefix instructions", perf.prefix_instr);
    mech("configuration B", perf.cfg_b_instr);
    mech("execute stalls", perf.stalls);
    mech("forwarded operands", perf.forwards);
    mech("user cache read hits", dc_rh);
    mech("loads decrypted by codec", perf.codec_loads);
    mech("mode switches", perf.switches);
    mech("register syncs", perf.syncs);
    mech("prediction hit right", perf.bp_hit_right);
    mech("mispredict refills", perf.refills);
    mech("TLB allocations", tlb_allocs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
