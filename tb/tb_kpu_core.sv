// tb_kpu_core -- timing of the pipeline core on its own.
//
// The core runs a short program against behavioural memories (data memory
// indexed directly by mode and program address). Reports (l.nop 2) are time
// stamped, and the cycle distance and the number of execute stalls between
// two reports are compared with what the pipeline structure implies:
//   * dependent ALU instructions issue one per cycle in both modes
//     (full forwarding, no stall);
//   * a user immediate instruction (configuration B) executes in slot 13, so
//     a configuration-A consumer directly behind it waits 10 cycles;
//   * a user load that hits the user data cache delays a direct consumer by
//     one cycle; one that misses waits for the codec, 10 cycles.
// The reported values themselves are checked too, as is the store of cipher
// text to memory.
module tb_kpu_core;
  import kpu_pkg::*;
  import kpu_tb_pkg::*;

  localparam logic [63:0] KEY = 64'h0f1e_2d3c_4b5a_6978;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, key_load = 0;
  logic [63:0] key_q;
  logic [31:0] imem_addr, imem_rdata, raddr, waddr, report_data;
  logic [63:0] rdata, wdata;
  logic re, ruser, we, wuser, report_valid, halted, user_mode;
  logic [31:0][63:0] real_regs, shadow_regs;
  logic [15:0] sr;
  perf_t perf;
  logic [31:0] dc_rh, dc_rm, dc_wh, dc_wm;

  logic [31:0] imem [logic [31:0]];
  logic [63:0] dmem [logic [32:0]];

  kpu_core dut (
    .clk, .rst_n, .key_load, .key(KEY), .key_q, .imem_addr, .imem_rdata,
    .dmem_re(re), .dmem_ruser(ruser), .dmem_raddr(raddr), .dmem_rdata(rdata),
    .dmem_we(we), .dmem_wuser(wuser), .dmem_waddr(waddr), .dmem_wdata(wdata),
    .report_valid, .report_data, .halted, .user_mode, .real_regs, .shadow_regs,
    .sr, .perf, .dc_rd_hits(dc_rh), .dc_rd_misses(dc_rm), .dc_wr_hits(dc_wh),
    .dc_wr_misses(dc_wm)
  );

  always #5 clk = ~clk;

  assign imem_rdata = imem.exists(imem_addr >> 2) ? imem[imem_addr >> 2] : i_nop(16'h0);
  assign rdata = dmem.exists({ruser, raddr}) ? dmem[{ruser, raddr}] : 64'h0;
  always @(posedge clk) if (we) dmem[{wuser, waddr}] = wdata;

  // ----------------------------------------------------------- program
  logic [31:0] pc;
  int salt = 0;
  task automatic put(input logic [31:0] ins);
    imem[pc >> 2] = ins;
    pc += 4;
  endtask
  task automatic uimm(input logic [5:0] op, input int rd, input int ra, input logic [31:0] v);
    logic [63:0] c;
    c = kpu_enc(KEY, imm_block(v, salt++));
    put(i_pfx(c[63:40]));
    put(i_pfx(c[39:16]));
    put(i_ri(op, rd, ra, c[15:0]));
  endtask

  logic [31:0] expected [$];

  task automatic build();
    pc = 32'h100;
    put(i_ri(OP_ORI, 2, 0, 16'h8000));  put(i_mtspr(0, 2, 16'd64));
    put(i_ri(OP_ORI, 2, 0, 16'h2000));  put(i_mtspr(0, 2, 16'd32));
    put(i_ri(OP_ADDI, 4, 0, 16'd1));    put(i_ri(OP_ADDI, 3, 0, 16'd1));
    put(i_nop(NOP_REPORT));                               expected.push_back(1);       // R0
    for (int i = 0; i < 8; i++) put(i_rrr(4'h0, 4, 4, 2));
    put(i_ri(OP_ORI, 3, 4, 16'h0));     put(i_nop(NOP_REPORT));
    expected.push_back(32'h10001);                                                    // R1
    put(I_RFE);
    pc = 32'h2000;
    uimm(OP_ADDI, 3, 0, 7);             uimm(OP_ADDI, 4, 0, 1);
    uimm(OP_ADDI, 8, 0, 200);
    for (int i = 0; i < 12; i++) put(i_nop(16'h0));   // let the immediates settle
    put(i_nop(NOP_REPORT));                               expected.push_back(7);       // R2
    for (int i = 0; i < 8; i++) put(i_rrr(4'h0, 3, 3, 4));
    put(i_nop(NOP_REPORT));                               expected.push_back(15);      // R3
    uimm(OP_ADDI, 5, 0, 100);           put(i_rrr(4'h0, 3, 5, 0));
    put(i_nop(NOP_REPORT));                               expected.push_back(100);     // R4
    put(i_sw(16'h0, 5, 3));             put(i_lwz(6, 16'h0, 5));
    put(i_rrr(4'h0, 3, 6, 4));          put(i_nop(NOP_REPORT));
    expected.push_back(101);                                                           // R5
    put(i_lwz(7, 16'h0, 8));            put(i_rrr(4'h0, 3, 7, 0));
    put(i_nop(NOP_REPORT));                               expected.push_back(555);     // R6
    put(i_nop(NOP_EXIT));
  endtask

  // ------------------------------------------------------------- reports
  int nrep = 0;
  logic [31:0] cyc = 0;
  logic [31:0] rep_cyc [8];
  logic [31:0] rep_stl [8];
  // stall count per cycle: a report is written 1 (supervisor) or 11 (user)
  // cycles after it executed, and stalls are charged to execute
  logic [31:0] stl_hist [16];
  always @(posedge clk) begin
    cyc <= cyc + 1;
    stl_hist[cyc % 16] = perf.stalls;
    if (rst_n && report_valid) begin
      checks++;
      if (nrep >= expected.size() || report_data !== expected[nrep]) begin
        failures++;
        $display("report %0d: %h expected %h", nrep, report_data,
                 nrep < expected.size() ? expected[nrep] : 32'hx);
      end
      if (nrep < 8) begin rep_cyc[nrep] = cyc; rep_stl[nrep] = stl_hist[(cyc - (user_mode ? 11 : 1)) % 16]; end
      nrep++;
    end
  end

  task automatic gap(input int a, input int b, input int cycles, input int stalls, input string what);
    checks += 2;
    $display("%-34s %0d cycles, %0d stalls", what, rep_cyc[b] - rep_cyc[a], rep_stl[b] - rep_stl[a]);
    if (rep_cyc[b] - rep_cyc[a] != cycles) begin
      failures++; $display("  expected %0d cycles", cycles);
    end
    if (rep_stl[b] - rep_stl[a] != stalls) begin
      failures++; $display("  expected %0d stalls", stalls);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // user address 200 holds the cipher text of 555
    dmem[{1'b1, 32'd200}] = kpu_enc(KEY, imm_block(32'd555, 99));
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
    if (nrep == expected.size()) begin
      // 8 adds, an ori and the report: one per cycle
      gap(0, 1, 10, 0, "supervisor dependent adds");
      // 8 adds and the report
      gap(2, 3, 9, 0, "user dependent adds");
      // 3 instructions of the immediate, the add, the report, 10 stall cycles
      gap(3, 4, 15, 10, "configuration B then consumer");
      // store, load, add, report, one stall
      gap(4, 5, 5, 1, "load hit then consumer");
      // load, add, report, 10 stall cycles
      gap(5, 6, 13, 10, "load miss then consumer");
    end
    checks++;
    if (dc_rh != 1 || dc_rm != 1) begin
      failures++; $display("cache hits %0d misses %0d", dc_rh, dc_rm);
    end
    // the store wrote cipher text of 100 at user address 100
    checks++;
    if (!dmem.exists({1'b1, 32'd100}) || kpu_dec(KEY, dmem[{1'b1, 32'd100}]) % (64'd1 << 32) != 64'd100 ||
        dmem[{1'b1, 32'd100}] % (64'd1 << 32) == 64'd100) begin
      failures++; $display("stored word wrong");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
