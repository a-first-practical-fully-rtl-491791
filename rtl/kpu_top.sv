// kpu_top -- the encrypted-mode OpenRISC processor: pipeline core plus the
// data-address path to memory.
//
// The core (kpu_core) issues data accesses with the address the program
// computed. Supervisor accesses are physical: byte address / 8 selects a
// 64-bit memory word. User accesses are mapped in two steps: the decrypted
// 32-bit word address is scrambled to a 64-bit value under the processor key
// (kpu_addr_scrambler), and the word-granular TLB (kpu_tlb) assigns every
// distinct scrambled address its own physical word in a preset range, first
// come first served. Memory thus only ever holds cipher text for user data,
// laid out in order of first use.
//
// Ports: a combinational instruction memory (32-bit words, byte address) and
// a combinational 64-bit data memory with one read and one write port, both
// addressed by 64-bit-word index. The processor key is loaded with key_load.
// Debug outputs expose the registers, the supervision register, the
// performance counters and the cache and TLB statistics. Memories are outside
// this design.
module kpu_top
  import kpu_pkg::*;
#(
  parameter int unsigned DCACHE_LINES = 64,
  parameter int unsigned BTB_ENTRIES  = 64,
  parameter int unsigned TLB_ENTRIES  = 256,
  parameter logic [31:0] USER_BASE    = 32'h0010_0000  // first physical word for user data
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              key_load,
  input  logic [63:0]       key,
  output logic [31:0]       imem_addr,
  input  logic [31:0]       imem_rdata,
  output logic              mem_re,
  output logic [31:0]       mem_raddr,
  input  logic [63:0]       mem_rdata,
  output logic              mem_we,
  output logic [31:0]       mem_waddr,
  output logic [63:0]       mem_wdata,
  output logic              report_valid,
  output logic [31:0]       report_data,
  output logic              halted,
  output logic              user_mode,
  output logic [31:0][63:0] real_regs,
  output logic [31:0][63:0] shadow_regs,
  output logic [15:0]       sr,
  output perf_t             perf,
  output logic [31:0]       dc_rd_hits, dc_rd_misses, dc_wr_hits, dc_wr_misses,
  output logic              tlb_full,
  output logic [31:0]       tlb_used,
  output logic [31:0]       tlb_allocs
);

  logic        re, ruser, we, wuser;
  logic [31:0] raddr, waddr;
  logic [63:0] wdata, key_q;
  logic [1:0][63:0] saddr;
  logic [1:0][31:0] paddr;
  logic [1:0]       tok, talloc;

  kpu_core #(
    .DCACHE_LINES(DCACHE_LINES), .BTB_ENTRIES(BTB_ENTRIES)
  ) u_core (
    .clk, .rst_n, .key_load, .key, .key_q,
    .imem_addr, .imem_rdata,
    .dmem_re(re), .dmem_ruser(ruser), .dmem_raddr(raddr), .dmem_rdata(mem_rdata),
    .dmem_we(we), .dmem_wuser(wuser), .dmem_waddr(waddr), .dmem_wdata(wdata),
    .report_valid, .report_data, .halted, .user_mode, .real_regs, .shadow_regs,
    .sr, .perf, .dc_rd_hits, .dc_rd_misses, .dc_wr_hits, .dc_wr_misses
  );

  kpu_addr_scrambler u_scr_r (.key(key_q), .addr(raddr), .saddr(saddr[0]));
  kpu_addr_scrambler u_scr_w (.key(key_q), .addr(waddr), .saddr(saddr[1]));

  kpu_tlb #(.ENTRIES(TLB_ENTRIES), .PHYS_BASE(USER_BASE)) u_tlb (
    .clk, .rst_n, .req({we && wuser, re && ruser}), .vaddr(saddr), .paddr,
    .ok(tok), .alloc(talloc), .full(tlb_full), .used(tlb_used)
  );

  // user accesses the TLB cannot map (it is full) are dropped
  assign mem_re    = re && (!ruser || tok[0]);
  assign mem_raddr = ruser ? paddr[0] : {3'b000, raddr[31:3]};
  assign mem_we    = we && (!wuser || tok[1]);
  assign mem_waddr = wuser ? paddr[1] : {3'b000, waddr[31:3]};
  assign mem_wdata = wdata;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) tlb_allocs <= '0;
    else        tlb_allocs <= tlb_allocs + 32'(talloc[0]) + 32'(talloc[1]);

endmodule
