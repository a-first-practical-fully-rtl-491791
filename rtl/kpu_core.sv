// kpu_core -- the two-mode pipeline of the encrypted ("pseudo-homomorphic")
// OpenRISC processor.
//
// One physical pipeline of 15 positions: fetch (F) followed by slots 1..14.
// Supervisor-mode instructions run unencrypted through the classic five
// stages F, Decode(1), Read(2), Execute(3), Write(4) and leave. User-mode
// instructions run on encrypted data and traverse all 15 positions, in one of
// two configurations that place the 10-stage codec differently:
//
//   configuration A : F  D(1)  R(2)  E(3)  codec(4..13)  W(14)
//   configuration B : F  D(1)  codec(2..11)  R(12)  E(13)  W(14)
//
// B is used by immediate instructions: their 64-bit encrypted immediate,
// assembled in Decode from two preceding prefix instructions (24 bits each)
// and the instruction's own 16 bits, is decrypted by the codec before Read.
// Every other user instruction uses A and executes early, so its result can
// be forwarded at once; the codec behind it decrypts the cipher text a load
// brings from memory, or encrypts the value a store sends to memory. Both
// configurations write in slot 14, so instructions complete in order.
//
// User instructions compute on decrypted values held in shadow registers,
// which mirror the real general purpose registers and exist only for user
// mode. Real registers hold cipher text. A result that was never encrypted
// leaves its real register "stale"; when the processor enters supervisor mode
// every stale register is re-encrypted by the codec from its shadow before the
// supervisor runs, and when it returns to user mode every register the
// supervisor wrote is decrypted into its shadow. Program addresses are not
// encrypted: a jump-and-link puts {16'h7fff,16'h0,addr} in the shadow and the
// zero-filled address in the real register.
//
// A small user-only cache of decrypted values (kpu_user_dcache) is written by
// every user store and read by every user load in the cycle after Execute; a
// hit makes the load's value available one slot after Execute (so a consumer
// directly behind waits one cycle), a miss makes it wait for the codec.
//
// Hazards: operands and flags are forwarded from every later slot holding an
// older instruction of the same mode; if the newest older producer has not yet
// got its result (a load in flight, or an immediate instruction still in its
// codec stages), Execute stalls and slots 1..3 hold while slot 4 takes a
// bubble. Control transfers resolve in Execute (slot 3) against a branch
// prediction buffer consulted at fetch; there is no delay slot. System calls,
// traps, illegal instructions (64-bit instructions are illegal in user mode)
// and l.rfe take effect in the write slot, after the front end has been held
// since their decode. User flags are hidden on entry to supervisor mode and
// restored by l.rfe.
//
// Interfaces: combinational instruction memory (imem_addr -> imem_rdata) and a
// combinational data memory with one read and one write port whose addresses
// are the data addresses seen by the program, tagged with the mode; the
// enclosing design maps them to physical words. l.nop 2 reports r3 (decrypted
// in user mode) on the report port; l.nop 1 halts.
//
// Taken from the paper: the two modes and pipeline lengths, the A/B
// configurations and the 10-stage codec, shadow registers, prefix
// instructions, the user data cache, the program-address forms, forwarding,
// load-use stalls, branch prediction and the hidden user flags. This design's
// own choices: the cipher's details, pad function, lazy register encryption,
// cache and predictor organisation, instruction subset and prefix encoding,
// and that load/store offsets are plain (not encrypted) immediates.
module kpu_core
  import kpu_pkg::*;
#(
  parameter int unsigned DCACHE_LINES = 64,
  parameter int unsigned BTB_ENTRIES  = 64,
  parameter logic [31:0] RESET_PC     = RESET_VEC
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              key_load,
  input  logic [63:0]       key,
  output logic [63:0]       key_q,
  // instruction memory
  output logic [31:0]       imem_addr,
  input  logic [31:0]       imem_rdata,
  // data memory
  output logic              dmem_re,
  output logic              dmem_ruser,
  output logic [31:0]       dmem_raddr,
  input  logic [63:0]       dmem_rdata,
  output logic              dmem_we,
  output logic              dmem_wuser,
  output logic [31:0]       dmem_waddr,
  output logic [63:0]       dmem_wdata,
  // debug / status
  output logic              report_valid,
  output logic [31:0]       report_data,
  output logic              halted,
  output logic              user_mode,
  output logic [31:0][63:0] real_regs,
  output logic [31:0][63:0] shadow_regs,
  output logic [15:0]       sr,
  output perf_t             perf,
  output logic [31:0]       dc_rd_hits, dc_rd_misses, dc_wr_hits, dc_wr_misses
);

  // ------------------------------------------------------------------ state
  uop_t        s [1:NSLOTS];
  uop_t        n [1:NSLOTS];
  logic [31:0] pc_q, pc_n;
  logic        mode_q;             // 1 = user
  logic        hold_q, hold_n;     // front end held behind a serialising instr
  logic [47:0] pfx_q;
  logic [15:0] sr_q, esr_q;
  logic [31:0] epcr_q;
  logic [2:0]  hidden_q;           // user flags {OV,CY,F} while in supervisor
  logic [31:0] real_stale_q, shadow_stale_q;
  logic        halted_q;

  typedef enum logic [1:0] {S_RUN, S_SYNC, S_DRAIN} sst_e;
  sst_e        sst_q;
  logic [31:0] svec_q;
  logic        sdec_q;             // sync direction: 1 decrypt real -> shadow
  logic [31:0] tpc_q;
  logic        tmode_q;

  logic [10:0][63:0] rk;

  kpu_keysched u_keys (
    .clk, .rst_n, .key_load, .key, .rk
  );
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) key_q <= '0; else if (key_load) key_q <= key;

  // -------------------------------------------------------- register files
  logic [2:0][4:0]  rr_addr;  logic [2:0][63:0] rr_data;
  logic [4:0][4:0]  sr_addr;  logic [4:0][63:0] sr_data;
  logic             rw_en, sw_en;
  logic [4:0]       rw_addr, sw_addr;
  logic [63:0]      rw_data, sw_data;

  kpu_regfile #(.NREAD(3)) u_real (
    .clk, .rst_n, .raddr(rr_addr), .rdata(rr_data),
    .we(rw_en), .waddr(rw_addr), .wdata(rw_data), .regs(real_regs)
  );
  kpu_regfile #(.NREAD(5)) u_shadow (
    .clk, .rst_n, .raddr(sr_addr), .rdata(sr_data),
    .we(sw_en), .waddr(sw_addr), .wdata(sw_data), .regs(shadow_regs)
  );

  // ------------------------------------------------------------ predictor
  logic        bp_hit, bp_tk;
  logic [31:0] bp_tgt;
  logic        bpu_en, bpu_tk;
  logic [31:0] bpu_pc, bpu_tgt;

  kpu_btb #(.ENTRIES(BTB_ENTRIES)) u_btb (
    .clk, .rst_n, .lk_pc(pc_q), .lk_hit(bp_hit), .lk_taken(bp_tk),
    .lk_target(bp_tgt), .up_en(bpu_en), .up_pc(bpu_pc), .up_taken(bpu_tk),
    .up_target(bpu_tgt)
  );

  // ----------------------------------------------------------- data cache
  logic        dc_re, dc_hit, dc_we;
  logic [31:0] dc_raddr, dc_waddr;
  logic [63:0] dc_rdata, dc_wdata;

  kpu_user_dcache #(.LINES(DCACHE_LINES)) u_dcache (
    .clk, .rst_n, .rd_en(dc_re), .rd_addr(dc_raddr), .rd_hit(dc_hit),
    .rd_data(dc_rdata), .wr_en(dc_we), .wr_addr(dc_waddr), .wr_data(dc_wdata),
    .rd_hits(dc_rd_hits), .rd_misses(dc_rd_misses), .wr_hits(dc_wr_hits),
    .wr_misses(dc_wr_misses)
  );

  // ---------------------------------------------------------------- decode
  function automatic uop_t decode(input uop_t f, input logic [47:0] pfx);
    uop_t u;
    logic [31:0] i;
    u      = f;
    i      = f.instr;
    u.kind = K_ILLEGAL;
    u.cfg  = CFG_A;
    u.rd   = i[25:21];
    u.ra   = i[20:16];
    u.rb   = i[15:11];
    {u.we, u.use_ra, u.use_rb, u.use_imm, u.rd_f, u.rd_cy, u.wr_f, u.wr_cy} = '0;
    {u.link, u.wide, u.res_ok, u.c_on, u.c_dec, u.c_sp} = '0;
    u.op   = A_ADD;
    u.cond = i[25:21];
    u.imm  = 64'(sext16(i[15:0]));
    u.a    = '0;
    u.b    = '0;
    u.res  = '0;
    u.cbuf = '0;
    u.c_lo = '0;
    u.mem_ct = '0;
    u.addr = '0;
    {u.f, u.cy, u.ov} = '0;
    unique case (i[31:26])
      OP_J, OP_JAL: begin
        u.kind = K_JUMP;
        u.imm  = 64'({{4{i[25]}}, i[25:0], 2'b00});
        u.link = i[31:26] == OP_JAL;
        u.we   = u.link;
        u.rd   = 5'd9;
      end
      OP_BNF, OP_BF: begin
        u.kind = K_BRANCH;
        u.imm  = 64'({{4{i[25]}}, i[25:0], 2'b00});
        u.rd_f = 1'b1;
        u.cond = {4'd0, i[31:26] == OP_BF};
      end
      OP_NOP: begin
        u.kind   = K_NOP;
        u.ra     = 5'd3;
        u.use_ra = i[15:0] == NOP_REPORT;
      end
      OP_SYS: begin
        if (i[25:24] == 2'd0)      u.kind = K_SYS;
        else if (i[25:24] == 2'd1) u.kind = K_TRAP;
      end
      OP_RFE:  if (!f.user) u.kind = K_RFE;
      OP_JR, OP_JALR: begin
        u.kind   = K_JUMPR;
        u.use_rb = 1'b1;
        u.link   = i[31:26] == OP_JALR;
        u.we     = u.link;
        u.rd     = 5'd9;
      end
      OP_PFX:  u.kind = K_PREFIX;
      OP_LD, OP_LWZ: if (!(f.user && i[31:26] == OP_LD)) begin
        u.kind   = K_LOAD;
        u.we     = 1'b1;
        u.use_ra = 1'b1;
        u.wide   = i[31:26] == OP_LD;
      end
      OP_SD, OP_SW: if (!(f.user && i[31:26] == OP_SD)) begin
        u.kind   = K_STORE;
        u.use_ra = 1'b1;
        u.use_rb = 1'b1;
        u.wide   = i[31:26] == OP_SD;
        u.imm    = 64'(sext16({i[25:21], i[10:0]}));
      end
      OP_ADDI, OP_ANDI, OP_ORI, OP_XORI, OP_MOVHI, OP_SHI: begin
        u.kind    = K_ALU;
        u.we      = 1'b1;
        u.use_ra  = i[31:26] != OP_MOVHI;
        u.use_imm = 1'b1;
        unique case (i[31:26])
          OP_ADDI:  begin u.op = A_ADD; u.wr_cy = 1'b1; end
          OP_ANDI:  begin u.op = A_AND; u.imm = {48'h0, i[15:0]}; end
          OP_ORI:   begin u.op = A_OR;  u.imm = {48'h0, i[15:0]}; end
          OP_XORI:  u.op = A_XOR;
          OP_MOVHI: begin u.op = A_MOVHI; u.imm = {48'h0, i[15:0]}; end
          default: begin
            u.imm = {58'h0, i[5:0]};
            unique case (i[7:6])
              2'd0: u.op = A_SLL;
              2'd1: u.op = A_SRL;
              2'd2: u.op = A_SRA;
              default: u.op = A_ROR;
            endcase
          end
        endcase
      end
      OP_SFI: begin
        u.kind    = K_SF;
        u.use_ra  = 1'b1;
        u.use_imm = 1'b1;
        u.wr_f    = 1'b1;
      end
      OP_MFSPR: begin
        u.kind   = K_MFSPR;
        u.we     = 1'b1;
        u.use_ra = 1'b1;
        u.imm    = {48'h0, i[15:0]};
      end
      OP_MTSPR: begin
        u.kind   = K_MTSPR;
        u.use_ra = 1'b1;
        u.use_rb = 1'b1;
        u.imm    = {48'h0, i[25:21], i[10:0]};
      end
      OP_ALU: begin
        u.kind   = K_ALU;
        u.we     = 1'b1;
        u.use_ra = 1'b1;
        u.use_rb = 1'b1;
        unique case (i[3:0])
          4'h0: begin u.op = A_ADD;  u.wr_cy = 1'b1; end
          4'h1: begin u.op = A_ADDC; u.wr_cy = 1'b1; u.rd_cy = 1'b1; end
          4'h2: begin u.op = A_SUB;  u.wr_cy = 1'b1; end
          4'h3: u.op = A_AND;
          4'h4: u.op = A_OR;
          4'h5: u.op = A_XOR;
          4'h6: u.op = A_MUL;
          4'h8: unique case (i[7:6])
                  2'd0: u.op = A_SLL;
                  2'd1: u.op = A_SRL;
                  2'd2: u.op = A_SRA;
                  default: u.op = A_ROR;
                endcase
          default: u.kind = K_ILLEGAL;
        endcase
        if (u.kind == K_ILLEGAL) {u.we, u.use_ra, u.use_rb, u.wr_cy, u.rd_cy} = '0;
      end
      OP_SF: begin
        u.kind   = K_SF;
        u.use_ra = 1'b1;
        u.use_rb = 1'b1;
        u.wr_f   = 1'b1;
      end
      default: ;
    endcase
    if (u.rd == 5'd0) u.we = 1'b0;
    // user-mode immediates are encrypted: configuration B
    if (f.user && u.use_imm) begin
      u.cfg   = CFG_B;
      u.cbuf  = {pfx, i[15:0]};
      u.c_dec = 1'b1;
      u.c_sp  = dec_special({pfx, i[15:0]});
      u.c_lo  = {pfx[15:0], i[15:0]};
    end
    return u;
  endfunction

  function automatic logic serialising(input uop_t u);
    return u.kind inside {K_SYS, K_TRAP, K_RFE, K_ILLEGAL} ||
           (u.kind == K_NOP && u.instr[15:0] == NOP_EXIT);
  endfunction

  // ------------------------------------------------------------- codec
  word_t cb_next [2:13];
  for (genvar k = 2; k <= 13; k++) begin : g_codec
    logic       act, dec;
    logic [3:0] rnd;
    word_t      o;
    assign act = s[k].valid && s[k].user &&
                 ((s[k].cfg == CFG_B && k <= 11) ||
                  (s[k].cfg == CFG_A && s[k].c_on && k >= 4));
    assign rnd = (s[k].cfg == CFG_B) ? 4'(k - 1) : 4'(k - 3);
    assign dec = (s[k].cfg == CFG_B) ? 1'b1 : s[k].c_dec;
    kpu_codec_stage u_stage (
      .state_i(s[k].cbuf), .dec_i(dec), .round_i(act ? rnd : 4'd1), .rk, .state_o(o)
    );
    assign cb_next[k] = !act ? s[k].cbuf :
                        (rnd == 4'd10 && s[k].c_sp) ? special_out(dec, s[k].c_lo) : o;
  end

  // ------------------------------------------------ execute, slot 3 (A / S)
  uop_t        e3;
  logic        ex3, stall;
  logic        fa_hit, fa_ok, fb_hit, fb_ok, ff_hit, ff_ok, fc_hit, fc_ok;
  word_t       fa_val, fb_val;
  logic        ff_val, fc_val;
  word_t       opa3, opb3, alu3_res;
  logic        alu3_cy, alu3_ov, alu3_f;
  logic        tk3, mispred;
  logic [31:0] tgt3, next3;

  always_comb begin
    e3  = s[3];
    ex3 = e3.valid && (!e3.user || e3.cfg == CFG_A);
    {fa_hit, fa_ok, fb_hit, fb_ok, ff_hit, ff_ok, fc_hit, fc_ok, ff_val, fc_val} = '0;
    fa_val = '0;
    fb_val = '0;
    // oldest first, so the newest older producer wins
    for (int k = NSLOTS; k >= 4; k--) begin
      if (s[k].valid && s[k].user == e3.user) begin
        if (s[k].we && s[k].rd == e3.ra) begin
          fa_hit = 1'b1; fa_ok = s[k].res_ok; fa_val = s[k].res;
        end
        if (s[k].we && s[k].rd == e3.rb) begin
          fb_hit = 1'b1; fb_ok = s[k].res_ok; fb_val = s[k].res;
        end
        if (s[k].wr_f) begin
          ff_hit = 1'b1; ff_ok = s[k].res_ok; ff_val = s[k].f;
        end
        if (s[k].wr_cy) begin
          fc_hit = 1'b1; fc_ok = s[k].res_ok; fc_val = s[k].cy;
        end
      end
    end
    if (e3.ra == 5'd0) fa_hit = 1'b0;
    if (e3.rb == 5'd0) fb_hit = 1'b0;
    stall = ex3 && ((e3.use_ra && fa_hit && !fa_ok) || (e3.use_rb && fb_hit && !fb_ok) ||
                    (e3.rd_f && ff_hit && !ff_ok) || (e3.rd_cy && fc_hit && !fc_ok));
    opa3 = fa_hit ? fa_val : e3.a;
    opb3 = e3.use_imm ? e3.imm : (fb_hit ? fb_val : e3.b);
  end

  kpu_alu u_alu3 (
    .op(e3.op), .cond(e3.cond), .user(e3.user), .a(opa3), .b(opb3),
    .cy_i(fc_hit ? fc_val : sr_q[SR_CY]), .res(alu3_res), .cy_o(alu3_cy),
    .ov_o(alu3_ov), .flag_o(alu3_f)
  );

  always_comb begin
    logic fl;
    fl   = ff_hit ? ff_val : sr_q[SR_F];
    tk3  = 1'b0;
    tgt3 = e3.pc + 32'd4;
    unique case (e3.kind)
      K_JUMP:   begin tk3 = 1'b1; tgt3 = e3.pc + e3.imm[31:0]; end
      K_BRANCH: begin tk3 = (fl == e3.cond[0]); tgt3 = e3.pc + e3.imm[31:0]; end
      K_JUMPR:  begin tk3 = 1'b1; tgt3 = opb3[31:0]; end
      default: ;
    endcase
    next3   = tk3 ? tgt3 : e3.pc + 32'd4;
    mispred = ex3 && !stall && next3 != (e3.pred_tk ? e3.pred_tgt : e3.pc + 32'd4);
  end

  logic [31:0] addr3;
  logic [15:0] sprn3;
  word_t       sprv3;
  always_comb begin
    addr3 = opa3[31:0] + e3.imm[31:0];
    sprn3 = opa3[15:0] | e3.imm[15:0];
    unique case (sprn3)
      SPR_SR:   sprv3 = {48'h0, sr_q};
      SPR_EPCR: sprv3 = {32'h0, epcr_q};
      SPR_ESR:  sprv3 = {48'h0, esr_q};
      default:  sprv3 = '0;
    endcase
  end

  // ------------------------------------------------ execute, slot 13 (B)
  uop_t  e13;
  word_t opa13, alu13_res;
  logic  alu13_cy, alu13_ov, alu13_f, f13a;
  always_comb begin
    e13   = s[13];
    f13a  = s[14].valid && s[14].we && s[14].rd == e13.ra && e13.ra != 5'd0;
    opa13 = f13a ? s[14].res : e13.a;
  end
  kpu_alu u_alu13 (
    .op(e13.op), .cond(e13.cond), .user(1'b1), .a(opa13), .b(e13.cbuf),
    .cy_i((s[14].valid && s[14].wr_cy) ? s[14].cy : sr_q[SR_CY]),
    .res(alu13_res), .cy_o(alu13_cy), .ov_o(alu13_ov), .flag_o(alu13_f)
  );

  // ------------------------------------------------------ write, slots 4/14
  uop_t  w4, w14;
  logic  w4v, w14v, sw_ev, sw_user;
  logic [31:0] sw_pc;

  always_comb begin
    w4   = s[4];
    w14  = s[14];
    w4v  = w4.valid && !w4.user;
    w14v = w14.valid && w14.user;
    // real register file
    rw_en = 1'b0; rw_addr = '0; rw_data = '0;
    sw_en = 1'b0; sw_addr = '0; sw_data = '0;
    if (w4v && w4.we) begin
      rw_en = 1'b1; rw_addr = w4.rd; rw_data = w4.res;
    end
    if (w14v) begin
      unique case (w14.kind)
        K_SYNC_ENC: begin rw_en = 1'b1; rw_addr = w14.rd; rw_data = w14.cbuf; end
        K_SYNC_DEC: begin sw_en = 1'b1; sw_addr = w14.rd; sw_data = w14.cbuf; end
        default: if (w14.we) begin
          sw_en = 1'b1; sw_addr = w14.rd; sw_data = w14.res;
          if (w14.link) begin
            rw_en = 1'b1; rw_addr = w14.rd; rw_data = {32'h0, w14.res[31:0]};
          end
          // a load served by the codec also stores the cipher text it read;
          // a cache hit leaves the real register stale instead
          if (w14.kind == K_LOAD && w14.c_on) begin
            rw_en = 1'b1; rw_addr = w14.rd; rw_data = w14.mem_ct;
          end
        end
      endcase
    end
    // mode switches
    sw_ev   = 1'b0;
    sw_pc   = '0;
    sw_user = 1'b0;
    if ((w4v && w4.kind inside {K_SYS, K_TRAP, K_ILLEGAL, K_RFE}) ||
        (w14v && w14.kind inside {K_SYS, K_TRAP, K_ILLEGAL})) begin
      uop_t w;
      w     = w14v ? w14 : w4;
      sw_ev = 1'b1;
      unique case (w.kind)
        K_SYS:   sw_pc = SYSCALL_VEC;
        K_TRAP:  sw_pc = TRAP_VEC;
        K_RFE:   begin sw_pc = epcr_q; sw_user = !esr_q[SR_SM]; end
        default: sw_pc = ILLEGAL_VEC;
      endcase
    end
  end

  // ------------------------------------------------------------ sequencing
  uop_t sync_u;
  logic [4:0] sync_i;
  always_comb begin
    sync_i = '0;
    for (int r = 31; r >= 0; r--) if (svec_q[r]) sync_i = 5'(r);
    sync_u        = '0;
    sync_u.valid  = 1'b1;
    sync_u.user   = 1'b1;
    sync_u.cfg    = CFG_A;
    sync_u.kind   = sdec_q ? K_SYNC_DEC : K_SYNC_ENC;
    sync_u.rd     = sync_i;
    sync_u.c_on   = 1'b1;
    sync_u.c_dec  = sdec_q;
    sync_u.cbuf   = sdec_q ? rr_data[2] : sr_data[4];
    sync_u.c_sp   = sdec_q ? dec_special(rr_data[2]) : enc_special(sr_data[4]);
    sync_u.c_lo   = sdec_q ? rr_data[2][31:0] : sr_data[4][31:0];
  end

  always_comb begin
    // register read ports
    rr_addr = {sync_i, s[2].rb, s[2].ra};
    sr_addr = {sync_i, s[12].rb, s[12].ra, s[2].rb, s[2].ra};
  end

  logic fetch_en, d_is_pfx;
  assign d_is_pfx = s[1].instr[31:26] == OP_PFX;
  assign fetch_en  = sst_q == S_RUN && !hold_q && !halted_q;
  assign imem_addr = pc_q;

  always_comb begin
    uop_t f, d, r2, x;
    for (int k = 1; k <= int'(NSLOTS); k++) n[k] = s[k];
    pc_n   = pc_q;
    hold_n = hold_q;

    // slot 14 <- 13 (B executes in 13; A load misses finish decryption)
    x = s[13];
    x.cbuf = cb_next[13];
    if (x.valid && x.user && x.cfg == CFG_B) begin
      x.res = alu13_res;  x.f = alu13_f;  x.cy = alu13_cy;  x.ov = alu13_ov;
      x.res_ok = 1'b1;
    end
    if (x.valid && x.kind == K_LOAD && !x.res_ok) begin
      x.res = cb_next[13]; x.res_ok = 1'b1;
    end
    n[14] = x;
    // slots 6..13
    for (int k = 5; k <= 12; k++) begin
      x = s[k];
      x.cbuf = cb_next[k];
      // configuration B reads its register in slot 12
      if (x.valid && x.user && x.cfg == CFG_B && k == 12) x.a = sr_data[2];
      n[k+1] = x;
    end
    // slot 5 <- 4 : supervisor instructions have retired; user loads see the cache
    x = s[4];
    x.cbuf = cb_next[4];
    if (!x.user) x.valid = 1'b0;
    if (x.valid && x.kind == K_LOAD && x.cfg == CFG_A && dc_hit) begin
      x.res = dc_rdata; x.res_ok = 1'b1; x.c_on = 1'b0;
    end
    n[5] = x;

    // slot 4 <- 3 (execute)
    x = s[3];
    if (x.valid && x.user && x.cfg == CFG_B) begin
      x.cbuf = cb_next[3];
    end else if (ex3) begin
      x.a = opa3;
      x.b = opb3;
      unique case (x.kind)
        K_ALU:   begin x.res = alu3_res; x.cy = alu3_cy; x.ov = alu3_ov; x.res_ok = 1'b1; end
        K_SF:    begin x.f = alu3_f; x.res_ok = 1'b1; end
        K_MFSPR: begin x.res = x.user ? '0 : sprv3; x.res_ok = 1'b1; end
        K_JUMP, K_JUMPR: begin
          x.res    = x.user ? {PADDR_TAG, 16'h0, e3.pc + 32'd4} : {32'h0, e3.pc + 32'd4};
          x.res_ok = 1'b1;
        end
        K_NOP:   begin x.res = opa3; x.res_ok = 1'b1; end
        K_LOAD: begin
          x.addr = addr3;
          if (x.user) begin
            x.mem_ct = dmem_rdata;
            x.cbuf   = dmem_rdata;
            x.c_on   = 1'b1;
            x.c_dec  = 1'b1;
            x.c_sp   = dec_special(dmem_rdata);
            x.c_lo   = dmem_rdata[31:0];
          end else begin
            x.res    = x.wide ? dmem_rdata : {32'h0, dmem_rdata[31:0]};
            x.res_ok = 1'b1;
          end
        end
        K_STORE: begin
          x.addr = addr3;
          x.res_ok = 1'b1;
          if (x.user) begin
            x.cbuf  = opb3;
            x.c_on  = 1'b1;
            x.c_dec = 1'b0;
            x.c_sp  = enc_special(opb3);
            x.c_lo  = opb3[31:0];
          end
        end
        default: x.res_ok = 1'b1;
      endcase
    end
    n[4] = stall ? '0 : x;

    // slot 3 <- 2 (read)
    r2 = s[2];
    if (r2.valid && r2.user && r2.cfg == CFG_B) begin
      r2.cbuf = cb_next[2];
    end else begin
      r2.a = r2.user ? sr_data[0] : rr_data[0];
      r2.b = r2.user ? sr_data[1] : rr_data[1];
    end
    if (stall) begin
      // keep the waiting instruction's operands current with each write
      n[3] = s[3];
      if (e3.user && sw_en && sw_addr == e3.ra) n[3].a = sw_data;
      if (e3.user && sw_en && sw_addr == e3.rb) n[3].b = sw_data;
      if (!e3.user && rw_en && rw_addr == e3.ra) n[3].a = rw_data;
      if (!e3.user && rw_en && rw_addr == e3.rb) n[3].b = rw_data;
    end else begin
      n[3] = r2;
    end

    // slot 2 <- 1 (decode)
    d = decode(s[1], pfx_q);
    if (!stall) begin
      n[2] = s[1].valid ? d : '0;
      if (s[1].valid && serialising(d)) hold_n = 1'b1;
    end

    // slot 1 <- fetch
    f          = '0;
    f.valid    = 1'b1;
    f.user     = mode_q;
    f.pc       = pc_q;
    f.instr    = imem_rdata;
    f.pred_hit = bp_hit;
    f.pred_tk  = bp_tk;
    f.pred_tgt = bp_tgt;
    if (!stall) begin
      if (fetch_en && !(s[1].valid && serialising(d))) begin
        n[1] = f;
        pc_n = bp_tk ? bp_tgt : pc_q + 32'd4;
      end else begin
        n[1] = '0;
      end
    end

    // misprediction: drop everything younger than the instruction in Execute
    if (mispred) begin
      n[1] = '0; n[2] = '0; n[3] = '0;
      pc_n   = next3;
      hold_n = 1'b0;
    end

    // mode switch: nothing older than the switching instruction is left
    if (sw_ev) begin
      for (int k = 1; k <= int'(NSLOTS); k++) n[k] = '0;
    end
    if (sst_q == S_SYNC && svec_q != '0) n[4] = sync_u;
    if (sst_q == S_DRAIN && n[1].valid == 1'b0) begin
      pc_n   = tpc_q;
      hold_n = 1'b0;
    end
  end

  logic pipe_empty;
  always_comb begin
    pipe_empty = 1'b1;
    for (int k = 1; k <= int'(NSLOTS); k++) if (s[k].valid) pipe_empty = 1'b0;
  end

  // data memory and cache ports
  always_comb begin
    dmem_re    = ex3 && !stall && e3.kind == K_LOAD;
    dmem_ruser = e3.user;
    dmem_raddr = addr3;
    dc_re      = dmem_re && e3.user;
    dc_raddr   = addr3;
    dc_we      = ex3 && !stall && e3.kind == K_STORE && e3.user;
    dc_waddr   = addr3;
    dc_wdata   = opb3;
    dmem_we    = 1'b0;
    dmem_wuser = 1'b0;
    dmem_waddr = '0;
    dmem_wdata = '0;
    if (ex3 && !stall && e3.kind == K_STORE && !e3.user) begin
      dmem_we    = 1'b1;
      dmem_waddr = addr3;
      dmem_wdata = e3.wide ? opb3 : {32'h0, opb3[31:0]};
    end else if (w14v && w14.kind == K_STORE) begin
      dmem_we    = 1'b1;
      dmem_wuser = 1'b1;
      dmem_waddr = w14.addr;
      dmem_wdata = w14.cbuf;
    end
    bpu_en  = ex3 && !stall && e3.kind inside {K_JUMP, K_BRANCH, K_JUMPR};
    bpu_pc  = e3.pc;
    bpu_tk  = tk3;
    bpu_tgt = tgt3;
  end

  // ------------------------------------------------------------ registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 1; k <= int'(NSLOTS); k++) s[k] <= '0;
      pc_q           <= RESET_PC;
      mode_q         <= 1'b0;
      hold_q         <= 1'b0;
      pfx_q          <= '0;
      sr_q           <= 16'h8001;          // FO and SM set: supervisor after reset
      esr_q          <= '0;
      epcr_q         <= '0;
      hidden_q       <= '0;
      real_stale_q   <= '0;
      shadow_stale_q <= '0;
      halted_q       <= 1'b0;
      sst_q          <= S_RUN;
      svec_q         <= '0;
      sdec_q         <= 1'b0;
      tpc_q          <= '0;
      tmode_q        <= 1'b0;
      perf           <= '0;
      report_valid   <= 1'b0;
      report_data    <= '0;
    end else begin
      for (int k = 1; k <= int'(NSLOTS); k++) s[k] <= n[k];
      pc_q   <= pc_n;
      hold_q <= hold_n;
      if (s[1].valid && !stall && !mispred && d_is_pfx) pfx_q <= {pfx_q[23:0], s[1].instr[23:0]};

      // staleness of the two register copies
      if (w14v && sw_en && !(rw_en && rw_addr == sw_addr)) real_stale_q[sw_addr] <= 1'b1;
      if (w14v && rw_en) real_stale_q[rw_addr] <= 1'b0;
      if (w4v && rw_en)  shadow_stale_q[rw_addr] <= 1'b1;
      if (w14v && w14.kind == K_SYNC_DEC) shadow_stale_q[w14.rd] <= 1'b0;

      // flags written in the write slot
      if (w4v && w4.wr_f)   sr_q[SR_F] <= w4.f;
      if (w4v && w4.wr_cy)  {sr_q[SR_OV], sr_q[SR_CY]} <= {w4.ov, w4.cy};
      if (w14v && w14.wr_f)  sr_q[SR_F] <= w14.f;
      if (w14v && w14.wr_cy) {sr_q[SR_OV], sr_q[SR_CY]} <= {w14.ov, w14.cy};

      // supervisor SPR writes happen in Execute (the front end holds no
      // speculative older work there); SM changes only through exceptions
      if (ex3 && !stall && e3.kind == K_MTSPR && !e3.user) begin
        unique case (sprn3)
          SPR_SR:   sr_q   <= {opb3[15:1], sr_q[SR_SM]};
          SPR_EPCR: epcr_q <= opb3[31:0];
          SPR_ESR:  esr_q  <= opb3[15:0];
          default: ;
        endcase
      end

      // reports
      report_valid <= 1'b0;
      if ((w4v && w4.kind == K_NOP) || (w14v && w14.kind == K_NOP)) begin
        uop_t w;
        w = w14v ? w14 : w4;
        if (w.instr[15:0] == NOP_REPORT) begin
          report_valid <= 1'b1;
          report_data  <= w.res[31:0];
        end
        if (w.instr[15:0] == NOP_EXIT) halted_q <= 1'b1;
      end

      // mode switches and register synchronisation
      if (sw_ev) begin
        uop_t w;
        logic [15:0] srv;
        w   = w14v ? w14 : w4;
        srv = sr_q;
        sst_q   <= S_SYNC;
        tpc_q   <= sw_pc;
        tmode_q <= sw_user;
        if (w.kind == K_RFE) begin
          sr_q   <= esr_q;
          sdec_q <= 1'b1;
          svec_q <= sw_user ? shadow_stale_q : '0;
          if (sw_user) {sr_q[SR_OV], sr_q[SR_CY], sr_q[SR_F]} <= hidden_q;
        end else begin
          if (w.user) begin
            hidden_q <= {srv[SR_OV], srv[SR_CY], srv[SR_F]};
            {srv[SR_OV], srv[SR_CY], srv[SR_F]} = '0;
          end
          esr_q  <= srv;
          epcr_q <= (w.kind == K_SYS) ? w.pc + 32'd4 : w.pc;
          sr_q   <= srv | 16'h0001;
          sdec_q <= 1'b0;
          svec_q <= w.user ? (real_stale_q & ~32'h1) : '0;
        end
      end else if (sst_q == S_SYNC) begin
        if (svec_q == '0) sst_q <= S_DRAIN;
        else svec_q[sync_i] <= 1'b0;
      end else if (sst_q == S_DRAIN && pipe_empty) begin
        sst_q  <= S_RUN;
        mode_q <= tmode_q;
      end

      // counters
      perf.cycles <= perf.cycles + 1;
      if (mode_q) perf.user_cycles <= perf.user_cycles + 1;
      if (w14v && !(w14.kind inside {K_SYNC_ENC, K_SYNC_DEC})) begin
        perf.user_instr <= perf.user_instr + 1;
        if (w14.kind == K_PREFIX) perf.prefix_instr <= perf.prefix_instr + 1;
        if (w14.cfg == CFG_B) perf.cfg_b_instr <= perf.cfg_b_instr + 1;
        if (w14.kind == K_LOAD && w14.c_on) perf.codec_loads <= perf.codec_loads + 1;
      end
      if (w4v) perf.super_instr <= perf.super_instr + 1;
      if (w14v && w14.kind inside {K_SYNC_ENC, K_SYNC_DEC}) perf.syncs <= perf.syncs + 1;
      if (stall) perf.stalls <= perf.stalls + 1;
      if (mispred) perf.refills <= perf.refills + 1;
      if (sw_ev) perf.switches <= perf.switches + 1;
      if (ex3 && !stall && ((e3.use_ra && fa_hit) || (e3.use_rb && fb_hit)))
        perf.forwards <= perf.forwards + 1;
      if (bpu_en) begin
        if (e3.pred_hit && !mispred)  perf.bp_hit_right  <= perf.bp_hit_right + 1;
        if (e3.pred_hit && mispred)   perf.bp_hit_wrong  <= perf.bp_hit_wrong + 1;
        if (!e3.pred_hit && !mispred) perf.bp_miss_right <= perf.bp_miss_right + 1;
        if (!e3.pred_hit && mispred)  perf.bp_miss_wrong <= perf.bp_miss_wrong + 1;
      end
    end
  end

  assign halted    = halted_q;
  assign user_mode = mode_q;
  assign sr        = sr_q;

endmodule
