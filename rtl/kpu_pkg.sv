// kpu_pkg -- types, instruction encodings and arithmetic helpers shared by the
// encrypted-mode ("KPU") OpenRISC processor.
//
// Data words are 64 bits. In user (encrypted) mode a register or memory word
// holds a 64-bit cipher block; its decrypted form is a 64-bit plaintext block
// {pad[31:0], value[31:0]}: 32 bits of meaningful data under 32 bits of padding.
// Program addresses are never encrypted. Their "encrypted" form is the address
// zero-filled to 64 bits and their "decrypted" form has the top 16 bits set to
// 16'h7fff; pads of real data are kept away from both forms.
//
// The cipher is a 64-bit-block, 64-bit-key member of the Rijndael family with
// 10 rounds (one per codec pipeline stage). Rijndael itself defines only 128 to
// 256-bit blocks, so the 2-column state, the ShiftRows offsets (0,1,0,1) and
// the key expansion for Nk=2 are this design's own generalisation. The S-box is
// computed (GF(2^8) inverse followed by the AES affine map), not tabulated.
//
// The pad function (how the padding of a result is derived from the padding of
// the operands) is this design's choice; it is deterministic, so repeating a
// calculation reproduces the same cipher text, as the addressing discipline of
// encrypted programs requires.
package kpu_pkg;

  typedef logic [63:0] word_t;

  localparam int unsigned CODEC_ROUNDS = 10;   // codec stages
  localparam int unsigned NSLOTS       = 14;   // pipeline slots after fetch
  localparam int unsigned W_SUPER      = 4;    // write slot, supervisor mode
  localparam int unsigned W_USER       = 14;   // write slot, user mode

  // program-address forms
  localparam logic [15:0] PADDR_TAG = 16'h7fff;

  // OpenRISC 1000 major opcodes used here (bits 31:26)
  localparam logic [5:0] OP_J     = 6'h00;
  localparam logic [5:0] OP_JAL   = 6'h01;
  localparam logic [5:0] OP_BNF   = 6'h03;
  localparam logic [5:0] OP_BF    = 6'h04;
  localparam logic [5:0] OP_NOP   = 6'h05;
  localparam logic [5:0] OP_MOVHI = 6'h06;
  localparam logic [5:0] OP_SYS   = 6'h08;  // bits 25:24 = 0 sys, 1 trap
  localparam logic [5:0] OP_RFE   = 6'h09;
  localparam logic [5:0] OP_JR    = 6'h11;
  localparam logic [5:0] OP_JALR  = 6'h12;
  localparam logic [5:0] OP_PFX   = 6'h1c;  // prefix: 24-bit segment in bits 23:0
  localparam logic [5:0] OP_LD    = 6'h20;  // 64-bit load (supervisor only)
  localparam logic [5:0] OP_LWZ   = 6'h21;
  localparam logic [5:0] OP_ADDI  = 6'h27;
  localparam logic [5:0] OP_ANDI  = 6'h29;
  localparam logic [5:0] OP_ORI   = 6'h2a;
  localparam logic [5:0] OP_XORI  = 6'h2b;
  localparam logic [5:0] OP_MFSPR = 6'h2d;
  localparam logic [5:0] OP_SHI   = 6'h2e;
  localparam logic [5:0] OP_SFI   = 6'h2f;
  localparam logic [5:0] OP_MTSPR = 6'h30;
  localparam logic [5:0] OP_SD    = 6'h34;  // 64-bit store (supervisor only)
  localparam logic [5:0] OP_SW    = 6'h35;
  localparam logic [5:0] OP_ALU   = 6'h38;
  localparam logic [5:0] OP_SF    = 6'h39;

  // l.nop immediates understood by the debug port
  localparam logic [15:0] NOP_EXIT   = 16'h0001;
  localparam logic [15:0] NOP_REPORT = 16'h0002;

  // exception vectors and SPR numbers (OpenRISC 1000)
  localparam logic [31:0] RESET_VEC   = 32'h0000_0100;
  localparam logic [31:0] ILLEGAL_VEC = 32'h0000_0700;
  localparam logic [31:0] SYSCALL_VEC = 32'h0000_0c00;
  localparam logic [31:0] TRAP_VEC    = 32'h0000_0e00;
  localparam logic [15:0] SPR_SR      = 16'd17;
  localparam logic [15:0] SPR_EPCR    = 16'd32;
  localparam logic [15:0] SPR_ESR     = 16'd64;

  // supervision register bits
  localparam int unsigned SR_SM  = 0;
  localparam int unsigned SR_F   = 9;
  localparam int unsigned SR_CY  = 10;
  localparam int unsigned SR_OV  = 11;
  localparam int unsigned SR_OVE = 12;
  localparam int unsigned SR_FO  = 15;

  typedef enum logic [1:0] {CFG_A, CFG_B} cfg_e;

  typedef enum logic [4:0] {
    K_NOP, K_PREFIX, K_ALU, K_SF, K_LOAD, K_STORE, K_BRANCH, K_JUMP, K_JUMPR,
    K_SYS, K_TRAP, K_RFE, K_MFSPR, K_MTSPR, K_ILLEGAL, K_SYNC_ENC, K_SYNC_DEC
  } kind_e;

  typedef enum logic [3:0] {
    A_ADD, A_ADDC, A_SUB, A_AND, A_OR, A_XOR, A_MUL, A_SLL, A_SRL, A_SRA,
    A_ROR, A_MOVHI
  } aluop_e;

  // one instruction in flight
  typedef struct packed {
    logic        valid;
    kind_e       kind;
    logic        user;       // fetched in user (encrypted) mode
    cfg_e        cfg;        // pipeline configuration (user mode)
    logic [31:0] pc;
    logic [31:0] instr;
    logic [4:0]  rd, ra, rb;
    logic        we;         // writes rd
    logic        use_ra, use_rb, use_imm;
    logic        rd_f, rd_cy; // reads flag F / carry
    logic        wr_f, wr_cy; // writes flag F / carry+overflow
    aluop_e      op;
    logic [4:0]  cond;       // set-flag condition
    logic        link;       // jal / jalr
    logic        wide;       // 64-bit load/store
    word_t       imm;        // supervisor immediate, sign/zero extended
    word_t       a, b;       // operands read at the Read stage
    word_t       res;        // result (plaintext in user mode)
    logic        res_ok;     // res valid
    logic        f, cy, ov;  // flag results
    word_t       cbuf;       // codec state
    logic        c_on;       // codec in use (configuration A)
    logic        c_dec;      // codec direction
    logic        c_sp;       // program-address special form
    logic [31:0] c_lo;       // low word kept for the special form
    word_t       mem_ct;     // cipher text loaded from memory
    logic [31:0] addr;       // data address
    logic        pred_hit, pred_tk;
    logic [31:0] pred_tgt;
  } uop_t;

  // performance counters (cf. the paper's run statistics)
  typedef struct packed {
    logic [31:0] cycles;
    logic [31:0] user_cycles;
    logic [31:0] user_instr;      // retired in user mode (prefixes included)
    logic [31:0] super_instr;     // retired in supervisor mode
    logic [31:0] prefix_instr;
    logic [31:0] cfg_b_instr;     // user instructions run in configuration B
    logic [31:0] stalls;          // cycles the execute stage waited on a hazard
    logic [31:0] refills;         // mispredictions that refilled the front end
    logic [31:0] switches;        // mode switches
    logic [31:0] syncs;           // register re-encryptions / re-decryptions
    logic [31:0] codec_loads;     // user loads served by the codec (cache miss)
    logic [31:0] forwards;        // operands taken from the forwarding network
    logic [31:0] bp_hit_right, bp_hit_wrong, bp_miss_right, bp_miss_wrong;
  } perf_t;

  // ---------------------------------------------------------------- padding
  function automatic logic [31:0] pad_mix(input logic [31:0] pa, input logic [31:0] pb,
                                          input logic [3:0] op);
    logic [31:0] x;
    x = {pa[26:0], pa[31:27]} ^ pb ^ {8{op}} ^ 32'h9e37_79b9;
    if (x[31:16] == PADDR_TAG) x[31:16] = 16'h7ffe;
    return x;
  endfunction

  // ---------------------------------------------------------------- GF(2^8)
  function automatic logic [7:0] xtime(input logic [7:0] a);
    return {a[6:0], 1'b0} ^ (a[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic logic [7:0] gf_mul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] p, t;
    p = '0;
    t = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p ^= t;
      t = xtime(t);
    end
    return p;
  endfunction

  function automatic logic [7:0] gf_inv(input logic [7:0] x);
    logic [7:0] x2, x3, x12, x15, x240;
    x2   = gf_mul(x, x);
    x3   = gf_mul(x2, x);
    x12  = gf_mul(gf_mul(x3, x3), gf_mul(x3, x3));
    x15  = gf_mul(x12, x3);
    x240 = gf_mul(x15, x15);        // x^30
    x240 = gf_mul(x240, x240);      // x^60
    x240 = gf_mul(x240, x240);      // x^120
    x240 = gf_mul(x240, x240);      // x^240
    return gf_mul(gf_mul(x240, x12), x2);  // x^254
  endfunction

  function automatic logic [7:0] rotl8(input logic [7:0] a, input int unsigned n);
    return (a << n) | (a >> (8 - n));
  endfunction

  function automatic logic [7:0] affine(input logic [7:0] b);
    return b ^ rotl8(b, 1) ^ rotl8(b, 2) ^ rotl8(b, 3) ^ rotl8(b, 4) ^ 8'h63;
  endfunction

  function automatic logic [7:0] inv_affine(input logic [7:0] s);
    return rotl8(s, 1) ^ rotl8(s, 3) ^ rotl8(s, 6) ^ 8'h05;
  endfunction

  function automatic logic [7:0] sbox(input logic [7:0] x);
    return affine(gf_inv(x));
  endfunction

  function automatic logic [7:0] inv_sbox(input logic [7:0] x);
    return gf_inv(inv_affine(x));
  endfunction

  // ---------------------------------------------------- Rijndael-64 layers
  // byte j of a block is blk[63-8j -: 8]; column c holds bytes 4c..4c+3.
  function automatic word_t shift_rows(input word_t s);
    // rows 1 and 3 rotate by one column, rows 0 and 2 stay: its own inverse
    word_t o;
    o = s;
    for (int r = 1; r < 4; r += 2) begin
      o[63-8*r -: 8]     = s[63-8*(r+4) -: 8];
      o[63-8*(r+4) -: 8] = s[63-8*r -: 8];
    end
    return o;
  endfunction

  function automatic logic [31:0] mix_col(input logic [31:0] c, input logic inv);
    logic [7:0] a0, a1, a2, a3;
    a0 = c[31:24]; a1 = c[23:16]; a2 = c[15:8]; a3 = c[7:0];
    if (!inv)
      return {gf_mul(a0,8'd2)^gf_mul(a1,8'd3)^a2^a3,
              a0^gf_mul(a1,8'd2)^gf_mul(a2,8'd3)^a3,
              a0^a1^gf_mul(a2,8'd2)^gf_mul(a3,8'd3),
              gf_mul(a0,8'd3)^a1^a2^gf_mul(a3,8'd2)};
    else
      return {gf_mul(a0,8'd14)^gf_mul(a1,8'd11)^gf_mul(a2,8'd13)^gf_mul(a3,8'd9),
              gf_mul(a0,8'd9)^gf_mul(a1,8'd14)^gf_mul(a2,8'd11)^gf_mul(a3,8'd13),
              gf_mul(a0,8'd13)^gf_mul(a1,8'd9)^gf_mul(a2,8'd14)^gf_mul(a3,8'd11),
              gf_mul(a0,8'd11)^gf_mul(a1,8'd13)^gf_mul(a2,8'd9)^gf_mul(a3,8'd14)};
  endfunction

  function automatic word_t mix_columns(input word_t s, input logic inv);
    return {mix_col(s[63:32], inv), mix_col(s[31:0], inv)};
  endfunction

  // program-address special forms of the codec
  function automatic logic enc_special(input word_t pt);
    return pt[63:48] == PADDR_TAG;
  endfunction
  function automatic logic dec_special(input word_t ct);
    return ct[63:32] == 32'h0;
  endfunction
  function automatic word_t special_out(input logic dec, input logic [31:0] lo);
    return dec ? {PADDR_TAG, 16'h0, lo} : {32'h0, lo};
  endfunction

  function automatic logic [31:0] sext16(input logic [15:0] v);
    return {{16{v[15]}}, v};
  endfunction

endpackage
