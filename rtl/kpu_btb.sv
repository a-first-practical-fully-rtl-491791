// kpu_btb -- branch prediction cache consulted at fetch.
//
// A direct-mapped buffer of ENTRIES lines indexed by the word address of the
// program counter (program addresses are never encrypted, so ordinary
// prediction works). Each line holds a tag, the last target and a 2-bit
// saturating counter. Lookup is combinational: on a hit with the counter at 2
// or 3 the fetch stage follows the stored target, otherwise it falls through.
// Updates come from the execute stage for every resolved control transfer; a
// taken transfer that misses allocates the line with the counter at 2. The
// paper only names the buffer and reports its hit/miss and right/wrong counts;
// its organisation here is this design's choice.
module kpu_btb #(
  parameter int unsigned ENTRIES = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] lk_pc,
  output logic        lk_hit,
  output logic        lk_taken,
  output logic [31:0] lk_target,
  input  logic        up_en,
  input  logic [31:0] up_pc,
  input  logic        up_taken,
  input  logic [31:0] up_target
);

  localparam int unsigned IW = $clog2(ENTRIES);

  logic [ENTRIES-1:0] valid_q;
  logic [31:0]        tag_q [ENTRIES];
  logic [31:0]        tgt_q [ENTRIES];
  logic [1:0]         ctr_q [ENTRIES];
  logic [IW-1:0]      li, ui;
  logic               uhit;

  assign li        = lk_pc[IW+1:2];
  assign ui        = up_pc[IW+1:2];
  assign lk_hit    = valid_q[li] && tag_q[li] == lk_pc;
  assign lk_taken  = lk_hit && ctr_q[li][1];
  assign lk_target = tgt_q[li];
  assign uhit      = valid_q[ui] && tag_q[ui] == up_pc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= '0;
    end else if (up_en) begin
      if (uhit) begin
        if (up_taken) begin
          tgt_q[ui] <= up_target;
          if (ctr_q[ui] != 2'd3) ctr_q[ui] <= ctr_q[ui] + 2'd1;
        end else if (ctr_q[ui] != 2'd0) begin
          ctr_q[ui] <= ctr_q[ui] - 2'd1;
        end
      end else if (up_taken) begin
        valid_q[ui] <= 1'b1;
        tag_q[ui]   <= up_pc;
        tgt_q[ui]   <= up_target;
        ctr_q[ui]   <= 2'd2;
      end
    end
  end

endmodule
