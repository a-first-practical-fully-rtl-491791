// kpu_user_dcache -- the user-mode-only data cache of decrypted values.
//
// Every user-mode store writes the decrypted 64-bit block it stores (while the
// encrypted copy goes on to memory); every user-mode load looks here first, so
// a hit delivers the decrypted value without waiting for the codec. The cache
// lives inside the processor's protected boundary. Organisation (direct
// mapped, LINES entries, indexed and tagged by the 32-bit decrypted word
// address, written on stores only) is this design's choice: the paper gives
// only the cache's function and its hit statistics.
//
// Timing: a read presented in one cycle (rd_en, rd_addr) returns rd_hit and
// rd_data in the next; a write (wr_en) takes effect at the clock edge and is
// seen by a read presented in the following cycle. Hit/miss counters count
// reads and writes separately (a write "hits" when the line already held that
// address).
module kpu_user_dcache #(
  parameter int unsigned LINES = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        rd_en,
  input  logic [31:0] rd_addr,
  output logic        rd_hit,
  output logic [63:0] rd_data,
  input  logic        wr_en,
  input  logic [31:0] wr_addr,
  input  logic [63:0] wr_data,
  output logic [31:0] rd_hits, rd_misses, wr_hits, wr_misses
);

  localparam int unsigned IW = $clog2(LINES);

  logic [LINES-1:0]        valid_q;
  logic [31:0]             tag_q  [LINES];
  logic [63:0]             data_q [LINES];
  logic [IW-1:0]           ri, wi;

  // word index: user data words are 4-byte OpenRISC words
  assign ri = rd_addr[IW+1:2];
  assign wi = wr_addr[IW+1:2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q   <= '0;
      rd_hit    <= 1'b0;
      rd_data   <= '0;
      rd_hits   <= '0;
      rd_misses <= '0;
      wr_hits   <= '0;
      wr_misses <= '0;
    end else begin
      rd_hit <= 1'b0;
      if (rd_en) begin
        rd_hit  <= valid_q[ri] && tag_q[ri] == rd_addr;
        rd_data <= data_q[ri];
        if (valid_q[ri] && tag_q[ri] == rd_addr) rd_hits <= rd_hits + 1;
        else                                     rd_misses <= rd_misses + 1;
      end
      if (wr_en) begin
        valid_q[wi] <= 1'b1;
        tag_q[wi]   <= wr_addr;
        data_q[wi]  <= wr_data;
        if (valid_q[wi] && tag_q[wi] == wr_addr) wr_hits <= wr_hits + 1;
        else                                     wr_misses <= wr_misses + 1;
      end
    end
  end

endmodule
