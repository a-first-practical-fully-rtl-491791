// kpu_regfile -- 32 x 64-bit register file with NREAD combinational read
// ports, one write port and write-through bypass.
//
// The processor uses two of these: the real general purpose registers, which
// hold cipher text for user programs and plain values for the supervisor, and
// the user-mode-only shadow registers, which hold the decrypted form of the
// same values and are visible only to user-mode instructions. A read of the
// register being written in the same cycle returns the new value. Register 0
// reads as zero and ignores writes (OpenRISC convention). All registers reset
// to zero.
module kpu_regfile #(
  parameter int unsigned NREAD = 2
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [NREAD-1:0][4:0]  raddr,
  output logic [NREAD-1:0][63:0] rdata,
  input  logic                   we,
  input  logic [4:0]             waddr,
  input  logic [63:0]            wdata,
  output logic [31:0][63:0]      regs      // whole file, for debug observation
);

  logic [31:0][63:0] r_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                     r_q <= '0;
    else if (we && waddr != 5'd0)   r_q[waddr] <= wdata;
  end

  always_comb begin
    for (int p = 0; p < int'(NREAD); p++) begin
      if (raddr[p] == 5'd0)                  rdata[p] = '0;
      else if (we && waddr == raddr[p])      rdata[p] = wdata;
      else                                   rdata[p] = r_q[raddr[p]];
    end
  end

  assign regs = r_q;

endmodule
