// kpu_tlb -- word-granularity translation buffer for user-mode data addresses.
//
// User data addresses leave the processor as scattered 64-bit values, so a
// page-granular TLB would be useless. This buffer maps each distinct 64-bit
// address to one 64-bit physical word in a preset range, handing out physical
// words in first-come, first-served order: the first address ever used gets
// PHYS_BASE, the next new one PHYS_BASE+1 and so on. Data first touched close
// together in time thus lands close together in memory. Entries are never
// evicted; when all ENTRIES are in use a new address cannot be mapped, ok is
// low for that access and the sticky full flag is raised.
//
// Two lookup ports (p = 0, 1) are combinational: a hit returns its physical
// word index at once, a miss returns the next free index and allocates it at
// the clock edge. If both ports miss on the same address in one cycle they
// share one allocation. The fully associative organisation, sizes and the
// behaviour when full are this design's choices.
module kpu_tlb #(
  parameter int unsigned ENTRIES   = 256,
  parameter logic [31:0] PHYS_BASE = 32'h0010_0000
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [1:0]       req,
  input  logic [1:0][63:0] vaddr,
  output logic [1:0][31:0] paddr,     // physical 64-bit-word index
  output logic [1:0]       ok,
  output logic [1:0]       alloc,     // this access allocated a new entry
  output logic             full,
  output logic [31:0]      used
);

  localparam int unsigned IW = $clog2(ENTRIES);

  logic [ENTRIES-1:0] valid_q;
  logic [63:0]        tag_q [ENTRIES];
  logic [IW:0]        next_q;
  logic [1:0]         hit;
  logic [1:0][IW-1:0] hidx;
  logic               same;

  always_comb begin
    hit  = '0;
    hidx = '0;
    for (int p = 0; p < 2; p++)
      for (int e = 0; e < int'(ENTRIES); e++)
        if (valid_q[e] && tag_q[e] == vaddr[p]) begin
          hit[p]  = 1'b1;
          hidx[p] = IW'(e);
        end
    same  = req[0] && req[1] && vaddr[0] == vaddr[1];
    alloc = '0;
    ok    = '0;
    paddr = '0;
    // port 0
    if (req[0]) begin
      if (hit[0]) begin
        ok[0] = 1'b1; paddr[0] = PHYS_BASE + 32'(hidx[0]);
      end else if (next_q < (IW+1)'(ENTRIES)) begin
        ok[0] = 1'b1; alloc[0] = 1'b1; paddr[0] = PHYS_BASE + 32'(next_q);
      end
    end
    // port 1
    if (req[1]) begin
      if (hit[1]) begin
        ok[1] = 1'b1; paddr[1] = PHYS_BASE + 32'(hidx[1]);
      end else if (same) begin
        ok[1] = ok[0]; paddr[1] = paddr[0];
      end else if (next_q + (IW+1)'(alloc[0]) < (IW+1)'(ENTRIES)) begin
        ok[1] = 1'b1; alloc[1] = 1'b1;
        paddr[1] = PHYS_BASE + 32'(next_q) + 32'(alloc[0]);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= '0;
      next_q  <= '0;
      full    <= 1'b0;
    end else begin
      if (alloc[0]) begin
        valid_q[next_q[IW-1:0]] <= 1'b1;
        tag_q[next_q[IW-1:0]]   <= vaddr[0];
      end
      if (alloc[1]) begin
        valid_q[IW'(next_q + (IW+1)'(alloc[0]))] <= 1'b1;
        tag_q[IW'(next_q + (IW+1)'(alloc[0]))]   <= vaddr[1];
      end
      next_q <= next_q + (IW+1)'(alloc[0]) + (IW+1)'(alloc[1]);
      if ((req[0] && !ok[0]) || (req[1] && !ok[1])) full <= 1'b1;
    end
  end

  assign used = 32'(next_q);

endmodule
