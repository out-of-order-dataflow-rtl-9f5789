// graph_mem: local graph memory of one processing element.
//
// 4096 words of 40 bits: eight 512x40 M20K blocks, as in the paper, stacked
// by address (bank = address[11:9]). It holds the node records, the fanout
// lists and, in words 0..255, the region reserved for the RDY/SENT bit-flags.
// The paper multi-pumps the BRAMs to get extra virtual ports; here that is
// captured as NPORTS independent read/write ports on one clock (a true
// dual-port M20K clocked at twice the PE clock gives four). Each port either
// reads or writes in a cycle. Reads are registered (data one cycle after the
// address) and return the value from before any write of the same cycle.
// When several ports write one address in the same cycle, the highest-
// numbered port wins. The port count, the read latency and the collision
// rule are this design's choices; the paper does not give them.
module graph_mem
  import tdp_pkg::*;
#(
  parameter int unsigned BANKS      = 8,
  parameter int unsigned BANK_DEPTH = 512,
  parameter int unsigned NPORTS     = 4,
  localparam int unsigned DEPTH     = BANKS * BANK_DEPTH,
  localparam int unsigned AW        = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              we    [NPORTS],
  input  logic [AW-1:0]     addr  [NPORTS],
  input  logic [WORD_W-1:0] wdata [NPORTS],
  output logic [WORD_W-1:0] rdata [NPORTS]
);

  logic [WORD_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    for (int p = 0; p < NPORTS; p++) begin
      rdata[p] <= mem[addr[p]];
    end
    for (int p = 0; p < NPORTS; p++) begin
      if (we[p]) mem[addr[p]] <= wdata[p];
    end
  end

endmodule
