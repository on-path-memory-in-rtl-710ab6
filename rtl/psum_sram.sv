// psum_sram: two-port SRAM of one path, DEPTH words of W bits, READS read ports.
//
// One write port and READS (1 or 2) read ports, all usable in the same cycle, as the
// paper's SRAMs read and write at the same time. The write is synchronous; the reads are
// asynchronous, so a word written in one cycle is seen by a read in the next cycle, which
// the serial partial-sum schedule needs (a word produced in cycle j is an operand in a
// later cycle). The merged memory uses two read ports (port width 2P), the folded path
// memory one (port width P). A real chip would use an SRAM macro here; the read timing of
// that macro (registered read data) is not modelled.
module psum_sram #(
  parameter int unsigned DEPTH = 16,
  parameter int unsigned W     = 64,
  parameter int unsigned READS = 2,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                      clk,
  input  logic                      we,
  input  logic [AW-1:0]             waddr,
  input  logic [W-1:0]              wdata,
  input  logic [READS-1:0][AW-1:0]  raddr,
  output logic [READS-1:0][W-1:0]   rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk)
    if (we) mem[waddr] <= wdata;

  always_comb
    for (int unsigned r = 0; r < READS; r++)
      rdata[r] = mem[raddr[r]];
endmodule
