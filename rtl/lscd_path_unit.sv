// lscd_path_unit: partial-sum and decoded-bit storage of a list SC polar decoder.
//
// The unit receives, for every decoded bit, the list management result (parent path and
// new bit of each of the L surviving paths). It supplies the partial sums the G functions
// need: the P-bit register banks for stages <= p (ps_bank) and, for a G node at stage
// p+k > p, the 2^k serially generated words (ps_valid / ps_addr / ps_word), one per cycle
// starting the cycle after the LM that completes the left sibling. At the end of the frame
// it returns the N decoded bits of all L paths, one P-bit word of every path per cycle,
// for the CRC check and the final choice.
//
// SCHEME selects how the decoded bits are kept:
//  * SCHEME_MERGED (default): a merged memory alone. The decoded bits are recovered from
//    the partial-sum SRAMs in cycles the SRAMs are idle; rd_ready rises when recovery is
//    done (recov_busy low).
//  * SCHEME_FOLDED_PM: a list folded PSN (merged_memory without recovery) for the partial
//    sums plus a folded path memory for the decoded bits, both fed by the same LM results.
// Both schemes have the same ports and the same timing apart from the recovery wait.
module lscd_path_unit
  import polar_pkg::*;
#(
  parameter int unsigned  N      = 1024,
  parameter int unsigned  L      = 16,
  parameter int unsigned  P      = 64,
  parameter path_scheme_e SCHEME = SCHEME_MERGED,
  localparam int unsigned NW     = N / P,
  localparam int unsigned AW     = (NW > 1) ? $clog2(NW) : 1,
  localparam int unsigned LW     = (L > 1) ? $clog2(L) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic                 lm_valid,
  input  logic [L-1:0][LW-1:0] lm_parent,
  input  logic [L-1:0]         lm_bit,
  output logic                 lm_ready,
  output logic [L-1:0][P-1:0]  ps_bank,
  output logic                 ps_valid,
  output logic [AW-1:0]        ps_addr,
  output logic [L-1:0][P-1:0]  ps_word,
  output logic                 rd_ready,
  input  logic                 rd_start,
  output logic                 rd_valid,
  output logic [AW-1:0]        rd_addr,
  output logic [L-1:0][P-1:0]  rd_bits,
  output logic                 recov_busy
);
  if (SCHEME == SCHEME_MERGED) begin : g_merged
    merged_memory #(.N(N), .L(L), .P(P), .RECOVER(1'b1)) u_mm (
      .clk, .rst_n, .start, .lm_valid, .lm_parent, .lm_bit, .lm_ready,
      .ps_bank, .ps_valid, .ps_addr, .ps_word,
      .rd_ready, .rd_start, .rd_valid, .rd_addr, .rd_bits, .recov_busy);
  end else begin : g_folded
    logic                lm_ready_pm, unused_rd_ready, unused_rd_valid, unused_busy;
    logic [AW-1:0]       unused_rd_addr;
    logic [L-1:0][P-1:0] unused_rd_bits;
    logic                lm_ready_ps;
    merged_memory #(.N(N), .L(L), .P(P), .RECOVER(1'b0)) u_psn (
      .clk, .rst_n, .start, .lm_valid, .lm_parent, .lm_bit, .lm_ready(lm_ready_ps),
      .ps_bank, .ps_valid, .ps_addr, .ps_word,
      .rd_ready(unused_rd_ready), .rd_start(1'b0), .rd_valid(unused_rd_valid),
      .rd_addr(unused_rd_addr), .rd_bits(unused_rd_bits), .recov_busy(unused_busy));
    folded_path_memory #(.N(N), .L(L), .P(P)) u_fpm (
      .clk, .rst_n, .start, .lm_valid, .lm_parent, .lm_bit, .lm_ready(lm_ready_pm),
      .rd_ready, .rd_start, .rd_valid, .rd_addr, .rd_bits);
    assign lm_ready   = lm_ready_ps && lm_ready_pm;
    assign recov_busy = 1'b0;
  end
endmodule
