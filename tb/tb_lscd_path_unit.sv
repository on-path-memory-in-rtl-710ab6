// tb_lscd_path_unit: end-to-end test of lscd_path_unit at reduced sizes.
//
// Three units run whole frames of random list management under a modelled semi-parallel
// schedule (see lscd_checker):
//  A: merged memory, N = 64,  L = 4, P = 4, two frames - recovery must stay hidden
//     (no cycle beyond the final store before readout), as Lambda < P * 2^(2P-2) holds;
//  B: folded PSN + folded path memory, same sizes, same random seed behaviour;
//  C: merged memory, N = 256, L = 4, P = 2 - outside that bound, so recovery must show
//     as extra cycles before readout.
// Each mechanism (single-word store, serial generation, generation of the N/2 block, path
// duplication, recovery in idle cycles, recovery overhead) must be seen at least once.
module tb_lscd_path_unit;
  import polar_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks, failures;

`define LSCD_PAIR(NAME, NN, LL, PP, SCH, FR) \
  localparam int unsigned NAME``_NW = NN / PP; \
  localparam int unsigned NAME``_AW = $clog2(NAME``_NW); \
  logic NAME``_rst_n, NAME``_start, NAME``_lm_valid, NAME``_lm_ready, NAME``_ps_valid; \
  logic NAME``_rd_ready, NAME``_rd_start, NAME``_rd_valid, NAME``_recov_busy, NAME``_done; \
  logic [LL-1:0][$clog2(LL)-1:0] NAME``_lm_parent; \
  logic [LL-1:0] NAME``_lm_bit; \
  logic [LL-1:0][PP-1:0] NAME``_ps_bank, NAME``_ps_word, NAME``_rd_bits; \
  logic [NAME``_AW-1:0] NAME``_ps_addr, NAME``_rd_addr; \
  int NAME``_checks, NAME``_failures, NAME``_n_store, NAME``_n_gen, NAME``_n_gen_top; \
  int NAME``_n_dup, NAME``_n_recov, NAME``_overhead; \
  lscd_path_unit #(.N(NN), .L(LL), .P(PP), .SCHEME(SCH)) NAME``_dut ( \
    .clk, .rst_n(NAME``_rst_n), .start(NAME``_start), .lm_valid(NAME``_lm_valid), \
    .lm_parent(NAME``_lm_parent), .lm_bit(NAME``_lm_bit), .lm_ready(NAME``_lm_ready), \
    .ps_bank(NAME``_ps_bank), .ps_valid(NAME``_ps_valid), .ps_addr(NAME``_ps_addr), \
    .ps_word(NAME``_ps_word), .rd_ready(NAME``_rd_ready), .rd_start(NAME``_rd_start), \
    .rd_valid(NAME``_rd_valid), .rd_addr(NAME``_rd_addr), .rd_bits(NAME``_rd_bits), \
    .recov_busy(NAME``_recov_busy)); \
  lscd_checker #(.N(NN), .L(LL), .P(PP), .FRAMES(FR)) NAME``_chk ( \
    .clk, .rst_n(NAME``_rst_n), .start(NAME``_start), .lm_valid(NAME``_lm_valid), \
    .lm_parent(NAME``_lm_parent), .lm_bit(NAME``_lm_bit), .lm_ready(NAME``_lm_ready), \
    .ps_bank(NAME``_ps_bank), .ps_valid(NAME``_ps_valid), .ps_addr(NAME``_ps_addr), \
    .ps_word(NAME``_ps_word), .rd_ready(NAME``_rd_ready), .rd_start(NAME``_rd_start), \
    .rd_valid(NAME``_rd_valid), .rd_addr(NAME``_rd_addr), .rd_bits(NAME``_rd_bits), \
    .recov_busy(NAME``_recov_busy), .checks(NAME``_checks), .failures(NAME``_failures), \
    .done(NAME``_done), .n_store(NAME``_n_store), .n_gen(NAME``_n_gen), \
    .n_gen_top(NAME``_n_gen_top), .n_dup(NAME``_n_dup), .n_recov_cyc(NAME``_n_recov), \
    .overhead(NAME``_overhead));

  `LSCD_PAIR(a, 64, 4, 4, SCHEME_MERGED, 2)
  `LSCD_PAIR(b, 64, 4, 4, SCHEME_FOLDED_PM, 2)
  `LSCD_PAIR(c, 256, 4, 2, SCHEME_MERGED, 1)

  task automatic need(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    @(posedge clk);
    wait (a_done && b_done && c_done);
    checks   = a_checks + b_checks + c_checks;
    failures = a_failures + b_failures + c_failures;
    $display("A merged  : stores=%0d gens=%0d top=%0d dup=%0d recov_cycles=%0d overhead=%0d",
             a_n_store, a_n_gen, a_n_gen_top, a_n_dup, a_n_recov, a_overhead);
    $display("B folded  : stores=%0d gens=%0d top=%0d dup=%0d overhead=%0d",
             b_n_store, b_n_gen, b_n_gen_top, b_n_dup, b_overhead);
    $display("C merged P=2: stores=%0d gens=%0d top=%0d dup=%0d recov_cycles=%0d overhead=%0d",
             c_n_store, c_n_gen, c_n_gen_top, c_n_dup, c_n_recov, c_overhead);
    need(a_n_store > 0 && b_n_store > 0 && c_n_store > 0, "single-word stores seen");
    need(a_n_gen > 0 && b_n_gen > 0 && c_n_gen > 0, "serial generations seen");
    need(a_n_gen_top > 0 && b_n_gen_top > 0 && c_n_gen_top > 0, "N/2 generation seen");
    need(a_n_dup > 0 && b_n_dup > 0 && c_n_dup > 0, "path duplication seen");
    need(a_n_recov > 0 && c_n_recov > 0, "recovery during decoding seen");
    need(a_overhead == 0, "recovery hidden when Lambda < P*2^(2P-2)");
    need(b_overhead == 0, "folded path memory ready right after the last store");
    need(c_overhead > 0, "recovery overhead when the bound is violated");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
