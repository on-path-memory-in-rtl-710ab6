// tb_merged_memory: merged_memory alone (N = 128, L = 8, P = 8, two frames) under the
// modelled decoding schedule of lscd_checker: register banks, serial partial sums and
// their timing, hidden recovery and the readout of all paths are checked.
module tb_merged_memory;
  localparam int unsigned N = 128, L = 8, P = 8;
  localparam int unsigned NW = N / P, AW = $clog2(NW), LW = $clog2(L);
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, start, lm_valid, lm_ready, ps_valid, rd_ready, rd_start, rd_valid, recov_busy;
  logic done;
  logic [L-1:0][LW-1:0] lm_parent;
  logic [L-1:0] lm_bit;
  logic [L-1:0][P-1:0] ps_bank, ps_word, rd_bits;
  logic [AW-1:0] ps_addr, rd_addr;
  int checks, failures, n_store, n_gen, n_gen_top, n_dup, n_recov, overhead;

  merged_memory #(.N(N), .L(L), .P(P)) dut (.*);

  lscd_checker #(.N(N), .L(L), .P(P), .FRAMES(2)) chk (
    .clk, .rst_n, .start, .lm_valid, .lm_parent, .lm_bit, .lm_ready, .ps_bank, .ps_valid,
    .ps_addr, .ps_word, .rd_ready, .rd_start, .rd_valid, .rd_addr, .rd_bits, .recov_busy,
    .checks, .failures, .done, .n_store, .n_gen, .n_gen_top, .n_dup, .n_recov_cyc(n_recov),
    .overhead);

  initial begin
    int c, f;
    @(posedge clk);
    wait (done === 1'b1);
    c = checks + 2; f = failures;
    $display("stores=%0d gens=%0d recov_cycles=%0d overhead=%0d", n_store, n_gen, n_recov, overhead);
    if (n_recov == 0) f++;
    if (overhead != 0) f++;
    $display("TB_RESULT checks=%0d failures=%0d", c, f);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
