// tb_lscd_full: one frame through lscd_path_unit at its default size
// (N = 1024, L = 16, P = 64, merged memory), checked bit for bit by lscd_checker:
// register banks, every serially generated partial-sum word and its cycle, and the
// readout of all 16 paths. With P = 64 the recovery must be fully hidden, so the readout
// may start right after the final store.
module tb_lscd_full;
  localparam int unsigned N = 1024, L = 16, P = 64;
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

  lscd_path_unit dut (.*);

  lscd_checker #(.N(N), .L(L), .P(P), .FRAMES(1)) chk (
    .clk, .rst_n, .start, .lm_valid, .lm_parent, .lm_bit, .lm_ready, .ps_bank, .ps_valid,
    .ps_addr, .ps_word, .rd_ready, .rd_start, .rd_valid, .rd_addr, .rd_bits, .recov_busy,
    .checks, .failures, .done, .n_store, .n_gen, .n_gen_top, .n_dup, .n_recov_cyc(n_recov),
    .overhead);

  initial begin
    int c, f;
    @(posedge clk);
    wait (done === 1'b1);
    c = checks; f = failures;
    $display("stores=%0d gens=%0d top=%0d dup=%0d recov_cycles=%0d overhead=%0d",
             n_store, n_gen, n_gen_top, n_dup, n_recov, overhead);
    c += 2;
    if (!(n_gen_top == 1 && n_recov > 0)) f++;
    if (overhead != 0) f++;
    $display("TB_RESULT checks=%0d failures=%0d", c, f);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
