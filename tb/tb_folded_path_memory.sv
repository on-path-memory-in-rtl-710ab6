// tb_folded_path_memory: folded_path_memory alone (N = 128, L = 8, P = 8, two frames).
// lscd_checker drives random list management results; the unit must be busy exactly
// for the store or consolidation cycles after each completed word and must return the
// decoded bits of every path at the end of each frame.
module tb_folded_path_memory;
  localparam int unsigned N = 128, L = 8, P = 8;
  localparam int unsigned NW = N / P, AW = $clog2(NW), LW = $clog2(L);
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, start, lm_valid, lm_ready, rd_ready, rd_start, rd_valid;
  logic done;
  logic [L-1:0][LW-1:0] lm_parent;
  logic [L-1:0] lm_bit;
  logic [L-1:0][P-1:0] rd_bits;
  logic [AW-1:0] rd_addr;
  int checks, failures, n_store, n_gen, n_gen_top, n_dup, n_recov, overhead;

  folded_path_memory #(.N(N), .L(L), .P(P)) dut (.*);

  lscd_checker #(.N(N), .L(L), .P(P), .FRAMES(2), .CHECK_PS(1'b0)) chk (
    .clk, .rst_n, .start, .lm_valid, .lm_parent, .lm_bit, .lm_ready, .ps_bank('0),
    .ps_valid(1'b0), .ps_addr('0), .ps_word('0), .rd_ready, .rd_start, .rd_valid, .rd_addr,
    .rd_bits, .recov_busy(1'b0), .checks, .failures, .done, .n_store, .n_gen, .n_gen_top,
    .n_dup, .n_recov_cyc(n_recov), .overhead);

  initial begin
    int c, f;
    @(posedge clk);
    wait (done === 1'b1);
    c = checks + 1; f = failures;
    if (overhead != 0) f++;
    $display("stores=%0d consolidations=%0d dup=%0d", n_store, n_gen, n_dup);
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
