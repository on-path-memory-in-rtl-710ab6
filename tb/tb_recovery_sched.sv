// tb_recovery_sched: recovery_sched for a 64-word frame. A word array stands for one
// SRAM: each granted pair does word a0 ^= word a1. After a group of level K is done, its
// words must equal the word-level encoding Y_j = XOR of S_i over all i whose offset
// contains j's (the inverse of the partial-sum encoding), and exactly K * 2^(K-1) pairs
// must have been granted. Grants are random (the SRAM is busy at random) and several
// groups are queued at once. The pair order of a 4-word group is checked against
// (0,2) (1,3) (0,1) (2,3).
module tb_recovery_sched;
  localparam int unsigned NW = 64, AW = 6, KW = 3;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, clear, req, grant, valid, busy;
  logic [KW-1:0] req_lvl;
  logic [AW-1:0] a0, a1;
  logic [7:0] mem [NW], orig [NW];
  int pairs, checks = 0, failures = 0;
  int order_a0 [$], order_a1 [$];

  recovery_sched #(.NW(NW)) dut (.*);

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  always @(posedge clk) if (valid && grant) begin
    mem[a0] <= mem[a0] ^ mem[a1];
    pairs++;
    order_a0.push_back(int'(a0)); order_a1.push_back(int'(a1));
  end

  task automatic run(input int lvls[$], input bit full_grant);
    int expected = 0;
    for (int w = 0; w < int'(NW); w++) begin mem[w] = 8'($urandom); orig[w] = mem[w]; end
    pairs = 0; order_a0.delete(); order_a1.delete();
    foreach (lvls[i]) begin
      req = 1'b1; req_lvl = KW'(lvls[i]);
      expected += lvls[i] * (1 << (lvls[i] - 1));
      @(negedge clk);
    end
    req = 1'b0;
    while (busy) begin
      grant = full_grant ? 1'b1 : 1'($urandom);
      @(negedge clk);
    end
    grant = 1'b0;
    chk(pairs == expected, "pair count");
    foreach (lvls[i]) begin
      int k = lvls[i], base = NW - (2 << lvls[i]);
      for (int j = 0; j < (1 << k); j++) begin
        logic [7:0] y = '0;
        for (int s = j; s < (1 << k); s++) if ((s & j) == j) y ^= orig[base + s];
        chk(mem[base + j] == y, "recovered word");
      end
    end
  endtask

  initial begin
    rst_n = 1'b0; clear = 1'b0; req = 1'b0; grant = 1'b0; req_lvl = '0;
    @(negedge clk); rst_n = 1'b1;
    run('{2}, 1'b1);
    chk(order_a0.size() == 4, "order size");
    if (order_a0.size() == 4) begin
      chk(order_a0[0] == 56 && order_a1[0] == 58, "pair 0");
      chk(order_a0[1] == 57 && order_a1[1] == 59, "pair 1");
      chk(order_a0[2] == 56 && order_a1[2] == 57, "pair 2");
      chk(order_a0[3] == 58 && order_a1[3] == 59, "pair 3");
    end
    for (int k = 1; k <= 5; k++) run('{k}, 1'b1);
    for (int k = 1; k <= 5; k++) run('{k}, 1'b0);
    run('{5, 4, 3, 2, 1}, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
