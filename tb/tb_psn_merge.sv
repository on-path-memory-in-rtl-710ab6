// tb_psn_merge: psn_merge (P = 16) driving a register bank bit by bit over many random
// P-bit blocks. After each bit t, positions 0..t must hold the binary-expansion groups of
// t+1 each encoded with F^(x)size; after the last bit the bank must equal u_P * F^(x)p.
// Positions above t must not change.
module tb_psn_merge;
  localparam int unsigned P = 16, LOGP = 4;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic [P-1:0] bank, bank_nx, u;
  logic [LOGP-1:0] pos;
  logic bit_in;
  int checks = 0, failures = 0;

  psn_merge #(.P(P)) dut (.bank_in(bank), .pos(pos), .bit_in(bit_in), .bank_out(bank_nx));

  function automatic int unsigned msb_i(input int unsigned v);
    int unsigned r = 0;
    for (int i = 0; i < 32; i++) if (v[i]) r = i;
    return r;
  endfunction

  initial begin
    bank = '0;
    for (int blk = 0; blk < 60; blk++) begin
      u = {$urandom};
      for (int t = 0; t < int'(P); t++) begin
        pos = LOGP'(t); bit_in = u[t];
        @(negedge clk);
        for (int j = 0; j < int'(P); j++) begin
          logic e;
          if (j <= t) begin
            int unsigned lv, st;
            lv = msb_i((t + 1) ^ j);
            st = (t + 1) & ~((2 << lv) - 1);
            e = 1'b0;
            for (int v = 0; v < (1 << lv); v++)
              if ((v & (j - st)) == (j - st)) e ^= u[st + v];
          end else begin
            e = bank[j];
          end
          checks++;
          if (bank_nx[j] !== e) begin
            failures++;
            if (failures < 10) $display("FAIL blk %0d t %0d j %0d", blk, t, j);
          end
        end
        bank = bank_nx;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
