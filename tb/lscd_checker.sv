// lscd_checker: stimulus and reference model for the LSCD partial-sum / path storage unit.
//
// It plays the part of the rest of a list SC decoder around lscd_path_unit: for every bit
// of a frame it waits the number of cycles a semi-parallel decoder spends in the nodes
// below stage p before that leaf (p cycles before the first bit of a P-bit block, 1 + the
// trailing zeros of t before bit t otherwise; 2P-2 per block), then hands over a random
// list management result (random parents among the live paths, random bits). A bit-level
// model keeps the N decoded bits of every path and checks
//  * the register banks after each bit against the in-place partial-sum layout,
//  * every serially generated partial-sum word against u * F^(x)lambda of the left
//    sibling block, including that the 2^k words come in the 2^k cycles right after the
//    LM, top word first,
//  * the readout of all paths against the model,
// and reports how many cycles the unit needed after the last bit before the readout could
// start beyond the one store cycle (recovery overhead).
module lscd_checker #(
  parameter int unsigned N      = 1024,
  parameter int unsigned L      = 16,
  parameter int unsigned P      = 64,
  parameter int unsigned FRAMES = 1,
  parameter bit          CHECK_PS = 1'b1,  // 0: the unit has no partial-sum outputs
  localparam int unsigned NW    = N / P,
  localparam int unsigned AW    = (NW > 1) ? $clog2(NW) : 1,
  localparam int unsigned LW    = (L > 1) ? $clog2(L) : 1,
  localparam int unsigned LOGP  = (P > 1) ? $clog2(P) : 1
) (
  input  logic                 clk,
  output logic                 rst_n,
  output logic                 start,
  output logic                 lm_valid,
  output logic [L-1:0][LW-1:0] lm_parent,
  output logic [L-1:0]         lm_bit,
  input  logic                 lm_ready,
  input  logic [L-1:0][P-1:0]  ps_bank,
  input  logic                 ps_valid,
  input  logic [AW-1:0]        ps_addr,
  input  logic [L-1:0][P-1:0]  ps_word,
  input  logic                 rd_ready,
  output logic                 rd_start,
  input  logic                 rd_valid,
  input  logic [AW-1:0]        rd_addr,
  input  logic [L-1:0][P-1:0]  rd_bits,
  input  logic                 recov_busy,
  output int                   checks,
  output int                   failures,
  output logic                 done,
  output int                   n_store,       // P-bit words stored alone
  output int                   n_gen,         // serial partial-sum generations
  output int                   n_gen_top,     // generations of the N/2 block
  output int                   n_dup,         // LM steps that duplicated a path
  output int                   n_recov_cyc,   // cycles with recovery busy while decoding
  output int                   overhead       // extra cycles before readout, summed
);
  logic u   [L][N];
  logic u_n [L][N];

  function automatic int unsigned tz_i(input int unsigned v);
    for (int i = 0; i < 32; i++) if (v[i]) return i;
    return 32;
  endfunction
  function automatic int unsigned msb_i(input int unsigned v);
    int unsigned r = 0;
    for (int i = 0; i < 32; i++) if (v[i]) r = i;
    return r;
  endfunction

  // bit j of (u[l][base .. base+size-1]) * F^(x)log2(size)
  function automatic logic enc_bit(input int l, input int base, input int size, input int j);
    logic x = 1'b0;
    for (int v = j; v < size; v++)
      if ((v & j) == j) x ^= u[l][base + v];
    return x;
  endfunction

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  initial begin
    int unsigned live, t, c, k;
    int          cyc;
    checks = 0; failures = 0; done = 1'b0;
    n_store = 0; n_gen = 0; n_gen_top = 0; n_dup = 0; n_recov_cyc = 0; overhead = 0;
    rst_n = 1'b0; start = 1'b0; lm_valid = 1'b0; rd_start = 1'b0;
    lm_parent = '0; lm_bit = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < int'(FRAMES); f++) begin
      @(negedge clk); start = 1'b1;
      @(negedge clk); start = 1'b0;
      for (int l = 0; l < int'(L); l++) for (int i = 0; i < int'(N); i++) u[l][i] = 1'b0;
      live = 1;
      for (int i = 0; i < int'(N); i++) begin
        t = i % P;
        repeat ((t == 0) ? LOGP : tz_i(t) + 1) begin
          if (recov_busy) n_recov_cyc++;
          @(negedge clk);
        end
        cyc = 0;
        while (!lm_ready && cyc < 100000) begin @(negedge clk); cyc++; end
        check(lm_ready, "lm_ready");
        // list management result
        live = (2 * live > L) ? L : 2 * live;
        begin
          automatic logic [L-1:0] used = '0;
          automatic logic dup = 1'b0;
          for (int l = 0; l < int'(L); l++) begin
            lm_parent[l] = LW'($urandom % live);
            lm_bit[l]    = 1'($urandom);
            if (used[lm_parent[l]]) dup = 1'b1;
            used[lm_parent[l]] = 1'b1;
          end
          if (dup) n_dup++;
        end
        for (int l = 0; l < int'(L); l++) begin
          for (int b = 0; b < i; b++) u_n[l][b] = u[lm_parent[l]][b];
          u_n[l][i] = lm_bit[l];
          for (int b = i + 1; b < int'(N); b++) u_n[l][b] = 1'b0;
        end
        lm_valid = 1'b1;
        @(negedge clk);
        lm_valid = 1'b0;
        u = u_n;
        // register banks: in-place partial sums of the current P-bit block
        if (CHECK_PS) for (int l = 0; l < int'(L); l++)
          for (int j = 0; j <= int'(t); j++) begin
            int unsigned cb, lv, st;
            cb = t + 1;
            lv = msb_i(cb ^ j);
            st = cb & ~((2 << lv) - 1);
            check(ps_bank[l][j] == enc_bit(l, i - t + st, 1 << lv, j - st), "bank");
          end
        if (t == P - 1) begin
          c = (i + 1) / P;
          if (c % 2 == 1 || c == NW) begin
            n_store++;
            check((!CHECK_PS || !ps_valid) && !lm_ready, "store cycle");
            @(negedge clk);
          end else begin
            k = tz_i(c);
            n_gen++;
            if ((1 << k) == NW / 2) n_gen_top++;
            for (int j = 0; j < (1 << k); j++) begin
              automatic int unsigned w = c - 1 - j;
              check(!lm_ready && (!CHECK_PS || (ps_valid && ps_addr == AW'(w))),
                    "generation timing");
              if (CHECK_PS) for (int l = 0; l < int'(L); l++)
                for (int b = 0; b < int'(P); b++)
                  check(ps_word[l][b] == enc_bit(l, (c - (1 << k)) * P, (1 << k) * P,
                                                 (w - (c - (1 << k))) * P + b), "ps word");
              if (recov_busy) n_recov_cyc++;
              @(negedge clk);
            end
            check(CHECK_PS ? !ps_valid : lm_ready, "generation length");
          end
        end
      end
      // readout
      cyc = 0;
      while (!rd_ready && cyc < 100000) begin @(negedge clk); cyc++; end
      overhead += cyc;
      check(rd_ready, "rd_ready");
      rd_start = 1'b1;
      @(negedge clk);
      rd_start = 1'b0;
      for (int w = 0; w < int'(NW); w++) begin
        check(rd_valid && rd_addr == AW'(w), "readout timing");
        for (int l = 0; l < int'(L); l++)
          for (int b = 0; b < int'(P); b++)
            check(rd_bits[l][b] == u[l][w * P + b], "decoded bit");
        @(negedge clk);
      end
      check(!rd_valid, "readout length");
    end
    done = 1'b1;
  end
endmodule
