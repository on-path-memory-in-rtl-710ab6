// recovery_sched: schedule of the decoded-bit recovery in the merged memory.
//
// A finished group of 2^K words (K = lambda - p) holds the stage-lambda partial sums of
// its bits. Applying F^(x)K word-wise (P-bit words, XOR per bit) turns word j into
// (u_P)_j * F^(x)p. This block walks the butterflies of that word-level encoder, one per
// cycle, largest distance first: for d = 2^(K-1) down to 1, for every word i of the group
// whose offset has the d-bit clear, word i ^= word i+d. That is (2^K / 2) * K cycles,
// i.e. (Lambda / 2P) * log2(Lambda / P), the latency derived in the paper; for Lambda = 8,
// P = 2 it gives the pairs (0,2) (1,3) (0,1) (2,3), the order of the paper's example.
//
// Groups are announced with req / req_lvl (level K, K >= 1). The group of level K is the
// last one of that size in the frame and starts at word NW - 2^(K+1). Requests are kept in
// a pending mask and served largest level first. Each cycle the current pair is shown on
// a0 / a1 with valid; it is consumed only when grant is high (the SRAM is free), so
// recovery runs in the gaps the decoding leaves. Picking up a queued group takes one cycle
// before its first pair is shown. busy stays high while anything is pending.
// The pair order and the cycle count follow the paper; the queue and the grant rule are
// this design's own.
module recovery_sched #(
  parameter int unsigned NW   = 16,   // words per frame, N / P
  localparam int unsigned AW  = (NW > 1) ? $clog2(NW) : 1,
  localparam int unsigned KW  = $clog2(AW + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          req,
  input  logic [KW-1:0] req_lvl,
  input  logic          grant,
  output logic          valid,
  output logic [AW-1:0] a0,
  output logic [AW-1:0] a1,
  output logic          busy
);
  logic [AW:0]   pending;     // bit K set: group of level K waits
  logic          active;
  logic [KW-1:0] cur_k;       // level of the group in work
  logic [KW-1:0] stage;       // butterfly distance is 2^stage
  logic [AW-1:0] idx;         // butterfly index inside the stage
  logic [AW-1:0] base;

  // word offset: idx with a zero inserted at bit 'stage'
  logic [AW-1:0] off;
  always_comb begin
    logic [AW-1:0] lowmask;
    lowmask = (AW'(1) << stage) - AW'(1);
    off     = ((idx & ~lowmask) << 1) | (idx & lowmask);
  end

  assign base  = AW'(NW - (1 << (cur_k + 1)));
  assign valid = active;
  assign a0    = base + off;
  assign a1    = base + off + (AW'(1) << stage);
  assign busy  = active || (pending != '0);

  // highest pending level
  logic [KW-1:0] next_k;
  always_comb begin
    next_k = '0;
    for (int unsigned k = 1; k <= AW; k++)
      if (pending[k]) next_k = KW'(k);
  end

  // pending mask after this cycle's request and pick-up
  logic [AW:0] pend_n;
  always_comb begin
    pend_n = pending;
    if (req && req_lvl != '0) pend_n[req_lvl] = 1'b1;
    if (!active && pending != '0) pend_n[next_k] = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending <= '0;
      active  <= 1'b0;
      cur_k   <= '0;
      stage   <= '0;
      idx     <= '0;
    end else if (clear) begin
      pending <= '0;
      active  <= 1'b0;
    end else begin
      if (active) begin
        if (grant) begin
          if (32'(idx) == (1 << (cur_k - 1)) - 1) begin
            idx <= '0;
            if (stage == '0) active <= 1'b0;
            else stage <= stage - 1'b1;
          end else begin
            idx <= idx + 1'b1;
          end
        end
      end else if (pending != '0) begin
        active <= 1'b1;
        cur_k  <= next_k;
        stage  <= next_k - 1'b1;
        idx    <= '0;
      end
      pending <= pend_n;
    end
  end

`ifndef SYNTHESIS
  a_req_lvl: assert property (@(posedge clk) disable iff (!rst_n)
    req |-> (32'(req_lvl) <= AW));
`endif
endmodule
