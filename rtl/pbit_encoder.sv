// pbit_encoder: P-bit polar encoder, dout = din * F^(x)p with F = [1 0; 1 1].
//
// Output bit w is the XOR of every input bit v whose index contains the bits of w
// (v AND w = w). It is built as the usual p butterfly stages: in stage s, bit j with
// index bit s clear takes j XOR (j + 2^s). Because F^(x)p is its own inverse, the same
// block both encodes a P-bit word and turns a recovered intermediate word
// (u_P * F^(x)p) back into the P decoded bits u_P, which is how the merged memory uses it.
// Purely combinational, no clock.
module pbit_encoder #(
  parameter int unsigned P = 64
) (
  input  logic [P-1:0] din,
  output logic [P-1:0] dout
);
  localparam int unsigned LOGP = (P > 1) ? $clog2(P) : 1;

  // stg[s] is the word after s butterfly stages
  logic [P-1:0] stg [LOGP+1];
  assign stg[0] = din;
  for (genvar s = 0; s < LOGP; s++) begin : g_stage
    for (genvar j = 0; j < P; j++) begin : g_bit
      if (((j >> s) & 1) == 0 && (j + (1 << s)) < P) begin : g_xor
        assign stg[s+1][j] = stg[s][j] ^ stg[s][j + (1 << s)];
      end else begin : g_pass
        assign stg[s+1][j] = stg[s][j];
      end
    end
  end
  assign dout = stg[LOGP];
endmodule
