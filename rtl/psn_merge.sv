// psn_merge: parallel partial-sum network of one path (the stages up to p).
//
// The P-bit register bank of a path holds partial sums in place: after t+1 bits of the
// current P-bit block are decoded, positions 0..t hold the binary-expansion groups of t+1,
// each group stored as its bits times F^(x)size. When bit t arrives, the groups at the
// tail (sizes 2^(k-1) .. 1, where k is the number of trailing ones of t) merge with it into
// one group of 2^k bits. The merge is done from the top position down:
//   X[t] = new bit,   X[j] = S[j] XOR X[j + 2^b],
// b being the highest zero bit of j's offset in the merged group. Once a P-bit block is
// complete the bank holds the stage-p partial sums u_P * F^(x)p of that block, which is
// the word the folded network writes to its SRAM. Positions above t are left untouched.
// Combinational; the register bank itself lives in the caller.
// The paper only names this part ("PSN for length 2P codes"); this in-place merge is this
// design's way of doing it.
module psn_merge #(
  parameter int unsigned P = 64,
  localparam int unsigned LOGP = (P > 1) ? $clog2(P) : 1
) (
  input  logic [P-1:0]    bank_in,  // partial sums of the path before this bit
  input  logic [LOGP-1:0] pos,      // position t of the new bit in the P-bit block
  input  logic            bit_in,   // newly decoded bit u
  output logic [P-1:0]    bank_out  // partial sums after merging the new bit
);
  import polar_pkg::*;

  always_comb begin
    int unsigned k, base, rel, b;
    logic [P-1:0] x;
    k    = tz(~32'(pos));             // trailing ones of pos
    base = 32'(pos) & ~((32'd1 << k) - 1);
    x    = bank_in;
    rel  = 0;
    b    = 0;
    for (int j = P - 1; j >= 0; j--) begin
      if (j == int'(pos)) begin
        x[j] = bit_in;
      end else if (j < int'(pos) && j >= int'(base)) begin
        rel  = 32'(j) - base;
        b    = msb_zero(rel, k);
        x[j] = bank_in[j] ^ x[j + (1 << b)];
      end
    end
    bank_out = x;
  end
endmodule
