// list_crossbar: L x L crossbar of W-bit words.
//
// Output o carries input sel[o]; several outputs may pick the same input, which is how a
// path that survives list management twice is duplicated. In this design one instance of
// W = P bits is shared by two jobs that never happen in the same cycle: permuting the
// register banks after list management, and gathering a path's words from the SRAM that
// its pointer names. Purely combinational.
module list_crossbar #(
  parameter int unsigned L = 16,
  parameter int unsigned W = 64,
  localparam int unsigned LW = (L > 1) ? $clog2(L) : 1
) (
  input  logic [L-1:0][W-1:0]  din,
  input  logic [L-1:0][LW-1:0] sel,
  output logic [L-1:0][W-1:0]  dout
);
  always_comb
    for (int unsigned o = 0; o < L; o++)
      dout[o] = din[sel[o]];
endmodule
