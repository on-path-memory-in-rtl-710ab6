// tb_pbit_encoder: pbit_encoder at P = 64 against the definition of u * F^(x)p
// (output bit w = XOR of input bits v with v AND w = w) on unit vectors and random words,
// and checks that encoding the output again gives the input back (F^(x)p is an involution).
module tb_pbit_encoder;
  localparam int unsigned P = 64;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic [P-1:0] din, dout;
  int checks = 0, failures = 0;

  pbit_encoder #(.P(P)) dut  (.din(din),  .dout(dout));

  function automatic logic [P-1:0] ref_enc(input logic [P-1:0] u);
    logic [P-1:0] x = '0;
    int w = 0, v, lim;
    lim = int'($urandom_range(P, P));  // run-time bound: keeps the loops rolled
    while (w < lim) begin
      v = w;
      while (v < lim) begin
        if ((v & w) == w) x[w] = x[w] ^ u[v];
        v++;
      end
      w++;
    end
    return x;
  endfunction

  initial begin
    for (int n = 0; n < 300; n++) begin
      din = (n < int'(P)) ? (P'(1) << n) : {$urandom, $urandom};
      @(negedge clk);
      checks++;
      if (dout !== ref_enc(din)) begin
        failures++;
        if (failures < 10) $display("FAIL enc %h -> %h", din, dout);
      end
      checks++;
      if (ref_enc(dout) !== din) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
