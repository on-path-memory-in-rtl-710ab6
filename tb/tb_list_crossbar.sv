// tb_list_crossbar: list_crossbar (L = 16, W = 64) with random data and random selects,
// including many outputs picking the same input.
module tb_list_crossbar;
  localparam int unsigned L = 16, W = 64, LW = 4;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic [L-1:0][W-1:0] din, dout;
  logic [L-1:0][LW-1:0] sel;
  int checks = 0, failures = 0;

  list_crossbar #(.L(L), .W(W)) dut (.din(din), .sel(sel), .dout(dout));

  initial begin
    for (int n = 0; n < 200; n++) begin
      for (int i = 0; i < int'(L); i++) begin
        din[i] = {$urandom, $urandom};
        sel[i] = (n % 2) ? LW'($urandom % 3) : LW'($urandom);
      end
      @(negedge clk);
      for (int o = 0; o < int'(L); o++) begin
        checks++;
        if (dout[o] !== din[sel[o]]) failures++;
      end
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
