// tb_psum_sram: psum_sram (16 words of 64 bits, two read ports) against an array model:
// random writes and reads in the same cycles; a word written in one cycle must be read
// back by either port from the next cycle on.
module tb_psum_sram;
  localparam int unsigned DEPTH = 16, W = 64, AW = 4;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic we;
  logic [AW-1:0] waddr;
  logic [W-1:0] wdata;
  logic [1:0][AW-1:0] raddr;
  logic [1:0][W-1:0] rdata;
  logic [W-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  psum_sram #(.DEPTH(DEPTH), .W(W), .READS(2)) dut (.*);

  initial begin
    we = 1'b1;
    for (int a = 0; a < int'(DEPTH); a++) begin
      waddr = AW'(a); wdata = {$urandom, $urandom}; model[a] = wdata;
      @(negedge clk);
    end
    for (int n = 0; n < 500; n++) begin
      we = 1'($urandom); waddr = AW'($urandom); wdata = {$urandom, $urandom};
      raddr[0] = (n % 3 == 0) ? waddr : AW'($urandom); raddr[1] = AW'($urandom);
      #1;
      for (int r = 0; r < 2; r++) begin
        checks++;
        if (rdata[r] !== model[raddr[r]]) failures++;
      end
      @(negedge clk);
      if (we) model[waddr] = wdata;
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
