// tb_pointer_mem: pointer_mem (L = 8, 5 levels) against a model under random sequences of
// init, copy-from-parent and set-own operations; every level of every path is looked up
// after each operation.
module tb_pointer_mem;
  localparam int unsigned L = 8, NLVL = 5, LW = 3, KW = 3;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, init, copy_en, set_en;
  logic [L-1:0][LW-1:0] parent, sel;
  logic [KW-1:0] set_lvl, lvl;
  int model [L][NLVL], nm [L][NLVL];
  int checks = 0, failures = 0;

  pointer_mem #(.L(L), .NLVL(NLVL)) dut (.*);

  initial begin
    rst_n = 1'b0; init = 1'b0; copy_en = 1'b0; set_en = 1'b0; parent = '0; set_lvl = '0; lvl = '0;
    for (int l = 0; l < int'(L); l++) for (int k = 0; k < int'(NLVL); k++) model[l][k] = l;
    @(negedge clk); rst_n = 1'b1;
    for (int n = 0; n < 400; n++) begin
      automatic int op = $urandom % 8;
      init = (op == 0); copy_en = (op >= 1 && op <= 4); set_en = (op >= 5);
      for (int l = 0; l < int'(L); l++) parent[l] = LW'($urandom);
      set_lvl = KW'($urandom % NLVL);
      nm = model;
      if (init) begin
        for (int l = 0; l < int'(L); l++) for (int k = 0; k < int'(NLVL); k++) nm[l][k] = l;
      end else if (copy_en) begin
        for (int l = 0; l < int'(L); l++) for (int k = 0; k < int'(NLVL); k++)
          nm[l][k] = model[parent[l]][k];
      end else begin
        for (int l = 0; l < int'(L); l++) nm[l][set_lvl] = l;
      end
      @(negedge clk);
      init = 1'b0; copy_en = 1'b0; set_en = 1'b0;
      model = nm;
      for (int k = 0; k < int'(NLVL); k++) begin
        lvl = KW'(k);
        #1;
        for (int l = 0; l < int'(L); l++) begin
          checks++;
          if (int'(sel[l]) != model[l][k]) failures++;
        end
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
