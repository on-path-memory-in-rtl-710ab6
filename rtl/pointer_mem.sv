// pointer_mem: per-path group pointers of the folded memories.
//
// Path l owns NLVL = n-p+1 pointers, one per group level (see polar_pkg). Pointer
// ptr[l][k] names the SRAM (physical path index) that holds path l's level-k group, so
// words are never copied when paths are duplicated; only these log2(L)-bit pointers are.
//  * init     : start of a frame, every path points at its own SRAM.
//  * copy_en  : after list management, path l takes all pointers of its parent parent[l].
//  * set_en   : after a group of level set_lvl has been written into every path's own
//               SRAM, ptr[l][set_lvl] = l for all l.
//  * lookup   : sel[l] = ptr[l][lvl] (combinational), the crossbar select used to gather
//               a word of level lvl for every path in one cycle.
// One update per clock; init wins over copy, copy over set.
module pointer_mem #(
  parameter int unsigned L    = 16,
  parameter int unsigned NLVL = 5,
  localparam int unsigned LW  = (L > 1) ? $clog2(L) : 1,
  localparam int unsigned KW  = (NLVL > 1) ? $clog2(NLVL) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 init,
  input  logic                 copy_en,
  input  logic [L-1:0][LW-1:0] parent,
  input  logic                 set_en,
  input  logic [KW-1:0]        set_lvl,
  input  logic [KW-1:0]        lvl,
  output logic [L-1:0][LW-1:0] sel
);
  logic [LW-1:0] ptr [L][NLVL];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned l = 0; l < L; l++)
        for (int unsigned k = 0; k < NLVL; k++)
          ptr[l][k] <= LW'(l);
    end else if (init) begin
      for (int unsigned l = 0; l < L; l++)
        for (int unsigned k = 0; k < NLVL; k++)
          ptr[l][k] <= LW'(l);
    end else if (copy_en) begin
      for (int unsigned l = 0; l < L; l++)
        for (int unsigned k = 0; k < NLVL; k++)
          ptr[l][k] <= ptr[parent[l]][k];
    end else if (set_en) begin
      for (int unsigned l = 0; l < L; l++)
        ptr[l][set_lvl] <= LW'(l);
    end
  end

  always_comb
    for (int unsigned l = 0; l < L; l++)
      sel[l] = ptr[l][lvl];

`ifndef SYNTHESIS
  a_lvl_range: assert property (@(posedge clk) disable iff (!rst_n)
    set_en |-> (32'(set_lvl) < NLVL));
`endif
endmodule
