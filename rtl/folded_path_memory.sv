// folded_path_memory: path memory folded the way the folded partial-sum network is.
//
// What it does. Stores the partial decoded vectors (the decoded bits themselves) of the
// L paths of a list SC decoder and returns all of them at the end of the frame, while the
// only per-bit permutation is over P bits instead of N.
//
// How it works.
//  * Left part: one P-bit register bank per path. After each list management (LM) step
//    the shared crossbar gives path l the bank of its parent lm_parent[l] and a shifter
//    shifts the new bit lm_bit[l] in at the top, so after P bits bit j of the bank is bit
//    j of the P-bit block.
//  * Right part: one SRAM per path of N/P words of P bits, one read port (port width P).
//    Word w always lives at address w. A full bank is written to the path's own SRAM when
//    the completed word count c becomes odd (1 cycle). When c becomes even with 2^k as its
//    lowest set bit, the 2^k words [c-2^k, c) are consolidated into the path's own SRAM,
//    top word first, one word per cycle: the top word comes from the bank, the others are
//    read through the crossbar from whichever SRAM the path's pointer names. These are the
//    same cycles in which the folded PSN generates the matching partial sums. The path's
//    level-k pointer then points at itself, so a path needs at most n-p+1 pointers.
//  * Readout: word w of every path is read through the crossbar from the SRAM its pointer
//    names, one word of all L paths per cycle.
//
// Interface and timing: the same frame handshake as merged_memory (lm_valid with
// lm_ready, 1 store cycle or 2^k consolidation cycles after the LM, rd_start with
// rd_ready, N/P readout cycles). Since it follows the same word count, it runs in lockstep
// with a folded PSN fed by the same LM results.
//
// Follows the paper: register banks, shifters, one shared P-bit crossbar, N-bit SRAMs of
// port width P, pointers, consolidation during the partial-sum generation cycles. This
// design's own choices: shift direction, in-place word layout, pointer levels, timing.
module folded_path_memory #(
  parameter int unsigned N     = 1024,
  parameter int unsigned L     = 16,
  parameter int unsigned P     = 64,
  localparam int unsigned NW   = N / P,
  localparam int unsigned AW   = (NW > 1) ? $clog2(NW) : 1,
  localparam int unsigned LOGP = (P > 1) ? $clog2(P) : 1,
  localparam int unsigned LW   = (L > 1) ? $clog2(L) : 1,
  localparam int unsigned NLVL = AW + 1,
  localparam int unsigned KW   = $clog2(NLVL)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic                 lm_valid,
  input  logic [L-1:0][LW-1:0] lm_parent,
  input  logic [L-1:0]         lm_bit,
  output logic                 lm_ready,
  output logic                 rd_ready,
  input  logic                 rd_start,
  output logic                 rd_valid,
  output logic [AW-1:0]        rd_addr,
  output logic [L-1:0][P-1:0]  rd_bits
);
  import polar_pkg::*;

  typedef enum logic [1:0] {S_IDLE, S_STORE, S_GEN, S_READ} state_e;

  state_e              state;
  logic [AW:0]         cw;
  logic [LOGP-1:0]     pos;
  logic [KW-1:0]       gk;
  logic [AW-1:0]       gj;
  logic [L-1:0][P-1:0] bank;

  logic [L-1:0][P-1:0]  xb_in, xb_out;
  logic [L-1:0][LW-1:0] xb_sel, ptr_sel;
  list_crossbar #(.L(L), .W(P)) u_xbar (.din(xb_in), .sel(xb_sel), .dout(xb_out));

  logic                sr_we;
  logic [AW-1:0]       sr_waddr, sr_raddr;
  logic [L-1:0][P-1:0] sr_wdata, rd0;
  for (genvar l = 0; l < L; l++) begin : g_sram
    psum_sram #(.DEPTH(NW), .W(P), .READS(1)) u_sram (
      .clk(clk), .we(sr_we), .waddr(sr_waddr), .wdata(sr_wdata[l]),
      .raddr(sr_raddr), .rdata(rd0[l]));
  end

  logic          ptr_set;
  logic [KW-1:0] ptr_set_lvl, ptr_lvl;
  pointer_mem #(.L(L), .NLVL(NLVL)) u_ptr (
    .clk(clk), .rst_n(rst_n), .init(start), .copy_en(lm_valid && lm_ready),
    .parent(lm_parent), .set_en(ptr_set), .set_lvl(ptr_set_lvl), .lvl(ptr_lvl), .sel(ptr_sel));

  logic [AW-1:0] gw;
  assign gw = AW'(32'(cw) - 1 - 32'(gj));

  assign lm_ready = (state == S_IDLE) && (32'(cw) < NW) && !start;
  assign rd_ready = (state == S_IDLE) && (32'(cw) == NW) && !start;
  assign rd_valid = (state == S_READ);
  assign rd_addr  = gj;
  assign rd_bits  = xb_out;

  always_comb begin
    xb_in       = bank;
    xb_sel      = lm_parent;
    ptr_lvl     = '0;
    sr_we       = 1'b0;
    sr_waddr    = '0;
    sr_raddr    = '0;
    sr_wdata    = bank;
    ptr_set     = 1'b0;
    ptr_set_lvl = '0;
    case (state)
      S_STORE: begin
        sr_we       = 1'b1;
        sr_waddr    = AW'(32'(cw) - 1);
        ptr_set     = 1'b1;
        ptr_set_lvl = (32'(cw) == NW) ? KW'(AW) : '0;
      end
      S_GEN: begin
        xb_in    = rd0;
        ptr_lvl  = KW'(msb_one(32'(gw) ^ (32'(cw) - 1)));
        xb_sel   = ptr_sel;
        sr_raddr = gw;
        sr_we    = 1'b1;
        sr_waddr = gw;
        if (gj != '0) sr_wdata = xb_out;
        if (32'(gj) == (1 << gk) - 1) begin
          ptr_set     = 1'b1;
          ptr_set_lvl = gk;
        end
      end
      S_READ: begin
        xb_in    = rd0;
        ptr_lvl  = KW'(word_level(32'(gj), NW, NW));
        xb_sel   = ptr_sel;
        sr_raddr = gj;
      end
      default: ;
    endcase
  end

  // shifters: new bit enters at the top, older bits move down one place
  logic [L-1:0][P-1:0] bank_next;
  always_comb
    for (int unsigned l = 0; l < L; l++)
      bank_next[l] = {lm_bit[l], xb_out[l][P-1:1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cw    <= '0;
      pos   <= '0;
      gk    <= '0;
      gj    <= '0;
      bank  <= '0;
    end else if (start) begin
      state <= S_IDLE;
      cw    <= '0;
      pos   <= '0;
      gj    <= '0;
      bank  <= '0;
    end else begin
      case (state)
        S_IDLE: begin
          if (lm_valid && lm_ready) begin
            bank <= bank_next;
            pos  <= pos + 1'b1;
            if (32'(pos) == P - 1) begin
              cw <= cw + 1'b1;
              gj <= '0;
              if (!(cw[0]) || (32'(cw) + 1 == NW)) begin
                state <= S_STORE;
              end else begin
                state <= S_GEN;
                gk    <= KW'(tz(32'(cw) + 1));
              end
            end
          end else if (rd_start && rd_ready) begin
            state <= S_READ;
            gj    <= '0;
          end
        end
        S_STORE: state <= S_IDLE;
        S_GEN: begin
          if (32'(gj) == (1 << gk) - 1) state <= S_IDLE;
          gj <= gj + 1'b1;
        end
        S_READ: begin
          if (32'(gj) == NW - 1) state <= S_IDLE;
          gj <= gj + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

`ifndef SYNTHESIS
  a_lm_handshake: assert property (@(posedge clk) disable iff (!rst_n)
    lm_valid |-> lm_ready);
`endif
endmodule
