// merged_memory: list folded partial-sum network whose SRAMs also yield the decoded bits.
//
// What it does. For each of the L paths of a list SC decoder it keeps the partial sums
// (the already decoded bits re-encoded) that the G functions need, and at the end of the
// frame gives back the N decoded bits of every path, without any separate path memory.
//
// How it works.
//  * Stages <= p: a P-bit register bank per path, updated by psn_merge after each list
//    management (LM) step. The banks are first permuted by the shared crossbar (path l
//    takes its parent's bank), then the new bit of path l is merged in. ps_bank shows the
//    banks to the processing elements.
//  * Stages > p: one SRAM per path of N/P words of P bits (N bits). Word w always lives
//    at address w. When a block of P bits completes and the completed word count c
//    becomes odd, the bank is stored (1 cycle). When c becomes even with 2^k as lowest set
//    bit, the stage-(p+k) partial sums of the block [c-2^k, c) are generated serially, one
//    word per cycle from the top word down (2^k cycles): the top word is the bank,
//    word w below it is S_w XOR X_{w+2^b} (b: highest zero bit of w's offset), where S_w
//    is read through the crossbar from the SRAM the path's pointer names and X_{w+2^b}
//    from the path's own SRAM. Every result is streamed on ps_word and written to the
//    path's own SRAM, after which the path's level-k pointer points at itself. Paths are
//    thus "copied" only through pointers (pointer_mem).
//  * Recovery (RECOVER = 1): the group [NW-2^(k+1), NW-2^k) is never touched again once
//    generated, so it is queued for recovery_sched, which re-encodes it word-wise in the
//    SRAM of every path, one pair of words per cycle, only in cycles the SRAMs are not
//    used for storing or generating. Readout then sends each word through a P-bit encoder
//    per path, turning (u_P)_j * F^(x)p back into the decoded bits.
//
// Interface and timing. lm_valid may be raised only with lm_ready. A store takes 1 cycle
// and a generation of 2^k words 2^k cycles, starting the cycle after the LM; lm_ready is
// low meanwhile. ps_valid marks a generated word (address ps_addr, all paths). After the
// last bit (N bits) and once recovery is idle, rd_ready rises; rd_start then streams words
// 0 .. N/P-1 of all L paths on rd_bits, one word per cycle with rd_valid. start clears the
// frame. With RECOVER = 0 the block is a plain list folded PSN (no recovery, no readout).
//
// Follows the paper: register banks for stages <= p, N-bit SRAMs with 2P-bit reads, one
// P-bit crossbar, XOR of P bits shared between generation and recovery, recovery order and
// latency, per-path output encoder. This design's own choices: the in-place word layout,
// the pointer levels, start-after-LM timing, asynchronous SRAM reads, the handshake.
module merged_memory #(
  parameter int unsigned N       = 1024,
  parameter int unsigned L       = 16,
  parameter int unsigned P       = 64,
  parameter bit          RECOVER = 1'b1,
  localparam int unsigned NW     = N / P,
  localparam int unsigned AW     = (NW > 1) ? $clog2(NW) : 1,
  localparam int unsigned LOGP   = (P > 1) ? $clog2(P) : 1,
  localparam int unsigned LW     = (L > 1) ? $clog2(L) : 1,
  localparam int unsigned NLVL   = AW + 1,
  localparam int unsigned KW     = $clog2(NLVL)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  // list management result of one decoded bit
  input  logic                 lm_valid,
  input  logic [L-1:0][LW-1:0] lm_parent,
  input  logic [L-1:0]         lm_bit,
  output logic                 lm_ready,
  // partial sums to the processing elements
  output logic [L-1:0][P-1:0]  ps_bank,
  output logic                 ps_valid,
  output logic [AW-1:0]        ps_addr,
  output logic [L-1:0][P-1:0]  ps_word,
  // decoded-bit readout
  output logic                 rd_ready,
  input  logic                 rd_start,
  output logic                 rd_valid,
  output logic [AW-1:0]        rd_addr,
  output logic [L-1:0][P-1:0]  rd_bits,
  output logic                 recov_busy
);
  import polar_pkg::*;

  typedef enum logic [1:0] {S_IDLE, S_STORE, S_GEN, S_READ} state_e;

  state_e            state;
  logic [AW:0]       cw;        // completed words
  logic [LOGP-1:0]   pos;       // bit position inside the current word
  logic [KW-1:0]     gk;        // level of the block being generated
  logic [AW-1:0]     gj;        // generation step / readout address
  logic [L-1:0][P-1:0] bank;

  // ---------------- shared crossbar ----------------
  logic [L-1:0][P-1:0]  xb_in, xb_out;
  logic [L-1:0][LW-1:0] xb_sel, ptr_sel;
  list_crossbar #(.L(L), .W(P)) u_xbar (.din(xb_in), .sel(xb_sel), .dout(xb_out));

  // ---------------- SRAMs ----------------
  logic                     sr_we;
  logic [AW-1:0]            sr_waddr;
  logic [1:0][AW-1:0]       sr_raddr;
  logic [L-1:0][P-1:0]      sr_wdata, rd0, rd1;
  for (genvar l = 0; l < L; l++) begin : g_sram
    logic [1:0][P-1:0] rdata;
    psum_sram #(.DEPTH(NW), .W(P), .READS(2)) u_sram (
      .clk(clk), .we(sr_we), .waddr(sr_waddr), .wdata(sr_wdata[l]),
      .raddr(sr_raddr), .rdata(rdata));
    assign rd0[l] = rdata[0];
    assign rd1[l] = rdata[1];
  end

  // ---------------- pointers ----------------
  logic          ptr_set;
  logic [KW-1:0] ptr_set_lvl, ptr_lvl;
  pointer_mem #(.L(L), .NLVL(NLVL)) u_ptr (
    .clk(clk), .rst_n(rst_n), .init(start), .copy_en(lm_valid && lm_ready),
    .parent(lm_parent), .set_en(ptr_set), .set_lvl(ptr_set_lvl), .lvl(ptr_lvl), .sel(ptr_sel));

  // ---------------- serial generation addresses ----------------
  logic [AW-1:0] gw, gbase, gpartner;
  always_comb begin
    int unsigned rel;
    gw       = AW'(32'(cw) - 1 - 32'(gj));
    gbase    = AW'(32'(cw) - (1 << gk));
    rel      = 32'(gw) - 32'(gbase);
    gpartner = AW'(32'(gw) + (1 << msb_zero(rel, 32'(gk))));
  end

  // ---------------- recovery ----------------
  logic          rc_req, rc_grant, rc_valid;
  logic [AW-1:0] rc_a0, rc_a1;
  logic          rc_busy;
  if (RECOVER) begin : g_rec
    logic [$clog2(AW + 1)-1:0] lvl_req;
    assign lvl_req = ($clog2(AW + 1))'(gk);
    recovery_sched #(.NW(NW)) u_rsched (
      .clk(clk), .rst_n(rst_n), .clear(start), .req(rc_req), .req_lvl(lvl_req),
      .grant(rc_grant), .valid(rc_valid), .a0(rc_a0), .a1(rc_a1), .busy(rc_busy));
  end else begin : g_norec
    assign rc_valid = 1'b0;
    assign rc_a0    = '0;
    assign rc_a1    = '0;
    assign rc_busy  = 1'b0;
  end
  assign rc_grant   = (state == S_IDLE) && rc_valid;
  assign recov_busy = rc_busy;

  // ---------------- datapath muxes ----------------
  logic lm_fire;
  assign lm_fire  = lm_valid && lm_ready;
  assign lm_ready = (state == S_IDLE) && (32'(cw) < NW) && !start;

  always_comb begin
    xb_in       = bank;
    xb_sel      = lm_parent;
    ptr_lvl     = '0;
    sr_we       = 1'b0;
    sr_waddr    = '0;
    sr_raddr    = '{default: '0};
    sr_wdata    = bank;
    ptr_set     = 1'b0;
    ptr_set_lvl = '0;
    rc_req      = 1'b0;
    ps_valid    = 1'b0;
    ps_addr     = gw;
    ps_word     = bank;
    case (state)
      S_STORE: begin
        sr_we       = 1'b1;
        sr_waddr    = AW'(32'(cw) - 1);
        ptr_set     = 1'b1;
        ptr_set_lvl = (32'(cw) == NW) ? KW'(AW) : '0;
      end
      S_GEN: begin
        xb_in       = rd0;
        ptr_lvl     = KW'(msb_one(32'(gw) ^ (32'(cw) - 1)));
        xb_sel      = ptr_sel;
        sr_raddr[0] = gw;
        sr_raddr[1] = gpartner;
        sr_we       = 1'b1;
        sr_waddr    = gw;
        if (gj != '0)
          for (int unsigned l = 0; l < L; l++)
            sr_wdata[l] = xb_out[l] ^ rd1[l];
        ps_valid    = 1'b1;
        ps_word     = sr_wdata;
        if (32'(gj) == (1 << gk) - 1) begin
          ptr_set     = 1'b1;
          ptr_set_lvl = gk;
          rc_req      = RECOVER && (32'(gbase) == NW - (2 << gk));
        end
      end
      S_READ: begin
        xb_in       = rd0;
        ptr_lvl     = KW'(word_level(32'(gj), NW, NW));
        xb_sel      = ptr_sel;
        sr_raddr[0] = gj;
      end
      default: begin  // S_IDLE: the SRAMs are free for recovery
        if (rc_grant) begin
          sr_raddr[0] = rc_a0;
          sr_raddr[1] = rc_a1;
          sr_we       = 1'b1;
          sr_waddr    = rc_a0;
          for (int unsigned l = 0; l < L; l++)
            sr_wdata[l] = rd0[l] ^ rd1[l];
        end
      end
    endcase
  end

  // ---------------- readout encoders, one per path ----------------
  for (genvar l = 0; l < L; l++) begin : g_enc
    pbit_encoder #(.P(P)) u_enc (.din(xb_out[l]), .dout(rd_bits[l]));
  end
  assign rd_valid = (state == S_READ);
  assign rd_addr  = gj;
  assign rd_ready = RECOVER && (state == S_IDLE) && (32'(cw) == NW) && !rc_busy && !start;

  // ---------------- parallel PSN banks ----------------
  logic [L-1:0][P-1:0] bank_next;
  for (genvar l = 0; l < L; l++) begin : g_psn
    psn_merge #(.P(P)) u_merge (
      .bank_in(xb_out[l]), .pos(pos), .bit_in(lm_bit[l]), .bank_out(bank_next[l]));
  end
  assign ps_bank = bank;

  // ---------------- control ----------------
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
          if (lm_fire) begin
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
