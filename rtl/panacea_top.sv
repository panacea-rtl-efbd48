// panacea_top: the Panacea accelerator - on-chip memories with their memory manager,
// the top controller, the AQS-GEMM core (16 PEAs) and the post-processing unit.
//
// Panacea computes quantized GEMM layers with symmetric 7-bit weights and asymmetric
// 8-bit activations on 4-bit slices. Weight HO vectors that are all zero and activation
// HO vectors whose slices all equal the layer's frequent value r are neither stored,
// moved nor multiplied; a compensation term keeps the result exact (see cs and ppu).
// A host (not part of this design) fills WMEM/AMEM through the memory port, sets the
// layer configuration and pulses start; done pulses when all outputs are in OMEM in the
// same compressed block format, ready to serve as the next layer's AMEM contents.
// Memory port: mem_sel 0 = WMEM, 1 = AMEM, 2 = OMEM; logical word addresses; 16 lanes of
// 32 bits; reads return one cycle later on mem_rdata. The host may use it only while
// busy is low. Each memory is two 512 x 512-bit banks (LO bank: address bit 5 = 0,
// HO bank: bit 5 = 1), 64 KB per memory as in the paper. The memory manager (the
// multiplexers below) gives the host port priority when idle and the controller
// otherwise.
// The DMA, AXI bus and host core of the chip are not modelled; the memory and
// configuration ports stand in for them.
module panacea_top
  import panacea_pkg::*;
(
  input  logic                         clk,
  input  logic                         rst_n,
  // host memory port
  input  logic [1:0]                   mem_sel,
  input  logic                         mem_re,
  input  logic                         mem_we,
  input  logic [MEM_AW-1:0]            mem_addr,
  input  logic [MEM_LANES-1:0]         mem_lane,
  input  logic [MEM_LANES-1:0][31:0]   mem_wdata,
  output logic [MEM_LANES-1:0][31:0]   mem_rdata,
  // layer control
  input  layer_cfg_t                   cfg,
  input  logic                         start,
  output logic                         busy,
  output logic                         done,
  // statistics and events
  output logic [31:0]                  st_cycles,
  output logic [31:0]                  st_load_cycles,
  output logic [31:0]                  st_run_cycles,
  output logic [31:0]                  st_drain_cycles,
  output logic [31:0]                  st_ema_words,
  output logic [31:0]                  st_compute_cycles,
  output logic                         ev_dtp_help,
  output logic                         ev_sat
);
  localparam int BD = 512;   // words per bank

  layer_cfg_t c;

  // ---------------- memories ----------------
  logic              wl_re, wh_re, al_re, ah_re;
  logic [8:0]        wl_idx, wh_idx, al_idx, ah_idx;
  logic [MEM_LANES-1:0][31:0] wl_rd, wh_rd, al_rd, ah_rd, ol_rd, oh_rd;
  logic              ol_we, oh_we;
  logic [MEM_LANES-1:0] o_lane;
  logic [8:0]        ol_idx, oh_idx;
  logic [31:0]       ol_wd, oh_wd;

  logic [8:0] h_idx;
  logic       h_bank;
  assign h_idx  = {mem_addr[9:6], mem_addr[4:0]};
  assign h_bank = mem_addr[5];

  logic h_re [3][2];
  logic h_we [3][2];
  always_comb begin
    for (int m = 0; m < 3; m++)
      for (int b = 0; b < 2; b++) begin
        h_re[m][b] = !busy && mem_re && mem_sel == 2'(m) && h_bank == 1'(b);
        h_we[m][b] = !busy && mem_we && mem_sel == 2'(m) && h_bank == 1'(b);
      end
  end

  // WMEM
  sram #(.DEPTH(BD), .LANES(MEM_LANES), .LANE_W(32)) u_wmem_lo (
    .clk, .re(h_re[0][0] || wl_re), .raddr(busy ? wl_idx : h_idx), .rdata(wl_rd),
    .we(h_we[0][0]), .wlane(mem_lane), .waddr(h_idx), .wdata(mem_wdata));
  sram #(.DEPTH(BD), .LANES(MEM_LANES), .LANE_W(32)) u_wmem_ho (
    .clk, .re(h_re[0][1] || wh_re), .raddr(busy ? wh_idx : h_idx), .rdata(wh_rd),
    .we(h_we[0][1]), .wlane(mem_lane), .waddr(h_idx), .wdata(mem_wdata));
  // AMEM
  sram #(.DEPTH(BD), .LANES(MEM_LANES), .LANE_W(32)) u_amem_lo (
    .clk, .re(h_re[1][0] || al_re), .raddr(busy ? al_idx : h_idx), .rdata(al_rd),
    .we(h_we[1][0]), .wlane(mem_lane), .waddr(h_idx), .wdata(mem_wdata));
  sram #(.DEPTH(BD), .LANES(MEM_LANES), .LANE_W(32)) u_amem_ho (
    .clk, .re(h_re[1][1] || ah_re), .raddr(busy ? ah_idx : h_idx), .rdata(ah_rd),
    .we(h_we[1][1]), .wlane(mem_lane), .waddr(h_idx), .wdata(mem_wdata));
  // OMEM
  sram #(.DEPTH(BD), .LANES(MEM_LANES), .LANE_W(32)) u_omem_lo (
    .clk, .re(h_re[2][0]), .raddr(h_idx), .rdata(ol_rd),
    .we(busy ? ol_we : h_we[2][0]), .wlane(busy ? o_lane : mem_lane),
    .waddr(busy ? ol_idx : h_idx), .wdata(busy ? {MEM_LANES{ol_wd}} : mem_wdata));
  sram #(.DEPTH(BD), .LANES(MEM_LANES), .LANE_W(32)) u_omem_ho (
    .clk, .re(h_re[2][1]), .raddr(h_idx), .rdata(oh_rd),
    .we(busy ? oh_we : h_we[2][1]), .wlane(busy ? o_lane : mem_lane),
    .waddr(busy ? oh_idx : h_idx), .wdata(busy ? {MEM_LANES{oh_wd}} : mem_wdata));

  // host read data: remember which bank was read
  logic [1:0] rsel_q;
  logic       rbank_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsel_q <= '0; rbank_q <= 1'b0;
    end else if (mem_re) begin
      rsel_q <= mem_sel; rbank_q <= h_bank;
    end
  end
  always_comb begin
    case (rsel_q)
      2'd0:    mem_rdata = rbank_q ? wh_rd : wl_rd;
      2'd1:    mem_rdata = rbank_q ? ah_rd : al_rd;
      default: mem_rdata = rbank_q ? oh_rd : ol_rd;
    endcase
  end

  // ---------------- controller ----------------
  logic              a_lo_valid, a_ho_first, w_lo_valid, w_tile, w_ho_first;
  logic [KIDX_W-1:0] a_k, w_k;
  vec_t              a_lo [R];
  vec_t              w_lo [P];
  logic              a_ho_valid [R];
  logic              w_ho_valid [P];
  ho_entry_t         a_ho [R];
  ho_entry_t         w_ho [P];
  logic              core_start, core_first_k, core_done, core_busy;
  logic              rd_tile;
  logic [5:0]        rd_row;
  logic [3:0]        rd_grp;
  psum_t             rd_psum [V];
  cs_t               rd_cs;
  logic              ppu_valid;
  logic signed [31:0] ppu_bias;
  logic [KIDX_W-1:0] ppu_k, po_k, po_ho_pos;
  logic [15:0]       ppu_tag, po_tag;
  logic              po_valid, po_ho_valid;
  vec_t              po_lo;
  logic [19:0]       po_ho;
  logic [KIDX_W:0]   po_cnt;

  panacea_ctrl u_ctrl (
    .clk, .rst_n, .cfg_in(cfg), .start, .busy, .done, .cfg(c),
    .wl_re, .wh_re, .al_re, .ah_re, .wl_idx, .wh_idx, .al_idx, .ah_idx,
    .wl_rd, .wh_rd, .al_rd, .ah_rd,
    .ol_we, .oh_we, .o_lane, .ol_idx, .oh_idx, .ol_wd, .oh_wd,
    .a_lo_valid, .a_k, .a_lo, .a_ho_first, .a_ho_valid, .a_ho,
    .w_lo_valid, .w_tile, .w_k, .w_lo, .w_ho_first, .w_ho_valid, .w_ho,
    .core_start, .core_first_k, .core_done,
    .rd_tile, .rd_row, .rd_grp, .ppu_valid, .ppu_bias, .ppu_k, .ppu_tag,
    .po_valid, .po_k, .po_tag, .po_lo, .po_ho_valid, .po_ho, .po_ho_pos, .po_cnt,
    .st_cycles, .st_load_cycles, .st_run_cycles, .st_drain_cycles, .st_ema_words
  );

  // ---------------- AQS-GEMM core ----------------
  aqs_core #(.NP(P), .NR(R)) u_core (
    .clk, .rst_n, .dtp(c.dtp), .dbs_sh(c.dbs_sh),
    .a_lo_valid, .a_k, .a_lo, .a_ho_first, .a_ho_valid, .a_ho,
    .w_lo_valid, .w_tile, .w_k, .w_lo, .w_ho_first, .w_ho_valid, .w_ho,
    .start(core_start), .first_k(core_first_k), .busy(core_busy), .done(core_done),
    .dtp_help(ev_dtp_help), .cyc_compute(st_compute_cycles),
    .rd_tile, .rd_row, .rd_grp, .rd_psum, .rd_cs
  );

  // ---------------- post-processing unit ----------------
  ppu #(.TAG_W(16)) u_ppu (
    .clk, .rst_n, .cfg(c.ppu),
    .in_valid(ppu_valid), .in_psum(rd_psum), .in_cs(rd_cs), .in_bias(ppu_bias),
    .in_k(ppu_k), .in_tag(ppu_tag),
    .out_valid(po_valid), .out_k(po_k), .out_tag(po_tag), .out_lo(po_lo),
    .out_ho_valid(po_ho_valid), .out_ho(po_ho), .out_ho_pos(po_ho_pos), .out_cnt(po_cnt),
    .out_sat(ev_sat)
  );

  a_host_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                busy |-> !(mem_we && mem_sel != 2'd3));
endmodule
