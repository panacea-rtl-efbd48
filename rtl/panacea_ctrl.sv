// panacea_ctrl: top controller. Runs one GEMM layer  Y = f(W x + b)  over the tiles of
// the output-stationary loop nest
//   for m (TM rows, 2TM under DTP) / for n (TN columns) / for k (TK) / for a (R sub-tiles)
// The innermost loop runs inside the AQS-GEMM core; this controller does the rest:
//   LOAD  for each K tile, reads one activation block (TK x TN, 16 column-group lanes)
//         from AMEM and one weight block per weight sub-tile (16 PEA lanes) from WMEM and
//         streams them into the core. A block is read as: LO word 31 first (it carries the
//         per-lane HO entry counts), then LO word k and HO entry k of both banks together,
//         k = 0..31; HO entries beyond a lane's count are not sent (compressed data is
//         never moved). 34 cycles per block.
//   RUN   pulses the core (first K tile overwrites the partial sums) and waits for done.
//   DRAIN after the last K tile, feeds every output vector (sub-tile t, column group a,
//         row) with its row's bias through the PPU, and writes the PPU's LO vectors and
//         HO entries to OMEM in the same block format, so OMEM can feed the next layer.
// Memory words are 16 lanes x 32 bit; a 64-word block = LO bank words 0..31 and HO bank
// words 32..63 (bank = address bit 5). Bases must be multiples of 64 words.
// Layouts (this design's choice): weight block ((m*KT + k)*NT + t), lane p = rows
// m*NT*TM + t*TM + 4p..4p+3; activation block (n*KT + k), lane a = columns n*TN+4a..+3;
// bias of row g at WMEM word b_base + g/16, lane g%16; output block (n*KTo + g/32) with
// KTo = m_tiles*NT*TM/TK.
// The loop order, tile sizes and DTP follow the paper; the sequencing (no overlap of
// load, compute and drain) and all formats are this design's choices.
module panacea_ctrl
  import panacea_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  layer_cfg_t        cfg_in,
  input  logic              start,
  output logic              busy,
  output logic              done,
  output layer_cfg_t        cfg,          // registered configuration
  // memory read ports (bank index = {addr[9:6], addr[4:0]})
  output logic              wl_re, wh_re, al_re, ah_re,
  output logic [8:0]        wl_idx, wh_idx, al_idx, ah_idx,
  input  logic [MEM_LANES-1:0][31:0] wl_rd, wh_rd, al_rd, ah_rd,
  // OMEM write ports
  output logic              ol_we, oh_we,
  output logic [MEM_LANES-1:0] o_lane,
  output logic [8:0]        ol_idx, oh_idx,
  output logic [31:0]       ol_wd, oh_wd,
  // core load ports
  output logic              a_lo_valid,
  output logic [KIDX_W-1:0] a_k,
  output vec_t              a_lo [R],
  output logic              a_ho_first,
  output logic              a_ho_valid [R],
  output ho_entry_t         a_ho [R],
  output logic              w_lo_valid,
  output logic              w_tile,
  output logic [KIDX_W-1:0] w_k,
  output vec_t              w_lo [P],
  output logic              w_ho_first,
  output logic              w_ho_valid [P],
  output ho_entry_t         w_ho [P],
  output logic              core_start,
  output logic              core_first_k,
  input  logic              core_done,
  // core read port and PPU input
  output logic              rd_tile,
  output logic [5:0]        rd_row,
  output logic [3:0]        rd_grp,
  output logic              ppu_valid,
  output logic signed [31:0] ppu_bias,
  output logic [KIDX_W-1:0] ppu_k,
  output logic [15:0]       ppu_tag,
  // PPU output
  input  logic              po_valid,
  input  logic [KIDX_W-1:0] po_k,
  input  logic [15:0]       po_tag,
  input  vec_t              po_lo,
  input  logic              po_ho_valid,
  input  logic [19:0]       po_ho,
  input  logic [KIDX_W-1:0] po_ho_pos,
  input  logic [KIDX_W:0]   po_cnt,
  // statistics
  output logic [31:0]       st_cycles,
  output logic [31:0]       st_load_cycles,
  output logic [31:0]       st_run_cycles,
  output logic [31:0]       st_drain_cycles,
  output logic [31:0]       st_ema_words    // memory lanes moved into the core
);
  typedef enum logic [2:0] {C_IDLE, C_LOAD, C_RUN, C_WAIT, C_DRAIN, C_FLUSH} cstate_e;
  cstate_e st;

  logic [5:0] mt, nt, kt;
  logic       ld_t;          // weight sub-tile being loaded
  logic [5:0] ld_s;          // load step 0..33
  logic [5:0] a_cnt [R];     // HO entry counts of the activation block lanes
  logic [5:0] w_cnt [P];
  logic       ld_act;        // activation block is loaded in this phase
  logic [10:0] dr_i;         // drain index {t, a, row}
  logic [2:0] fl;

  function automatic logic [8:0] bidx(logic [MEM_AW-1:0] addr);
    return {addr[9:6], addr[4:0]};
  endfunction

  // block bases (word addresses, 64-aligned)
  logic [MEM_AW-1:0] w_blk, a_blk, b_addr;
  logic [5:0]        nt_w;   // weight sub-tiles per m tile
  logic [10:0]       dr_g;   // global output row of the drain item being issued
  always_comb begin
    nt_w  = cfg.dtp ? 6'd2 : 6'd1;
    w_blk = cfg.w_base + MEM_AW'((((mt * cfg.k_tiles + kt) * nt_w) + 6'(ld_t)) << 6);
    a_blk = cfg.a_base + MEM_AW'((nt * cfg.k_tiles + kt) << 6);
    dr_g  = 11'(mt * nt_w * TM) + (dr_i[10] ? 11'(TM) : 11'd0) + 11'(dr_i[5:0]);
    b_addr = cfg.b_base + MEM_AW'(dr_g >> 4);
  end

  // ---------------- memory reads ----------------
  logic [4:0] ld_k;
  assign ld_k = 5'(ld_s - 6'd1);
  always_comb begin
    wl_re = 1'b0; wh_re = 1'b0; al_re = 1'b0; ah_re = 1'b0;
    wl_idx = '0;  wh_idx = '0;  al_idx = '0;  ah_idx = '0;
    if (st == C_LOAD) begin
      if (ld_s == 0) begin
        wl_re = 1'b1; wl_idx = bidx(w_blk + 10'd31);
        al_re = ld_act; al_idx = bidx(a_blk + 10'd31);
      end else if (ld_s <= 32) begin
        wl_re = 1'b1; wl_idx = bidx(w_blk + MEM_AW'(ld_k));
        wh_re = 1'b1; wh_idx = bidx(w_blk + 10'd32 + MEM_AW'(ld_k));
        al_re = ld_act; al_idx = bidx(a_blk + MEM_AW'(ld_k));
        ah_re = ld_act; ah_idx = bidx(a_blk + 10'd32 + MEM_AW'(ld_k));
      end
    end else if (st == C_DRAIN) begin
      wl_re = !b_addr[5]; wh_re = b_addr[5];
      wl_idx = bidx(b_addr); wh_idx = bidx(b_addr);
    end
  end

  // ---------------- core load streams (data of step ld_s-1) ----------------
  logic [4:0] dk;
  logic       dvalid;
  assign dk     = 5'(ld_s - 6'd2);
  assign dvalid = (st == C_LOAD) && (ld_s >= 2);
  always_comb begin
    a_lo_valid = dvalid && ld_act;
    w_lo_valid = dvalid;
    a_k = dk; w_k = dk; w_tile = ld_t;
    a_ho_first = dvalid && (dk == 0);
    w_ho_first = dvalid && (dk == 0);
    for (int l = 0; l < R; l++) begin
      a_lo[l]       = al_rd[l][15:0];
      a_ho_valid[l] = a_lo_valid && ((6'(dk) < a_cnt[l]) || (dk == 0 && a_cnt[l] == 0));
      a_ho[l]       = '{empty: (a_cnt[l] == 0), rle: ah_rd[l][19:16], vec: ah_rd[l][15:0]};
    end
    for (int l = 0; l < P; l++) begin
      w_lo[l]       = wl_rd[l][15:0];
      w_ho_valid[l] = w_lo_valid && ((6'(dk) < w_cnt[l]) || (dk == 0 && w_cnt[l] == 0));
      w_ho[l]       = '{empty: (w_cnt[l] == 0), rle: wh_rd[l][19:16], vec: wh_rd[l][15:0]};
    end
  end

  // ---------------- drain: core read and PPU input (one cycle after issue) ----------------
  logic        dq_v;
  logic [10:0] dq_i;
  logic        dq_bank;
  logic [3:0]  dq_lane;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dq_v <= 1'b0; dq_i <= '0; dq_bank <= 1'b0; dq_lane <= '0;
    end else begin
      dq_v    <= (st == C_DRAIN);
      dq_i    <= dr_i;
      dq_bank <= b_addr[5];
      dq_lane <= dr_g[3:0];
    end
  end
  always_comb begin
    rd_tile   = dq_i[10];
    rd_grp    = dq_i[9:6];
    rd_row    = dq_i[5:0];
    ppu_valid = dq_v;
    ppu_bias  = dq_bank ? wh_rd[dq_lane] : wl_rd[dq_lane];
    ppu_k     = dq_i[4:0];
    ppu_tag   = {5'd0, dq_i};
  end

  // ---------------- OMEM writes ----------------
  logic [10:0]       po_g;
  logic [MEM_AW-1:0] o_blk;
  logic [5:0]        kto;
  always_comb begin
    kto    = 6'(cfg.m_tiles * nt_w * (TM / TK));
    po_g   = 11'(mt * nt_w * TM) + (po_tag[10] ? 11'(TM) : 11'd0) + 11'(po_tag[5:0]);
    o_blk  = cfg.o_base + MEM_AW'((nt * kto + 6'(po_g >> 5)) << 6);
    ol_we  = po_valid;
    oh_we  = po_ho_valid;
    o_lane = MEM_LANES'(1) << po_tag[9:6];
    ol_idx = bidx(o_blk + MEM_AW'(po_k));
    oh_idx = bidx(o_blk + 10'd32 + MEM_AW'(po_ho_pos));
    ol_wd  = {10'd0, (po_k == 5'd31) ? po_cnt : 6'd0, po_lo};
    oh_wd  = {12'd0, po_ho};
  end

  // ---------------- sequencing ----------------
  logic [5:0] nt_tot;
  assign nt_tot = cfg.dtp ? 6'd2 : 6'd1;

  // lane-words moved by the block being loaded: dense LO vectors plus the HO entries
  logic [31:0] ld_words;
  always_comb begin
    ld_words = 32'(ld_act ? R * TK : 0) + 32'(P * TK);
    for (int l = 0; l < R; l++) if (ld_act) ld_words = ld_words + 32'(al_rd[l][21:16]);
    for (int l = 0; l < P; l++) ld_words = ld_words + 32'(wl_rd[l][21:16]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; cfg <= '0; done <= 1'b0;
      mt <= '0; nt <= '0; kt <= '0; ld_t <= 1'b0; ld_s <= '0; ld_act <= 1'b0;
      dr_i <= '0; fl <= '0;
      core_start <= 1'b0; core_first_k <= 1'b0;
      st_cycles <= '0; st_load_cycles <= '0; st_run_cycles <= '0; st_drain_cycles <= '0;
      st_ema_words <= '0;
      for (int l = 0; l < R; l++) a_cnt[l] <= '0;
      for (int l = 0; l < P; l++) w_cnt[l] <= '0;
    end else begin
      done       <= 1'b0;
      core_start <= 1'b0;
      if (st != C_IDLE) st_cycles <= st_cycles + 1;
      case (st)
        C_LOAD:               st_load_cycles  <= st_load_cycles + 1;
        C_RUN, C_WAIT:        st_run_cycles   <= st_run_cycles + 1;
        C_DRAIN, C_FLUSH:     st_drain_cycles <= st_drain_cycles + 1;
        default: ;
      endcase
      case (st)
        C_IDLE: if (start) begin
          cfg <= cfg_in;
          mt <= '0; nt <= '0; kt <= '0;
          ld_t <= 1'b0; ld_s <= '0; ld_act <= 1'b1;
          st_cycles <= '0; st_load_cycles <= '0; st_run_cycles <= '0;
          st_drain_cycles <= '0; st_ema_words <= '0;
          st <= C_LOAD;
        end
        C_LOAD: begin
          if (ld_s == 1) begin
            for (int l = 0; l < R; l++) if (ld_act) a_cnt[l] <= al_rd[l][21:16];
            for (int l = 0; l < P; l++) w_cnt[l] <= wl_rd[l][21:16];
            st_ema_words <= st_ema_words + ld_words;
          end
          if (ld_s == 6'd33) begin
            ld_s <= '0;
            if (cfg.dtp && !ld_t) begin
              ld_t <= 1'b1; ld_act <= 1'b0;
            end else begin
              ld_t <= 1'b0;
              core_start   <= 1'b1;
              core_first_k <= (kt == 0);
              st <= C_RUN;
            end
          end else ld_s <= ld_s + 1;
        end
        C_RUN: st <= C_WAIT;
        C_WAIT: if (core_done) begin
          ld_act <= 1'b1;
          if (kt + 1 < cfg.k_tiles) begin
            kt <= kt + 1;
            st <= C_LOAD;
          end else begin
            kt   <= '0;
            dr_i <= '0;
            st   <= C_DRAIN;
          end
        end
        C_DRAIN: begin
          if (dr_i == ((nt_tot == 2) ? 11'h7ff : 11'h3ff)) begin
            fl <= '0;
            st <= C_FLUSH;
          end else dr_i <= dr_i + 1;
        end
        C_FLUSH: begin
          fl <= fl + 1;
          if (fl == 3'd7) begin
            if (nt + 1 < cfg.n_tiles) begin
              nt <= nt + 1; st <= C_LOAD;
            end else if (mt + 1 < cfg.m_tiles) begin
              nt <= '0; mt <= mt + 1; st <= C_LOAD;
            end else begin
              st <= C_IDLE; done <= 1'b1;
            end
          end
        end
        default: st <= C_IDLE;
      endcase
    end
  end

  assign busy = (st != C_IDLE);
endmodule
