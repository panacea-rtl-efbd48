// tb_panacea_top: end-to-end test of the whole accelerator at its default size
// (16 PEAs, TM = 64, TK = 32, TN = 64, 64 KB memories), with no parameter overridden.
// It runs a chain of three GEMM layers Y = f(W X + b) the way a host would:
//   * layer 1 takes random uint8 activations (many column groups inside the slice-skip
//     range of the layer's r), DBS type 1, double-tile processing (DTP) on;
//   * layers 2 and 3 take the previous layer's output: the host copies OMEM into AMEM
//     unchanged, so the output block format is checked as next-layer input. Layer 2 uses
//     DBS type 2, two M tiles and no DTP; layer 3 DBS type 3 with DTP.
// Weights are random 7-bit values with column groups of small weights (zero HO vectors),
// some of them long enough to force run-length breaks. The bias of each row folds in the
// asymmetric zero point and the compensation constant 16*r*sum(w), as a compiler would.
// The model computes y = sum_k w*x - zp*sum_k w + b exactly, then the PWL function,
// requantizer (zero point adjusted by ZPM) and slicing; every output value decoded from
// OMEM (HO entries placed by their run-length indices, compressed vectors = r'') is
// compared, as is the per-segment entry count and the number of memory words moved.
// Mechanisms counted (each must occur, or it counts as a failure): compressed weight HO
// vectors, compressed activation HO vectors, forced run breaks in inputs and outputs,
// compressed output vectors, DTP hand-over of W_LO x x_LO jobs, DBS types 1, 2 and 3,
// accumulation over several K tiles, several M/N tiles, quantizer saturation, more than
// one PWL segment in use, and chaining OMEM into AMEM.
module tb_panacea_top;
  import panacea_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [1:0] mem_sel = 0;
  logic mem_re = 0, mem_we = 0;
  logic [MEM_AW-1:0] mem_addr = 0;
  logic [MEM_LANES-1:0] mem_lane = 0;
  logic [MEM_LANES-1:0][31:0] mem_wdata = '0;
  logic [MEM_LANES-1:0][31:0] mem_rdata;
  layer_cfg_t cfg;
  logic start = 0, busy, done;
  logic [31:0] st_cycles, st_load_cycles, st_run_cycles, st_drain_cycles, st_ema_words, st_compute_cycles;
  logic ev_dtp_help, ev_sat;

  panacea_top dut (.*);
  always #2 clk = ~clk;   // 250 MHz

  int checks = 0, failures = 0;
  // mechanism counters
  int m_wcomp = 0, m_xcomp = 0, m_in_force = 0, m_out_force = 0, m_ocomp = 0, m_help = 0;
  int m_dbs [3] = '{0, 0, 0};
  int m_multi_k = 0, m_multi_mn = 0, m_sat = 0, m_chain = 0;
  int m_seg [PWL_SEGS];

  always @(posedge clk) begin
    if (ev_dtp_help) m_help++;
    if (ev_sat) m_sat++;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  localparam int MAXM = 128, MAXK = 128, MAXN = 128;
  int W [MAXM][MAXK];
  int X [MAXK][MAXN];      // uint8 input activations of the current layer
  int Q [MAXM][MAXN];      // expected uint8 outputs
  int B [MAXM];
  logic [MEM_LANES-1:0][31:0] blk [64];

  // ---------------- host port ----------------
  task automatic hwrite(int sel, int addr, logic [MEM_LANES-1:0][31:0] d);
    @(negedge clk);
    mem_sel = 2'(sel); mem_we = 1; mem_addr = MEM_AW'(addr); mem_lane = '1; mem_wdata = d;
    @(negedge clk);
    mem_we = 0;
  endtask
  task automatic hread(int sel, int addr, output logic [MEM_LANES-1:0][31:0] d);
    @(negedge clk);
    mem_sel = 2'(sel); mem_re = 1; mem_addr = MEM_AW'(addr);
    @(negedge clk);
    mem_re = 0;
    d = mem_rdata;
  endtask
  task automatic write_blk(int sel, int base);
    for (int w = 0; w < 64; w++) hwrite(sel, base + w, blk[w]);
  endtask

  // lane data -> block words; ho[l][k] is the HO vector, comp[l][k] its compressibility
  task automatic encode(logic [15:0] lo [16][32], logic [15:0] ho [16][32], bit comp [16][32],
                        output int moved, input bit is_act);
    for (int w = 0; w < 64; w++) blk[w] = '0;
    moved = 0;
    for (int l = 0; l < 16; l++) begin
      bit send [32]; int rle [32]; int n, e;
      rle_encode(comp[l], send, rle, n);
      e = 0;
      for (int k = 0; k < 32; k++) begin
        blk[k][l] = {16'd0, lo[l][k]};
        if (comp[l][k]) begin if (is_act) m_xcomp++; else m_wcomp++; end
        if (send[k]) begin
          if (comp[l][k]) m_in_force++;
          blk[32 + e][l] = {12'd0, 4'(rle[k]), ho[l][k]};
          e++;
        end
      end
      blk[31][l][21:16] = 6'(n);
      moved += 32 + n;
    end
  endtask

  // ---------------- one layer ----------------
  task automatic run_layer(int Mt, int Nt, int Kt, bit d, int sh, int r, int zp_in, int nl_sh,
                           bit chained, int lay);
    int NTW = d ? 2 : 1;
    int M = Mt * NTW * TM, N = Nt * TN, K = Kt * TK;
    int ema = 0, moved;
    int zp_raw, zp, nr, qmul, qsh, pwl_sh;
    logic [15:0] lo [16][32]; logic [15:0] ho [16][32]; bit comp [16][32];
    m_dbs[sh]++;
    if (Kt > 1) m_multi_k++;
    if (Mt > 1 || Nt > 1) m_multi_mn++;
    if (chained) m_chain++;
    // weights: column groups (4 rows x 1 k) of small values, some long runs of them
    for (int m = 0; m < M; m += 4)
      for (int k = 0; k < K; k++) begin
        bit sml = (m % 64 == 8) ? 1 : (($urandom % 100) < 45);
        for (int i = 0; i < 4; i++) W[m+i][k] = sml ? int'($urandom % 16) - 8 : int'($urandom % 128) - 64;
      end
    // bias: b + 16*r*sum(w) - zp_in*sum(w)
    for (int m = 0; m < M; m++) begin
      longint s = 0;
      for (int k = 0; k < K; k++) s += W[m][k];
      B[m] = int'($signed($urandom % 4001)) - 2000 + int'(16 * r * s) - int'(zp_in * s);
    end
    // write weight blocks: ((mt*KT + kt)*NTW + t)
    for (int mt = 0; mt < Mt; mt++)
      for (int kt = 0; kt < Kt; kt++)
        for (int t = 0; t < NTW; t++) begin
          for (int p = 0; p < 16; p++)
            for (int k = 0; k < 32; k++) begin
              int rr = mt * NTW * TM + t * TM + 4 * p, kk = kt * TK + k;
              lo[p][k] = pack4(sbr_lo(W[rr][kk]), sbr_lo(W[rr+1][kk]), sbr_lo(W[rr+2][kk]), sbr_lo(W[rr+3][kk]));
              ho[p][k] = pack4(sbr_ho(W[rr][kk]), sbr_ho(W[rr+1][kk]), sbr_ho(W[rr+2][kk]), sbr_ho(W[rr+3][kk]));
              comp[p][k] = (ho[p][k] == 16'd0);
            end
          encode(lo, ho, comp, moved, 0);
          ema += moved * Nt;
          write_blk(0, ((mt * Kt + kt) * NTW + t) * 64);
        end
    // biases at block 14 of WMEM
    for (int w = 0; w < M / 16; w++) begin
      logic [MEM_LANES-1:0][31:0] bw;
      for (int l = 0; l < 16; l++) bw[l] = 32'(B[w * 16 + l]);
      hwrite(0, 14 * 64 + w, bw);
    end
    // activation blocks (nt*KT + kt): written fresh, or OMEM copied by the host
    for (int nt = 0; nt < Nt; nt++)
      for (int kt = 0; kt < Kt; kt++) begin
        for (int a = 0; a < 16; a++)
          for (int k = 0; k < 32; k++) begin
            int kk = kt * TK + k, c = nt * TN + 4 * a;
            lo[a][k] = pack4(dbs_lo(X[kk][c], sh), dbs_lo(X[kk][c+1], sh), dbs_lo(X[kk][c+2], sh), dbs_lo(X[kk][c+3], sh));
            ho[a][k] = pack4(dbs_ho(X[kk][c], sh), dbs_ho(X[kk][c+1], sh), dbs_ho(X[kk][c+2], sh), dbs_ho(X[kk][c+3], sh));
            comp[a][k] = (ho[a][k] == {4{4'(r)}});
          end
        encode(lo, ho, comp, moved, 1);
        ema += moved * Mt;
        if (chained) begin
          for (int w = 0; w < 64; w++) begin
            logic [MEM_LANES-1:0][31:0] dw;
            hread(2, (nt * Kt + kt) * 64 + w, dw);
            hwrite(1, (nt * Kt + kt) * 64 + w, dw);
          end
        end else write_blk(1, (nt * Kt + kt) * 64);
      end
    // configuration: ZPM-adjusted output zero point and PWL (clamp / leaky / linear)
    zp_raw = 100 + int'($urandom % 40);
    zp     = ((zp_raw >> (4 + nl_sh)) << (4 + nl_sh)) + (1 << (3 + nl_sh));
    nr     = dbs_ho(zp, nl_sh);
    pwl_sh = 3;
    qmul   = (lay == 3) ? 3000 : 40 + int'($urandom % 40);
    qsh    = 14;
    cfg = '0;
    cfg.m_tiles = 6'(Mt); cfg.n_tiles = 6'(Nt); cfg.k_tiles = 6'(Kt); cfg.dtp = d; cfg.dbs_sh = 2'(sh);
    cfg.w_base = 0; cfg.b_base = 10'(14 * 64); cfg.a_base = 0; cfg.o_base = 0;
    cfg.ppu.r = 4'(r);
    for (int i = 0; i < PWL_SEGS - 1; i++) cfg.ppu.pwl_bp[i] = 32'sh7fffffff;
    cfg.ppu.pwl_bp[0] = -32'sd30000; cfg.ppu.pwl_bp[1] = 32'sd0;
    for (int i = 0; i < PWL_SEGS; i++) begin cfg.ppu.pwl_slope[i] = 16'd8; cfg.ppu.pwl_icpt[i] = 0; end
    cfg.ppu.pwl_slope[0] = 16'd0; cfg.ppu.pwl_icpt[0] = -32'sd7500;   // clamp below -30000
    cfg.ppu.pwl_slope[1] = 16'd2;                                      // y/4 on [-30000, 0)
    cfg.ppu.pwl_sh = 5'(pwl_sh);
    cfg.ppu.qmul = 16'(qmul); cfg.ppu.qsh = 6'(qsh); cfg.ppu.zp = 8'(zp);
    cfg.ppu.nl_sh = 2'(nl_sh); cfg.ppu.nr = 4'(nr);
    // model
    for (int m = 0; m < M; m++)
      for (int c = 0; c < N; c++) begin
        longint y = 0, f, p, q; int seg;
        longint s = 0;
        // the RTL computes sum w*(kept slices) + bias - 16*r*cs = sum w*x + bias - 16*r*sum(w)
        for (int k = 0; k < K; k++) begin
          y += longint'(W[m][k]) * dbs_val(X[k][c], sh);
          s += W[m][k];
        end
        y = y + B[m] - 16 * r * s;
        seg = 0;
        for (int i = 0; i < PWL_SEGS - 1; i++) if (y >= longint'($signed(cfg.ppu.pwl_bp[i]))) seg = i + 1;
        m_seg[seg]++;
        f = ((y * longint'($signed(cfg.ppu.pwl_slope[seg]))) >>> pwl_sh) + longint'($signed(cfg.ppu.pwl_icpt[seg]));
        p = f * qmul + (longint'(1) <<< (qsh - 1));
        q = (p >>> qsh) + zp;
        if (q < 0) q = 0;
        if (q > 255) q = 255;
        Q[m][c] = int'(q);
      end
    // run
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    $display("layer %0d: M=%0d N=%0d K=%0d dtp=%0d dbs type %0d: %0d cycles (load %0d, run %0d, drain %0d, compute %0d), %0d lane-words moved",
             lay, M, N, K, d, sh + 1, st_cycles, st_load_cycles, st_run_cycles, st_drain_cycles,
             st_compute_cycles, st_ema_words);
    checks++;
    if (int'(st_ema_words) != ema) begin failures++; $display("moved %0d exp %0d", st_ema_words, ema); end
    // decode OMEM: block (nt*KTo + m/32), lane = column group, word = m%32
    begin
      int KTo = M / TK;
      for (int nt = 0; nt < Nt; nt++)
        for (int ko = 0; ko < KTo; ko++) begin
          for (int w = 0; w < 64; w++) hread(2, (nt * KTo + ko) * 64 + w, blk[w]);
          for (int a = 0; a < 16; a++) begin
            int n = int'(blk[31][a][21:16]);
            int pos = 0;
            logic [15:0] hv [32];
            bit got [32];
            int ecnt = 0;
            for (int k = 0; k < 32; k++) got[k] = 0;
            for (int e = 0; e < n && e < 32; e++) begin
              pos += int'(blk[32 + e][a][19:16]);
              if (pos < 32) begin hv[pos] = blk[32 + e][a][15:0]; got[pos] = 1; end
              if (blk[32 + e][a][19:16] == 4'd15) m_out_force++;
              pos++;
            end
            // expected entry count
            begin
              bit oc [32]; bit send [32]; int rle [32];
              for (int k = 0; k < 32; k++) begin
                int m = ko * TK + k, c = nt * TN + 4 * a;
                oc[k] = (pack4(dbs_ho(Q[m][c], nl_sh), dbs_ho(Q[m][c+1], nl_sh), dbs_ho(Q[m][c+2], nl_sh),
                               dbs_ho(Q[m][c+3], nl_sh)) == {4{4'(nr)}});
                if (oc[k]) m_ocomp++;
              end
              rle_encode(oc, send, rle, ecnt);
            end
            checks++;
            if (n != ecnt) begin failures++; $display("block %0d lane %0d count %0d exp %0d", nt * KTo + ko, a, n, ecnt); end
            for (int k = 0; k < 32; k++)
              for (int j = 0; j < 4; j++) begin
                int m = ko * TK + k, c = nt * TN + 4 * a + j;
                int hs = got[k] ? int'(hv[k][4*j +: 4]) : nr;
                int val = 16 * hs + (int'(blk[k][a][4*j +: 4]) << nl_sh);
                checks++;
                if (val != dbs_val(Q[m][c], nl_sh)) begin
                  failures++;
                  if (failures < 10) $display("layer %0d Y[%0d][%0d] = %0d exp %0d (q %0d)", lay, m, c, val,
                                              dbs_val(Q[m][c], nl_sh), Q[m][c]);
                end
              end
          end
        end
    end
    // next layer's input is this layer's output
    for (int m = 0; m < M; m++)
      for (int c = 0; c < N; c++) X[m][c] = Q[m][c];
  endtask

  initial begin
    int zp1, zp2;
    for (int s = 0; s < PWL_SEGS; s++) m_seg[s] = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    // layer 1 input: uint8 around zero point 136; r = HO slice of 128 (ZPM for l = 4)
    for (int k = 0; k < 64; k++)
      for (int c = 0; c < 128; c += 4) begin
        bit near = (c % 64 == 12) ? 1 : (($urandom % 100) < 50);
        for (int j = 0; j < 4; j++) X[k][c+j] = near ? 128 + int'($urandom % 16) : int'($urandom % 256);
      end
    run_layer(1, 2, 2, 1, 0, 8, 136, 1, 0, 1);
    zp1 = int'(cfg.ppu.zp);
    run_layer(2, 2, 4, 0, 1, int'(cfg.ppu.nr), zp1, 2, 1, 2);
    zp2 = int'(cfg.ppu.zp);
    run_layer(1, 2, 4, 1, 2, int'(cfg.ppu.nr), zp2, 0, 1, 3);
    // mechanisms
    begin
      int nseg = 0;
      for (int s = 0; s < PWL_SEGS; s++) if (m_seg[s] > 0) nseg++;
      $display("mechanisms: compressed W HO %0d, compressed x HO %0d, forced breaks in %0d out %0d, compressed outputs %0d, DTP hand-over cycles %0d, DBS types %0d/%0d/%0d, multi-K layers %0d, multi-M/N layers %0d, saturated outputs %0d, PWL segments used %0d, chained layers %0d",
               m_wcomp, m_xcomp, m_in_force, m_out_force, m_ocomp, m_help, m_dbs[0], m_dbs[1], m_dbs[2],
               m_multi_k, m_multi_mn, m_sat, nseg, m_chain);
      checks += 14;
      if (m_wcomp == 0) failures++;
      if (m_xcomp == 0) failures++;
      if (m_in_force == 0) failures++;
      if (m_out_force == 0) failures++;
      if (m_ocomp == 0) failures++;
      if (m_help == 0) failures++;
      if (m_dbs[0] == 0) failures++;
      if (m_dbs[1] == 0) failures++;
      if (m_dbs[2] == 0) failures++;
      if (m_multi_k == 0) failures++;
      if (m_multi_mn == 0) failures++;
      if (m_sat == 0) failures++;
      if (nseg < 2) failures++;
      if (m_chain == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
