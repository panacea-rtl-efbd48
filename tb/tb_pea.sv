// tb_pea: one processing element array against an integer model.
// Random 7-bit weights (two sub-tiles, with columns of small weights so their HO vector
// is zero and compressed) and uint8 activations (with rows inside the slice-skip range
// of a random r, so their HO vector is compressed) are sliced, run-length encoded and
// loaded; for every DBS type and with DTP off and on the test checks
//   * the 4x4 partial sums: sum_k w[i][k] * ((x_HO kept ? 16*xh : 0) + 2^sh * xl),
//   * the compensation sums: sum over kept x_HO of w[i][k],
//   * that partial sums - 16*r*cs + 16*r*sum_k w equals the exact sliced GEMM,
//   * the cycle count from start to done against the scheduling policy.
module tb_pea;
  import panacea_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic dtp = 0;
  logic [1:0] dbs_sh = 0;
  logic wl_lo_valid = 0, wl_ho_valid = 0, wl_ho_first = 0, wl_tile = 0;
  logic [KIDX_W-1:0] wl_k = 0;
  vec_t wl_lo = 0;
  ho_entry_t wl_ho = 0;
  vec_t x_ho [TK];
  vec_t x_lo [TK];
  logic [TK-1:0] ux;
  logic start = 0, busy, done, dtp_help;
  psum_t psum [2][V][V];
  cs_t cssum [2][V];
  int checks = 0, failures = 0, helps = 0;

  pea dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(posedge clk) if (dtp_help) helps++;

  int w [2][V][TK];
  int x [TK][V];

  function automatic int model_cycles(int dyn, int ll0, int ll1, bit d);
    int c = 0;
    while (dyn > 0 || ll0 + ll1 > 0) begin
      int s, dd, free;
      s = (ll0 + ll1 < N_SWO) ? ll0 + ll1 : N_SWO;
      if (s <= ll0) ll0 -= s; else begin ll1 -= (s - ll0); ll0 = 0; end
      dd = (dyn < N_DWO) ? dyn : N_DWO;
      dyn -= dd;
      free = N_DWO - dd;
      if (d && free > 0) ll1 -= (ll1 < free) ? ll1 : free;
      c++;
    end
    return c;
  endfunction

  task automatic load_weights(int t, output logic [TK-1:0] uwm);
    bit comp [32]; bit send [32]; int rle [32]; int n; bit first;
    for (int k = 0; k < TK; k++) begin
      comp[k] = 1;
      for (int i = 0; i < V; i++) if (sbr_ho(w[t][i][k]) != 0) comp[k] = 0;
    end
    rle_encode(comp, send, rle, n);
    for (int k = 0; k < TK; k++) begin
      @(negedge clk);
      wl_lo_valid = 1; wl_ho_valid = 0; wl_tile = 1'(t); wl_k = 5'(k);
      wl_lo = pack4(sbr_lo(w[t][0][k]), sbr_lo(w[t][1][k]), sbr_lo(w[t][2][k]), sbr_lo(w[t][3][k]));
    end
    @(negedge clk); wl_lo_valid = 0;
    first = 1;
    uwm = '0;
    for (int k = 0; k < TK; k++) if (send[k]) begin
      @(negedge clk);
      wl_ho_valid = 1; wl_ho_first = first; first = 0;
      wl_ho = '{empty: 1'b0, rle: 4'(rle[k]),
                vec: pack4(sbr_ho(w[t][0][k]), sbr_ho(w[t][1][k]), sbr_ho(w[t][2][k]), sbr_ho(w[t][3][k]))};
      uwm[k] = 1;
    end
    if (n == 0) begin
      @(negedge clk); wl_ho_valid = 1; wl_ho_first = 1; wl_ho = '{empty: 1'b1, rle: 0, vec: 0};
    end
    @(negedge clk); wl_ho_valid = 0; wl_ho_first = 0;
  endtask

  task automatic run_case(int sh, bit d, int wsp, int xsp);
    int r;
    logic [TK-1:0] uwm [2];
    bit comp [32]; bit send [32]; int rle [32]; int n;
    int cyc, expc, dyn;
    r = ($urandom % 16) & ~((1 << sh) - 1);
    // weights
    for (int t = 0; t < 2; t++)
      for (int k = 0; k < TK; k++) begin
        bit sml = ($urandom % 100) < wsp;
        for (int i = 0; i < V; i++)
          w[t][i][k] = sml ? int'($urandom % 16) - 8 : int'($urandom % 128) - 64;
      end
    // activations: rows in the skip range of r or random
    for (int k = 0; k < TK; k++) begin
      bit skip = ($urandom % 100) < xsp;
      for (int j = 0; j < V; j++) begin
        if (skip) x[k][j] = ((r >> sh) << (4 + sh)) | int'($urandom % (1 << (4 + sh)));
        else      x[k][j] = int'($urandom % 256);
      end
    end
    dtp = d; dbs_sh = 2'(sh);
    load_weights(0, uwm[0]);
    if (d) load_weights(1, uwm[1]); else uwm[1] = '0;
    for (int k = 0; k < TK; k++) begin
      comp[k] = 1;
      for (int j = 0; j < V; j++) if (dbs_ho(x[k][j], sh) != r) comp[k] = 0;
    end
    rle_encode(comp, send, rle, n);
    for (int k = 0; k < TK; k++) begin
      ux[k] = send[k];
      x_lo[k] = pack4(dbs_lo(x[k][0], sh), dbs_lo(x[k][1], sh), dbs_lo(x[k][2], sh), dbs_lo(x[k][3], sh));
      x_ho[k] = send[k] ? pack4(dbs_ho(x[k][0], sh), dbs_ho(x[k][1], sh), dbs_ho(x[k][2], sh), dbs_ho(x[k][3], sh))
                        : 16'($urandom);    // never read
    end
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; if (cyc > 200) break; end
    // start -> first issue is one cycle, done comes one cycle after the last issue
    dyn = $countones(uwm[0] & ux) + $countones(ux) + $countones(uwm[0]);
    if (d) dyn += $countones(uwm[1] & ux) + $countones(ux) + $countones(uwm[1]);
    expc = model_cycles(dyn, TK, d ? TK : 0, d) + 1;
    checks++;
    if (cyc != expc) begin failures++; $display("cycles %0d exp %0d", cyc, expc); end
    for (int t = 0; t < (d ? 2 : 1); t++)
      for (int i = 0; i < V; i++) begin
        longint csum = 0, wsum = 0;
        for (int k = 0; k < TK; k++) begin
          wsum += w[t][i][k];
          if (ux[k]) csum += w[t][i][k];
        end
        checks++;
        if (longint'(cssum[t][i]) != csum) begin
          failures++; $display("cs t%0d i%0d got %0d exp %0d", t, i, cssum[t][i], csum);
        end
        for (int j = 0; j < V; j++) begin
          longint e = 0, exact = 0, rec;
          for (int k = 0; k < TK; k++) begin
            e += longint'(w[t][i][k]) * ((ux[k] ? 16 * dbs_ho(x[k][j], sh) : 0) + (dbs_lo(x[k][j], sh) << sh));
            exact += longint'(w[t][i][k]) * dbs_val(x[k][j], sh);
          end
          checks++;
          if (longint'(psum[t][i][j]) != e) begin
            failures++;
            if (failures < 10) $display("psum t%0d [%0d][%0d] got %0d exp %0d", t, i, j, psum[t][i][j], e);
          end
          rec = longint'(psum[t][i][j]) - 16 * r * longint'(cssum[t][i]) + 16 * r * wsum;
          checks++;
          if (rec != exact) begin
            failures++;
            if (failures < 10) $display("compensated result %0d exact %0d", rec, exact);
          end
        end
      end
  endtask

  initial begin
    for (int k = 0; k < TK; k++) begin x_ho[k] = 0; x_lo[k] = 0; end
    ux = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 60; n++)
      run_case(n % 3, (n / 3) % 2 == 1, (n % 5) * 25, 40 + (n % 4) * 20);
    // all compressed activations and weights
    run_case(0, 1, 100, 100);
    checks++;
    if (helps == 0) begin failures++; $display("no DTP hand-over seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
