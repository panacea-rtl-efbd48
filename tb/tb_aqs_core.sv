// tb_aqs_core: the AQS-GEMM core (16 PEAs, global buffers, PE controller) at its default
// size against an integer model.
// Each case draws a 2TM x 2TK weight block (sub-tile 1 used only with DTP) and a
// 2TK x TN activation block with HO-compressible columns/rows, slices and run-length
// encodes them per lane, and runs two K tiles: the first overwrites the global
// partial-sum buffer, the second accumulates. All TM (2TM) x TN partial sums and all
// compensation sums are read back through the read port and compared; the compensated
// result psum - 16*r*cs + 16*r*sum(w) is checked against the exact sliced GEMM.
// Also checks that compute cycles are counted and that DTP hand-over happened.
module tb_aqs_core;
  import panacea_pkg::*;
  import tb_ref_pkg::*;
  localparam int NP = P, NR = R;
  logic clk = 0, rst_n = 0;
  logic dtp = 0;
  logic [1:0] dbs_sh = 0;
  logic a_lo_valid = 0;
  logic [KIDX_W-1:0] a_k = 0;
  vec_t a_lo [NR];
  logic a_ho_first = 0;
  logic a_ho_valid [NR];
  ho_entry_t a_ho [NR];
  logic w_lo_valid = 0, w_tile = 0;
  logic [KIDX_W-1:0] w_k = 0;
  vec_t w_lo [NP];
  logic w_ho_first = 0;
  logic w_ho_valid [NP];
  ho_entry_t w_ho [NP];
  logic start = 0, first_k = 0, busy, done, dtp_help;
  logic [31:0] cyc_compute;
  logic rd_tile = 0;
  logic [$clog2(NP*V)-1:0] rd_row = 0;
  logic [$clog2(NR)-1:0] rd_grp = 0;
  psum_t rd_psum [V];
  cs_t rd_cs;
  int checks = 0, failures = 0, helps = 0;

  aqs_core dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (dtp_help) helps++;

  initial begin
    repeat (400000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  int w [2*TM][2*TK];     // [tile*TM + row][k]
  int x [2*TK][TN];
  int r, sh;

  task automatic load_w(int t, int kt);
    bit comp [NP][32]; bit send [NP][32]; int rle [NP][32]; int n [NP];
    int idx [NP];
    for (int p = 0; p < NP; p++) begin
      for (int k = 0; k < TK; k++) begin
        comp[p][k] = 1;
        for (int i = 0; i < V; i++) if (sbr_ho(w[t*TM + 4*p + i][kt*TK + k]) != 0) comp[p][k] = 0;
      end
      rle_encode(comp[p], send[p], rle[p], n[p]);
      idx[p] = 0;
    end
    for (int k = 0; k < TK; k++) begin
      @(negedge clk);
      w_lo_valid = 1; w_tile = 1'(t); w_k = 5'(k);
      for (int p = 0; p < NP; p++) begin
        int rr = t*TM + 4*p;
        w_lo[p] = pack4(sbr_lo(w[rr][kt*TK+k]), sbr_lo(w[rr+1][kt*TK+k]), sbr_lo(w[rr+2][kt*TK+k]),
                        sbr_lo(w[rr+3][kt*TK+k]));
      end
    end
    @(negedge clk); w_lo_valid = 0;
    for (int s = 0; s < TK; s++) begin
      bit any = 0;
      @(negedge clk);
      w_ho_first = (s == 0);
      for (int p = 0; p < NP; p++) begin
        w_ho_valid[p] = 0; w_ho[p] = '0;
        while (idx[p] < TK && !send[p][idx[p]]) idx[p]++;
        if (idx[p] < TK) begin
          int k = idx[p], rr = t*TM + 4*p;
          w_ho_valid[p] = 1;
          w_ho[p] = '{empty: 1'b0, rle: 4'(rle[p][k]),
                      vec: pack4(sbr_ho(w[rr][kt*TK+k]), sbr_ho(w[rr+1][kt*TK+k]), sbr_ho(w[rr+2][kt*TK+k]),
                                 sbr_ho(w[rr+3][kt*TK+k]))};
          idx[p]++; any = 1;
        end else if (s == 0) begin
          w_ho_valid[p] = 1; w_ho[p] = '{empty: 1'b1, rle: 0, vec: 0}; any = 1;
        end
      end
      if (!any) break;
    end
    @(negedge clk);
    w_ho_first = 0;
    for (int p = 0; p < NP; p++) w_ho_valid[p] = 0;
  endtask

  task automatic load_x(int kt, output bit ux [NR][32]);
    bit comp [NR][32]; int rle [NR][32]; int n [NR]; int idx [NR];
    for (int a = 0; a < NR; a++) begin
      for (int k = 0; k < TK; k++) begin
        comp[a][k] = 1;
        for (int j = 0; j < V; j++) if (dbs_ho(x[kt*TK + k][4*a + j], sh) != r) comp[a][k] = 0;
      end
      rle_encode(comp[a], ux[a], rle[a], n[a]);
      idx[a] = 0;
    end
    for (int k = 0; k < TK; k++) begin
      @(negedge clk);
      a_lo_valid = 1; a_k = 5'(k);
      for (int a = 0; a < NR; a++)
        a_lo[a] = pack4(dbs_lo(x[kt*TK+k][4*a], sh), dbs_lo(x[kt*TK+k][4*a+1], sh),
                        dbs_lo(x[kt*TK+k][4*a+2], sh), dbs_lo(x[kt*TK+k][4*a+3], sh));
    end
    @(negedge clk); a_lo_valid = 0;
    for (int s = 0; s < TK; s++) begin
      bit any = 0;
      @(negedge clk);
      a_ho_first = (s == 0);
      for (int a = 0; a < NR; a++) begin
        a_ho_valid[a] = 0; a_ho[a] = '0;
        while (idx[a] < TK && !ux[a][idx[a]]) idx[a]++;
        if (idx[a] < TK) begin
          int k = idx[a];
          a_ho_valid[a] = 1;
          a_ho[a] = '{empty: 1'b0, rle: 4'(rle[a][k]),
                      vec: pack4(dbs_ho(x[kt*TK+k][4*a], sh), dbs_ho(x[kt*TK+k][4*a+1], sh),
                                 dbs_ho(x[kt*TK+k][4*a+2], sh), dbs_ho(x[kt*TK+k][4*a+3], sh))};
          idx[a]++; any = 1;
        end else if (s == 0) begin
          a_ho_valid[a] = 1; a_ho[a] = '{empty: 1'b1, rle: 0, vec: 0}; any = 1;
        end
      end
      if (!any) break;
    end
    @(negedge clk);
    a_ho_first = 0;
    for (int a = 0; a < NR; a++) a_ho_valid[a] = 0;
  endtask

  task automatic run_case(int n);
    bit ux [2][NR][32];
    bit d = (n % 2 == 1);
    int wsp = 20 + 30 * (n % 3), xsp = 30 + 20 * (n % 3);
    int c0;
    sh = n % 3;
    r = ($urandom % 16) & ~((1 << sh) - 1);
    for (int m = 0; m < 2*TM; m++)
      for (int k = 0; k < 2*TK; k++) w[m][k] = 0;
    for (int m = 0; m < (d ? 2*TM : TM); m += 4)
      for (int k = 0; k < 2*TK; k++) begin
        bit sml = ($urandom % 100) < wsp;
        for (int i = 0; i < V; i++) w[m+i][k] = sml ? int'($urandom % 16) - 8 : int'($urandom % 128) - 64;
      end
    for (int k = 0; k < 2*TK; k++)
      for (int c = 0; c < TN; c += 4) begin
        bit skip = ($urandom % 100) < xsp;
        for (int j = 0; j < V; j++)
          x[k][c+j] = skip ? (((r >> sh) << (4 + sh)) | int'($urandom % (1 << (4 + sh)))) : int'($urandom % 256);
      end
    dtp = d; dbs_sh = 2'(sh);
    c0 = int'(cyc_compute);
    for (int kt = 0; kt < 2; kt++) begin
      load_w(0, kt);
      if (d) load_w(1, kt);
      load_x(kt, ux[kt]);
      @(negedge clk); start = 1; first_k = (kt == 0);
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
    end
    checks++;
    if (int'(cyc_compute) <= c0) begin failures++; $display("no compute cycles counted"); end
    for (int t = 0; t < (d ? 2 : 1); t++)
      for (int row = 0; row < TM; row++)
        for (int g = 0; g < NR; g++) begin
          longint csum = 0, wsum = 0;
          int m = t*TM + row;
          rd_tile = 1'(t); rd_row = 6'(row); rd_grp = 4'(g);
          #1;
          for (int k = 0; k < 2*TK; k++) begin
            wsum += w[m][k];
            if (ux[k / TK][g][k % TK]) csum += w[m][k];
          end
          checks++;
          if (longint'(rd_cs) != csum) begin
            failures++;
            if (failures < 10) $display("cs t%0d row %0d g %0d got %0d exp %0d", t, row, g, rd_cs, csum);
          end
          for (int j = 0; j < V; j++) begin
            longint e = 0, exact = 0, rec;
            int c = 4*g + j;
            for (int k = 0; k < 2*TK; k++) begin
              e += longint'(w[m][k]) * ((ux[k / TK][g][k % TK] ? 16 * dbs_ho(x[k][c], sh) : 0) +
                                        (dbs_lo(x[k][c], sh) << sh));
              exact += longint'(w[m][k]) * dbs_val(x[k][c], sh);
            end
            rec = longint'(rd_psum[j]) - 16 * r * longint'(rd_cs) + 16 * r * wsum;
            checks += 2;
            if (longint'(rd_psum[j]) != e) begin
              failures++;
              if (failures < 10) $display("psum t%0d row %0d col %0d got %0d exp %0d", t, row, c, rd_psum[j], e);
            end
            if (rec != exact) failures++;
          end
        end
  endtask

  initial begin
    for (int a = 0; a < NR; a++) begin a_lo[a] = 0; a_ho_valid[a] = 0; a_ho[a] = 0; end
    for (int p = 0; p < NP; p++) begin w_lo[p] = 0; w_ho_valid[p] = 0; w_ho[p] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 6; n++) run_case(n);
    checks++;
    if (helps == 0) begin failures++; $display("no DTP hand-over"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
