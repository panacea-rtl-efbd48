// tb_wsched: drives the workload scheduler with random weight/activation masks, with and
// without double-tile processing, and checks that
//   * every required outer product (HH on uw&ux, LH on ux, HL on uw, LL on all k, per
//     weight sub-tile) is issued exactly once and nothing else is issued,
//   * SWOs only get W_LO x W_LO jobs and DWOs only get HH/LH/HL jobs or, under DTP,
//     W_LO x_LO jobs of sub-tile 1,
//   * the number of issue cycles matches a count-level model of the policy:
//     per cycle SWOs take min(8, LL left), DWOs min(4, dynamic left) plus free slots on
//     the LL jobs of sub-tile 1.
module tb_wsched;
  import panacea_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, dtp = 0;
  logic [TK-1:0] uw [2];
  logic [TK-1:0] ux;
  job_t dwo_job [N_DWO];
  job_t swo_job [N_SWO];
  logic busy, last;
  int checks = 0, failures = 0, helped = 0;

  wsched dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

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

  task automatic run_one(input bit d);
    int cnt [2][4][TK];
    int cyc, expc, dyn, ll1;
    bit seen_last;
    for (int t = 0; t < 2; t++) for (int k2 = 0; k2 < 4; k2++) for (int k = 0; k < TK; k++) cnt[t][k2][k] = 0;
    @(negedge clk);
    dtp = d;
    uw[0] = $urandom & ($urandom % 2 ? $urandom : 32'hffff_ffff);
    uw[1] = $urandom & $urandom;
    ux    = ($urandom % 4 == 0) ? 32'h0 : ($urandom & $urandom & $urandom);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 0; seen_last = 0;
    while (busy) begin
      for (int o = 0; o < N_DWO; o++) if (dwo_job[o].valid) begin
        cnt[dwo_job[o].tile][dwo_job[o].kind][dwo_job[o].k]++;
        if (dwo_job[o].kind == J_LL) begin
          helped++;
          checks++;
          if (!(d && dwo_job[o].tile)) begin failures++; $display("DWO got illegal LL job"); end
        end
      end
      for (int o = 0; o < N_SWO; o++) if (swo_job[o].valid) begin
        cnt[swo_job[o].tile][swo_job[o].kind][swo_job[o].k]++;
        checks++;
        if (swo_job[o].kind != J_LL) begin failures++; $display("SWO got dynamic job"); end
      end
      if (last) seen_last = 1;
      cyc++;
      @(negedge clk);
      if (cyc > 100) break;
    end
    // exactly-once check
    for (int t = 0; t < 2; t++)
      for (int k = 0; k < TK; k++) begin
        int e [4];
        bit act;
        act = (t == 0) || d;
        e[J_HH] = act && uw[t][k] && ux[k];
        e[J_LH] = act && ux[k];
        e[J_HL] = act && uw[t][k];
        e[J_LL] = act;
        for (int j = 0; j < 4; j++) begin
          checks++;
          if (cnt[t][j][k] != e[j]) begin
            failures++;
            $display("job t%0d kind%0d k%0d issued %0d times, exp %0d", t, j, k, cnt[t][j][k], e[j]);
          end
        end
      end
    dyn = $countones(uw[0] & ux) + $countones(ux) + $countones(uw[0]);
    ll1 = 0;
    if (d) begin
      dyn += $countones(uw[1] & ux) + $countones(ux) + $countones(uw[1]);
      ll1 = TK;
    end
    expc = model_cycles(dyn, TK, ll1, d);
    checks++;
    if (cyc != expc || !seen_last) begin
      failures++;
      $display("cycles %0d exp %0d (dtp=%0d dyn=%0d)", cyc, expc, d, dyn);
    end
  endtask

  initial begin
    uw[0] = '0; uw[1] = '0; ux = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) run_one(n % 2 == 1);
    checks++;
    if (helped == 0) begin failures++; $display("DTP hand-over never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
