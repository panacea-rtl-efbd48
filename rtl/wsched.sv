// wsched: workload scheduler of one PEA.
//
// For one activation sub-tile (TK slice-vectors deep) it holds, per weight sub-tile t,
// four job masks over k:
//   HH[t] = uw[t] & ux   (W_HO x_HO)      LH[t] = ux   (W_LO x_HO)
//   HL[t] = uw[t]        (W_HO x_LO)      LL[t] = all  (W_LO x_LO, dense)
// where uw[t] marks uncompressed weight HO vectors and ux uncompressed activation HO
// vectors. Every cycle the static operators (SWOs) take the lowest 8 pending LL jobs
// (sub-tile 0 first, then sub-tile 1), and the dynamic operators (DWOs) take the lowest
// 4 pending HH/LH/HL jobs (sub-tile 0 before 1). When fewer than 4 dynamic jobs remain,
// free DWOs take LL jobs of the second sub-tile, highest k first (double-tile
// processing). Tile 1 is only used when dtp=1.
// Timing: start loads the masks; from the next cycle on, dwo_job/swo_job show the jobs
// issued in that cycle (combinational from the masks) and the masks drop them at the
// clock edge. last is high in the cycle of the final issue. Cycles per sub-tile =
// max(ceil(LL/8), ceil(dyn/4)) without DTP.
// Follows the paper: which jobs go to DWOs and SWOs and the DTP hand-over; the issue
// order inside each pool is this design's choice.
module wsched
  import panacea_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          dtp,
  input  logic [TK-1:0] uw [2],
  input  logic [TK-1:0] ux,
  output job_t          dwo_job [N_DWO],
  output job_t          swo_job [N_SWO],
  output logic          busy,
  output logic          last
);
  localparam int ND = 6 * TK;   // dynamic pool: {t, kind(HH,LH,HL), k}
  localparam int NL = 2 * TK;   // static pool:  {t, k}

  logic [ND-1:0] dyn_q, dyn_d;
  logic [NL-1:0] ll_q, ll_d;

  always_comb begin
    int nd, ns;
    logic [NL-1:0] ll_rem;
    dyn_d  = dyn_q;
    ll_d   = ll_q;
    ll_rem = ll_q;
    for (int s = 0; s < N_SWO; s++) swo_job[s] = '0;
    for (int d = 0; d < N_DWO; d++) dwo_job[d] = '0;
    // SWOs: lowest pending W_LO x_LO jobs
    ns = 0;
    for (int b = 0; b < NL; b++) begin
      if (ll_q[b] && ns < N_SWO) begin
        swo_job[ns] = '{valid: 1'b1, tile: (b >= TK), kind: J_LL, k: KIDX_W'(b % TK)};
        ll_rem[b]   = 1'b0;
        ns++;
      end
    end
    // DWOs: dynamic jobs
    nd = 0;
    for (int b = 0; b < ND; b++) begin
      if (dyn_q[b] && nd < N_DWO) begin
        dwo_job[nd] = '{valid: 1'b1, tile: (b >= 3*TK), kind: jkind_e'(2'((b / TK) % 3)),
                        k: KIDX_W'(b % TK)};
        dyn_d[b]    = 1'b0;
        nd++;
      end
    end
    // free DWOs help with W_LO x_LO of the second weight sub-tile
    for (int b = NL - 1; b >= TK; b--) begin
      if (ll_rem[b] && nd < N_DWO) begin
        dwo_job[nd] = '{valid: 1'b1, tile: 1'b1, kind: J_LL, k: KIDX_W'(b - TK)};
        ll_rem[b]   = 1'b0;
        nd++;
      end
    end
    ll_d = ll_rem;
    busy = (|dyn_q) || (|ll_q);
    last = busy && (dyn_d == '0) && (ll_d == '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dyn_q <= '0;
      ll_q  <= '0;
    end else if (start) begin
      dyn_q <= {(dtp ? uw[1] : '0), (dtp ? ux : '0), (dtp ? (uw[1] & ux) : '0),
                uw[0], ux, uw[0] & ux};
      ll_q  <= {(dtp ? {TK{1'b1}} : {TK{1'b0}}), {TK{1'b1}}};
    end else begin
      dyn_q <= dyn_d;
      ll_q  <= ll_d;
    end
  end
endmodule
