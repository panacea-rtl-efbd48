// pea: processing element array, one of the 16 in the AQS-GEMM core.
//
// A PEA owns a 4 x TK weight sub-tile (two under double-tile processing, DTP) and
// computes its 4x4 output block against one TK x 4 activation sub-tile at a time.
//   * Weight load: LO slice-vectors are written densely by k; HO slice-vectors arrive as
//     a run-length encoded stream which an index decoder (idxd, one per sub-tile) turns
//     into absolute k. The WBUF keeps both, the weight index buffer keeps the mask uw[t]
//     of uncompressed HO vectors; a compressed HO vector reads back as zero.
//   * Activation sub-tile: broadcast by the core (HO and LO vectors plus the mask ux of
//     uncompressed HO vectors) and held stable while the sub-tile runs.
//   * Compute: the workload scheduler issues up to 4 dynamic jobs (W_HO x_HO, W_LO x_HO,
//     W_HO x_LO) to the DWOs and 8 dense jobs (W_LO x_LO) to the SWOs each cycle; each
//     operator is an opc. Two S-ACCs (one per weight sub-tile) shift and accumulate the
//     products; two compensators (cs) accumulate 2^3*W_HO + W_LO over the W_LO x_HO jobs,
//     reusing the weight vectors those jobs already read.
// Timing: start (one cycle) clears the accumulators and loads the scheduler; issue begins
// the next cycle, one group of jobs per cycle; done pulses one cycle after the last issue,
// when psum/cssum hold the result. They stay valid until the next start.
// Follows the paper: operator counts, job split between DWOs and SWOs, DTP hand-over of
// W_LO x_LO jobs, shift-by-DBS-type, compensation by weight reuse. The load port format
// and the broadcast of the whole activation sub-tile are this design's choices.
module pea
  import panacea_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // configuration, constant during a layer
  input  logic              dtp,
  input  logic [1:0]        dbs_sh,        // l-4 of the current layer's activations
  // weight sub-tile load
  input  logic              wl_lo_valid,   // write LO vector wl_lo at k = wl_k
  input  logic              wl_ho_valid,   // one HO stream entry
  input  logic              wl_ho_first,   // first HO entry of the sub-tile
  input  logic              wl_tile,
  input  logic [KIDX_W-1:0] wl_k,
  input  vec_t              wl_lo,
  input  ho_entry_t         wl_ho,
  // activation sub-tile, stable while busy
  input  vec_t              x_ho [TK],
  input  vec_t              x_lo [TK],
  input  logic [TK-1:0]     ux,
  // control
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic              dtp_help,      // a DWO runs a W_LO x_LO job this cycle
  // results
  output psum_t             psum  [2][V][V],
  output cs_t               cssum [2][V]
);
  // ---------------- weight buffer and index decoding ----------------
  vec_t              wbuf  [2][2][TK];   // [sub-tile][0: HO, 1: LO][k]
  logic [TK-1:0]     uw    [2];
  logic [KIDX_W-1:0] dec_idx [2];
  logic              dec_ovf [2];

  for (genvar t = 0; t < 2; t++) begin : g_idxd
    idxd #(.IDX_W(4), .SEG(TK)) u_idxd (
      .clk, .rst_n,
      .in_valid (wl_ho_valid && (wl_tile == 1'(t))),
      .in_first (wl_ho_first),
      .in_empty (wl_ho.empty),
      .in_rle   (wl_ho.rle),
      .out_idx  (dec_idx[t]),
      .out_ovf  (dec_ovf[t]),
      .mask     (uw[t])
    );
  end

  always_ff @(posedge clk) begin
    if (wl_lo_valid) wbuf[wl_tile][1][wl_k] <= wl_lo;
    if (wl_ho_valid && !wl_ho.empty && !dec_ovf[wl_tile])
      wbuf[wl_tile][0][dec_idx[wl_tile]] <= wl_ho.vec;
  end

  // Weight vector read for slice lo (0: HO, 1: LO); a compressed HO vector reads as zero.
  // One indexed read per operand (no selection between two reads) keeps synthesis from
  // trying to share the read ports of mutually exclusive operand paths.
  function automatic vec_t w_read(logic t, logic lo, logic [KIDX_W-1:0] k);
    return wbuf[t][lo][k] & {16{lo | uw[t][k]}};
  endfunction

  // activation HO vectors at 0..TK-1, LO vectors at TK..2TK-1
  vec_t x_all [2*TK];
  always_comb
    for (int k = 0; k < TK; k++) begin
      x_all[k]      = x_ho[k];
      x_all[TK + k] = x_lo[k];
    end

  // ---------------- scheduler ----------------
  job_t dwo_job [N_DWO];
  job_t swo_job [N_SWO];
  logic last;

  wsched u_sched (
    .clk, .rst_n, .start, .dtp, .uw, .ux,
    .dwo_job, .swo_job, .busy, .last
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) done <= 1'b0;
    else        done <= last;
  end

  // ---------------- operators ----------------
  job_t  op_job [N_OPS];
  vec_t  op_w   [N_OPS];
  vec_t  op_x   [N_OPS];
  prod_t op_p   [N_OPS][V][V];
  logic  sa_en  [2][N_OPS];
  logic [3:0] sa_sh [N_OPS];

  always_comb begin
    for (int d = 0; d < N_DWO; d++) op_job[d] = dwo_job[d];
    for (int s = 0; s < N_SWO; s++) op_job[N_DWO + s] = swo_job[s];
    dtp_help = 1'b0;
    for (int d = 0; d < N_DWO; d++)
      if (dwo_job[d].valid && dwo_job[d].kind == J_LL) dtp_help = 1'b1;
    for (int o = 0; o < N_OPS; o++) begin
      // kind bit 0: weight slice is LO (LH, LL); bit 1: activation slice is LO (HL, LL)
      op_w[o] = w_read(op_job[o].tile, op_job[o].kind[0], op_job[o].k);
      op_x[o] = x_all[{op_job[o].kind[1], op_job[o].k}];
      sa_sh[o]    = job_shift(op_job[o].kind, dbs_sh);
      sa_en[0][o] = op_job[o].valid && !op_job[o].tile;
      sa_en[1][o] = op_job[o].valid &&  op_job[o].tile;
    end
  end

  for (genvar o = 0; o < N_OPS; o++) begin : g_op
    opc u_opc (.w_vec(op_w[o]), .x_vec(op_x[o]), .prod(op_p[o]));
  end

  // ---------------- S-ACCs and compensators ----------------
  logic cs_en [2][N_DWO];
  vec_t cs_wh [N_DWO];
  vec_t cs_wl [N_DWO];

  always_comb begin
    for (int d = 0; d < N_DWO; d++) begin
      cs_wh[d]    = w_read(dwo_job[d].tile, 1'b0, dwo_job[d].k);
      cs_wl[d]    = w_read(dwo_job[d].tile, 1'b1, dwo_job[d].k);
      cs_en[0][d] = dwo_job[d].valid && dwo_job[d].kind == J_LH && !dwo_job[d].tile;
      cs_en[1][d] = dwo_job[d].valid && dwo_job[d].kind == J_LH &&  dwo_job[d].tile;
    end
  end

  for (genvar t = 0; t < 2; t++) begin : g_acc
    sacc #(.NOPS(N_OPS)) u_sacc (
      .clk, .rst_n, .clr(start), .en(sa_en[t]), .shamt(sa_sh), .prod(op_p), .acc(psum[t])
    );
    cs #(.ND(N_DWO)) u_cs (
      .clk, .rst_n, .clr(start), .en(cs_en[t]), .w_ho(cs_wh), .w_lo(cs_wl), .sum(cssum[t])
    );
  end

  // a new sub-tile must not start while the previous one is running
  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
endmodule
