// aqs_core: the AQS-GEMM core - 16 PEAs, the global activation buffer with its index
// decoders, the PE controller and the global partial-sum buffer.
//
// Dataflow (output stationary). For one output tile the controller above loads, for
// each K tile, a TK x TN activation tile into the global activation buffer and one
// 4 x TK weight sub-tile (two under DTP) into every PEA, then pulses start. The PE
// controller then walks the R = TN/4 activation sub-tiles: it broadcasts sub-tile a
// (TK HO vectors, TK LO vectors, mask of uncompressed HO vectors) to all PEAs, starts
// them together, waits until every PEA has finished (they take different numbers of
// cycles because their weight sparsity differs), and adds each PEA's 4x4 partial sums
// and its compensation sums into the global partial-sum buffer (overwrite on the first
// K tile). So each PEA reuses its weight sub-tile R times, and all PEAs share one
// activation tile.
// Load ports are lane-parallel, matching the memory word: lane a of the activation port
// carries column group a, lane p of the weight port carries the sub-tile of PEA p. HO
// lanes carry run-length encoded entries; LO lanes are dense and indexed by k.
// The global partial-sum buffer is a memory with one wide word per activation sub-tile
// (all PEAs' 2 x 4 x 4 sums), read, updated and written back in the write-back cycle.
// Read port: rd_tile/rd_row/rd_grp select one 1x4 output vector (row of the 2TM x TN
// tile, column group) and its row's compensation sum; combinational.
// Follows the paper for P, R, TK, TN, TM, sharing and reuse; the lock-step barrier per
// sub-tile, the serial load-then-compute order and the separate compensation-sum buffer
// are this design's choices.
module aqs_core
  import panacea_pkg::*;
#(
  parameter int NP = P,     // PEAs
  parameter int NR = R      // activation sub-tiles per tile = TN/4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              dtp,
  input  logic [1:0]        dbs_sh,
  // activation tile load (lane = column group)
  input  logic              a_lo_valid,
  input  logic [KIDX_W-1:0] a_k,
  input  vec_t              a_lo [NR],
  input  logic              a_ho_first,
  input  logic              a_ho_valid [NR],
  input  ho_entry_t         a_ho [NR],
  // weight sub-tile load (lane = PEA)
  input  logic              w_lo_valid,
  input  logic              w_tile,
  input  logic [KIDX_W-1:0] w_k,
  input  vec_t              w_lo [NP],
  input  logic              w_ho_first,
  input  logic              w_ho_valid [NP],
  input  ho_entry_t         w_ho [NP],
  // run one K tile
  input  logic              start,
  input  logic              first_k,
  output logic              busy,
  output logic              done,
  output logic              dtp_help,      // some DWO helped with W_LO x_LO this cycle
  output logic [31:0]       cyc_compute,   // cycles spent computing since reset
  // partial-sum read port
  input  logic                    rd_tile,
  input  logic [$clog2(NP*V)-1:0] rd_row,
  input  logic [$clog2(NR)-1:0]   rd_grp,
  output psum_t                   rd_psum [V],
  output cs_t                     rd_cs
);
  // ---------------- global activation buffer ----------------
  vec_t              gx_ho [NR][TK];
  vec_t              gx_lo [NR][TK];
  logic [TK-1:0]     gmask [NR];
  logic [KIDX_W-1:0] a_idx [NR];
  logic              a_ovf [NR];

  for (genvar a = 0; a < NR; a++) begin : g_aidx
    idxd #(.IDX_W(4), .SEG(TK)) u_idxd (
      .clk, .rst_n,
      .in_valid (a_ho_valid[a]),
      .in_first (a_ho_first),
      .in_empty (a_ho[a].empty),
      .in_rle   (a_ho[a].rle),
      .out_idx  (a_idx[a]),
      .out_ovf  (a_ovf[a]),
      .mask     (gmask[a])
    );
    always_ff @(posedge clk) begin
      if (a_lo_valid) gx_lo[a][a_k] <= a_lo[a];
      if (a_ho_valid[a] && !a_ho[a].empty && !a_ovf[a]) gx_ho[a][a_idx[a]] <= a_ho[a].vec;
    end
  end

  // ---------------- PE controller ----------------
  typedef enum logic [1:0] {S_IDLE, S_START, S_RUN, S_WB} state_e;
  state_e            st;
  logic [$clog2(NR)-1:0] a_cur;
  logic              first_q;
  logic [NP-1:0]     fin, fin_d;
  logic              pea_start;

  logic  pea_busy  [NP];
  logic  pea_done  [NP];
  logic  pea_help  [NP];
  psum_t pea_psum  [NP][2][V][V];
  cs_t   pea_cs    [NP][2][V];

  assign pea_start = (st == S_START);
  assign busy      = (st != S_IDLE);

  always_comb begin
    dtp_help = 1'b0;
    for (int p = 0; p < NP; p++) dtp_help |= pea_help[p];
  end

  for (genvar p = 0; p < NP; p++) begin : g_pea
    pea u_pea (
      .clk, .rst_n, .dtp, .dbs_sh,
      .wl_lo_valid (w_lo_valid),
      .wl_ho_valid (w_ho_valid[p]),
      .wl_ho_first (w_ho_first),
      .wl_tile     (w_tile),
      .wl_k        (w_k),
      .wl_lo       (w_lo[p]),
      .wl_ho       (w_ho[p]),
      .x_ho        (gx_ho[a_cur]),
      .x_lo        (gx_lo[a_cur]),
      .ux          (gmask[a_cur]),
      .start       (pea_start),
      .busy        (pea_busy[p]),
      .done        (pea_done[p]),
      .dtp_help    (pea_help[p]),
      .psum        (pea_psum[p]),
      .cssum       (pea_cs[p])
    );
  end

  // ---------------- global partial-sum buffer ----------------
  // One memory word per activation sub-tile a: the 2 x TM x 4 partial sums and 2 x TM
  // compensation sums of all PEAs. Written once per sub-tile (read-modify-write).
  localparam int NPS = NP * 2 * V * V;
  localparam int NCS = NP * 2 * V;
  logic [NPS-1:0][PSUM_W-1:0] gps [NR];
  logic [NCS-1:0][CS_W-1:0]   gcs [NR];
  logic [NPS-1:0][PSUM_W-1:0] gps_old, gps_new;
  logic [NCS-1:0][CS_W-1:0]   gcs_old, gcs_new;

  always_comb begin
    fin_d = fin;
    for (int p = 0; p < NP; p++) if (pea_done[p]) fin_d[p] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= S_IDLE;
      a_cur       <= '0;
      first_q     <= 1'b0;
      fin         <= '0;
      done        <= 1'b0;
      cyc_compute <= '0;
    end else begin
      done <= 1'b0;
      if (st == S_RUN) cyc_compute <= cyc_compute + 1;
      case (st)
        S_IDLE: if (start) begin
          a_cur   <= '0;
          first_q <= first_k;
          st      <= S_START;
        end
        S_START: begin
          fin <= '0;
          st  <= S_RUN;
        end
        S_RUN: begin
          fin <= fin_d;
          if (&fin_d) st <= S_WB;
        end
        S_WB: begin
          if (a_cur == $clog2(NR)'(NR - 1)) begin
            st   <= S_IDLE;
            done <= 1'b1;
          end else begin
            a_cur <= a_cur + 1'b1;
            st    <= S_START;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign gps_old = gps[a_cur];
  assign gcs_old = gcs[a_cur];
  always_comb begin
    for (int p = 0; p < NP; p++)
      for (int t = 0; t < 2; t++)
        for (int i = 0; i < V; i++) begin
          for (int j = 0; j < V; j++)
            gps_new[((p * 2 + t) * V + i) * V + j] =
              (first_q ? '0 : gps_old[((p * 2 + t) * V + i) * V + j]) + pea_psum[p][t][i][j];
          gcs_new[(p * 2 + t) * V + i] = (first_q ? '0 : gcs_old[(p * 2 + t) * V + i]) + pea_cs[p][t][i];
        end
  end

  always_ff @(posedge clk) begin
    if (st == S_WB) begin
      gps[a_cur] <= gps_new;
      gcs[a_cur] <= gcs_new;
    end
  end

  // ---------------- read port ----------------
  logic [NPS-1:0][PSUM_W-1:0] rd_word;
  logic [NCS-1:0][CS_W-1:0]   rd_cword;
  logic [$clog2(NP)-1:0]      rd_p;
  logic [1:0]                 rd_i;
  assign rd_word  = gps[rd_grp];
  assign rd_cword = gcs[rd_grp];
  assign rd_p     = rd_row[$clog2(NP*V)-1:2];
  assign rd_i     = rd_row[1:0];
  always_comb begin
    for (int j = 0; j < V; j++)
      rd_psum[j] = rd_word[((int'(rd_p) * 2 + int'(rd_tile)) * V + int'(rd_i)) * V + j];
    rd_cs = rd_cword[(int'(rd_p) * 2 + int'(rd_tile)) * V + int'(rd_i)];
  end

  a_pea_idle_at_start: assert property (@(posedge clk) disable iff (!rst_n)
                                        pea_start |-> !pea_busy[0]);
endmodule
