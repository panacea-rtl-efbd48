// ppu: post-processing unit. Turns finished partial sums into the next layer's
// compressed activations, one 1x4 output vector (one row, four columns) per cycle.
//
// Five registered stages, as the pipeline of the unit:
//   1 MUL   m = cs * r                          (compensation sum times the frequent slice)
//   2 ADD   y[j] = psum[j] + bias - 2^4 * m     (exact AQS-GEMM result; saturated to 32 bit)
//   3 NL    f[j] = PWL(y[j])                    (ppu_pwl)
//   4 QNT   q[j] = clip(round(f[j]*qmul / 2^qsh) + zp, 0, 255), then slicing for the next
//           layer's DBS type: HO = q[7:l] zero-padded to 4 bits, LO = q[l-1:l-4]
//   5 RLE   the HO vector is compressed if all four slices equal the next layer's r;
//           a run counter gives each uncompressed vector its 4-bit run-length index.
//           A run that reaches 15 forces the next vector out uncompressed.
// Vectors of one TK-row segment must arrive in order k = 0..TK-1 (in_k). For each input
// the unit emits out_valid with the LO vector and k; for an uncompressed HO vector also
// out_ho_valid with {rle, vec} and its slot out_ho_pos in the segment; at k = TK-1 out_cnt
// holds the segment's number of HO entries. in_tag travels with the data.
// Latency: 5 cycles, throughput one vector per cycle, no back-pressure.
// The stage order and the MUL/ADD with r follow the paper; the requantizer formula and
// the output format are this design's choices.
module ppu
  import panacea_pkg::*;
#(
  parameter int TAG_W = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  ppu_cfg_t          cfg,
  input  logic              in_valid,
  input  psum_t             in_psum [V],
  input  cs_t               in_cs,
  input  logic signed [31:0] in_bias,
  input  logic [KIDX_W-1:0] in_k,
  input  logic [TAG_W-1:0]  in_tag,
  output logic              out_valid,
  output logic [KIDX_W-1:0] out_k,
  output logic [TAG_W-1:0]  out_tag,
  output vec_t              out_lo,
  output logic              out_ho_valid,
  output logic [19:0]       out_ho,       // {rle, vec}
  output logic [KIDX_W-1:0] out_ho_pos,
  output logic [KIDX_W:0]   out_cnt,
  output logic              out_sat       // a value was clipped by the quantizer
);
  typedef struct packed {
    logic              v;
    logic [KIDX_W-1:0] k;
    logic [TAG_W-1:0]  tag;
  } side_t;

  // ---------------- stage 1: MUL ----------------
  side_t s1;
  psum_t s1_ps [V];
  logic signed [31:0] s1_bias;
  logic signed [CS_W+4:0] s1_m;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s1 <= '0;
    else        s1 <= '{v: in_valid, k: in_k, tag: in_tag};
  end
  always_ff @(posedge clk) begin
    s1_ps   <= in_psum;
    s1_bias <= in_bias;
    s1_m    <= (CS_W+5)'(in_cs * $signed({1'b0, cfg.r}));
  end

  // ---------------- stage 2: ADD ----------------
  side_t s2;
  logic signed [31:0] s2_y [V];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s2 <= '0;
    else        s2 <= s1;
  end
  always_ff @(posedge clk) begin
    for (int j = 0; j < V; j++) begin
      logic signed [PSUM_W+1:0] t;
      t = (PSUM_W+2)'(s1_ps[j]) + (PSUM_W+2)'(s1_bias) - ((PSUM_W+2)'(s1_m) <<< 4);
      if (t > (PSUM_W+2)'(32'sh7fffffff))      s2_y[j] <= 32'sh7fffffff;
      else if (t < -(PSUM_W+2)'(33'sh80000000)) s2_y[j] <= 32'sh80000000;
      else                                      s2_y[j] <= t[31:0];
    end
  end

  // ---------------- stage 3: nonlinear ----------------
  side_t s3;
  logic signed [31:0] s3_f [V];
  logic signed [31:0] nl_f [V];
  for (genvar j = 0; j < V; j++) begin : g_pwl
    logic [$clog2(PWL_SEGS)-1:0] seg_unused;
    ppu_pwl #(.SEGS(PWL_SEGS)) u_pwl (
      .y(s2_y[j]), .bp(cfg.pwl_bp), .slope(cfg.pwl_slope), .icpt(cfg.pwl_icpt),
      .sh(cfg.pwl_sh), .f(nl_f[j]), .seg(seg_unused)
    );
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s3 <= '0;
    else        s3 <= s2;
  end
  always_ff @(posedge clk) s3_f <= nl_f;

  // ---------------- stage 4: quantize and slice ----------------
  side_t s4;
  vec_t  s4_ho, s4_lo;
  logic  s4_sat;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s4 <= '0;
    else        s4 <= s3;
  end
  always_ff @(posedge clk) begin
    logic sat;
    sat = 1'b0;
    for (int j = 0; j < V; j++) begin
      logic signed [49:0] p;
      logic signed [49:0] q;
      logic [7:0] q8;
      p = 50'(s3_f[j] * $signed({1'b0, cfg.qmul}));
      if (cfg.qsh != 0) p = p + (50'sd1 <<< (cfg.qsh - 1));
      q = (p >>> cfg.qsh) + $signed(50'(cfg.zp));
      if (q < 0)            begin q8 = 8'd0;   sat = 1'b1; end
      else if (q > 50'd255) begin q8 = 8'd255; sat = 1'b1; end
      else                  q8 = q[7:0];
      case (cfg.nl_sh)
        2'd1:    begin s4_ho[4*j +: 4] <= {q8[7:5], 1'b0};  s4_lo[4*j +: 4] <= q8[4:1]; end
        2'd2:    begin s4_ho[4*j +: 4] <= {q8[7:6], 2'b00}; s4_lo[4*j +: 4] <= q8[5:2]; end
        default: begin s4_ho[4*j +: 4] <= q8[7:4];          s4_lo[4*j +: 4] <= q8[3:0]; end
      endcase
    end
    s4_sat <= sat;
  end

  // ---------------- stage 5: compression and RLE ----------------
  logic [3:0]        run;
  logic [KIDX_W:0]   cnt;
  logic              comp;
  logic              emit;
  logic [KIDX_W:0]   cnt_seg;
  logic [3:0]        run_seg;

  always_comb begin
    comp = (s4_ho == {V{cfg.nr}});
    run_seg = (s4.k == '0) ? 4'd0 : run;
    cnt_seg = (s4.k == '0) ? '0 : cnt;
    emit = !comp || (run_seg == 4'd15);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= '0;
      cnt <= '0;
      out_valid    <= 1'b0;
      out_ho_valid <= 1'b0;
      out_sat      <= 1'b0;
    end else begin
      out_valid    <= s4.v;
      out_ho_valid <= s4.v && emit;
      out_sat      <= s4.v && s4_sat;
      if (s4.v) begin
        run <= emit ? 4'd0 : run_seg + 4'd1;
        cnt <= cnt_seg + (KIDX_W+1)'(emit);
      end
    end
  end

  always_ff @(posedge clk) begin
    out_k      <= s4.k;
    out_tag    <= s4.tag;
    out_lo     <= s4_lo;
    out_ho     <= {run_seg, s4_ho};
    out_ho_pos <= cnt_seg[KIDX_W-1:0];
    out_cnt    <= cnt_seg + (KIDX_W+1)'(emit);
  end
endmodule
