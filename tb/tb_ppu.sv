// tb_ppu: the post-processing unit against a model of its five stages.
// Streams random segments of TK output vectors (k = 0..TK-1 in order, with idle cycles in
// between) under random layer configurations: frequent slice r, a PWL function with
// random breakpoints, requantizer scale/shift/zero point, next layer DBS type and r''.
// Partial sums are drawn so that many quantized values land in the compressed range.
// For every output it checks k, tag, the LO vector, whether an HO entry is emitted, its
// {rle, vec}, its slot, the saturation flag, and at k = TK-1 the entry count. It also
// counts that compressed vectors, forced run breaks (run of 15) and saturation occurred.
module tb_ppu;
  import panacea_pkg::*;
  logic clk = 0, rst_n = 0;
  ppu_cfg_t cfg;
  logic in_valid = 0;
  psum_t in_psum [V];
  cs_t in_cs;
  logic signed [31:0] in_bias;
  logic [KIDX_W-1:0] in_k;
  logic [15:0] in_tag;
  logic out_valid, out_ho_valid, out_sat;
  logic [KIDX_W-1:0] out_k, out_ho_pos;
  logic [15:0] out_tag;
  vec_t out_lo;
  logic [19:0] out_ho;
  logic [KIDX_W:0] out_cnt;
  int checks = 0, failures = 0;
  int n_comp = 0, n_force = 0, n_sat = 0;

  ppu dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (500000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  typedef struct {
    int k; int tag; logic [15:0] lo; bit emit; logic [19:0] ho; int pos; int cnt; bit sat;
  } exp_t;
  exp_t expq [$];
  int run, cnt;

  function automatic longint sat32(longint v);
    if (v > 64'sd2147483647) return 64'sd2147483647;
    if (v < -64'sd2147483648) return -64'sd2147483648;
    return v;
  endfunction

  function automatic exp_t model(longint ps [V], longint c, longint b, int k, int tag);
    exp_t e;
    logic [15:0] ho;
    bit comp;
    e.k = k; e.tag = tag; e.sat = 0; ho = 0; e.lo = 0;
    for (int j = 0; j < V; j++) begin
      longint y, f, p, q; int seg;
      y = sat32(ps[j] + b - 16 * c * longint'(cfg.r));
      seg = 0;
      for (int i = 0; i < PWL_SEGS - 1; i++) if (y >= longint'($signed(cfg.pwl_bp[i]))) seg = i + 1;
      f = sat32(((y * longint'($signed(cfg.pwl_slope[seg]))) >>> cfg.pwl_sh) + longint'($signed(cfg.pwl_icpt[seg])));
      p = f * longint'(cfg.qmul);
      if (cfg.qsh != 0) p += longint'(1) <<< (cfg.qsh - 1);
      q = (p >>> cfg.qsh) + longint'(cfg.zp);
      if (q < 0) begin q = 0; e.sat = 1; end
      if (q > 255) begin q = 255; e.sat = 1; end
      ho[4*j +: 4] = 4'(((q >> (4 + cfg.nl_sh)) << cfg.nl_sh));
      e.lo[4*j +: 4] = 4'(q >> cfg.nl_sh);
    end
    if (k == 0) begin run = 0; cnt = 0; end
    comp = (ho == {4{cfg.nr}});
    e.emit = !comp || run == 15;
    e.ho = {4'(run), ho};
    e.pos = cnt;
    if (comp) n_comp++;
    if (comp && run == 15) n_force++;
    if (e.emit) begin run = 0; cnt++; end else run++;
    e.cnt = cnt;
    if (e.sat) n_sat++;
    return e;
  endfunction

  always @(posedge clk) if (out_valid) begin
    exp_t e;
    if (expq.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      e = expq.pop_front();
      checks++;
      if (int'(out_k) != e.k || int'(out_tag) != e.tag || out_lo != e.lo || out_ho_valid != e.emit ||
          out_sat != e.sat) begin
        failures++;
        if (failures < 10) $display("tag %0d k %0d/%0d lo %h/%h emit %0d/%0d sat %0d/%0d", e.tag, out_k, e.k,
                                    out_lo, e.lo, out_ho_valid, e.emit, out_sat, e.sat);
      end
      if (e.emit) begin
        checks++;
        if (out_ho != e.ho || int'(out_ho_pos) != e.pos) begin
          failures++;
          if (failures < 10) $display("ho %h/%h pos %0d/%0d", out_ho, e.ho, out_ho_pos, e.pos);
        end
      end
      if (e.k == TK - 1) begin
        checks++;
        if (int'(out_cnt) != e.cnt) begin failures++; $display("cnt %0d/%0d", out_cnt, e.cnt); end
      end
    end
  end

  task automatic rand_cfg(int n);
    longint b;
    cfg.r = 4'($urandom);
    b = longint'($signed($urandom % 2001)) - 1000;
    for (int i = 0; i < PWL_SEGS - 1; i++) begin
      cfg.pwl_bp[i] = 32'(b);
      b += 1 + $urandom % 2000;
    end
    cfg.pwl_sh = 5'($urandom % 6);
    for (int i = 0; i < PWL_SEGS; i++) begin
      cfg.pwl_slope[i] = (n % 3 == 0) ? 16'(1 << cfg.pwl_sh) : 16'($signed($urandom % 64) - 16);
      cfg.pwl_icpt[i]  = (n % 3 == 0) ? 32'd0 : 32'($signed($urandom % 201) - 100);
    end
    cfg.qmul  = 16'(1 + $urandom % 300);
    cfg.qsh   = 6'(10 + $urandom % 8);
    cfg.zp    = 8'($urandom);
    cfg.nl_sh = 2'($urandom % 3);
    // r'' of the next layer: the HO slice of the zero point
    cfg.nr    = 4'((cfg.zp >> (4 + cfg.nl_sh)) << cfg.nl_sh);
  endtask

  initial begin
    int tag = 0;
    cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 120; n++) begin
      int spread;
      rand_cfg(n);
      spread = (n % 4 == 0) ? 1 << 20 : (n % 4 == 1) ? 64 : 4096;
      for (int k = 0; k < TK; k++) begin
        longint ps [V]; longint c, b;
        @(negedge clk);
        for (int j = 0; j < V; j++) begin
          ps[j] = longint'($signed($urandom % (2 * spread + 1))) - spread;
          in_psum[j] = psum_t'(ps[j]);
        end
        c = longint'($signed($urandom % 201)) - 100;
        b = longint'($signed($urandom % 2001)) - 1000;
        if (n % 17 == 5) begin  // push the adder into 32-bit saturation
          ps[0] = 64'sd1 <<< 40; in_psum[0] = psum_t'(ps[0]);
        end
        in_cs = cs_t'(c); in_bias = 32'(b); in_k = KIDX_W'(k); in_tag = 16'(tag);
        in_valid = 1;
        expq.push_back(model(ps, c, b, k, tag));
        tag++;
        if ($urandom % 4 == 0) begin @(negedge clk); in_valid = 0; end
      end
      @(negedge clk); in_valid = 0;
      repeat (8) @(negedge clk);   // let the pipeline drain before the configuration changes
    end
    repeat (10) @(negedge clk);
    checks += 4;
    if (expq.size() != 0) begin failures++; $display("%0d outputs missing", expq.size()); end
    if (n_comp == 0) begin failures++; $display("no compressed vector"); end
    if (n_force == 0) begin failures++; $display("no forced run break"); end
    if (n_sat == 0) begin failures++; $display("no saturation"); end
    $display("compressed %0d forced %0d saturated %0d", n_comp, n_force, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
