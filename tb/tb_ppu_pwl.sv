// tb_ppu_pwl: the piecewise-linear nonlinear function against an integer model.
// Random ascending breakpoints, slopes, intercepts and shifts; inputs drawn near the
// breakpoints, at random and at the 32-bit extremes (to reach the output saturation).
// Checks the segment number and the value; counts that every segment and both
// saturation directions were reached.
module tb_ppu_pwl;
  import panacea_pkg::*;
  localparam int S = PWL_SEGS;
  logic signed [31:0] y, f;
  logic [S-2:0][31:0] bp;
  logic [S-1:0][15:0] slope;
  logic [S-1:0][31:0] icpt;
  logic [4:0] sh;
  logic [$clog2(S)-1:0] seg;
  int checks = 0, failures = 0;
  int seg_seen [S];
  int sat_hi = 0, sat_lo = 0;

  ppu_pwl dut (.*);

  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  initial begin
    for (int s = 0; s < S; s++) seg_seen[s] = 0;
    for (int n = 0; n < 4000; n++) begin
      longint b [S-1];
      longint m, e;
      int es;
      // ascending breakpoints
      b[0] = longint'($signed($urandom % 2000)) - 1000;
      for (int i = 1; i < S - 1; i++) b[i] = b[i-1] + 1 + ($urandom % 300);
      for (int i = 0; i < S - 1; i++) bp[i] = 32'(b[i]);
      for (int i = 0; i < S; i++) begin
        slope[i] = 16'($urandom);
        icpt[i]  = (n % 7 == 0) ? 32'($urandom) : 32'($signed($urandom % 20001) - 10000);
      end
      sh = 5'($urandom);
      case (n % 4)
        0: y = 32'(b[$urandom % (S - 1)] + longint'($urandom % 3) - 1);
        1: y = $signed($urandom % 4000) - 2000;
        2: y = (n % 8 < 4) ? 32'sh7fffffff - 32'($urandom % 100) : 32'sh80000000 + 32'($urandom % 100);
        default: y = $signed($urandom);
      endcase
      #1;
      es = 0;
      for (int i = 0; i < S - 1; i++) if (longint'(y) >= b[i]) es = i + 1;
      m = (longint'(y) * longint'($signed(slope[es]))) >>> sh;
      e = m + longint'($signed(icpt[es]));
      if (e > 64'sd2147483647) begin e = 64'sd2147483647; sat_hi++; end
      else if (e < -64'sd2147483648) begin e = -64'sd2147483648; sat_lo++; end
      seg_seen[es]++;
      checks += 2;
      if (int'(seg) != es) begin failures++; $display("seg %0d exp %0d y=%0d", seg, es, y); end
      if (longint'(f) != e) begin
        failures++;
        if (failures < 10) $display("f %0d exp %0d y=%0d seg %0d", f, e, y, es);
      end
    end
    for (int s = 0; s < S; s++) begin
      checks++;
      if (seg_seen[s] == 0) begin failures++; $display("segment %0d never used", s); end
    end
    checks += 2;
    if (sat_hi == 0) failures++;
    if (sat_lo == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
