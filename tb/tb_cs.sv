// tb_cs: drives the compensator with random weight slice-vectors and enables and checks
// the four row sums of 2^3*W_HO + W_LO against an integer model; also checks clear.
module tb_cs;
  import panacea_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0;
  logic en [N_DWO];
  vec_t w_ho [N_DWO];
  vec_t w_lo [N_DWO];
  cs_t  sum [V];
  int model [V];
  int checks = 0, failures = 0;

  cs #(.ND(N_DWO)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int d = 0; d < N_DWO; d++) begin en[d] = 0; w_ho[d] = 0; w_lo[d] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk); clr = 1;
      for (int d = 0; d < N_DWO; d++) en[d] = 1;     // clear has priority
      for (int i = 0; i < V; i++) model[i] = 0;
      @(negedge clk); clr = 0;
      for (int c = 0; c < 1 + $urandom % 10; c++) begin
        for (int d = 0; d < N_DWO; d++) begin
          en[d] = ($urandom % 2) == 1;
          w_ho[d] = 16'($urandom); w_lo[d] = 16'($urandom);
          if (en[d]) for (int i = 0; i < V; i++)
            model[i] += 8 * int'($signed(w_ho[d][4*i +: 4])) + int'($signed(w_lo[d][4*i +: 4]));
        end
        @(negedge clk);
      end
      for (int d = 0; d < N_DWO; d++) en[d] = 0;
      #1;
      for (int i = 0; i < V; i++) begin
        checks++;
        if (int'(sum[i]) != model[i]) begin
          failures++;
          if (failures < 5) $display("sum[%0d]=%0d exp %0d", i, sum[i], model[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
