// tb_sacc: feeds random product blocks, enables and shift amounts (0..9, the range the
// slice weights and DBS types produce) for a few cycles, and checks the 16 accumulated
// partial sums against an integer model; also checks clear.
module tb_sacc;
  import panacea_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0;
  logic en [N_OPS];
  logic [3:0] shamt [N_OPS];
  prod_t prod [N_OPS][V][V];
  psum_t acc [V][V];
  longint model [V][V];
  int checks = 0, failures = 0;

  sacc #(.NOPS(N_OPS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic idle();
    for (int o = 0; o < N_OPS; o++) begin en[o] = 0; shamt[o] = 0; end
  endtask

  initial begin
    idle();
    for (int o = 0; o < N_OPS; o++) for (int i = 0; i < V; i++) for (int j = 0; j < V; j++) prod[o][i][j] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      @(negedge clk); clr = 1; idle();
      for (int i = 0; i < V; i++) for (int j = 0; j < V; j++) model[i][j] = 0;
      @(negedge clk); clr = 0;
      for (int c = 0; c < 1 + $urandom % 6; c++) begin
        for (int o = 0; o < N_OPS; o++) begin
          en[o] = ($urandom % 3) != 0;
          shamt[o] = 4'($urandom % 10);
          for (int i = 0; i < V; i++) for (int j = 0; j < V; j++) begin
            prod[o][i][j] = prod_t'($urandom);
            if (en[o]) model[i][j] += longint'(prod[o][i][j]) * (longint'(1) << shamt[o]);
          end
        end
        @(negedge clk);
      end
      idle();
      #1;
      for (int i = 0; i < V; i++) for (int j = 0; j < V; j++) begin
        checks++;
        if (longint'(acc[i][j]) != model[i][j]) begin
          failures++;
          if (failures < 5) $display("acc[%0d][%0d]=%0d exp %0d", i, j, acc[i][j], model[i][j]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
