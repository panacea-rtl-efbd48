// tb_opc: checks the outer product calculator against integer products for random and
// corner-case slice-vectors (signed weight slices -8..7, unsigned activation slices 0..15).
module tb_opc;
  import panacea_pkg::*;
  vec_t  w, x;
  prod_t p [V][V];
  int checks = 0, failures = 0;

  opc dut (.w_vec(w), .x_vec(x), .prod(p));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      if (n == 0)      begin w = 16'h8888; x = 16'hffff; end
      else if (n == 1) begin w = 16'h7777; x = 16'hffff; end
      else begin w = 16'($urandom); x = 16'($urandom); end
      #1;
      for (int i = 0; i < V; i++)
        for (int j = 0; j < V; j++) begin
          int wi, xj, e;
          wi = int'($signed(w[4*i +: 4]));
          xj = int'(x[4*j +: 4]);
          e  = wi * xj;
          checks++;
          if (int'(p[i][j]) != e) begin
            failures++;
            if (failures < 10) $display("opc mismatch w=%0d x=%0d got %0d", wi, xj, p[i][j]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
