// tb_sram: writes random words with random lane masks into a memory bank, keeps a model,
// and checks one-cycle synchronous reads, lane masking and read-before-write.
module tb_sram;
  localparam int D = 64, L = 4, W = 32;
  logic clk = 0;
  logic re = 0, we = 0;
  logic [5:0] raddr = 0, waddr = 0;
  logic [L-1:0] wlane = 0;
  logic [L-1:0][W-1:0] rdata, wdata = 0;
  logic [L-1:0][W-1:0] model [D];
  int checks = 0, failures = 0;

  sram #(.DEPTH(D), .LANES(L), .LANE_W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // initialise every word
    for (int a = 0; a < D; a++) begin
      @(negedge clk); we = 1; waddr = 6'(a); wlane = '1;
      for (int l = 0; l < L; l++) wdata[l] = $urandom;
      model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 3000; n++) begin
      logic [L-1:0][W-1:0] exp;
      @(negedge clk);
      re = 1; raddr = 6'($urandom);
      we = ($urandom % 2) == 1; waddr = ($urandom % 4 == 0) ? raddr : 6'($urandom);
      wlane = L'($urandom);
      for (int l = 0; l < L; l++) wdata[l] = $urandom;
      exp = model[raddr];
      if (we) for (int l = 0; l < L; l++) if (wlane[l]) model[waddr][l] = wdata[l];
      @(negedge clk);
      re = 0; we = 0;
      checks++;
      if (rdata != exp) begin
        failures++;
        if (failures < 5) $display("read mismatch at %0d", raddr);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
