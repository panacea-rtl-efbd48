// tb_idxd: encodes random 32-vector uncompressed masks as run-length streams (runs capped
// at 15, the 16th vector of a longer run is sent uncompressed) and checks that the
// decoder returns every absolute index and rebuilds the mask; also all-compressed
// segments (one empty entry).
module tb_idxd;
  import panacea_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_first = 0, in_empty = 0;
  logic [3:0] in_rle = 0;
  logic [4:0] out_idx;
  logic out_ovf;
  logic [31:0] mask;
  int checks = 0, failures = 0;

  idxd #(.IDX_W(4), .SEG(32)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_seg(input logic [31:0] m);
    int run, nent;
    logic [31:0] full;   // mask actually encoded (with forced vectors)
    int idx_list[$];
    int rle_list[$];
    run = 0; full = '0;
    for (int k = 0; k < 32; k++) begin
      if (m[k] || run == 15) begin
        idx_list.push_back(k); rle_list.push_back(run); full[k] = 1'b1; run = 0;
      end else run++;
    end
    nent = idx_list.size();
    if (nent == 0) begin
      @(negedge clk); in_valid = 1; in_first = 1; in_empty = 1; in_rle = 0;
      @(negedge clk); in_valid = 0; in_first = 0; in_empty = 0;
    end else begin
      for (int e = 0; e < nent; e++) begin
        @(negedge clk);
        in_valid = 1; in_first = (e == 0); in_empty = 0; in_rle = 4'(rle_list[e]);
        #1;
        checks++;
        if (int'(out_idx) != idx_list[e] || out_ovf) begin
          failures++;
          $display("idx mismatch entry %0d: got %0d exp %0d", e, out_idx, idx_list[e]);
        end
      end
      @(negedge clk); in_valid = 0;
    end
    @(negedge clk);
    checks++;
    if (mask != full) begin
      failures++;
      $display("mask mismatch got %h exp %h", mask, full);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_seg(32'h0);
    run_seg(32'hffff_ffff);
    run_seg(32'h8000_0001);
    run_seg(32'h0000_0000);
    for (int n = 0; n < 300; n++) begin
      logic [31:0] m;
      m = $urandom & $urandom & $urandom;
      run_seg(m);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
