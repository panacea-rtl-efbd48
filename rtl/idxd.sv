// idxd: index decoder for run-length encoded HO slice-vector streams.
//
// A compressed stream lists only the uncompressed HO vectors of a TK-long segment. Each
// entry carries a 4-bit run-length index: the number of compressed vectors that precede
// it since the previous uncompressed one. The decoder keeps the position of the previous
// entry and outputs the absolute index  idx = prev + 1 + rle  (prev = -1 at the start of
// a segment), together with a bit mask of uncompressed positions of the whole segment.
// One entry per cycle; out_idx is combinational from the inputs and the running
// position, the mask is registered. in_first restarts a segment (clears the mask);
// an entry flagged in_empty stands for a segment whose vectors are all compressed.
// Paper: 4-bit indices, up to 15 skipped vectors per index. Restarting runs at every
// TK segment and the mask output are this design's choices.
module idxd
  import panacea_pkg::*;
#(
  parameter int IDX_W = 4,
  parameter int SEG   = TK
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    in_first,
  input  logic                    in_empty,  // segment has no uncompressed vector
  input  logic [IDX_W-1:0]        in_rle,
  output logic [$clog2(SEG)-1:0]  out_idx,
  output logic                    out_ovf,   // index beyond the segment (malformed stream)
  output logic [SEG-1:0]          mask
);
  localparam int PW = $clog2(SEG) + 1;
  logic [PW-1:0] next_pos;      // position the next entry with rle=0 would take
  logic [PW:0]   pos;

  always_comb begin
    pos     = (in_first ? '0 : {1'b0, next_pos}) + (PW+1)'(in_rle);
    out_idx = pos[$clog2(SEG)-1:0];
    out_ovf = in_valid && !in_empty && (pos >= (PW+1)'(SEG));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      next_pos <= '0;
      mask     <= '0;
    end else if (in_valid) begin
      next_pos <= PW'(pos + 1'b1);
      if (in_first) mask <= '0;
      if (!out_ovf && !in_empty) begin
        if (in_first) mask <= SEG'(1) << out_idx;
        else          mask[out_idx] <= 1'b1;
      end
    end
  end
endmodule
