// sram: on-chip memory bank with one read port and one lane-maskable write port.
//
// DEPTH words of LANES lanes of LANE_W bits. Reads are synchronous: rdata shows the word
// at raddr one cycle after re. A write with we stores wdata into the lanes set in wlane.
// A read and a write to the same word in one cycle return the old word. Used for the
// WMEM, AMEM and OMEM banks (each memory is two banks, one for LO words and one for HO
// entries, so a block's LO vector and HO entry of the same k move in the same cycle).
// The paper gives the sizes (64 KB each); the banking and the port set are this
// design's choice. Written as an array so that synthesis maps it onto a memory macro.
module sram #(
  parameter int DEPTH  = 512,
  parameter int LANES  = 16,
  parameter int LANE_W = 32
) (
  input  logic                          clk,
  input  logic                          re,
  input  logic [$clog2(DEPTH)-1:0]      raddr,
  output logic [LANES-1:0][LANE_W-1:0]  rdata,
  input  logic                          we,
  input  logic [LANES-1:0]              wlane,
  input  logic [$clog2(DEPTH)-1:0]      waddr,
  input  logic [LANES-1:0][LANE_W-1:0]  wdata
);
  logic [LANES-1:0][LANE_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    always_ff @(posedge clk) begin
      if (we && wlane[l]) mem[waddr][l] <= wdata[l];
    end
  end
endmodule
