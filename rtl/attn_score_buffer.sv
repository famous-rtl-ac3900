// attn_score_buffer: the attention-score output buffer.
//
// Collects the output rows of all heads side by side: entry (row, head) holds
// the DK 8-bit outputs of that head for that token, so reading one row over
// all heads gives the concatenation of the heads, a d_model-wide output row.
// Every head has its own write port (the heads run in lockstep and write the
// same row in the same cycle). The host reads one (row, head) entry per
// cycle through a registered read port.
module attn_score_buffer
  import famous_pkg::*;
#(
  parameter int H  = H_DEF,
  parameter int SL = SL_DEF,
  parameter int DK = DK_DEF
) (
  input  logic                  clk,
  input  logic [H-1:0]          we,
  input  logic [$clog2(SL)-1:0] wrow  [H],
  input  data_t                 wdata [H][DK],
  input  logic [$clog2(SL)-1:0] rrow,
  input  logic [$clog2(H)-1:0]  rhead,
  output data_t                 rdata [DK]
);
  data_t mem [SL][H][DK];

  always_ff @(posedge clk) begin
    for (int h = 0; h < H; h++)
      if (we[h]) mem[wrow[h]][h] <= wdata[h];
    rdata <= mem[rrow][rhead];
  end
endmodule
