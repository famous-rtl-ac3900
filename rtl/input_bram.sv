// input_bram: the input tile buffer of one attention head.
//
// Holds an SL x TS slice of the input sequence X: SL rows (tokens) and the TS
// embedding columns of the current tile. The host writes one whole row per
// cycle through the load port; PE_QKV reads one whole row per cycle, so all
// TS products of a row can be formed in parallel. Reads are registered
// (one-cycle latency), as in a block RAM. The buffer is refilled once per
// tile, d_model / TS times per run. The row-per-word layout is this design's
// choice; the SL x TS size is the paper's.
module input_bram
  import famous_pkg::*;
#(
  parameter int SL = SL_DEF,
  parameter int TS = TS_DEF
) (
  input  logic                   clk,
  input  logic                   we,
  input  logic [$clog2(SL)-1:0]  waddr,
  input  data_t                  wdata [TS],
  input  logic [$clog2(SL)-1:0]  raddr,
  output data_t                  rdata [TS]
);
  data_t mem [SL][TS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
