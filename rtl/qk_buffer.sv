// qk_buffer: the score buffer of one attention head.
//
// Holds the SL x SL matrix S = Q K^T at full accumulator precision, one entry
// per address (address = row * SL + column). QK_PM writes one entry per
// cycle; the softmax reads one entry per cycle with a registered (one-cycle)
// read, like a simple dual-port block RAM.
module qk_buffer
  import famous_pkg::*;
#(
  parameter int SL = SL_DEF
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(SL*SL)-1:0] waddr,
  input  acc_t                     wdata,
  input  logic [$clog2(SL*SL)-1:0] raddr,
  output acc_t                     rdata
);
  acc_t mem [SL*SL];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
