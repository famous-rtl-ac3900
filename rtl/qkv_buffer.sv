// qkv_buffer: the Q, K or V buffer of one attention head.
//
// SL rows by DK columns of accumulators. The QKV module delivers, for every
// tile, one partial sum per (row, column); the buffer adds it to what it
// already holds, so after the last tile each entry is the sum over all tiles
// (the first tile overwrites instead of adding, which clears the previous
// run). The accumulation is a two-stage read-modify-write: the entry is read
// in the cycle the partial sum arrives and written back one cycle later, so
// the same entry must not be sent in two consecutive cycles (an assertion
// checks this; the QKV loop never does it).
//
// The read port returns one whole row (all DK columns), registered, which is
// what the QK and SV modules consume. Keeping full-precision accumulators and
// requantising to 8 bits on the way out is this design's choice.
module qkv_buffer
  import famous_pkg::*;
#(
  parameter int SL = SL_DEF,
  parameter int DK = DK_DEF
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  acc_valid,
  input  logic                  acc_first,
  input  logic [$clog2(SL)-1:0] acc_row,
  input  logic [$clog2(DK)-1:0] acc_lane,
  input  acc_t                  acc_val,
  input  logic [$clog2(SL)-1:0] raddr,
  output acc_t                  rdata [DK]
);
  acc_t mem [SL][DK];

  logic                  p_valid, p_first;
  logic [$clog2(SL)-1:0] p_row;
  logic [$clog2(DK)-1:0] p_lane;
  acc_t                  p_val, p_old;

  always_ff @(posedge clk) begin
    if (rst) p_valid <= 1'b0;
    else     p_valid <= acc_valid;
    p_first <= acc_first;
    p_row   <= acc_row;
    p_lane  <= acc_lane;
    p_val   <= acc_val;
    p_old   <= mem[acc_row][acc_lane];
  end

  always_ff @(posedge clk) begin
    if (p_valid) mem[p_row][p_lane] <= p_first ? p_val : p_old + p_val;
    rdata <= mem[raddr];
  end

  // the read-modify-write must not see the same entry twice in a row
  assert property (@(posedge clk) disable iff (rst)
    !(acc_valid && p_valid && acc_row == p_row && acc_lane == p_lane))
    else $error("qkv_buffer: back-to-back accumulation into one entry");
endmodule
