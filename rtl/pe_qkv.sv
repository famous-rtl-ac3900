// pe_qkv: the PE array of the QKV processing module of one head.
//
// Three TS-lane dot-product arrays work side by side on the same input row:
// each cycle they take one row of the input tile and row j of the W_Q, W_K
// and W_V tiles and produce the partial sums Q[s][j], K[s][j] and V[s][j]
// over the TS columns of the current tile. With TS = 64 that is 3 x 64
// multipliers per head, one new (s, j) pair per cycle, results two cycles
// after the operands (out_valid). The inner (TS) loop being fully unrolled
// into parallel multipliers with an adder tree is this design's reading of
// how the PE count follows from the unrolling factor.
module pe_qkv
  import famous_pkg::*;
#(
  parameter int TS = TS_DEF
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  in_valid,
  input  data_t x_row  [TS],
  input  data_t wq_row [TS],
  input  data_t wk_row [TS],
  input  data_t wv_row [TS],
  output logic  out_valid,
  output acc_t  q_part,
  output acc_t  k_part,
  output acc_t  v_part
);
  logic vq, vk, vv;

  pe_dot #(.N(TS), .AW(DATA_W), .BW(DATA_W), .ACC_W(ACC_W)) u_dot_q (
    .clk, .rst, .in_valid, .a(x_row), .b(wq_row), .lane_en('1),
    .out_valid(vq), .sum(q_part));
  pe_dot #(.N(TS), .AW(DATA_W), .BW(DATA_W), .ACC_W(ACC_W)) u_dot_k (
    .clk, .rst, .in_valid, .a(x_row), .b(wk_row), .lane_en('1),
    .out_valid(vk), .sum(k_part));
  pe_dot #(.N(TS), .AW(DATA_W), .BW(DATA_W), .ACC_W(ACC_W)) u_dot_v (
    .clk, .rst, .in_valid, .a(x_row), .b(wv_row), .lane_en('1),
    .out_valid(vv), .sum(v_part));

  assign out_valid = vq & vk & vv;
endmodule
