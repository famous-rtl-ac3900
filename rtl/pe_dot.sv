// pe_dot: N multipliers feeding an adder tree, fully pipelined.
//
// This is what an unrolled inner loop of a dot product becomes: N products
// are registered in one stage, their sum in the next, so a new pair of
// N-element vectors can be taken every cycle and the sum appears two cycles
// later with out_valid. Lanes whose lane_en bit is clear contribute zero.
module pe_dot #(
  parameter int N     = 64,
  parameter int AW    = 8,
  parameter int BW    = 8,
  parameter int ACC_W = 32
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    in_valid,
  input  logic signed [AW-1:0]    a [N],
  input  logic signed [BW-1:0]    b [N],
  input  logic [N-1:0]            lane_en,
  output logic                    out_valid,
  output logic signed [ACC_W-1:0] sum
);
  logic signed [AW+BW-1:0] prod [N];
  logic                    v1;
  logic signed [ACC_W-1:0] tree;

  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++)
      if (lane_en[i]) prod[i] <= a[i] * b[i];
      else            prod[i] <= '0;
  end

  always_comb begin
    tree = '0;
    for (int i = 0; i < N; i++) tree += ACC_W'(prod[i]);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      v1        <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v1        <= in_valid;
      out_valid <= v1;
    end
    sum <= tree;
  end
endmodule
