// pe_mac: one processing element, a multiply-accumulate unit (one DSP48).
//
// Each enabled cycle it adds a*b to its accumulator; with clr set the
// accumulator is loaded with a*b instead, which starts a new sum without a
// separate clearing cycle. acc is the registered sum, valid one cycle after
// the last enabled input. Operand and accumulator widths are parameters.
module pe_mac #(
  parameter int AW    = 9,
  parameter int BW    = 8,
  parameter int ACC_W = 32
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    en,
  input  logic                    clr,
  input  logic signed [AW-1:0]    a,
  input  logic signed [BW-1:0]    b,
  output logic signed [ACC_W-1:0] acc
);
  logic signed [AW+BW-1:0] prod;
  assign prod = a * b;

  always_ff @(posedge clk) begin
    if (rst)     acc <= '0;
    else if (en) acc <= clr ? ACC_W'(prod) : acc + ACC_W'(prod);
  end
endmodule
