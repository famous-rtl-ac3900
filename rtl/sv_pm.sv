// sv_pm: the SV processing module of one attention head.
//
// Multiplies the softmax output with the value matrix: Z[s][j] = sum_t
// P[s][t] * V[t][j]. It has DK processing elements (pe_mac), one per output
// column j. Each probability p[t] arriving from the softmax is broadcast to
// all of them together with row t of the V buffer (requantised to signed
// 8 bits), and each PE accumulates p[t] * V[t][j]. After the last t of a row
// the sums are brought back to 8 bits (>>> 8, since p = 256 stands for 1.0,
// saturating) and written as row s of the head's output; columns >= dk are
// written as zero.
//
// Timing: the V row is requested in the cycle p arrives and is there one
// cycle later, when the PEs take it; the output row is written two cycles
// after the last p of the row. done pulses with the write of the last row.
module sv_pm
  import famous_pkg::*;
#(
  parameter int SL = SL_DEF,
  parameter int DK = DK_DEF
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic [15:0]           dk,
  input  logic [4:0]            qkv_shift,
  // probability stream from the softmax
  input  logic                  p_valid,
  input  logic [$clog2(SL)-1:0] p_t,
  input  logic [$clog2(SL)-1:0] p_row,
  input  logic                  p_first,
  input  logic                  p_last,
  input  logic                  p_lastrow,
  input  prob_t                 p_data,
  // V buffer read port
  output logic [$clog2(SL)-1:0] v_raddr,
  input  acc_t                  v_rdata [DK],
  // output rows
  output logic                  z_we,
  output logic [$clog2(SL)-1:0] z_row,
  output data_t                 z_data [DK],
  output logic                  done
);
  localparam int SW = $clog2(SL);

  assign v_raddr = p_t;

  logic         v1, first1, last1, lastrow1;
  logic [SW-1:0] row1;
  prob_t        p1;
  logic         last2, lastrow2;
  logic [SW-1:0] row2;
  always_ff @(posedge clk) begin
    if (rst) begin
      v1    <= 1'b0;
      last2 <= 1'b0;
    end else begin
      v1    <= p_valid;
      last2 <= v1 && last1;
    end
    first1   <= p_first;
    last1    <= p_last;
    lastrow1 <= p_lastrow;
    row1     <= p_row;
    p1       <= p_data;
    lastrow2 <= lastrow1;
    row2     <= row1;
  end

  acc_t acc [DK];
  for (genvar j = 0; j < DK; j++) begin : g_pe
    pe_mac #(.AW(P_W + 1), .BW(DATA_W), .ACC_W(ACC_W)) u_pe_sv (
      .clk, .rst, .en(v1), .clr(first1),
      .a(signed'({1'b0, p1})), .b(requant(v_rdata[j], qkv_shift)), .acc(acc[j]));
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      z_we <= 1'b0;
      done <= 1'b0;
    end else begin
      z_we <= last2;
      done <= last2 && lastrow2;
    end
    z_row <= row2;
    for (int j = 0; j < DK; j++)
      z_data[j] <= (j < int'(dk)) ? requant(acc[j], 5'd8) : '0;
  end
endmodule
