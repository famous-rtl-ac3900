// qk_pm: the QK processing module of one attention head.
//
// Computes the score matrix S = Q K^T. For every row s < seq_len and every
// column t < seq_len (t innermost) it reads row s of the Q buffer and row t
// of the K buffer, requantises both rows to signed 8 bits (arithmetic shift
// by qkv_shift, saturating) and takes their dot product over the first dk
// columns with a DK-lane PE array (PE_QK). One score per cycle is written to
// the QK buffer at address s*SL + t. Q and K are not tiled: both fit on chip.
//
// Timing: seq_len^2 cycles of issue, 3 cycles of pipeline; done pulses one
// cycle after the last score is written.
module qk_pm
  import famous_pkg::*;
#(
  parameter int SL = SL_DEF,
  parameter int DK = DK_DEF
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     start,
  input  logic [15:0]              seq_len,
  input  logic [15:0]              dk,
  input  logic [4:0]               qkv_shift,
  output logic                     done,
  output logic [$clog2(SL)-1:0]    q_raddr,
  input  acc_t                     q_rdata [DK],
  output logic [$clog2(SL)-1:0]    k_raddr,
  input  acc_t                     k_rdata [DK],
  output logic                     qk_we,
  output logic [$clog2(SL*SL)-1:0] qk_waddr,
  output acc_t                     qk_wdata
);
  localparam int SW = $clog2(SL);
  localparam int AW = $clog2(SL*SL);

  logic        running;
  logic [15:0] s_cnt, t_cnt;

  always_ff @(posedge clk) begin
    if (rst) begin
      running <= 1'b0;
      s_cnt   <= '0;
      t_cnt   <= '0;
    end else if (start) begin
      running <= 1'b1;
      s_cnt   <= '0;
      t_cnt   <= '0;
    end else if (running) begin
      if (t_cnt == seq_len - 1) begin
        t_cnt <= '0;
        if (s_cnt == seq_len - 1) running <= 1'b0;
        else s_cnt <= s_cnt + 1'b1;
      end else begin
        t_cnt <= t_cnt + 1'b1;
      end
    end
  end

  assign q_raddr = s_cnt[SW-1:0];
  assign k_raddr = t_cnt[SW-1:0];

  // stage 1: rows arrive, requantise, mask columns >= dk
  data_t        q8 [DK], k8 [DK];
  logic [DK-1:0] lane_en;
  always_comb begin
    for (int j = 0; j < DK; j++) begin
      q8[j]      = requant(q_rdata[j], qkv_shift);
      k8[j]      = requant(k_rdata[j], qkv_shift);
      lane_en[j] = (j < int'(dk));
    end
  end

  logic [2:0]    t_v, t_last;
  logic [AW-1:0] t_addr [3];
  always_ff @(posedge clk) begin
    if (rst) begin
      t_v    <= '0;
      t_last <= '0;
    end else begin
      t_v    <= {t_v[1:0], running};
      t_last <= {t_last[1:0], running && s_cnt == seq_len - 1 && t_cnt == seq_len - 1};
    end
    t_addr[0] <= AW'(int'(s_cnt) * SL + int'(t_cnt));
    t_addr[1] <= t_addr[0];
    t_addr[2] <= t_addr[1];
  end

  logic pe_valid;
  acc_t score;
  pe_dot #(.N(DK), .AW(DATA_W), .BW(DATA_W), .ACC_W(ACC_W)) u_pe_qk (
    .clk, .rst, .in_valid(t_v[0]), .a(q8), .b(k8), .lane_en,
    .out_valid(pe_valid), .sum(score));

  assign qk_we    = pe_valid;
  assign qk_waddr = t_addr[2];
  assign qk_wdata = score;

  always_ff @(posedge clk) begin
    if (rst) done <= 1'b0;
    else     done <= t_last[2];
  end
endmodule
