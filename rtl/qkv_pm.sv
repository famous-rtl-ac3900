// qkv_pm: the QKV processing module of one attention head (one tile pass).
//
// Contains the head's input BRAM (an SL x TS tile of X), its weight BRAM
// (d_k x TS tiles of W_Q, W_K, W_V and the biases) and the PE_QKV array.
// A pulse on start runs one tile: for every row s < seq_len and every column
// j < dk (j innermost) it reads row s of X and row j of the three weight
// tiles, and PE_QKV forms the three TS-term partial sums. They leave on the
// acc_* port one (s, j) per cycle, to be added into the Q, K and V buffers.
// On the first tile (first_tile at start) the bias, scaled to the
// accumulator's fixed point (bias <<< qkv_shift), is added and the buffers
// overwrite instead of accumulating. After d_model / TS such passes the
// buffers hold X*W + B.
//
// Timing: seq_len*dk cycles of issue plus 3 cycles of pipeline; done pulses
// DRAIN cycles after the last partial sum so the buffers have committed it.
// The load port writes the BRAMs while no pass is running.
module qkv_pm
  import famous_pkg::*;
#(
  parameter int SL = SL_DEF,
  parameter int DK = DK_DEF,
  parameter int TS = TS_DEF
) (
  input  logic                  clk,
  input  logic                  rst,
  // tile load port
  input  logic                  ld_we,
  input  ld_sel_e               ld_sel,
  input  logic [15:0]           ld_addr,
  input  data_t                 ld_data [TS],
  // control
  input  logic                  start,
  input  logic                  first_tile,
  input  logic [15:0]           seq_len,
  input  logic [15:0]           dk,
  input  logic [4:0]            qkv_shift,
  output logic                  done,
  // partial sums to the Q/K/V buffers
  output logic                  acc_valid,
  output logic                  acc_first,
  output logic [$clog2(SL)-1:0] acc_row,
  output logic [$clog2(DK)-1:0] acc_lane,
  output acc_t                  acc_q,
  output acc_t                  acc_k,
  output acc_t                  acc_v
);
  localparam int DRAIN = 3;
  localparam int SW = $clog2(SL);
  localparam int JW = $clog2(DK);

  logic          running, first_r;
  logic [15:0]   s_cnt, j_cnt;
  data_t         x_row [TS];
  data_t         wq_row [TS], wk_row [TS], wv_row [TS];
  data_t         bq, bk, bv;
  acc_t          q_part, k_part, v_part;
  logic          pe_valid;

  input_bram #(.SL(SL), .TS(TS)) u_in (
    .clk, .we(ld_we && ld_sel == LD_X), .waddr(ld_addr[SW-1:0]), .wdata(ld_data),
    .raddr(s_cnt[SW-1:0]), .rdata(x_row));

  weight_bram #(.DK(DK), .TS(TS)) u_w (
    .clk, .we(ld_we && ld_sel != LD_X), .wsel(ld_sel), .waddr(ld_addr[JW-1:0]),
    .wdata(ld_data), .raddr(j_cnt[JW-1:0]), .wq_row, .wk_row, .wv_row, .bq, .bk, .bv);

  // issue loop: s outer, j inner
  logic issue;
  assign issue = running;
  always_ff @(posedge clk) begin
    if (rst) begin
      running <= 1'b0;
      s_cnt   <= '0;
      j_cnt   <= '0;
      first_r <= 1'b0;
    end else if (start) begin
      running <= 1'b1;
      s_cnt   <= '0;
      j_cnt   <= '0;
      first_r <= first_tile;
    end else if (running) begin
      if (j_cnt == dk - 1) begin
        j_cnt <= '0;
        if (s_cnt == seq_len - 1) running <= 1'b0;
        else s_cnt <= s_cnt + 1'b1;
      end else begin
        j_cnt <= j_cnt + 1'b1;
      end
    end
  end

  // tags travel alongside the data: BRAM read (1) + PE_QKV (2)
  logic [2:0]  t_v, t_last;
  logic [SW-1:0] t_row [3];
  logic [JW-1:0] t_lane [3];
  data_t       b1q, b1k, b1v, b2q, b2k, b2v;
  always_ff @(posedge clk) begin
    if (rst) begin
      t_v    <= '0;
      t_last <= '0;
    end else begin
      t_v    <= {t_v[1:0], issue};
      t_last <= {t_last[1:0], issue && j_cnt == dk - 1 && s_cnt == seq_len - 1};
    end
    t_row[0]  <= s_cnt[SW-1:0];
    t_lane[0] <= j_cnt[JW-1:0];
    for (int i = 1; i < 3; i++) begin
      t_row[i]  <= t_row[i-1];
      t_lane[i] <= t_lane[i-1];
    end
    // bias is read with the weights (stage 1) and used at stage 3
    b1q <= bq; b1k <= bk; b1v <= bv;
    b2q <= b1q; b2k <= b1k; b2v <= b1v;
  end

  pe_qkv #(.TS(TS)) u_pe (
    .clk, .rst, .in_valid(t_v[0]), .x_row, .wq_row, .wk_row, .wv_row,
    .out_valid(pe_valid), .q_part, .k_part, .v_part);

  function automatic acc_t bias_acc(input data_t b, input logic [4:0] sh);
    return acc_t'(b) <<< sh;
  endfunction

  always_comb begin
    acc_valid = pe_valid;
    acc_first = first_r;
    acc_row   = t_row[2];
    acc_lane  = t_lane[2];
    acc_q     = first_r ? q_part + bias_acc(b2q, qkv_shift) : q_part;
    acc_k     = first_r ? k_part + bias_acc(b2k, qkv_shift) : k_part;
    acc_v     = first_r ? v_part + bias_acc(b2v, qkv_shift) : v_part;
  end

  // done DRAIN cycles after the last partial sum left
  logic [DRAIN-1:0] d_sr;
  always_ff @(posedge clk) begin
    if (rst) d_sr <= '0;
    else     d_sr <= {d_sr[DRAIN-2:0], t_last[2]};
  end
  assign done = d_sr[DRAIN-1];
endmodule
