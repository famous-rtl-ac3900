// attention_head: one attention head of the accelerator.
//
// Wires the three processing modules of a head with its buffers:
//   qkv_pm (input BRAM, weight BRAM, PE_QKV) -> Q, K, V buffers
//   qk_pm  (PE_QK)  reads Q and K buffers    -> QK buffer
//   softmax_unit    reads the QK buffer      -> probability stream
//   sv_pm  (PE_SV)  stream x V buffer rows   -> output rows (z_*)
// The phases are started by the controller one after the other; each
// reports completion with a one-cycle done pulse. All heads are identical
// and run in parallel on their own slice of the weights.
module attention_head
  import famous_pkg::*;
#(
  parameter int SL = SL_DEF,
  parameter int DK = DK_DEF,
  parameter int TS = TS_DEF
) (
  input  logic                  clk,
  input  logic                  rst,
  input  cfg_t                  cfg,
  // tile load port
  input  logic                  ld_we,
  input  ld_sel_e               ld_sel,
  input  logic [15:0]           ld_addr,
  input  data_t                 ld_data [TS],
  // phase control
  input  logic                  qkv_start,
  input  logic                  first_tile,
  output logic                  qkv_done,
  input  logic                  qk_start,
  output logic                  qk_done,
  input  logic                  sm_start,
  output logic                  sm_done,
  // output rows
  output logic                  z_we,
  output logic [$clog2(SL)-1:0] z_row,
  output data_t                 z_data [DK]
);
  localparam int SW = $clog2(SL);

  // QKV module -> Q/K/V buffers
  logic          acc_valid, acc_first;
  logic [SW-1:0] acc_row;
  logic [$clog2(DK)-1:0] acc_lane;
  acc_t          acc_q, acc_k, acc_v;

  qkv_pm #(.SL(SL), .DK(DK), .TS(TS)) u_qkv (
    .clk, .rst, .ld_we, .ld_sel, .ld_addr, .ld_data,
    .start(qkv_start), .first_tile, .seq_len(cfg.seq_len), .dk(cfg.dk),
    .qkv_shift(cfg.qkv_shift), .done(qkv_done),
    .acc_valid, .acc_first, .acc_row, .acc_lane, .acc_q, .acc_k, .acc_v);

  logic [SW-1:0] q_raddr, k_raddr, v_raddr;
  acc_t          q_rdata [DK], k_rdata [DK], v_rdata [DK];

  qkv_buffer #(.SL(SL), .DK(DK)) u_qbuf (
    .clk, .rst, .acc_valid, .acc_first, .acc_row, .acc_lane, .acc_val(acc_q),
    .raddr(q_raddr), .rdata(q_rdata));
  qkv_buffer #(.SL(SL), .DK(DK)) u_kbuf (
    .clk, .rst, .acc_valid, .acc_first, .acc_row, .acc_lane, .acc_val(acc_k),
    .raddr(k_raddr), .rdata(k_rdata));
  qkv_buffer #(.SL(SL), .DK(DK)) u_vbuf (
    .clk, .rst, .acc_valid, .acc_first, .acc_row, .acc_lane, .acc_val(acc_v),
    .raddr(v_raddr), .rdata(v_rdata));

  // QK module -> QK buffer
  logic                     qk_we;
  logic [$clog2(SL*SL)-1:0] qk_waddr, qk_raddr;
  acc_t                     qk_wdata, qk_rdata;

  qk_pm #(.SL(SL), .DK(DK)) u_qk (
    .clk, .rst, .start(qk_start), .seq_len(cfg.seq_len), .dk(cfg.dk),
    .qkv_shift(cfg.qkv_shift), .done(qk_done),
    .q_raddr, .q_rdata, .k_raddr, .k_rdata, .qk_we, .qk_waddr, .qk_wdata);

  qk_buffer #(.SL(SL)) u_qkbuf (
    .clk, .we(qk_we), .waddr(qk_waddr), .wdata(qk_wdata),
    .raddr(qk_raddr), .rdata(qk_rdata));

  // softmax -> SV module
  logic          p_valid, p_first, p_last, p_lastrow;
  logic [SW-1:0] p_t, p_row;
  prob_t         p_data;

  softmax_unit #(.SL(SL)) u_sm (
    .clk, .rst, .start(sm_start), .seq_len(cfg.seq_len), .mask_en(cfg.mask_en),
    .sm_scale(cfg.sm_scale), .done(),
    .qk_raddr, .qk_rdata, .p_valid, .p_t, .p_row, .p_first, .p_last, .p_lastrow, .p_data);

  sv_pm #(.SL(SL), .DK(DK)) u_sv (
    .clk, .rst, .dk(cfg.dk), .qkv_shift(cfg.qkv_shift),
    .p_valid, .p_t, .p_row, .p_first, .p_last, .p_lastrow, .p_data,
    .v_raddr, .v_rdata, .z_we, .z_row, .z_data, .done(sm_done));
endmodule
