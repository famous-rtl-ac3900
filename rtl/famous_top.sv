// famous_top: multi-head attention accelerator, top level.
//
// H attention heads work in parallel, each on its own d_k-column slice of
// W_Q, W_K and W_V, under one controller; their output rows are gathered in
// the attention-score buffer, whose rows are the concatenation of the heads.
// Large weight matrices are tiled along the embedding dimension: a run is
// n_tiles passes of the QKV modules, each on a TS-column tile of X and the
// matching TS rows of the weights, the partial products being summed in the
// Q/K/V buffers; then Q K^T, softmax and the product with V follow.
//
// Host interface (all synchronous to clk, reset rst active high):
//   cfg_in/start      runtime parameters, latched at start (see famous_pkg)
//   tile_req/tile_idx the controller waits for tile tile_idx; the host writes
//                     it through the load port and pulses tile_loaded
//   ld_*              one write per cycle into head ld_head: an X row
//                     (LD_X, addr = token), a weight row (LD_WQ/WK/WV,
//                     addr = output column j, data = the TS weights of the
//                     tile for that column) or a bias chunk (LD_BQ/BK/BV)
//   busy/done         run in progress / one-cycle pulse at the end
//   rd_row/rd_head    read port of the output: rd_data is the DK outputs of
//                     that head for that token, one cycle after the address
module famous_top
  import famous_pkg::*;
#(
  parameter int H       = H_DEF,
  parameter int D_MODEL = D_MODEL_DEF,
  parameter int TS      = TS_DEF,
  parameter int SL      = SL_DEF,
  parameter int DK      = D_MODEL / H
) (
  input  logic                  clk,
  input  logic                  rst,
  input  cfg_t                  cfg_in,
  input  logic                  start,
  output logic                  busy,
  output logic                  done,
  output logic                  tile_req,
  output logic [15:0]           tile_idx,
  input  logic                  tile_loaded,
  input  logic                  ld_we,
  input  logic [$clog2(H)-1:0]  ld_head,
  input  ld_sel_e               ld_sel,
  input  logic [15:0]           ld_addr,
  input  data_t                 ld_data [TS],
  input  logic [$clog2(SL)-1:0] rd_row,
  input  logic [$clog2(H)-1:0]  rd_head,
  output data_t                 rd_data [DK]
);
  cfg_t         cfg;
  logic [H-1:0] head_en;
  logic         qkv_start, first_tile, qk_start, sm_start;
  logic [H-1:0] qkv_done, qk_done, sm_done;

  famous_ctrl #(.H(H), .D_MODEL(D_MODEL), .TS(TS), .SL(SL), .DK(DK)) u_ctrl (
    .clk, .rst, .cfg_in, .start, .cfg, .busy, .done, .tile_req, .tile_idx,
    .tile_loaded, .head_en, .qkv_start, .first_tile, .qkv_done(qkv_done[0]),
    .qk_start, .qk_done(qk_done[0]), .sm_start, .sm_done(sm_done[0]));

  logic [H-1:0]          z_we;
  logic [$clog2(SL)-1:0] z_row  [H];
  data_t                 z_data [H][DK];

  for (genvar h = 0; h < H; h++) begin : g_head
    attention_head #(.SL(SL), .DK(DK), .TS(TS)) u_head (
      .clk, .rst, .cfg,
      .ld_we(ld_we && ld_head == h), .ld_sel, .ld_addr, .ld_data,
      .qkv_start(qkv_start && head_en[h]), .first_tile, .qkv_done(qkv_done[h]),
      .qk_start(qk_start && head_en[h]), .qk_done(qk_done[h]),
      .sm_start(sm_start && head_en[h]), .sm_done(sm_done[h]),
      .z_we(z_we[h]), .z_row(z_row[h]), .z_data(z_data[h]));
  end

  attn_score_buffer #(.H(H), .SL(SL), .DK(DK)) u_out (
    .clk, .we(z_we), .wrow(z_row), .wdata(z_data),
    .rrow(rd_row), .rhead(rd_head), .rdata(rd_data));
endmodule
