// famous_ctrl: run controller and runtime-parameter registers.
//
// The host writes the runtime parameters (cfg_in: active heads, number of
// tiles = d_model / TS, d_k, sequence length, mask and fixed-point settings)
// and pulses start; they are latched for the whole run, so one synthesised
// accelerator serves any model up to its built-in sizes without
// re-synthesis. The run is:
//   LOAD  tile_req is high with tile_idx; the host fills every active head's
//         input and weight BRAMs with that tile and pulses tile_loaded;
//   QKV   qkv_start (with first_tile on tile 0) runs one tile pass in every
//         active head; then back to LOAD for the next tile, or on after the
//         last one (n_tiles passes in all);
//   QK    qk_start: S = Q K^T in every head;
//   SMSV  sm_start: softmax and S*V, row by row, into the output buffer;
// then done pulses and the controller is idle again. The heads run in
// lockstep, so the phase-done pulses of head 0 pace the run.
// Start pulses go only to the first n_heads heads (head_en).
module famous_ctrl
  import famous_pkg::*;
#(
  parameter int H       = H_DEF,
  parameter int D_MODEL = D_MODEL_DEF,
  parameter int TS      = TS_DEF,
  parameter int SL      = SL_DEF,
  parameter int DK      = DK_DEF
) (
  input  logic         clk,
  input  logic         rst,
  input  cfg_t         cfg_in,
  input  logic         start,
  output cfg_t         cfg,
  output logic         busy,
  output logic         done,
  output logic         tile_req,
  output logic [15:0]  tile_idx,
  input  logic         tile_loaded,
  output logic [H-1:0] head_en,
  output logic         qkv_start,
  output logic         first_tile,
  input  logic         qkv_done,
  output logic         qk_start,
  input  logic         qk_done,
  output logic         sm_start,
  input  logic         sm_done
);
  typedef enum logic [2:0] {C_IDLE, C_LOAD, C_QKV, C_QK, C_SMSV} cstate_e;
  cstate_e state;

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= C_IDLE;
      cfg       <= '0;
      tile_idx  <= '0;
      done      <= 1'b0;
      qkv_start <= 1'b0;
      qk_start  <= 1'b0;
      sm_start  <= 1'b0;
    end else begin
      done      <= 1'b0;
      qkv_start <= 1'b0;
      qk_start  <= 1'b0;
      sm_start  <= 1'b0;
      unique case (state)
        C_IDLE: if (start) begin
          cfg      <= cfg_in;
          tile_idx <= '0;
          state    <= C_LOAD;
        end
        C_LOAD: if (tile_loaded) begin
          qkv_start <= 1'b1;
          state     <= C_QKV;
        end
        C_QKV: if (qkv_done) begin
          if (tile_idx == cfg.n_tiles - 1) begin
            qk_start <= 1'b1;
            state    <= C_QK;
          end else begin
            tile_idx <= tile_idx + 1'b1;
            state    <= C_LOAD;
          end
        end
        C_QK: if (qk_done) begin
          sm_start <= 1'b1;
          state    <= C_SMSV;
        end
        C_SMSV: if (sm_done) begin
          done  <= 1'b1;
          state <= C_IDLE;
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  assign busy       = (state != C_IDLE);
  assign tile_req   = (state == C_LOAD);
  assign first_tile = (tile_idx == 0);
  always_comb
    for (int h = 0; h < H; h++) head_en[h] = (h < int'(cfg.n_heads));

  // the runtime parameters must fit what was built
  assert property (@(posedge clk) disable iff (rst)
    (state == C_IDLE && start) |-> (cfg_in.n_heads >= 1 && cfg_in.n_heads <= 16'(H) &&
      cfg_in.n_tiles >= 1 && cfg_in.n_tiles <= 16'(D_MODEL / TS) &&
      cfg_in.dk >= 1 && cfg_in.dk <= 16'(DK) && cfg_in.seq_len >= 1 && cfg_in.seq_len <= 16'(SL)))
    else $error("famous_ctrl: runtime parameters exceed the built sizes");
endmodule
