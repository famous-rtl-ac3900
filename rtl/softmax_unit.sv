// softmax_unit: row-wise scaled, optionally masked softmax of one head.
//
// For each row s of the score buffer it computes
//   p[t] = exp(y[t] - m) / sum_u exp(y[u] - m),  y[t] = S[s][t] / sqrt(d_k),
// over the columns t < seq_len that the mask lets through (with mask_en set,
// a causal mask: only t <= s), and streams p[t] for t = 0 .. seq_len-1 to
// the SV module (masked columns give 0). The row is read three times:
//   MAX  one read per cycle, m = max of the included y;
//   EXP  one read per cycle, e[t] = exp(y[t]-m) stored, their sum kept;
//   DIV  32 cycles of restoring division, r = floor(2^31 / sum);
//   OUT  one p[t] = min(255, round(e[t] * r / 2^23)) per cycle.
// So one row takes 3*seq_len + 34 cycles.
//
// Number formats (all this design's choice; the paper states only that a
// softmax follows the scaled product and that data is 8-bit fixed point):
//   y = (S * sm_scale) >>> 16, in units of 1/16; the host folds 1/sqrt(d_k)
//     and the fixed-point scale of S into sm_scale.
//   e = 2^(-u/16) * 32768 with u = floor(d * 23637 / 2^14) ~ d*log2(e) and
//     d = min(m - y, 65535): the integer part of u/16 is a right shift, the
//     fraction a 16-entry table EXP2_LUT[f] = round(32768 * 2^(-f/16)).
//   p is unsigned 8-bit with 256 standing for 1.0 (so 255 is the largest).
module softmax_unit
  import famous_pkg::*;
#(
  parameter int SL = SL_DEF
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     start,
  input  logic [15:0]              seq_len,
  input  logic                     mask_en,
  input  logic [15:0]              sm_scale,
  output logic                     done,
  // score buffer read port (registered read in the buffer)
  output logic [$clog2(SL*SL)-1:0] qk_raddr,
  input  acc_t                     qk_rdata,
  // probability stream
  output logic                     p_valid,
  output logic [$clog2(SL)-1:0]    p_t,
  output logic [$clog2(SL)-1:0]    p_row,
  output logic                     p_first,
  output logic                     p_last,
  output logic                     p_lastrow,
  output prob_t                    p_data
);
  localparam int SW = $clog2(SL);
  localparam int AW = $clog2(SL*SL);
  localparam logic [EXP_W-1:0] EXP2_LUT [16] = '{
    16'd32768, 16'd31379, 16'd30048, 16'd28774, 16'd27554, 16'd26386, 16'd25268, 16'd24196,
    16'd23170, 16'd22188, 16'd21247, 16'd20347, 16'd19484, 16'd18658, 16'd17867, 16'd17109};

  typedef enum logic [2:0] {S_IDLE, S_MAX, S_EXP, S_DIV, S_OUT} state_e;
  state_e state;

  logic [15:0]       s_cnt, t_cnt;
  logic              rd_v;
  logic [15:0]       rd_t;
  logic signed [63:0] m;
  logic [EXP_W-1:0]  ebuf [SL];
  logic [31:0]       sum, rem, quo;
  logic [5:0]        bitn;

  // scaled score of the entry being read
  logic signed [63:0] y;
  assign y = (64'(signed'(qk_rdata)) * signed'(64'(sm_scale))) >>> 16;

  logic incl;
  assign incl = !(mask_en && rd_t > s_cnt);

  // exp(-(m - y)/16) * 32768
  function automatic logic [EXP_W-1:0] exp_fix(input logic signed [63:0] mm,
                                               input logic signed [63:0] yy);
    logic signed [63:0] d;
    logic [31:0]        u;
    logic [27:0]        ip;
    d = mm - yy;
    if (d > 64'sd65535) d = 64'sd65535;
    u  = (32'(d) * 32'd23637) >> 14;
    ip = u[31:4];
    if (ip >= 28'd16) return '0;
    return EXP2_LUT[u[3:0]] >> ip[3:0];
  endfunction

  logic [EXP_W-1:0] e_now;
  assign e_now = incl ? exp_fix(m, y) : '0;

  logic issue;
  assign issue = (state == S_MAX || state == S_EXP) && t_cnt < seq_len;
  assign qk_raddr = AW'(int'(s_cnt) * SL + int'(t_cnt));

  logic [32:0] rem_n;
  assign rem_n = {rem, (bitn == 6'd31) ? 1'b1 : 1'b0};

  function automatic prob_t norm(input logic [EXP_W-1:0] e, input logic [31:0] r);
    logic [63:0] v;
    v = (64'(e) * 64'(r) + 64'(1 << 22)) >> 23;
    return (v > 64'd255) ? prob_t'(255) : prob_t'(v);
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      state   <= S_IDLE;
      s_cnt   <= '0;
      t_cnt   <= '0;
      rd_v    <= 1'b0;
      rd_t    <= '0;
      done    <= 1'b0;
      p_valid <= 1'b0;
      m       <= '0;
      sum     <= '0;
      rem     <= '0;
      quo     <= '0;
      bitn    <= '0;
    end else begin
      done    <= 1'b0;
      p_valid <= 1'b0;
      rd_v    <= issue;
      rd_t    <= t_cnt;
      if (issue) t_cnt <= t_cnt + 1'b1;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_MAX;
          s_cnt <= '0;
          t_cnt <= '0;
          m     <= 64'sh8000_0000_0000_0000;
        end
        S_MAX: if (rd_v) begin
          if (incl && y > m) m <= y;
          if (rd_t == seq_len - 1) begin
            state <= S_EXP;
            t_cnt <= '0;
            sum   <= '0;
          end
        end
        S_EXP: if (rd_v) begin
          ebuf[rd_t[SW-1:0]] <= e_now;
          sum <= sum + 32'(e_now);
          if (rd_t == seq_len - 1) begin
            state <= S_DIV;
            rem   <= '0;
            quo   <= '0;
            bitn  <= 6'd31;
          end
        end
        S_DIV: begin
          if (rem_n >= 33'(sum)) begin
            rem       <= 32'(rem_n - 33'(sum));
            quo[bitn[4:0]] <= 1'b1;
          end else begin
            rem <= rem_n[31:0];
          end
          if (bitn == 6'd0) begin
            state <= S_OUT;
            t_cnt <= '0;
          end else begin
            bitn <= bitn - 1'b1;
          end
        end
        S_OUT: begin
          p_valid   <= 1'b1;
          p_t       <= t_cnt[SW-1:0];
          p_row     <= s_cnt[SW-1:0];
          p_first   <= (t_cnt == 0);
          p_last    <= (t_cnt == seq_len - 1);
          p_lastrow <= (s_cnt == seq_len - 1);
          p_data    <= norm(ebuf[t_cnt[SW-1:0]], quo);
          if (t_cnt == seq_len - 1) begin
            t_cnt <= '0;
            m     <= 64'sh8000_0000_0000_0000;
            if (s_cnt == seq_len - 1) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              s_cnt <= s_cnt + 1'b1;
              state <= S_MAX;
            end
          end else begin
            t_cnt <= t_cnt + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
