// tb_qkv_pm: loads an input tile, weight tiles and biases into a reduced QKV
// module, runs a first-tile pass and a later-tile pass and checks every
// partial sum it sends (value, row, column, first flag, order) against
// products computed here, with the bias (scaled by 2^qkv_shift) on the first
// pass only. Also checks the documented pass time seq_len*dk + 6 cycles,
// for the full sizes and for reduced runtime seq_len and dk.
module tb_qkv_pm;
  import famous_pkg::*;
  localparam int SL = 8, DK = 8, TS = 16;
  logic clk = 0, rst = 1;
  logic ld_we = 0;
  ld_sel_e ld_sel = LD_X;
  logic [15:0] ld_addr = '0;
  data_t ld_data [TS];
  logic start = 0, first_tile = 0, done;
  logic [15:0] seq_len = 16'(SL), dk = 16'(DK);
  logic [4:0] qkv_shift = 5'd3;
  logic acc_valid, acc_first;
  logic [2:0] acc_row, acc_lane;
  acc_t acc_q, acc_k, acc_v;

  data_t X [SL][TS];
  data_t W [3][DK][TS];
  data_t Bv [3][DK];
  int checks = 0, failures = 0, n_out = 0;
  bit exp_first;

  qkv_pm #(.SL(SL), .DK(DK), .TS(TS)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint ref_val(int k, int s, int j, bit first);
    longint v = 0;
    for (int i = 0; i < TS; i++) v += longint'(X[s][i]) * longint'(W[k][j][i]);
    if (first) v += longint'(Bv[k][j]) * (longint'(1) << qkv_shift);
    return v;
  endfunction

  always @(posedge clk) if (!rst && acc_valid) begin
    automatic int s = n_out / int'(dk);
    automatic int j = n_out % int'(dk);
    checks += 6;
    if (acc_row != 3'(s))  failures++;
    if (acc_lane != 3'(j)) failures++;
    if (acc_first != exp_first) failures++;
    if (acc_q !== acc_t'(ref_val(0, s, j, exp_first))) begin failures++; if (failures < 6) $display("n %0d row %0d lane %0d q %0d exp %0d first %0d", n_out, acc_row, acc_lane, acc_q, ref_val(0, s, j, exp_first), acc_first); end
    if (acc_k !== acc_t'(ref_val(1, s, j, exp_first))) failures++;
    if (acc_v !== acc_t'(ref_val(2, s, j, exp_first))) failures++;
    n_out++;
  end

  task automatic load_tile(bit with_bias);
    for (int r = 0; r < SL; r++) begin
      @(negedge clk); ld_we = 1; ld_sel = LD_X; ld_addr = 16'(r);
      for (int i = 0; i < TS; i++) begin ld_data[i] = data_t'($urandom); X[r][i] = ld_data[i]; end
    end
    for (int k = 0; k < 3; k++)
      for (int r = 0; r < DK; r++) begin
        @(negedge clk); ld_we = 1; ld_sel = ld_sel_e'(LD_WQ + k); ld_addr = 16'(r);
        for (int i = 0; i < TS; i++) begin ld_data[i] = data_t'($urandom); W[k][r][i] = ld_data[i]; end
      end
    if (with_bias)
      for (int k = 0; k < 3; k++) begin
        @(negedge clk); ld_we = 1; ld_sel = ld_sel_e'(LD_BQ + k); ld_addr = 16'd0;
        for (int i = 0; i < TS; i++) begin ld_data[i] = data_t'($urandom); if (i < DK) Bv[k][i] = ld_data[i]; end
      end
    @(negedge clk); ld_we = 0;
  endtask

  task automatic run_pass(bit first, int L, int D);
    int cyc = 0;
    seq_len = 16'(L); dk = 16'(D); n_out = 0; exp_first = first;
    @(negedge clk); start = 1; first_tile = first;
    @(negedge clk); start = 0; first_tile = 0; cyc = 1;
    while (!done && cyc < 10000) begin @(negedge clk); cyc++; end
    checks += 2;
    if (n_out != L * D) begin failures++; $display("outputs %0d, expected %0d", n_out, L * D); end
    if (cyc != L * D + 6) begin failures++; $display("pass took %0d cycles, expected %0d", cyc, L * D + 6); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    load_tile(1);
    run_pass(1, SL, DK);
    load_tile(0);
    run_pass(0, SL, DK);
    qkv_shift = 5'd0;
    run_pass(1, 5, 3);
    run_pass(0, 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
