// tb_pe_qkv: feeds random input and weight rows to the QKV PE array every
// cycle and checks the three dot products and their two-cycle latency.
module tb_pe_qkv;
  import famous_pkg::*;
  localparam int TS = 64, N = 300;
  logic clk = 0, rst = 1, in_valid = 0, out_valid;
  data_t x_row [TS], wq_row [TS], wk_row [TS], wv_row [TS];
  acc_t q_part, k_part, v_part;
  longint exp_q [N], exp_k [N], exp_v [N];
  int checks = 0, failures = 0, n_out = 0, cyc = 0, first_in = -1, first_out = -1;

  pe_qkv dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst && out_valid) begin
    if (first_out < 0) first_out = cyc;
    checks += 3;
    if (q_part !== 32'(exp_q[n_out])) begin failures++; if (failures < 4) $display("q %0d %0d %0d", n_out, q_part, exp_q[n_out]); end
    if (k_part !== 32'(exp_k[n_out])) failures++;
    if (v_part !== 32'(exp_v[n_out])) failures++;
    n_out++;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    for (int n = 0; n < N; n++) begin
      @(negedge clk);
      in_valid = 1;
      if (first_in < 0) first_in = cyc;
      exp_q[n] = 0; exp_k[n] = 0; exp_v[n] = 0;
      for (int i = 0; i < TS; i++) begin
        // the first rows use the extreme values
        x_row[i]  = (n < 2) ? -8'sd128 : data_t'($urandom);
        wq_row[i] = (n < 1) ? -8'sd128 : data_t'($urandom);
        wk_row[i] = data_t'($urandom);
        wv_row[i] = (n < 2) ? 8'sd127 : data_t'($urandom);
        exp_q[n] += longint'(x_row[i]) * longint'(wq_row[i]);
        exp_k[n] += longint'(x_row[i]) * longint'(wk_row[i]);
        exp_v[n] += longint'(x_row[i]) * longint'(wv_row[i]);
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (5) @(negedge clk);
    checks += 2;
    if (n_out != N) failures++;
    if (first_out - first_in != 2) begin
      failures++;
      $display("latency %0d, expected 2", first_out - first_in);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
