// tb_softmax_unit: the score buffer is modelled here (registered read); the
// softmax must stream, row after row, the probabilities of the reference
// model (famous_ref_pkg) exactly, stay within 3/256 of a real-valued softmax
// of the same scaled scores, take 3*seq_len + 34 cycles per row, and honour
// the causal mask. Runs with and without the mask and with a shorter
// runtime sequence length.
module tb_softmax_unit;
  import famous_pkg::*;
  import famous_ref_pkg::*;
  localparam int SL = 8;
  logic clk = 0, rst = 1, start = 0, done;
  logic [15:0] seq_len = 16'(SL);
  logic mask_en = 0;
  logic [15:0] sm_scale = 16'd4096;
  logic [5:0] qk_raddr;
  acc_t qk_rdata;
  logic p_valid, p_first, p_last, p_lastrow;
  logic [2:0] p_t, p_row;
  prob_t p_data;
  acc_t S [SL*SL];
  int P [SL][SL];
  int checks = 0, failures = 0, n_p = 0, n_masked = 0, worst = 0;

  softmax_unit #(.SL(SL)) dut (.*);

  always #5 clk = ~clk;
  always_ff @(posedge clk) qk_rdata <= S[qk_raddr];

  always @(posedge clk) if (!rst && p_valid) begin
    automatic int s = n_p / int'(seq_len);
    automatic int t = n_p % int'(seq_len);
    checks += 6;
    if (p_row != 3'(s) || p_t != 3'(t)) begin failures++; if (failures < 4) $display("row %0d t %0d exp %0d %0d", p_row, p_t, s, t); end
    if (p_first != (t == 0)) begin failures++; if (failures < 4) $display("first"); end
    if (p_last != (t == int'(seq_len) - 1)) begin failures++; if (failures < 4) $display("last %0d %0d %0d", p_last, t, seq_len); end
    if (p_lastrow != (s == int'(seq_len) - 1)) begin failures++; if (failures < 4) $display("lastrow"); end
    if (int'(p_data) != P[s][t]) begin
      failures++;
      if (failures < 5) $display("p[%0d][%0d] = %0d, expected %0d", s, t, p_data, P[s][t]);
    end
    if (mask_en && t > s) begin
      n_masked++;
      if (p_data != 0) begin failures++; if (failures < 4) $display("masked %0d %0d %0d", s, t, p_data); end
    end else checks--;
    n_p++;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int L, bit msk, int range);
    int cyc = 0;
    longint row [];
    int p [];
    real ex [], tot;
    seq_len = 16'(L); mask_en = msk;
    row = new[L];
    for (int a = 0; a < SL * SL; a++) S[a] = acc_t'($urandom_range(0, 2 * range)) - acc_t'(range);
    for (int s = 0; s < L; s++) begin
      for (int t = 0; t < L; t++) row[t] = longint'(S[s * SL + t]);
      softmax_row(row, L, s, msk, int'(sm_scale), p);
      // against a real-valued softmax of y/16
      ex = new[L]; tot = 0.0;
      for (int t = 0; t < L; t++) begin
        ex[t] = (msk && t > s) ? 0.0 : $exp(real'((row[t] * longint'(sm_scale)) >>> 16) / 16.0);
        tot += ex[t];
      end
      for (int t = 0; t < L; t++) begin
        automatic int d = p[t] - int'($floor(256.0 * ex[t] / tot + 0.5));
        P[s][t] = p[t];
        if (d < 0) d = -d;
        if (d > worst) worst = d;
        checks++;
        if (d > 3) begin failures++; $display("dev"); end
      end
    end
    n_p = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0; cyc = 1;
    while (!done && cyc < 20000) begin @(negedge clk); cyc++; end
    repeat (2) @(negedge clk);
    checks += 2;
    if (n_p != L * L) begin failures++; $display("np %0d", n_p); end
    if (cyc != L * (3 * L + 34) + 1) begin
      failures++;
      $display("took %0d cycles, expected %0d", cyc, L * (3 * L + 34) + 1);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    run(SL, 0, 200);
    run(SL, 1, 200);
    run(5, 0, 2000);
    run(SL, 1, 30);
    run(1, 0, 10);
    checks++;
    if (n_masked == 0) failures++;
    $display("largest deviation from the real-valued softmax: %0d/256", worst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
