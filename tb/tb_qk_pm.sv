// tb_qk_pm: the Q and K buffers are modelled here as registered row memories
// filled with random accumulator values; the QK module must write
// S[s][t] = sum_{j<dk} rq(Q[s][j]) * rq(K[t][j]) for every s, t < seq_len,
// at address s*SL + t, in seq_len^2 + 4 cycles. Runs at the full sizes and
// with reduced runtime seq_len and dk (the unused columns then hold large
// values that must be ignored).
module tb_qk_pm;
  import famous_pkg::*;
  import famous_ref_pkg::*;
  localparam int SL = 8, DK = 8;
  logic clk = 0, rst = 1, start = 0, done;
  logic [15:0] seq_len = 16'(SL), dk = 16'(DK);
  logic [4:0] qkv_shift = 5'd4;
  logic [2:0] q_raddr, k_raddr;
  acc_t q_rdata [DK], k_rdata [DK];
  logic qk_we;
  logic [5:0] qk_waddr;
  acc_t qk_wdata;
  acc_t Q [SL][DK], K [SL][DK];
  longint S [SL*SL];
  bit written [SL*SL];
  int checks = 0, failures = 0, n_wr = 0;

  qk_pm #(.SL(SL), .DK(DK)) dut (.*);

  always #5 clk = ~clk;
  always_ff @(posedge clk) begin
    q_rdata <= Q[q_raddr];
    k_rdata <= K[k_raddr];
  end
  always @(posedge clk) if (!rst && qk_we) begin
    n_wr++;
    written[qk_waddr] = 1;
    checks++;
    if (qk_wdata !== acc_t'(S[qk_waddr])) failures++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int L, int D);
    int cyc = 0;
    seq_len = 16'(L); dk = 16'(D);
    for (int s = 0; s < SL; s++)
      for (int j = 0; j < DK; j++) begin
        Q[s][j] = acc_t'($urandom_range(0, 5000)) - acc_t'(2500);
        K[s][j] = (j >= D) ? acc_t'(100000) : acc_t'($urandom_range(0, 5000)) - acc_t'(2500);
      end
    // one entry far outside the 8-bit range, to exercise saturation
    Q[0][0] = acc_t'(-1000000);
    for (int s = 0; s < SL; s++)
      for (int t = 0; t < SL; t++) begin
        S[s * SL + t] = 0;
        for (int j = 0; j < D; j++)
          S[s * SL + t] += longint'(rq(Q[s][j], qkv_shift)) * longint'(rq(K[t][j], qkv_shift));
        written[s * SL + t] = 0;
      end
    n_wr = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0; cyc = 1;
    while (!done && cyc < 10000) begin @(negedge clk); cyc++; end
    checks += 2;
    if (n_wr != L * L) failures++;
    if (cyc != L * L + 4) begin failures++; $display("took %0d cycles, expected %0d", cyc, L * L + 4); end
    for (int s = 0; s < L; s++)
      for (int t = 0; t < L; t++) begin checks++; if (!written[s * SL + t]) failures++; end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    run(SL, DK);
    run(5, 3);
    run(1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
