// tb_sv_pm: drives probability streams (rows of random p, with random gaps
// between beats) into the SV module, models the V buffer as a registered
// row memory, and checks each output row Z[s][j] = rq(sum_t p[t]*rq(V[t][j]), 8)
// with columns >= dk zero, the row index, the write timing (two cycles after
// the last p of a row) and the done pulse with the last row.
module tb_sv_pm;
  import famous_pkg::*;
  import famous_ref_pkg::*;
  localparam int SL = 8, DK = 4;
  logic clk = 0, rst = 1;
  logic [15:0] dk = 16'(DK);
  logic [4:0] qkv_shift = 5'd2;
  logic p_valid = 0, p_first = 0, p_last = 0, p_lastrow = 0;
  logic [2:0] p_t = '0, p_row = '0, v_raddr, z_row;
  prob_t p_data = '0;
  acc_t v_rdata [DK];
  logic z_we, done;
  data_t z_data [DK];
  acc_t V [SL][DK];
  int Z [SL][DK];
  int checks = 0, failures = 0, n_rows = 0, n_done = 0, last_cyc = 0, cyc = 0;

  sv_pm #(.SL(SL), .DK(DK)) dut (.*);

  always #5 clk = ~clk;
  always_ff @(posedge clk) v_rdata <= V[v_raddr];
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (!rst) begin
    if (z_we) begin
      checks += DK + 2;
      if (int'(z_row) != n_rows) failures++;
      if (cyc - last_cyc != 3) begin failures++; $display("row written %0d cycles after the last p", cyc - last_cyc); end
      for (int j = 0; j < DK; j++) if (int'(z_data[j]) != Z[n_rows][j]) failures++;
      n_rows++;
    end
    if (done) n_done++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int L, int D);
    int p [SL];
    dk = 16'(D); n_rows = 0; n_done = 0;
    for (int t = 0; t < SL; t++)
      for (int j = 0; j < DK; j++) V[t][j] = acc_t'($urandom_range(0, 1200)) - acc_t'(600);
    for (int s = 0; s < L; s++) begin
      for (int t = 0; t < L; t++) p[t] = (s == 0) ? 255 : $urandom_range(0, 255);
      for (int j = 0; j < DK; j++) begin
        longint acc = 0;
        for (int t = 0; t < L; t++) acc += longint'(p[t]) * longint'(rq(V[t][j], qkv_shift));
        Z[s][j] = (j < D) ? rq(acc, 8) : 0;
      end
      for (int t = 0; t < L; t++) begin
        @(negedge clk);
        p_valid = 1; p_t = 3'(t); p_row = 3'(s); p_data = prob_t'(p[t]);
        p_first = (t == 0); p_last = (t == L - 1); p_lastrow = (s == L - 1);
        if (t == L - 1) last_cyc = cyc;
        if ($urandom_range(0, 3) == 0) begin @(negedge clk); p_valid = 0; end
      end
      @(negedge clk); p_valid = 0;
      repeat (4) @(negedge clk);
    end
    checks += 2;
    if (n_rows != L) failures++;
    if (n_done != 1) failures++;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    run(SL, DK);
    run(3, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
