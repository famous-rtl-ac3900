// tb_weight_bram: loads the three weight banks and the three bias vectors
// (in TS-entry chunks) and reads every row back.
module tb_weight_bram;
  import famous_pkg::*;
  localparam int DK = 96, TS = 64;
  logic clk = 0, we = 0;
  ld_sel_e wsel = LD_WQ;
  logic [6:0] waddr = '0, raddr = '0;
  data_t wdata [TS];
  data_t wq_row [TS], wk_row [TS], wv_row [TS];
  data_t bq, bk, bv;
  data_t mw [3][DK][TS];
  data_t mb [3][DK];
  int checks = 0, failures = 0;

  weight_bram dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 3; k++)
      for (int r = 0; r < DK; r++) begin
        @(negedge clk);
        we = 1; wsel = ld_sel_e'(LD_WQ + k); waddr = 7'(r);
        for (int i = 0; i < TS; i++) begin wdata[i] = data_t'($urandom); mw[k][r][i] = wdata[i]; end
      end
    for (int k = 0; k < 3; k++)
      for (int c = 0; c < (DK + TS - 1) / TS; c++) begin
        @(negedge clk);
        we = 1; wsel = ld_sel_e'(LD_BQ + k); waddr = 7'(c);
        for (int i = 0; i < TS; i++) begin
          wdata[i] = data_t'($urandom);
          if (c * TS + i < DK) mb[k][c * TS + i] = wdata[i];
        end
      end
    @(negedge clk); we = 0;
    for (int r = 0; r < DK; r++) begin
      raddr = 7'(r);
      @(posedge clk); #1;
      for (int i = 0; i < TS; i++) begin
        checks += 3;
        if (wq_row[i] !== mw[0][r][i]) failures++;
        if (wk_row[i] !== mw[1][r][i]) failures++;
        if (wv_row[i] !== mw[2][r][i]) failures++;
      end
      checks += 3;
      if (bq !== mb[0][r]) failures++;
      if (bk !== mb[1][r]) failures++;
      if (bv !== mb[2][r]) failures++;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
