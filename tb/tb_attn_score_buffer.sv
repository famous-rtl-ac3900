// tb_attn_score_buffer: all heads write their rows in the same cycles; every
// (row, head) entry is read back and compared.
module tb_attn_score_buffer;
  import famous_pkg::*;
  localparam int H = 4, SL = 8, DK = 4;
  logic clk = 0;
  logic [H-1:0] we = '0;
  logic [2:0] wrow [H];
  data_t wdata [H][DK];
  logic [2:0] rrow = '0;
  logic [1:0] rhead = '0;
  data_t rdata [DK];
  data_t model [SL][H][DK];
  int checks = 0, failures = 0;

  attn_score_buffer #(.H(H), .SL(SL), .DK(DK)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < SL; r++) begin
      @(negedge clk);
      for (int h = 0; h < H; h++) begin
        we[h] = 1; wrow[h] = 3'(r);
        for (int j = 0; j < DK; j++) begin wdata[h][j] = data_t'($urandom); model[r][h][j] = wdata[h][j]; end
      end
    end
    // a second write to some heads only
    @(negedge clk);
    for (int h = 0; h < H; h++) begin
      we[h] = h[0]; wrow[h] = 3'd5;
      for (int j = 0; j < DK; j++) begin wdata[h][j] = data_t'($urandom); if (h[0]) model[5][h][j] = wdata[h][j]; end
    end
    @(negedge clk); we = '0;
    for (int r = 0; r < SL; r++)
      for (int h = 0; h < H; h++) begin
        rrow = 3'(r); rhead = 2'(h);
        @(posedge clk); #1;
        for (int j = 0; j < DK; j++) begin checks++; if (rdata[j] !== model[r][h][j]) failures++; end
        @(negedge clk);
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
