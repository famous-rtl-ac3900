// tb_qk_buffer: writes random scores at random addresses and reads them back.
module tb_qk_buffer;
  import famous_pkg::*;
  localparam int SL = 16;
  logic clk = 0, we = 0;
  logic [7:0] waddr = '0, raddr = '0;
  acc_t wdata = '0, rdata;
  acc_t model [SL*SL];
  int checks = 0, failures = 0;

  qk_buffer #(.SL(SL)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < SL * SL; a++) begin
      @(negedge clk); we = 1; waddr = 8'(a); wdata = acc_t'($urandom); model[a] = wdata;
    end
    for (int k = 0; k < 400; k++) begin
      @(negedge clk);
      we = ($urandom_range(0, 1) == 1);
      waddr = 8'($urandom); wdata = acc_t'($urandom);
      raddr = 8'($urandom);
      @(posedge clk); #1;
      checks++;
      if (rdata !== model[raddr]) failures++;
      if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
