// tb_input_bram: writes random rows into the input tile buffer and reads them
// back, checking the data and the one-cycle read latency.
module tb_input_bram;
  import famous_pkg::*;
  localparam int SL = 64, TS = 64;
  logic clk = 0, we = 0;
  logic [5:0] waddr = '0, raddr = '0;
  data_t wdata [TS];
  data_t rdata [TS];
  data_t model [SL][TS];
  int checks = 0, failures = 0;

  input_bram dut (.*);

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
      we = 1; waddr = 6'(r);
      for (int i = 0; i < TS; i++) begin wdata[i] = data_t'($urandom); model[r][i] = wdata[i]; end
    end
    @(negedge clk); we = 0;
    for (int k = 0; k < 200; k++) begin
      automatic int r = $urandom_range(0, SL - 1);
      raddr = 6'(r);
      @(posedge clk); #1;
      for (int i = 0; i < TS; i++) begin
        checks++;
        if (rdata[i] !== model[r][i]) failures++;
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
