// tb_qkv_buffer: three tile passes of partial sums in (row, column) order,
// the first overwriting, the others accumulating; then every row is read
// back and compared with the running sums kept by the testbench.
module tb_qkv_buffer;
  import famous_pkg::*;
  localparam int SL = 8, DK = 4;
  logic clk = 0, rst = 1, acc_valid = 0, acc_first = 0;
  logic [2:0] acc_row = '0, raddr = '0;
  logic [1:0] acc_lane = '0;
  acc_t acc_val = '0;
  acc_t rdata [DK];
  longint model [SL][DK];
  int checks = 0, failures = 0;

  qkv_buffer #(.SL(SL), .DK(DK)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    @(negedge clk); acc_valid = 0;
    repeat (3) @(negedge clk);
    for (int r = 0; r < SL; r++) begin
      raddr = 3'(r);
      @(posedge clk); #1;
      for (int j = 0; j < DK; j++) begin
        checks++;
        if (rdata[j] !== acc_t'(model[r][j])) failures++;
      end
      @(negedge clk);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    for (int run = 0; run < 2; run++) begin
      for (int tile = 0; tile < 3; tile++) begin
        for (int r = 0; r < SL; r++)
          for (int j = 0; j < DK; j++) begin
            @(negedge clk);
            acc_valid = 1; acc_first = (tile == 0);
            acc_row = 3'(r); acc_lane = 2'(j);
            acc_val = acc_t'($urandom_range(0, 200000)) - acc_t'(100000);
            model[r][j] = (tile == 0) ? longint'(acc_val) : model[r][j] + longint'(acc_val);
          end
        // gaps in the stream must not matter
        @(negedge clk); acc_valid = 0;
        repeat ($urandom_range(0, 3)) @(negedge clk);
      end
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
