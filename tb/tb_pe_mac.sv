// tb_pe_mac: checks the multiply-accumulate PE against a software sum.
// Random signed operands, random enable and clear patterns; the registered
// accumulator must equal the model one cycle after each input.
module tb_pe_mac;
  logic clk = 0, rst = 1, en = 0, clr = 0;
  logic signed [8:0]  a = '0;
  logic signed [7:0]  b = '0;
  logic signed [31:0] acc;
  longint model = 0;
  int checks = 0, failures = 0;

  pe_mac #(.AW(9), .BW(8), .ACC_W(32)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int i = 0; i < 2000; i++) begin
      a   <= 9'($urandom_range(0, 511));
      b   <= 8'($urandom);
      en  <= ($urandom_range(0, 9) != 0);
      clr <= ($urandom_range(0, 15) == 0) || i == 0;
      @(posedge clk);
      if (en) model = clr ? longint'(a) * longint'(b) : model + longint'(a) * longint'(b);
      #1;
      checks++;
      if (acc !== 32'(model)) begin
        failures++;
        if (failures < 5) $display("pe_mac mismatch at %0d: %0d vs %0d", i, acc, model);
      end
    end
    // a long sum of extreme products
    @(negedge clk);
    a = -9'sd256; b = -8'sd128; en = 1; clr = 1;
    @(negedge clk);
    clr = 0;
    repeat (99) @(negedge clk);
    checks++;
    if (acc !== 32'sd100 * 32'sd32768) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
