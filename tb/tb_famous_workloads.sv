// tb_famous_workloads: the accelerator at its built sizes (8 heads, d_model
// 768, tile 64, sequence length 64) running the other topologies it is
// meant to serve without re-synthesis: 4 and 2 active heads, embedding
// dimensions 512 and 256, sequence lengths 32 and 16 (the last one with the
// causal mask). Every output is checked; see famous_top_harness.
module tb_famous_workloads;
  famous_top_harness #(.FULL(1), .WORKLOADS(1), .H(8), .D_MODEL(768), .TS(64), .SL(64)) u_run ();

  // backstop in case the harness hangs before its own watchdog
  initial begin
    repeat (2000000) @(posedge u_run.clk);
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end
endmodule
