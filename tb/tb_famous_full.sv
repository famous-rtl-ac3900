// tb_famous_full: one complete run of the accelerator at its built sizes
// (8 heads, embedding dimension 768 in 12 tiles of 64, d_k 96, sequence
// length 64), checked end to end; see famous_top_harness.
module tb_famous_full;
  famous_top_harness #(.FULL(1), .H(8), .D_MODEL(768), .TS(64), .SL(64)) u_run ();
endmodule
