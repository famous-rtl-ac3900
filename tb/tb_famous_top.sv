// tb_famous_top: end-to-end runs of a reduced accelerator (2 heads,
// embedding dimension 64, tile size 16, sequence length 8) over several
// runtime configurations; see famous_top_harness.
module tb_famous_top;
  famous_top_harness #(.FULL(0), .H(2), .D_MODEL(64), .TS(16), .SL(8)) u_run ();
endmodule
