// tb_famous_ctrl: plays host and heads around the controller. The host
// answers every tile request after a random delay and the heads answer each
// phase start after a random delay; the testbench checks the order of the
// phases, n_tiles QKV passes with first_tile only on the first, the tile
// index sequence, the latched runtime parameters, the head enables and the
// single done pulse, for several runtime configurations.
module tb_famous_ctrl;
  import famous_pkg::*;
  localparam int H = 8;
  logic clk = 0, rst = 1, start = 0;
  cfg_t cfg_in, cfg;
  logic busy, done, tile_req, tile_loaded = 0;
  logic [15:0] tile_idx;
  logic [H-1:0] head_en;
  logic qkv_start, first_tile, qkv_done = 0, qk_start, qk_done = 0, sm_start, sm_done = 0;
  int checks = 0, failures = 0;
  int n_qkv, n_first, n_qk, n_sm, n_done, phase;

  famous_ctrl #(.H(H)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // heads: answer each start after a random delay
  initial forever begin
    @(posedge clk);
    if (qkv_start || qk_start || sm_start) begin
      automatic int which = qkv_start ? 0 : qk_start ? 1 : 2;
      repeat ($urandom_range(1, 20)) @(negedge clk);
      if (which == 0) qkv_done = 1; else if (which == 1) qk_done = 1; else sm_done = 1;
      @(negedge clk); qkv_done = 0; qk_done = 0; sm_done = 0;
    end
  end

  // monitor
  always @(posedge clk) if (!rst) begin
    if (qkv_start) begin
      n_qkv++;
      if (first_tile) n_first++;
      checks += 2;
      if (phase != 0) failures++;
      if (first_tile != (tile_idx == 0)) failures++;
    end
    if (qk_start) begin n_qk++; checks++; if (n_qkv != int'(cfg.n_tiles)) failures++; phase = 1; end
    if (sm_start) begin n_sm++; checks++; if (phase != 1) failures++; phase = 2; end
    if (done) n_done++;
  end

  task automatic run(int heads, int tiles, int dkv, int sl);
    int expect_tile = 0, cyc = 0;
    cfg_in = '0;
    cfg_in.n_heads = 16'(heads); cfg_in.n_tiles = 16'(tiles); cfg_in.dk = 16'(dkv);
    cfg_in.seq_len = 16'(sl); cfg_in.qkv_shift = 5'd3; cfg_in.sm_scale = 16'(1234 + heads);
    n_qkv = 0; n_first = 0; n_qk = 0; n_sm = 0; n_done = 0; phase = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cfg_in = '0;  // must have been latched
    while (!done && cyc < 5000) begin
      if (tile_req) begin
        checks++;
        if (int'(tile_idx) != expect_tile) failures++;
        repeat ($urandom_range(0, 5)) @(negedge clk);
        tile_loaded = 1; @(negedge clk); tile_loaded = 0;
        expect_tile++;
      end else begin
        @(negedge clk);
      end
      cyc++;
    end
    @(negedge clk);
    checks += 9 + H;
    if (n_qkv != tiles) failures++;
    if (n_first != 1) failures++;
    if (n_qk != 1 || n_sm != 1) failures++;
    if (n_done != 1) failures++;
    if (expect_tile != tiles) failures++;
    if (busy) failures++;
    if (int'(cfg.n_tiles) != tiles || int'(cfg.dk) != dkv) failures++;
    if (int'(cfg.seq_len) != sl || int'(cfg.n_heads) != heads) failures++;
    if (int'(cfg.sm_scale) != 1234 + heads) failures++;
    for (int h = 0; h < H; h++) if (head_en[h] != (h < heads)) failures++;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    run(8, 12, 96, 64);
    run(4, 12, 96, 64);
    run(2, 8, 64, 32);
    run(1, 1, 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
