// famous_top_harness: end-to-end test bench body for the accelerator.
//
// Plays the host: programs the runtime parameters, answers every tile
// request by writing the tile of X, W_Q, W_K, W_V (and on the first tile the
// biases) of every active head through the load port, waits for done and
// reads the whole output back. The expected output is computed here from
// the definition of multi-head attention in the accelerator's fixed-point
// formats (famous_ref_pkg): Q, K, V = X*W + B requantised to 8 bits,
// S = Q K^T over the first dk columns, the row softmax, Z = P V >>> 8.
//
// With FULL = 1 the accelerator is instantiated with its default sizes and
// two complete runs at the built sizes are made, without and with the
// causal mask; otherwise the sizes are the
// parameters given here and several runs exercise the runtime-programmable
// settings. With FULL = 1 and WORKLOADS = 1 the default-size accelerator
// runs the other evaluated topologies: 4 and 2 active heads, embedding
// dimensions 512 and 256, sequence lengths 32 and 16. It counts how often each mechanism occurred: multi-tile
// accumulation, causal mask, fewer heads than built, reduced d_k and
// sequence length, 8-bit saturation in the requantisation. One that never
// occurred counts as a failure. The compute time (cycles busy and not
// waiting for a tile) is checked against the sum of the phase latencies.
module famous_top_harness
  import famous_pkg::*;
  import famous_ref_pkg::*;
#(
  parameter bit FULL    = 0,
  parameter bit WORKLOADS = 0,
  parameter int H       = 2,
  parameter int D_MODEL = 64,
  parameter int TS      = 16,
  parameter int SL      = 8
) ();
  localparam int DK = D_MODEL / H;

  logic clk = 0, rst = 1, start = 0, tile_loaded = 0;
  cfg_t cfg_in = '0;
  logic busy, done, tile_req;
  logic [15:0] tile_idx;
  logic ld_we = 0;
  logic [$clog2(H)-1:0] ld_head = '0, rd_head = '0;
  ld_sel_e ld_sel = LD_X;
  logic [15:0] ld_addr = '0;
  data_t ld_data [TS];
  logic [$clog2(SL)-1:0] rd_row = '0;
  data_t rd_data [DK];

  if (FULL) begin : g_full
    famous_top dut (.*);
  end else begin : g_red
    famous_top #(.H(H), .D_MODEL(D_MODEL), .TS(TS), .SL(SL)) dut (.*);
  end

  always #5 clk = ~clk;

  // model data
  data_t X [SL][D_MODEL];
  data_t W [3][H][DK][D_MODEL];
  data_t B [3][H][DK];
  int    Zref [H][SL][DK];

  int checks = 0, failures = 0;
  int n_multitile = 0, n_mask = 0, n_fewer_heads = 0, n_small_dk = 0, n_short_seq = 0,
      n_saturate = 0;
  longint compute_cycles;
  bit counting = 0;

  always @(posedge clk) if (counting && busy && !tile_req) compute_cycles++;

  initial begin
    repeat (WORKLOADS ? 1500000 : FULL ? 400000 : 200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic make_data(int L, int D, int heads, int dkv);
    for (int s = 0; s < SL; s++)
      for (int i = 0; i < D_MODEL; i++) X[s][i] = data_t'($urandom);
    for (int k = 0; k < 3; k++)
      for (int h = 0; h < H; h++)
        for (int j = 0; j < DK; j++) begin
          B[k][h][j] = data_t'($urandom_range(0, 40)) - 8'sd20;
          for (int i = 0; i < D_MODEL; i++) W[k][h][j][i] = data_t'($urandom);
        end
  endtask

  task automatic reference(int L, int D, int heads, int dkv, bit mask, int sh, int scale);
    int q8 [3][SL][DK];
    for (int h = 0; h < heads; h++) begin
      for (int k = 0; k < 3; k++)
        for (int s = 0; s < L; s++)
          for (int j = 0; j < dkv; j++) begin
            longint a = longint'(B[k][h][j]) * (longint'(1) << sh);
            longint r;
            for (int i = 0; i < D; i++) a += longint'(X[s][i]) * longint'(W[k][h][j][i]);
            r = a >>> sh;
            if (r > 127 || r < -128) n_saturate++;
            q8[k][s][j] = rq(a, sh);
          end
      for (int s = 0; s < L; s++) begin
        longint srow [];
        int p [];
        srow = new[L];
        for (int t = 0; t < L; t++) begin
          srow[t] = 0;
          for (int j = 0; j < dkv; j++) srow[t] += longint'(q8[0][s][j]) * longint'(q8[1][t][j]);
        end
        softmax_row(srow, L, s, mask, scale, p);
        for (int j = 0; j < DK; j++) begin
          longint z = 0;
          if (j < dkv) for (int t = 0; t < L; t++) z += longint'(p[t]) * longint'(q8[2][t][j]);
          Zref[h][s][j] = (j < dkv) ? rq(z, 8) : 0;
        end
      end
    end
  endtask

  task automatic load_tile(int tt, int L, int heads, int dkv);
    for (int h = 0; h < heads; h++) begin
      for (int s = 0; s < L; s++) begin
        @(negedge clk);
        ld_we = 1; ld_head = ($clog2(H))'(h); ld_sel = LD_X; ld_addr = 16'(s);
        for (int i = 0; i < TS; i++) ld_data[i] = X[s][tt * TS + i];
      end
      for (int k = 0; k < 3; k++)
        for (int j = 0; j < dkv; j++) begin
          @(negedge clk);
          ld_we = 1; ld_head = ($clog2(H))'(h); ld_sel = ld_sel_e'(LD_WQ + k); ld_addr = 16'(j);
          for (int i = 0; i < TS; i++) ld_data[i] = W[k][h][j][tt * TS + i];
        end
      if (tt == 0)
        for (int k = 0; k < 3; k++)
          for (int c = 0; c * TS < dkv; c++) begin
            @(negedge clk);
            ld_we = 1; ld_head = ($clog2(H))'(h); ld_sel = ld_sel_e'(LD_BQ + k); ld_addr = 16'(c);
            for (int i = 0; i < TS; i++) ld_data[i] = (c * TS + i < DK) ? B[k][h][c * TS + i] : '0;
          end
    end
    @(negedge clk); ld_we = 0;
    tile_loaded = 1;
    @(negedge clk); tile_loaded = 0;
  endtask

  task automatic run(int L, int tiles, int heads, bit mask);
    int D = tiles * TS;
    int dkv = D / heads;
    int sh, scale, cyc = 0, bad = 0;
    longint expect_cycles;
    real sd;
    if (dkv > DK) dkv = DK;  // more heads than units: one pass of the first units
    // fixed-point settings a host would derive from the model sizes
    sd = 74.0 * 74.0 * $sqrt(real'(D));
    sh = 0;
    while (sd / real'(longint'(1) << sh) > 60.0) sh++;
    scale = int'(65536.0 * 24.0 / (60.0 * 60.0 * $sqrt(real'(dkv))));
    make_data(L, D, heads, dkv);
    reference(L, D, heads, dkv, mask, sh, scale);
    if (tiles > 1) n_multitile++;
    if (mask) n_mask++;
    if (heads < H) n_fewer_heads++;
    if (dkv < DK) n_small_dk++;
    if (L < SL) n_short_seq++;
    cfg_in = '0;
    cfg_in.n_heads = 16'(heads); cfg_in.n_tiles = 16'(tiles); cfg_in.dk = 16'(dkv);
    cfg_in.seq_len = 16'(L); cfg_in.mask_en = mask; cfg_in.qkv_shift = 5'(sh);
    cfg_in.sm_scale = 16'(scale);
    compute_cycles = 0; counting = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done && cyc < 1000000) begin
      if (tile_req) begin
        load_tile(int'(tile_idx), L, heads, dkv);
        cyc++;
      end else begin
        @(negedge clk); cyc++;
      end
    end
    counting = 0;
    // tile passes, QK, softmax + SV, controller hand-overs
    expect_cycles = longint'(tiles) * (L * dkv + 7) + (L * L + 5) + (L * (3 * L + 34) + 5);
    checks++;
    if (compute_cycles != expect_cycles) begin
      failures++;
      $display("compute cycles %0d, expected %0d", compute_cycles, expect_cycles);
    end
    $display("run L=%0d d_model=%0d heads=%0d dk=%0d mask=%0d: %0d compute cycles",
             L, D, heads, dkv, mask, compute_cycles);
    for (int h = 0; h < heads; h++)
      for (int s = 0; s < L; s++) begin
        @(negedge clk);
        rd_row = ($clog2(SL))'(s); rd_head = ($clog2(H))'(h);
        @(negedge clk);
        for (int j = 0; j < DK; j++) begin
          checks++;
          if (int'(rd_data[j]) != Zref[h][s][j]) begin
            failures++; bad++;
            if (bad < 5) $display("Z[h%0d][%0d][%0d] = %0d, expected %0d", h, s, j, rd_data[j], Zref[h][s][j]);
          end
        end
      end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    if (WORKLOADS) begin
      // the evaluated topologies other than the built one, at the built sizes:
      // fewer active heads (the model's heads then take several passes),
      // smaller embedding dimensions, shorter sequences
      run(SL, D_MODEL / TS, H / 2, 0);    // 4 heads
      run(SL, D_MODEL / TS, H / 4, 0);    // 2 heads
      run(SL, 512 / TS, H, 0);            // d_model 512
      run(SL, 256 / TS, H, 0);            // d_model 256
      run(32, D_MODEL / TS, H, 0);        // sequence length 32
      run(16, D_MODEL / TS, H, 1);        // sequence length 16, masked
    end else if (FULL) begin
      run(SL, D_MODEL / TS, H, 0);
      run(SL, D_MODEL / TS, H, 1);
    end else begin
      run(SL, D_MODEL / TS, H, 0);        // built sizes
      run(SL, D_MODEL / TS, H, 1);        // causal mask
      run(SL / 2 + 1, 2, 1, 0);           // fewer heads, short sequence
      run(SL, 1, H, 1);                   // one tile, small d_k
    end
    checks += 6;
    if (n_multitile == 0)   begin failures++; $display("no multi-tile run"); end
    if (n_mask == 0)        begin failures++; $display("no masked run"); end
    if (n_fewer_heads == 0 && (!FULL || WORKLOADS)) begin failures++; $display("no run with fewer heads"); end
    if (n_small_dk == 0 && (!FULL || WORKLOADS))    begin failures++; $display("no run with reduced d_k"); end
    if (n_short_seq == 0 && (!FULL || WORKLOADS))   begin failures++; $display("no run with a short sequence"); end
    if (n_saturate == 0)    begin failures++; $display("no saturation occurred"); end
    $display("mechanisms: multi-tile %0d, mask %0d, fewer heads %0d, reduced d_k %0d, short sequence %0d, saturations %0d",
             n_multitile, n_mask, n_fewer_heads, n_small_dk, n_short_seq, n_saturate);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
