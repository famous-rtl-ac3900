// famous_pkg: types, sizes and arithmetic helpers shared by the multi-head
// attention accelerator.
//
// The default sizes are the configuration the accelerator is built for:
// 8 parallel attention heads, embedding dimension 768, tile size 64 and
// sequence length 64, with 8-bit fixed-point data. The per-head width
// d_k = d_model / h = 96 follows from them. Accumulator width, the load-port
// encoding and the runtime configuration record are this design's choices.
package famous_pkg;

  localparam int DATA_W      = 8;    // 8-bit fixed-point operands
  localparam int ACC_W       = 32;   // accumulator / intermediate buffer width
  localparam int H_DEF       = 8;    // parallel attention heads
  localparam int D_MODEL_DEF = 768;  // embedding dimension
  localparam int TS_DEF      = 64;   // tile size
  localparam int SL_DEF      = 64;   // sequence length
  localparam int DK_DEF      = D_MODEL_DEF / H_DEF;  // 96

  // softmax fixed point: probabilities are unsigned 8-bit, 256 == 1.0
  localparam int P_W         = 8;
  localparam int EXP_W       = 16;   // exp() values, 32768 == 1.0

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic        [P_W-1:0]    prob_t;

  // What a load-port write goes to.
  typedef enum logic [2:0] {
    LD_X  = 3'd0,  // one row of the input tile (TS values)
    LD_WQ = 3'd1,  // one row j of the W_Q tile (TS values)
    LD_WK = 3'd2,
    LD_WV = 3'd3,
    LD_BQ = 3'd4,  // bias chunk: entries addr*TS .. addr*TS+TS-1
    LD_BK = 3'd5,
    LD_BV = 3'd6
  } ld_sel_e;

  // Runtime-programmable parameters, written by the host before start.
  typedef struct packed {
    logic [15:0] n_heads;    // head units to run, 1..H
    logic [15:0] n_tiles;    // d_model / TS, 1..D_MODEL/TS
    logic [15:0] dk;         // columns per head, 1..DK
    logic [15:0] seq_len;    // rows (tokens), 1..SL
    logic        mask_en;    // causal mask in the softmax
    logic [4:0]  qkv_shift;  // Q/K/V accumulator -> 8-bit: arithmetic right shift
    logic [15:0] sm_scale;   // y = (S * sm_scale) >>> 16, y in units of 1/16
  } cfg_t;

  // Saturate an accumulator to a signed 8-bit value after an arithmetic shift.
  function automatic data_t requant(input acc_t v, input logic [4:0] sh);
    acc_t s;
    s = v >>> sh;
    if (s > acc_t'(127))       return data_t'(127);
    else if (s < acc_t'(-128)) return data_t'(-128);
    else                       return data_t'(s);
  endfunction

endpackage
