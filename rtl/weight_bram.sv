// weight_bram: the weight tile buffer of one attention head.
//
// Three banks, W_Q, W_K and W_V, each holding d_k rows by TS columns: row j
// holds the TS weights of output column j that multiply the current input
// tile (the weights are kept transposed so that one row feeds one dot
// product). The tiling runs only along the embedding dimension, so each bank
// is d_k x TS and is refilled d_model / TS times per run. The bias vectors
// B_Q, B_K and B_V (d_k entries each) are kept here too; they are written in
// chunks of TS entries (chunk a covers entries a*TS .. a*TS+TS-1).
//
// The load port writes one row (or bias chunk) per cycle. The read port
// returns row j of all three banks and the three bias entries j, registered
// (one-cycle latency).
module weight_bram
  import famous_pkg::*;
#(
  parameter int DK = DK_DEF,
  parameter int TS = TS_DEF
) (
  input  logic                   clk,
  input  logic                   we,
  input  ld_sel_e                wsel,
  input  logic [$clog2(DK)-1:0]  waddr,
  input  data_t                  wdata [TS],
  input  logic [$clog2(DK)-1:0]  raddr,
  output data_t                  wq_row [TS],
  output data_t                  wk_row [TS],
  output data_t                  wv_row [TS],
  output data_t                  bq, bk, bv
);
  data_t mem_q [DK][TS];
  data_t mem_k [DK][TS];
  data_t mem_v [DK][TS];
  data_t b_q [DK];
  data_t b_k [DK];
  data_t b_v [DK];

  always_ff @(posedge clk) begin
    if (we) begin
      unique case (wsel)
        LD_WQ: mem_q[waddr] <= wdata;
        LD_WK: mem_k[waddr] <= wdata;
        LD_WV: mem_v[waddr] <= wdata;
        LD_BQ, LD_BK, LD_BV: begin
          for (int i = 0; i < TS; i++) begin
            if (int'(waddr) * TS + i < DK) begin
              if (wsel == LD_BQ) b_q[int'(waddr) * TS + i] <= wdata[i];
              if (wsel == LD_BK) b_k[int'(waddr) * TS + i] <= wdata[i];
              if (wsel == LD_BV) b_v[int'(waddr) * TS + i] <= wdata[i];
            end
          end
        end
        default: ;
      endcase
    end
    wq_row <= mem_q[raddr];
    wk_row <= mem_k[raddr];
    wv_row <= mem_v[raddr];
    bq     <= b_q[raddr];
    bk     <= b_k[raddr];
    bv     <= b_v[raddr];
  end
endmodule
