// qkv_ce: the Q/K/V computation engine of one attention head (QKV_CE).
//
// It holds the head's input BRAM (SL x TS_MHA bytes: one column tile of X),
// its three weight BRAMs (d_k x TS_MHA bytes each: the matching column tile
// of the head's rows of Wq, Wk, Wv), 32-bit accumulation buffers for Q, K and
// V (SL x d_k), the three bias vectors, and the final 8-bit Q, K and V
// buffers that the QK and SV engines read.
//
// Tiling (after the MHA tiling figure): the weights are cut only along the
// input dimension, into d_model/TS_MHA tiles. For each tile the controller
// writes the input and weight BRAMs, then pulses `start` (with `first` on the
// first tile). The engine walks i over the sequence and k over d_k, one (i,k)
// per cycle (the pipelined loop of the Q,K,V algorithm, II=1), and three
// TS_MHA-lane PE arrays form the three dot products over the tile; the sums
// are added into the accumulators (or replace them when `first`). A tile
// takes sl*dk + 2 cycles from the edge that samples `start` to the edge on
// which `done` is high. The bias registers may be written at any time,
// also while a tile computes (the original loads the biases during the
// computation, and the top does so in the last tile). After the last tile, `fin`
// adds the biases (scaled to the accumulator's 2*FRAC fraction bits),
// requantises to 8 bits and fills the Q/K/V buffers, sl*dk + 1 cycles.
//
// Lane count: the text says the innermost loop yields d_model/TS_MHA PEs,
// while the loop body indexes within one tile; this RTL uses TS_MHA lanes per
// matrix, which matches the reported DSP total (see README). The write ports,
// the start/done handshake and the row/column read ports are this design's.
module qkv_ce
  import protea_pkg::*;
#(
  parameter int unsigned SLM = SL_MAX,
  parameter int unsigned DKM = DK_MAX,
  parameter int unsigned TS  = TS_MHA
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [15:0]              sl,
  input  logic [15:0]              dk,
  // input BRAM write: one row of the current tile
  input  logic                     x_we,
  input  logic [$clog2(SLM)-1:0]   x_row,
  input  data_t                    x_data [TS],
  // weight BRAM write: sel 0=Wq 1=Wk 2=Wv, one row (output index k) of the tile
  input  logic                     w_we,
  input  logic [1:0]               w_sel,
  input  logic [$clog2(DKM)-1:0]   w_row,
  input  data_t                    w_data [TS],
  // bias write
  input  logic                     b_we,
  input  logic [1:0]               b_sel,
  input  logic [$clog2(DKM)-1:0]   b_idx,
  input  data_t                    b_data,
  // control
  input  logic                     start,
  input  logic                     first,
  input  logic                     fin,
  output logic                     busy,
  output logic                     done,
  // Q/K/V buffer read ports
  input  logic [$clog2(SLM)-1:0]   q_idx,
  output data_t                    q_row [DKM],
  input  logic [$clog2(SLM)-1:0]   k_idx,
  output data_t                    k_row [DKM],
  input  logic [$clog2(DKM)-1:0]   v_idx,
  output data_t                    v_col [SLM]
);
  localparam int unsigned IW = $clog2(SLM);
  localparam int unsigned KW = $clog2(DKM);

  data_t xb  [SLM][TS];
  data_t wb  [3][DKM][TS];
  data_t bias[3][DKM];
  acc_t  acc [3][SLM][DKM];
  data_t qkv [3][SLM][DKM];

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_FIN, S_DRAIN} state_e;
  state_e state;

  logic [IW-1:0] i_c;
  logic [KW-1:0] k_c;
  logic          first_r;
  logic          last_ik;
  logic          pe_en;
  logic [IW-1:0] i_p;
  logic [KW-1:0] k_p;

  acc_t pe_sum [3];
  logic pe_val [3];

  assign last_ik = (32'(i_c) == 32'(sl) - 1) && (32'(k_c) == 32'(dk) - 1);
  assign pe_en   = (state == S_RUN);
  assign busy    = (state != S_IDLE);

  for (genvar m = 0; m < 3; m++) begin : g_pe
    pe_array #(.LANES(TS), .AW(DW), .BW(DW), .SUMW(ACCW)) u_pe (
      .clk, .rst_n, .en(pe_en), .a(xb[i_c]), .b(wb[m][k_c]),
      .sum(pe_sum[m]), .valid(pe_val[m]));
  end

  // buffer writes from the loader
  always_ff @(posedge clk) begin
    if (x_we) xb[x_row] <= x_data;
    if (w_we && w_sel < 2'd3) wb[w_sel][w_row] <= w_data;
    if (b_we && b_sel < 2'd3) bias[b_sel][b_idx] <= b_data;
  end

  // accumulation and finalisation
  always_ff @(posedge clk) begin
    if (pe_val[0]) begin
      for (int m = 0; m < 3; m++)
        acc[m][i_p][k_p] <= (first_r ? acc_t'(0) : acc[m][i_p][k_p]) + pe_sum[m];
    end
    if (state == S_FIN) begin
      for (int m = 0; m < 3; m++)
        qkv[m][i_c][k_c] <= requant(acc[m][i_c][k_c] + (acc_t'(bias[m][k_c]) <<< FRAC));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      i_c     <= '0;
      k_c     <= '0;
      i_p     <= '0;
      k_p     <= '0;
      first_r <= 1'b0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      i_p  <= i_c;
      k_p  <= k_c;
      unique case (state)
        S_IDLE: begin
          i_c <= '0;
          k_c <= '0;
          if (start) begin
            state   <= S_RUN;
            first_r <= first;
          end else if (fin) begin
            state <= S_FIN;
          end
        end
        S_RUN, S_FIN: begin
          if (last_ik) begin
            i_c <= '0;
            k_c <= '0;
            if (state == S_RUN) state <= S_DRAIN;
            else begin
              state <= S_IDLE;
              done  <= 1'b1;
            end
          end else if (32'(k_c) == 32'(dk) - 1) begin
            k_c <= '0;
            i_c <= i_c + 1'b1;
          end else begin
            k_c <= k_c + 1'b1;
          end
        end
        S_DRAIN: begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    q_row = qkv[0][q_idx];
    k_row = qkv[1][k_idx];
    for (int i = 0; i < SLM; i++) v_col[i] = qkv[2][i][v_idx];
  end

  // A tile may only start when the engine is idle.
  assert property (@(posedge clk) disable iff (!rst_n) (start || fin) |-> state == S_IDLE);
endmodule
