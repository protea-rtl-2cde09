// ffn_ce: a tiled feedforward computation engine (FFN1_CE, FFN2_CE, FFN3_CE
// are three instances with different tile shapes).
//
// It computes Y = X * W^T for X of sl x n_in and W of n_out x n_in (stored
// [out][in]), both cut into tiles along both dimensions (after the FFN
// tiling figure). The engine holds one input tile (SLM x IN_TILE bytes), one
// weight tile (OUT_TILE x IN_TILE bytes) and the output accumulation buffer
// (SLM x OUT_MAX, 32 bits). For each tile pair the controller writes the
// input and weight tiles, then pulses `start` with the output-tile index
// `ot` and `first` (first input tile of that output tile). The engine walks
// i over the sequence and j over the OUT_TILE output columns, one (i, j) per
// cycle (pipelined loop, II=1), and an IN_TILE-lane PE array (the unrolled
// innermost loop) forms the partial dot product, which is added into
// acc[i][ot*OUT_TILE + j] (or replaces it when `first`). So partial sums are
// first accumulated along the input dimension, then the next output tile
// follows. A tile takes sl*OUT_TILE + 2 cycles from the edge that samples
// `start` to `done`.
//
// `fin` streams the result out, row by row, n_out columns per row, one
// element per cycle on o_we / o_row / o_col / o_data: the accumulator is
// requantised to 8 bits and, if RELU is set, negative values become 0.
// The ReLU after the first FFN linear layer follows the background
// description of transformer FFNs; the engines themselves are described
// without an activation. No FFN bias is added (none is described).
module ffn_ce
  import protea_pkg::*;
#(
  parameter int unsigned SLM      = SL_MAX,
  parameter int unsigned IN_TILE  = TS_FFN,
  parameter int unsigned OUT_TILE = TS_FFN,
  parameter int unsigned OUT_MAX  = D_MAX,
  parameter bit          RELU     = 1'b0
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [15:0]                 sl,
  input  logic [15:0]                 n_out,
  // input tile write: one row
  input  logic                        x_we,
  input  logic [$clog2(SLM)-1:0]      x_row,
  input  data_t                       x_data [IN_TILE],
  // weight tile write: one output row of the tile
  input  logic                        w_we,
  input  logic [$clog2(OUT_TILE)-1:0] w_row,
  input  data_t                       w_data [IN_TILE],
  // control
  input  logic                        start,
  input  logic                        first,
  input  logic [15:0]                 ot,
  input  logic                        fin,
  output logic                        busy,
  output logic                        done,
  // result stream
  output logic                        o_we,
  output logic [$clog2(SLM)-1:0]      o_row,
  output logic [$clog2(OUT_MAX)-1:0]  o_col,
  output data_t                       o_data
);
  localparam int unsigned IW = $clog2(SLM);
  localparam int unsigned JW = $clog2(OUT_TILE);
  localparam int unsigned CW = $clog2(OUT_MAX);

  data_t xb  [SLM][IN_TILE];
  data_t wb  [OUT_TILE][IN_TILE];
  acc_t  acc [SLM][OUT_MAX];

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_FIN, S_DRAIN} state_e;
  state_e state;

  logic [IW-1:0] i_c, i_p;
  logic [JW-1:0] j_c;
  logic [CW-1:0] c_c, c_p, base;
  logic          first_r, pe_en, pe_val, last_run, last_fin;
  acc_t          pe_sum;
  data_t         q;

  assign pe_en    = (state == S_RUN);
  assign busy     = (state != S_IDLE);
  assign last_run = (32'(i_c) == 32'(sl) - 1) && (32'(j_c) == OUT_TILE - 1);
  assign last_fin = (32'(i_c) == 32'(sl) - 1) && (32'(c_c) == 32'(n_out) - 1);

  pe_array #(.LANES(IN_TILE), .AW(DW), .BW(DW), .SUMW(ACCW)) u_pe (
    .clk, .rst_n, .en(pe_en), .a(xb[i_c]), .b(wb[j_c]), .sum(pe_sum), .valid(pe_val));

  always_ff @(posedge clk) begin
    if (x_we) xb[x_row] <= x_data;
    if (w_we) wb[w_row] <= w_data;
    if (pe_val) acc[i_p][c_p] <= (first_r ? acc_t'(0) : acc[i_p][c_p]) + pe_sum;
  end

  always_comb begin
    q = requant(acc[i_c][c_c]);
    if (RELU && q < 0) q = '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      i_c <= '0; j_c <= '0; c_c <= '0; i_p <= '0; c_p <= '0; base <= '0;
      first_r <= 1'b0;
      done <= 1'b0;
      o_we <= 1'b0; o_row <= '0; o_col <= '0; o_data <= '0;
    end else begin
      done <= 1'b0;
      o_we <= 1'b0;
      i_p  <= i_c;
      c_p  <= base + CW'(j_c);
      unique case (state)
        S_IDLE: begin
          i_c <= '0; j_c <= '0; c_c <= '0;
          if (start) begin
            state   <= S_RUN;
            first_r <= first;
            base    <= CW'(32'(ot) * OUT_TILE);
          end else if (fin) begin
            state <= S_FIN;
          end
        end
        S_RUN: begin
          if (last_run) begin
            state <= S_DRAIN;
          end else if (32'(j_c) == OUT_TILE - 1) begin
            j_c <= '0;
            i_c <= i_c + 1'b1;
          end else begin
            j_c <= j_c + 1'b1;
          end
        end
        S_FIN: begin
          o_we   <= 1'b1;
          o_row  <= i_c;
          o_col  <= c_c;
          o_data <= q;
          if (last_fin) state <= S_DRAIN;
          else if (32'(c_c) == 32'(n_out) - 1) begin
            c_c <= '0;
            i_c <= i_c + 1'b1;
          end else begin
            c_c <= c_c + 1'b1;
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

  assert property (@(posedge clk) disable iff (!rst_n) (start || fin) |-> state == S_IDLE);
endmodule
