// qk_ce: the Q x K^T computation engine of one attention head (QK_CE).
//
// For every pair (i, j) of sequence positions it forms the dot product of
// row i of Q with row j of K over d_k, using one PE per element of d_k (the
// fully unrolled inner loop of the Q x K^T algorithm, II=1 over j). Lanes at
// or beyond the runtime d_k are fed zeros. Each dot product is divided by
// the runtime embedding dimension and stored in the QK buffer as a 16-bit
// score with 2*FRAC fraction bits, saturated.
//
// Scaling: the Q x K^T algorithm divides by the embedding dimension, whereas
// the attention equation divides by sqrt(d_k). This RTL follows the
// algorithm (what the engine is described to do); the divider is a plain
// combinational signed division, an implementation choice.
//
// Timing: after `start`, one (i, j) per cycle; `done` is high sl*sl + 2
// cycles after the edge that samples `start`. The softmax unit reads the
// buffer one row at a time through s_idx / s_row.
module qk_ce
  import protea_pkg::*;
#(
  parameter int unsigned SLM = SL_MAX,
  parameter int unsigned DKM = DK_MAX
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [15:0]             sl,
  input  logic [15:0]             dk,
  input  logic [15:0]             d_model,
  input  logic                    start,
  output logic                    busy,
  output logic                    done,
  // Q and K buffer read ports (in the Q/K/V engine)
  output logic [$clog2(SLM)-1:0]  q_idx,
  input  data_t                   q_row [DKM],
  output logic [$clog2(SLM)-1:0]  k_idx,
  input  data_t                   k_row [DKM],
  // QK buffer read port
  input  logic [$clog2(SLM)-1:0]  s_idx,
  output score_t                  s_row [SLM]
);
  localparam int unsigned IW = $clog2(SLM);

  score_t sbuf [SLM][SLM];

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e state;

  logic [IW-1:0] i_c, j_c, i_p, j_p;
  logic          pe_en, pe_val, last_ij;
  acc_t          pe_sum;
  data_t         qa [DKM];
  data_t         kb [DKM];
  logic signed [47:0] quot;

  assign q_idx   = i_c;
  assign k_idx   = j_c;
  assign pe_en   = (state == S_RUN);
  assign busy    = (state != S_IDLE);
  assign last_ij = (32'(i_c) == 32'(sl) - 1) && (32'(j_c) == 32'(sl) - 1);

  always_comb begin
    for (int k = 0; k < DKM; k++) begin
      qa[k] = (32'(k) < 32'(dk)) ? q_row[k] : data_t'(0);
      kb[k] = (32'(k) < 32'(dk)) ? k_row[k] : data_t'(0);
    end
  end

  pe_array #(.LANES(DKM), .AW(DW), .BW(DW), .SUMW(ACCW)) u_pe (
    .clk, .rst_n, .en(pe_en), .a(qa), .b(kb), .sum(pe_sum), .valid(pe_val));

  assign quot = (d_model == 16'd0) ? 48'(pe_sum) : 48'(pe_sum) / 48'(signed'({1'b0, d_model}));

  always_ff @(posedge clk) begin
    if (pe_val)
      sbuf[i_p][j_p] <= (quot > 48'sd32767) ? score_t'(16'sd32767) :
                        (quot < -48'sd32768) ? score_t'(-16'sd32768) : score_t'(quot[15:0]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      i_c <= '0; j_c <= '0; i_p <= '0; j_p <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      i_p  <= i_c;
      j_p  <= j_c;
      unique case (state)
        S_IDLE: begin
          i_c <= '0;
          j_c <= '0;
          if (start) state <= S_RUN;
        end
        S_RUN: begin
          if (last_ij) begin
            state <= S_DRAIN;
            i_c <= '0;
            j_c <= '0;
          end else if (32'(j_c) == 32'(sl) - 1) begin
            j_c <= '0;
            i_c <= i_c + 1'b1;
          end else begin
            j_c <= j_c + 1'b1;
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

  assign s_row = sbuf[s_idx];

  assert property (@(posedge clk) disable iff (!rst_n) start |-> state == S_IDLE);
endmodule
