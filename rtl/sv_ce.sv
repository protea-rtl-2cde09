// sv_ce: the S x V computation engine of one attention head (SV_CE).
//
// For every sequence position i and every column j < d_k it forms the dot
// product of row i of the softmax output P with column j of V over the
// sequence, using SLM PEs (the fully unrolled innermost loop of the S x V
// algorithm, II=1 over j). P columns at or beyond the runtime sequence
// length are zero, so unused lanes add nothing. The sum (7 + FRAC fraction
// bits) is shifted back to FRAC fraction bits, saturated to 8 bits and
// written out as one element of the attention score through o_we / o_row /
// o_col / o_data; the top places it at column head*d_k + j of the shared
// attention-score buffer (the head concatenation).
//
// Timing: one (i, j) per cycle after `start`; `done`
// come sl*dk + 2 cycles after the edge that samples `start`.
module sv_ce
  import protea_pkg::*;
#(
  parameter int unsigned SLM = SL_MAX,
  parameter int unsigned DKM = DK_MAX
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [15:0]             sl,
  input  logic [15:0]             dk,
  input  logic                    start,
  output logic                    busy,
  output logic                    done,
  // P buffer (softmax) and V buffer read ports
  output logic [$clog2(SLM)-1:0]  p_idx,
  input  data_t                   p_row [SLM],
  output logic [$clog2(DKM)-1:0]  v_idx,
  input  data_t                   v_col [SLM],
  // attention-score output
  output logic                    o_we,
  output logic [$clog2(SLM)-1:0]  o_row,
  output logic [$clog2(DKM)-1:0]  o_col,
  output data_t                   o_data
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e state;

  logic [$clog2(SLM)-1:0] i_c, i_p;
  logic [$clog2(DKM)-1:0] j_c, j_p;
  logic pe_en, pe_val, last_ij;
  acc_t pe_sum;

  assign p_idx   = i_c;
  assign v_idx   = j_c;
  assign pe_en   = (state == S_RUN);
  assign busy    = (state != S_IDLE);
  assign last_ij = (32'(i_c) == 32'(sl) - 1) && (32'(j_c) == 32'(dk) - 1);

  pe_array #(.LANES(SLM), .AW(DW), .BW(DW), .SUMW(ACCW)) u_pe (
    .clk, .rst_n, .en(pe_en), .a(p_row), .b(v_col), .sum(pe_sum), .valid(pe_val));

  assign o_we   = pe_val;
  assign o_row  = i_p;
  assign o_col  = j_p;
  assign o_data = sat8(48'(pe_sum) >>> PFRAC);

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
          end else if (32'(j_c) == 32'(dk) - 1) begin
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

  assert property (@(posedge clk) disable iff (!rst_n) start |-> state == S_IDLE);
endmodule
