// layer_norm: residual addition and layer normalisation of one row (LN1, LN2).
//
// Its parts follow the LN blocks of the FFN figure: a mean unit, a variance
// unit, a normalisation unit and an element-wise multiply-and-add with the
// learned scale (gamma) and shift (beta) held in the weights-and-bias buffer.
// The residual addition in front of it comes from the description of the
// encoder (a residual connection accompanies every LN); the figure does not
// draw it.
//
// A row of d elements arrives one element per cycle on in_valid / x_data,
// together with the residual element r_data, while in_ready is high. The
// unit then, one element per cycle, computes
//   v_c   = x_c + r_c                             (FRAC fraction bits)
//   mean  = sum(v) / d                            (while the row arrives)
//   var   = sum((v - mean)^2) / d                 (2*FRAC fraction bits)
//   std   = max(1, isqrt(var))                    (16-step digit-by-digit root)
//   y_c   = sat8(((((v_c - mean) << FRAC) / std) * gamma_c >>> FRAC) + beta_c)
// and streams y out on y_valid / y_col / y_data. The integer square root,
// the divider and the clamp of std to one LSB (in place of an epsilon) are
// this design's choices. Per row: d cycles in, d cycles variance, 16 cycles
// root, d cycles out, plus two cycles (mean, root latch): 3d + 18 in all.
module layer_norm
  import protea_pkg::*;
#(
  parameter int unsigned DM = D_MAX
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [15:0]           d,
  // gamma (sel 0) / beta (sel 1) buffer write
  input  logic                  g_we,
  input  logic                  g_sel,
  input  logic [$clog2(DM)-1:0] g_idx,
  input  data_t                 g_data,
  // row input
  output logic                  in_ready,
  input  logic                  in_valid,
  input  data_t                 x_data,
  input  data_t                 r_data,
  // row output
  output logic                  y_valid,
  output logic [$clog2(DM)-1:0] y_col,
  output data_t                 y_data
);
  localparam int unsigned CW = $clog2(DM);

  data_t gamma [DM];
  data_t beta  [DM];
  logic signed [9:0] vrow [DM];

  typedef enum logic [2:0] {S_IN, S_MEAN, S_VAR, S_ROOT, S_STD, S_OUT} state_e;
  state_e state;

  logic [CW-1:0]       c;
  logic signed [31:0]  sum, mean;
  logic [39:0]         sq;
  logic [31:0]         op, res, one;
  logic [4:0]          it;
  logic [15:0]         stdv;
  logic signed [31:0]  dv, nrm, scaled;

  assign in_ready = (state == S_IN);

  always_ff @(posedge clk) begin
    if (g_we) begin
      if (g_sel) beta[g_idx]  <= g_data;
      else       gamma[g_idx] <= g_data;
    end
    if (state == S_IN && in_valid) vrow[c] <= 10'(x_data) + 10'(r_data);
  end

  always_comb begin
    dv     = 32'(vrow[c]) - mean;
    nrm    = (dv <<< FRAC) / signed'({16'd0, stdv});
    scaled = (nrm * 32'(gamma[c])) >>> FRAC;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IN;
      c <= '0; sum <= '0; mean <= '0; sq <= '0;
      op <= '0; res <= '0; one <= '0; it <= '0; stdv <= 16'd1;
      y_valid <= 1'b0; y_col <= '0; y_data <= '0;
    end else begin
      y_valid <= 1'b0;
      unique case (state)
        S_IN: if (in_valid) begin
          sum <= sum + 32'(10'(x_data) + 10'(r_data));
          if (32'(c) == 32'(d) - 1) begin
            c     <= '0;
            state <= S_MEAN;
          end else c <= c + 1'b1;
        end
        S_MEAN: begin
          mean  <= sum / signed'({16'd0, d});
          sq    <= '0;
          state <= S_VAR;
        end
        S_VAR: begin
          sq <= sq + 40'(dv * dv);
          if (32'(c) == 32'(d) - 1) begin
            c     <= '0;
            state <= S_ROOT;
            it    <= '0;
            one   <= 32'h4000_0000;
            res   <= '0;
            op    <= 32'((sq + 40'(dv * dv)) / 40'(d));
          end else c <= c + 1'b1;
        end
        S_ROOT: begin
          if (op >= res + one) begin
            op  <= op - (res + one);
            res <= (res >> 1) + one;
          end else begin
            res <= res >> 1;
          end
          one <= one >> 2;
          it  <= it + 1'b1;
          if (it == 5'd15) state <= S_STD;
        end
        S_STD: begin
          stdv  <= (res == 32'd0) ? 16'd1 : 16'(res);
          state <= S_OUT;
        end
        S_OUT: begin
          y_valid <= 1'b1;
          y_col   <= c;
          y_data  <= sat8(48'(scaled) + 48'(beta[c]));
          if (32'(c) == 32'(d) - 1) begin
            c     <= '0;
            sum   <= '0;
            state <= S_IN;
          end else c <= c + 1'b1;
        end
        default: state <= S_IN;
      endcase
    end
  end
endmodule
