// softmax_unit: row-wise softmax of one head's attention scores.
//
// The original engine is only said to compute softmax in LUTs and
// flip-flops; this is the simplest fixed-point form of that function.
// For each row i < sl of the QK buffer it makes three passes over the
// columns, one column per cycle:
//   1. MAX : m = max_j s[i][j]                       (j < sl)
//   2. EXP : e_j = 2^(-(m - s_j) * log2(e)), sum += e_j
//            (log2(e) ~ 369/256; the power of two is a 16-entry table of
//             round(65536 * 2^(-f/16)), f = 0..15, shifted right by the
//             integer part; e_j has 16 fraction bits)
//   3. DIV : p_j = min(127, (e_j << 7) / sum)         (all SLM columns;
//            columns >= sl get 0)
// Probabilities are written to the P buffer as signed 8-bit words with 7
// fraction bits (1.0 saturates to 127/128). Scores have 8 fraction bits.
//
// Timing: a row takes sl + sl + SLM cycles, plus one cycle of row set-up;
// `done` pulses when all sl rows are written. The SV engine reads P rows
// through p_idx / p_row.
module softmax_unit
  import protea_pkg::*;
#(
  parameter int unsigned SLM = SL_MAX
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [15:0]             sl,
  input  logic                    start,
  output logic                    busy,
  output logic                    done,
  // QK buffer read port
  output logic [$clog2(SLM)-1:0]  s_idx,
  input  score_t                  s_row [SLM],
  // P buffer read port
  input  logic [$clog2(SLM)-1:0]  p_idx,
  output data_t                   p_row [SLM]
);
  localparam int unsigned IW = $clog2(SLM);
  localparam int unsigned JW = $clog2(SLM + 1);

  // round(65536 * 2^(-f/16)), f = 0..15 (f = 0 clipped to 65535)
  localparam logic [15:0] POW2_FRAC [16] = '{
    16'd65535, 16'd62757, 16'd60097, 16'd57549, 16'd55109, 16'd52773, 16'd50535, 16'd48393,
    16'd46341, 16'd44376, 16'd42495, 16'd40693, 16'd38968, 16'd37316, 16'd35734, 16'd34219};

  data_t pbuf [SLM][SLM];
  logic [15:0] ebuf [SLM];

  typedef enum logic [2:0] {S_IDLE, S_ROW, S_MAX, S_EXP, S_DIV} state_e;
  state_e state;

  logic [IW-1:0] i_c;
  logic [JW-1:0] j_c;
  score_t        mx;
  logic [23:0]   sum;
  score_t        s_j;
  logic [16:0]   diff;
  logic [25:0]   t;
  logic [15:0]   e_j;
  logic [31:0]   p_q;

  assign s_idx = i_c;
  assign busy  = (state != S_IDLE);
  assign s_j   = s_row[j_c[IW-1:0]];

  always_comb begin
    diff = 17'(signed'({mx[15], mx}) - signed'({s_j[15], s_j}));
    t    = 26'(diff) * 26'd369;          // exponent in base 2, 16 fraction bits
    if (t[25:16] >= 10'd16) e_j = 16'd0;
    else                    e_j = POW2_FRAC[t[15:12]] >> t[19:16];
    p_q  = (sum == 24'd0) ? 32'd0 : ({16'd0, ebuf[j_c[IW-1:0]]} << 7) / {8'd0, sum};
  end

  always_ff @(posedge clk) begin
    if (state == S_EXP) ebuf[j_c[IW-1:0]] <= e_j;
    if (state == S_DIV)
      pbuf[i_c][j_c[IW-1:0]] <= (32'(j_c) >= 32'(sl)) ? data_t'(0) :
                                (p_q > 32'd127) ? data_t'(8'sd127) : data_t'(p_q[7:0]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      i_c <= '0; j_c <= '0; mx <= '0; sum <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          i_c <= '0;
          if (start) state <= S_ROW;
        end
        S_ROW: begin
          j_c   <= '0;
          mx    <= score_t'(-16'sd32768);
          sum   <= '0;
          state <= S_MAX;
        end
        S_MAX: begin
          if (s_j > mx) mx <= s_j;
          if (32'(j_c) == 32'(sl) - 1) begin j_c <= '0; state <= S_EXP; end
          else j_c <= j_c + 1'b1;
        end
        S_EXP: begin
          sum <= sum + 24'(e_j);
          if (32'(j_c) == 32'(sl) - 1) begin j_c <= '0; state <= S_DIV; end
          else j_c <= j_c + 1'b1;
        end
        S_DIV: begin
          if (32'(j_c) == SLM - 1) begin
            if (32'(i_c) == 32'(sl) - 1) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              i_c   <= i_c + 1'b1;
              state <= S_ROW;
            end
          end else j_c <= j_c + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign p_row = pbuf[p_idx];

  assert property (@(posedge clk) disable iff (!rst_n) start |-> state == S_IDLE);
endmodule
