// tb_softmax_unit: self-checking test of the softmax unit at a reduced size.
// Rows of random scores (8 fraction bits) are served from an array; each
// output probability is compared with a real-valued softmax computed here,
// scaled by 128 and clipped to 127, within +-3 LSB. Columns beyond the
// runtime sequence length must read 0, and every row must sum to about 128.
module tb_softmax_unit;
  import protea_pkg::*;
  localparam int SLM = 8, SLR = 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done;
  logic [$clog2(SLM)-1:0] s_idx, p_idx;
  score_t s_row [SLM];
  data_t  p_row [SLM];
  score_t s [SLM][SLM];

  softmax_unit #(.SLM(SLM)) dut (
    .clk, .rst_n, .sl(16'(SLR)), .start, .busy, .done, .s_idx, .s_row, .p_idx, .p_row);

  assign s_row = s[s_idx];

  int checks = 0, failures = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real den, ref_p;
    int e, tot;
    start = 0; p_idx = 0;
    foreach (s[i, j]) s[i][j] = score_t'(int'($urandom_range(0, 1600)) - 800);
    s[1][2] = score_t'(3000);   // one dominant score
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    start <= 1;
    @(posedge clk);
    start <= 0;
    do @(posedge clk); while (!done);
    for (int i = 0; i < SLR; i++) begin
      p_idx = i[$clog2(SLM)-1:0];
      #1;
      den = 0.0;
      for (int j = 0; j < SLR; j++) den += $exp(real'(s[i][j]) / 256.0);
      tot = 0;
      for (int j = 0; j < SLM; j++) begin
        if (j < SLR) begin
          ref_p = 128.0 * $exp(real'(s[i][j]) / 256.0) / den;
          e = (ref_p > 127.0) ? 127 : int'(ref_p);
          checks++;
          if (int'(p_row[j]) > e + 3 || int'(p_row[j]) < e - 3) begin
            failures++; $display("P[%0d][%0d]=%0d exp %0d", i, j, p_row[j], e);
          end
          tot += int'(p_row[j]);
        end else begin
          checks++;
          if (p_row[j] != 0) begin failures++; $display("P[%0d][%0d]=%0d exp 0", i, j, p_row[j]); end
        end
      end
      checks++;
      if (tot < 120 || tot > 130) begin failures++; $display("row %0d sums to %0d", i, tot); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
