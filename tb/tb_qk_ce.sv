// tb_qk_ce: self-checking test of the Q x K^T engine at a reduced size.
// Q and K rows are served from arrays of random values; every score is
// compared with (Q_i . K_j) / d_model computed here, saturated to 16 bits.
// Lanes beyond the runtime d_k hold garbage that must be ignored. The cycle
// count sl*sl + 2 is checked.
module tb_qk_ce;
  import protea_pkg::*;
  localparam int SLM = 8, DKM = 6;
  localparam int SLR = 5, DKR = 4, DMOD = 24;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done;
  logic [$clog2(SLM)-1:0] q_idx, k_idx, s_idx;
  data_t q_row [DKM], k_row [DKM];
  score_t s_row [SLM];
  data_t q [SLM][DKM], k [SLM][DKM];

  qk_ce #(.SLM(SLM), .DKM(DKM)) dut (
    .clk, .rst_n, .sl(16'(SLR)), .dk(16'(DKR)), .d_model(16'(DMOD)), .start, .busy, .done,
    .q_idx, .q_row, .k_idx, .k_row, .s_idx, .s_row);

  assign q_row = q[q_idx];
  assign k_row = k[k_idx];

  int checks = 0, failures = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, e, s;
    start = 0; s_idx = 0;
    foreach (q[i, d]) begin q[i][d] = data_t'($urandom); k[i][d] = data_t'($urandom); end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    start <= 1;
    @(posedge clk);
    t0 = $time / 10;
    start <= 0;
    do @(posedge clk); while (!done);
    checks++;
    if ($time / 10 - t0 != SLR*SLR + 2) begin failures++; $display("cycles %0d", $time / 10 - t0); end
    for (int i = 0; i < SLR; i++) begin
      s_idx = i[$clog2(SLM)-1:0];
      #1;
      for (int j = 0; j < SLR; j++) begin
        s = 0;
        for (int d = 0; d < DKR; d++) s += int'(q[i][d]) * int'(k[j][d]);
        e = s / DMOD;
        if (e > 32767) e = 32767;
        if (e < -32768) e = -32768;
        checks++;
        if (int'(s_row[j]) != e) begin failures++; $display("S[%0d][%0d]=%0d exp %0d", i, j, s_row[j], e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
