// tb_layer_norm: self-checking test of residual add + layer normalisation at
// a reduced size. Three rows of random x and residual values, random gamma
// and beta; each output is compared with a real-valued reference
// gamma * (v - mean) / sqrt(var) + beta (v = x + r, all in units of 1/16),
// within +-3 LSB. The row latency 3d + 18 and the output count are checked.
module tb_layer_norm;
  import protea_pkg::*;
  localparam int DM = 8, DR = 6, ROWS = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic g_we, g_sel, in_ready, in_valid, y_valid;
  logic [$clog2(DM)-1:0] g_idx, y_col;
  data_t g_data, x_data, r_data, y_data;

  layer_norm #(.DM(DM)) dut (
    .clk, .rst_n, .d(16'(DR)), .g_we, .g_sel, .g_idx, .g_data,
    .in_ready, .in_valid, .x_data, .r_data, .y_valid, .y_col, .y_data);

  int x [ROWS][DR], r [ROWS][DR], gm [DR], bt [DR];
  int got [DR];
  int nout;
  int checks = 0, failures = 0;

  always @(posedge clk) if (rst_n && y_valid) begin
    got[y_col] <= int'(y_data);
    nout <= nout + 1;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, e;
    real mean, var_, v, yr;
    {g_we, g_sel, in_valid} = '0;
    g_idx = 0; g_data = 0; x_data = 0; r_data = 0; nout = 0;
    foreach (x[i, j]) begin x[i][j] = int'($urandom_range(0, 120)) - 60; r[i][j] = int'($urandom_range(0, 120)) - 60; end
    foreach (gm[j]) begin gm[j] = int'($urandom_range(8, 24)); bt[j] = int'($urandom_range(0, 20)) - 10; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int j = 0; j < DR; j++) begin
      g_we <= 1; g_sel <= 0; g_idx <= j[$clog2(DM)-1:0]; g_data <= data_t'(gm[j]);
      @(posedge clk);
      g_sel <= 1; g_data <= data_t'(bt[j]);
      @(posedge clk);
    end
    g_we <= 0;
    for (int row = 0; row < ROWS; row++) begin
      while (!in_ready) @(posedge clk);
      for (int j = 0; j < DR; j++) begin
        in_valid <= 1; x_data <= data_t'(x[row][j]); r_data <= data_t'(r[row][j]);
        @(posedge clk);
      end
      in_valid <= 0;
      t0 = $time / 10;
      nout = 0;
      do @(posedge clk); while (nout < DR);
      checks++;
      // 2d + 18 cycles of work after the last input, +1 output register, +1 counter here
      if ($time / 10 - t0 != 2*DR + 20) begin failures++; $display("row cycles %0d", $time / 10 - t0 + DR); end
      @(posedge clk);
      mean = 0.0;
      for (int j = 0; j < DR; j++) mean += real'(x[row][j] + r[row][j]);
      mean /= DR;
      var_ = 0.0;
      for (int j = 0; j < DR; j++) begin v = real'(x[row][j] + r[row][j]) - mean; var_ += v * v; end
      var_ /= DR;
      for (int j = 0; j < DR; j++) begin
        yr = (real'(x[row][j] + r[row][j]) - mean) / $sqrt(var_) * real'(gm[j]) + real'(bt[j]);
        e = (yr > 127.0) ? 127 : (yr < -128.0) ? -128 : int'(yr);
        checks++;
        if (got[j] > e + 3 || got[j] < e - 3) begin failures++; $display("row %0d Y[%0d]=%0d exp %0d", row, j, got[j], e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
