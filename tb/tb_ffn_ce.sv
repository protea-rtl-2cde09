// tb_ffn_ce: self-checking test of the tiled FFN engine at a reduced size,
// with ReLU on. X (sl x 8) and W (6 x 8, [out][in]) are random; the engine
// sees 2 input tiles x 3 output tiles, input tiles innermost as in the
// tiling scheme. The streamed result is compared with relu(sat8((X W^T) >>>
// FRAC)) computed here. Per-tile cycle count (sl*OUT_TILE + 2) and the
// number of streamed elements are checked.
module tb_ffn_ce;
  import protea_pkg::*;
  localparam int SLM = 4, IT = 4, OT = 2, OM = 6;
  localparam int SLR = 3, NIN = 8, NOUT = 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic x_we, w_we, start, first, fin, busy, done, o_we;
  logic [$clog2(SLM)-1:0] x_row, o_row;
  logic [$clog2(OT)-1:0]  w_row;
  logic [$clog2(OM)-1:0]  o_col;
  logic [15:0] ot;
  data_t x_data [IT], w_data [IT], o_data;

  ffn_ce #(.SLM(SLM), .IN_TILE(IT), .OUT_TILE(OT), .OUT_MAX(OM), .RELU(1'b1)) dut (
    .clk, .rst_n, .sl(16'(SLR)), .n_out(16'(NOUT)), .x_we, .x_row, .x_data, .w_we, .w_row, .w_data,
    .start, .first, .ot, .fin, .busy, .done, .o_we, .o_row, .o_col, .o_data);

  int x [SLR][NIN], w [NOUT][NIN];
  int got [SLM][OM];
  int nout = 0;
  int checks = 0, failures = 0;

  always @(posedge clk) if (rst_n && o_we) begin
    got[o_row][o_col] <= int'(o_data);
    nout <= nout + 1;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, s;
    {x_we, w_we, start, first, fin} = '0;
    x_row = 0; w_row = 0; ot = 0;
    foreach (x_data[j]) begin x_data[j] = 0; w_data[j] = 0; end
    foreach (x[i, j]) x[i][j] = int'($urandom_range(0, 80)) - 40;
    foreach (w[i, j]) w[i][j] = int'($urandom_range(0, 80)) - 40;
    foreach (got[i, j]) got[i][j] = 9999;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int o = 0; o < NOUT / OT; o++)
      for (int t = 0; t < NIN / IT; t++) begin
        for (int i = 0; i < SLR; i++) begin
          x_we <= 1; x_row <= i[$clog2(SLM)-1:0];
          for (int j = 0; j < IT; j++) x_data[j] <= data_t'(x[i][t*IT+j]);
          @(posedge clk);
        end
        x_we <= 0;
        for (int r = 0; r < OT; r++) begin
          w_we <= 1; w_row <= r[$clog2(OT)-1:0];
          for (int j = 0; j < IT; j++) w_data[j] <= data_t'(w[o*OT+r][t*IT+j]);
          @(posedge clk);
        end
        w_we <= 0;
        start <= 1; first <= (t == 0); ot <= 16'(o);
        @(posedge clk);
        t0 = $time / 10;
        start <= 0;
        do @(posedge clk); while (!done);
        checks++;
        if ($time / 10 - t0 != SLR*OT + 2) begin failures++; $display("cycles %0d", $time / 10 - t0); end
      end
    fin <= 1;
    @(posedge clk);
    fin <= 0;
    do @(posedge clk); while (!done);
    @(posedge clk);
    checks++;
    if (nout != SLR*NOUT) begin failures++; $display("streamed %0d", nout); end
    for (int i = 0; i < SLR; i++)
      for (int o = 0; o < NOUT; o++) begin
        s = 0;
        for (int j = 0; j < NIN; j++) s += x[i][j] * w[o][j];
        s = s >>> FRAC;
        if (s > 127) s = 127;
        if (s < 0) s = 0;
        checks++;
        if (got[i][o] != s) begin failures++; $display("Y[%0d][%0d]=%0d exp %0d", i, o, got[i][o], s); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
