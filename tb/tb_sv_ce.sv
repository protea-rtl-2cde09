// tb_sv_ce: self-checking test of the S x V engine at a reduced size.
// P rows and V columns are served from arrays (P zero beyond the runtime
// sequence length, V random everywhere); every output element is collected
// from the write port and compared with sat8((P_i . V_j) >>> 7) computed
// here. The cycle count sl*dk + 2 and the number of writes are checked.
module tb_sv_ce;
  import protea_pkg::*;
  localparam int SLM = 8, DKM = 6;
  localparam int SLR = 5, DKR = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done, o_we;
  logic [$clog2(SLM)-1:0] p_idx, o_row;
  logic [$clog2(DKM)-1:0] v_idx, o_col;
  data_t p_row [SLM], v_col [SLM], o_data;
  data_t p [SLM][SLM], v [DKM][SLM];
  int got [SLM][DKM];
  int writes = 0;

  sv_ce #(.SLM(SLM), .DKM(DKM)) dut (
    .clk, .rst_n, .sl(16'(SLR)), .dk(16'(DKR)), .start, .busy, .done,
    .p_idx, .p_row, .v_idx, .v_col, .o_we, .o_row, .o_col, .o_data);

  assign p_row = p[p_idx];
  assign v_col = v[v_idx];

  always @(posedge clk) if (rst_n && o_we) begin
    got[o_row][o_col] <= int'(o_data);
    writes <= writes + 1;
  end

  int checks = 0, failures = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, s;
    start = 0;
    foreach (p[i, j]) p[i][j] = (j < SLR) ? data_t'($urandom_range(0, 60)) : data_t'(0);
    foreach (v[j, i]) v[j][i] = data_t'($urandom);
    foreach (got[i, j]) got[i][j] = 9999;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    start <= 1;
    @(posedge clk);
    t0 = $time / 10;
    start <= 0;
    do @(posedge clk); while (!done);
    checks++;
    if ($time / 10 - t0 != SLR*DKR + 2) begin failures++; $display("cycles %0d", $time / 10 - t0); end
    @(posedge clk);
    checks++;
    if (writes != SLR*DKR) begin failures++; $display("writes %0d", writes); end
    for (int i = 0; i < SLR; i++)
      for (int j = 0; j < DKR; j++) begin
        s = 0;
        for (int k = 0; k < SLM; k++) s += int'(p[i][k]) * int'(v[j][k]);
        s = s >>> 7;
        if (s > 127) s = 127;
        if (s < -128) s = -128;
        checks++;
        if (got[i][j] != s) begin failures++; $display("O[%0d][%0d]=%0d exp %0d", i, j, got[i][j], s); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
