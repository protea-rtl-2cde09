// tb_qkv_ce: self-checking test of one head's Q/K/V engine at a reduced size.
// Random X, weights and biases are loaded tile by tile (two tiles), the
// engine accumulates and finalises, and Q, K and V are compared with a
// reference computed here in plain integer arithmetic. The cycle count of a
// tile (sl*dk + 2) is checked too.
module tb_qkv_ce;
  import protea_pkg::*;
  localparam int SLM = 4, DKM = 4, TS = 4, NT = 2;
  localparam int SLR = 3, DKR = 3;  // runtime sizes below the maxima

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic x_we, w_we, b_we, start, first, fin, busy, done;
  logic [1:0] w_sel, b_sel;
  logic [$clog2(SLM)-1:0] x_row, q_idx, k_idx;
  logic [$clog2(DKM)-1:0] w_row, b_idx, v_idx;
  data_t x_data [TS], w_data [TS], b_data;
  data_t q_row [DKM], k_row [DKM], v_col [SLM];

  qkv_ce #(.SLM(SLM), .DKM(DKM), .TS(TS)) dut (
    .clk, .rst_n, .sl(16'(SLR)), .dk(16'(DKR)), .x_we, .x_row, .x_data, .w_we, .w_sel, .w_row, .w_data,
    .b_we, .b_sel, .b_idx, .b_data, .start, .first, .fin, .busy, .done,
    .q_idx, .q_row, .k_idx, .k_row, .v_idx, .v_col);

  int checks = 0, failures = 0;
  int x [SLR][NT*TS];
  int w [3][DKR][NT*TS];
  int b [3][DKR];

  function automatic int ref_out(int m, int i, int k);
    int s = 0;
    for (int j = 0; j < NT*TS; j++) s += x[i][j] * w[m][k][j];
    s += b[m][k] * (1 << FRAC);
    s = s >>> FRAC;
    if (s > 127) s = 127;
    if (s < -128) s = -128;
    return s;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, cyc;
    {x_we, w_we, b_we, start, first, fin} = '0;
    w_sel = 0; b_sel = 0; x_row = 0; w_row = 0; b_idx = 0; b_data = 0;
    q_idx = 0; k_idx = 0; v_idx = 0;
    foreach (x_data[j]) begin x_data[j] = 0; w_data[j] = 0; end
    foreach (x[i, j]) x[i][j] = int'($urandom_range(0, 60)) - 30;
    foreach (w[m, k, j]) w[m][k][j] = int'($urandom_range(0, 60)) - 30;
    foreach (b[m, k]) b[m][k] = int'($urandom_range(0, 40)) - 20;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int t = 0; t < NT; t++) begin
      for (int i = 0; i < SLR; i++) begin
        x_we <= 1; x_row <= i[$clog2(SLM)-1:0];
        for (int j = 0; j < TS; j++) x_data[j] <= data_t'(x[i][t*TS+j]);
        @(posedge clk);
      end
      x_we <= 0;
      for (int m = 0; m < 3; m++)
        for (int k = 0; k < DKR; k++) begin
          w_we <= 1; w_sel <= m[1:0]; w_row <= k[$clog2(DKM)-1:0];
          for (int j = 0; j < TS; j++) w_data[j] <= data_t'(w[m][k][t*TS+j]);
          @(posedge clk);
        end
      w_we <= 0;
      start <= 1; first <= (t == 0);
      @(posedge clk);
      t0 = $time / 10;
      start <= 0;
      do @(posedge clk); while (!done);
      cyc = $time / 10 - t0;
      checks++;
      if (cyc != SLR*DKR + 2) begin failures++; $display("tile cycles %0d", cyc); end
    end
    for (int m = 0; m < 3; m++)
      for (int k = 0; k < DKR; k++) begin
        b_we <= 1; b_sel <= m[1:0]; b_idx <= k[$clog2(DKM)-1:0]; b_data <= data_t'(b[m][k]);
        @(posedge clk);
      end
    b_we <= 0;
    fin <= 1;
    @(posedge clk);
    fin <= 0;
    do @(posedge clk); while (!done);
    @(posedge clk);
    for (int i = 0; i < SLR; i++) begin
      q_idx = i[$clog2(SLM)-1:0]; k_idx = i[$clog2(SLM)-1:0];
      #1;
      for (int k = 0; k < DKR; k++) begin
        checks += 2;
        if (int'(q_row[k]) != ref_out(0, i, k)) begin failures++; $display("Q[%0d][%0d]=%0d exp %0d", i, k, q_row[k], ref_out(0, i, k)); end
        if (int'(k_row[k]) != ref_out(1, i, k)) begin failures++; $display("K[%0d][%0d]=%0d exp %0d", i, k, k_row[k], ref_out(1, i, k)); end
      end
    end
    for (int k = 0; k < DKR; k++) begin
      v_idx = k[$clog2(DKM)-1:0];
      #1;
      for (int i = 0; i < SLR; i++) begin
        checks++;
        if (int'(v_col[i]) != ref_out(2, i, k)) begin failures++; $display("V[%0d][%0d]=%0d exp %0d", i, k, v_col[i], ref_out(2, i, k)); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
