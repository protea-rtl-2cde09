// tb_pe_array: self-checking test of the PE array (dot-product unit).
// Random signed vectors, including the extreme values -128 and 127 in every
// lane, are applied with en high and low; the registered sum must equal the
// dot product computed here one cycle later, hold while en is low, and
// `valid` must follow `en` by one cycle.
module tb_pe_array;
  localparam int L = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic en, valid;
  logic signed [7:0] a [L], b [L];
  logic signed [31:0] sum;

  pe_array #(.LANES(L), .AW(8), .BW(8), .SUMW(32)) dut (.clk, .rst_n, .en, .a, .b, .sum, .valid);

  int checks = 0, failures = 0;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e, prev;
    en = 0;
    foreach (a[l]) begin a[l] = 0; b[l] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    prev = 0;
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      en = (n % 4 != 3);
      e = 0;
      foreach (a[l]) begin
        a[l] = (n == 0) ? -8'sd128 : (n == 1) ? 8'sd127 : $signed(8'($urandom));
        b[l] = (n == 0) ? -8'sd128 : (n == 1) ? -8'sd128 : $signed(8'($urandom));
        e += int'(a[l]) * int'(b[l]);
      end
      @(posedge clk);
      #1;
      checks += 2;
      if (valid != en) begin failures++; $display("valid %0b en %0b", valid, en); end
      if (en) begin
        if (sum != e) begin failures++; $display("sum %0d exp %0d", sum, e); end
        prev = e;
      end else if (sum != prev) begin failures++; $display("sum changed while idle"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
