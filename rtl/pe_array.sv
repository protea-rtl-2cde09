// pe_array: a row of LANES processing elements, each one multiply-accumulate
// (one DSP slice on an FPGA), reduced by an adder tree into one dot product.
//
// This is the unrolled inner loop of every computation engine: each cycle
// with en=1 it forms sum_l a[l]*b[l] over all lanes, with signed operands of
// AW and BW bits, and presents it on `sum` one cycle later with `valid`.
// Lanes that an engine does not use at a runtime size are fed zeros by the
// engine. The lane count equals the trip count of the engine's unrolled loop;
// the registered output and the adder-tree structure are this design's choice.
module pe_array #(
  parameter int unsigned LANES = 64,
  parameter int unsigned AW    = 8,
  parameter int unsigned BW    = 8,
  parameter int unsigned SUMW  = 32
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        en,
  input  logic signed [AW-1:0]        a [LANES],
  input  logic signed [BW-1:0]        b [LANES],
  output logic signed [SUMW-1:0]      sum,
  output logic                        valid
);
  logic signed [SUMW-1:0] dot;

  always_comb begin
    dot = '0;
    for (int l = 0; l < LANES; l++)
      dot += SUMW'(a[l]) * SUMW'(b[l]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum   <= '0;
      valid <= 1'b0;
    end else begin
      valid <= en;
      if (en) sum <= dot;
    end
  end
endmodule
