// hbm_model: behavioural model of the external memory behind an 8-bit AXI4
// read port, for simulation only. It takes one INCR burst at a time (ARSIZE
// 0), answers after a short fixed latency and inserts a one-cycle gap in
// RVALID after every GAP-th beat so that the master sees a bursty stream.
// The contents are the byte array `mem`, written by the testbench through
// hierarchical access before a run. Every accepted AR is counted in `n_ar`.
module hbm_model #(
  parameter int unsigned BYTES = 65536,
  parameter int unsigned GAP   = 5
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] araddr,
  input  logic [7:0]  arlen,
  input  logic [2:0]  arsize,
  input  logic [1:0]  arburst,
  input  logic        arvalid,
  output logic        arready,
  output logic [7:0]  rdata,
  output logic [1:0]  rresp,
  output logic        rlast,
  output logic        rvalid,
  input  logic        rready
);
  logic [7:0] mem [BYTES];
  logic [31:0] addr;
  logic [8:0]  left;
  logic [2:0]  lat;
  logic [3:0]  gap;
  logic        busy;
  int n_ar = 0;

  assign arready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 0; rvalid <= 0; rlast <= 0; rdata <= 0; rresp <= 0;
      addr <= 0; left <= 0; lat <= 0; gap <= 0;
    end else begin
      if (arvalid && arready) begin
        if (arsize != 3'd0 || arburst != 2'b01) $error("hbm_model: unsupported burst");
        busy <= 1;
        addr <= araddr;
        left <= 9'(arlen) + 9'd1;
        lat  <= 3'd3;
        n_ar <= n_ar + 1;
      end
      if (rvalid && rready) begin
        rvalid <= 0;
        if (rlast) busy <= 0;
      end
      if (busy && !(rvalid && !rready) && !(rvalid && rlast)) begin
        if (lat != 0) lat <= lat - 1;
        else if (gap == 4'(GAP)) begin
          gap <= 0;
          rvalid <= 0;
        end else if (left != 0) begin
          rvalid <= 1;
          rdata  <= (addr < BYTES) ? mem[addr] : 8'h00;
          rresp  <= (addr < BYTES) ? 2'b00 : 2'b10;
          rlast  <= (left == 9'd1);
          addr   <= addr + 1;
          left   <= left - 1;
          gap    <= gap + 1;
        end
      end
    end
  end
endmodule
