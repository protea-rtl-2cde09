// axil_regs: the accelerator's control registers behind an AXI4-Lite slave.
//
// A host processor (a soft core in the original system) programs the
// runtime hyperparameters here and starts the accelerator; nothing in the
// datapath has to be re-synthesised to change them. The register map is
// this design's own (the original map is not published); all registers are
// 32 bits, byte strobes are honoured:
//   0x00 CTRL    bit 0: write 1 to start (self-clearing pulse)
//   0x04 STATUS  bit 0: busy, bit 1: done (set when a run ends, cleared by start),
//                bit 2: memory read error seen, bit 3: last start refused because the
//                runtime sizes exceed what was synthesised            (read only)
//   0x08 SL      sequence length
//   0x0C DMODEL  embedding dimension
//   0x10 HEADS   number of attention heads
//   0x14 LAYERS  number of encoder layers
//   0x18 XBASE   byte address of the input matrix X
//   0x1C WBASE   byte address of layer 0's parameters
// A write is taken when AW and W are both valid and no response is pending;
// the response follows on the next cycle. A read answers on the next cycle.
// Unmapped addresses read as 0 and ignore writes; responses are always OKAY.
module axil_regs
  import protea_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave
  input  logic [7:0]  s_awaddr,
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [31:0] s_wdata,
  input  logic [3:0]  s_wstrb,
  input  logic        s_wvalid,
  output logic        s_wready,
  output logic [1:0]  s_bresp,
  output logic        s_bvalid,
  input  logic        s_bready,
  input  logic [7:0]  s_araddr,
  input  logic        s_arvalid,
  output logic        s_arready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  output logic        s_rvalid,
  input  logic        s_rready,
  // to / from the accelerator
  output cfg_t        cfg,
  output logic        start,
  input  logic        busy,
  input  logic        run_done,
  input  logic        mem_err,
  input  logic        cfg_err
);
  logic [31:0] regs [2:7];
  logic        done_flag;
  logic        wr;

  assign wr        = s_awvalid && s_wvalid && !s_bvalid;
  assign s_awready = wr;
  assign s_wready  = wr;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;
  assign s_arready = !s_rvalid;

  assign cfg.sl      = regs[2][15:0];
  assign cfg.d_model = regs[3][15:0];
  assign cfg.heads   = regs[4][7:0];
  assign cfg.layers  = regs[5][7:0];
  assign cfg.x_base  = regs[6];
  assign cfg.w_base  = regs[7];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 2; r <= 7; r++) regs[r] <= '0;
      start <= 1'b0; done_flag <= 1'b0;
      s_bvalid <= 1'b0; s_rvalid <= 1'b0; s_rdata <= '0;
    end else begin
      start <= 1'b0;
      if (run_done) done_flag <= 1'b1;
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (wr) begin
        s_bvalid <= 1'b1;
        if (s_awaddr[7:2] == 6'd0) begin
          if (s_wstrb[0] && s_wdata[0]) begin
            start     <= 1'b1;
            done_flag <= 1'b0;
          end
        end else if (s_awaddr[7:2] >= 6'd2 && s_awaddr[7:2] <= 6'd7) begin
          for (int b = 0; b < 4; b++)
            if (s_wstrb[b]) regs[s_awaddr[4:2]][8*b +: 8] <= s_wdata[8*b +: 8];
        end
      end
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (s_arvalid && s_arready) begin
        s_rvalid <= 1'b1;
        if (s_araddr[7:2] == 6'd1)
          s_rdata <= {28'd0, cfg_err, mem_err, done_flag, busy};
        else if (s_araddr[7:2] >= 6'd2 && s_araddr[7:2] <= 6'd7)
          s_rdata <= regs[s_araddr[4:2]];
        else
          s_rdata <= '0;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) s_bvalid && !s_bready |=> s_bvalid);
  assert property (@(posedge clk) disable iff (!rst_n) s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));
endmodule
