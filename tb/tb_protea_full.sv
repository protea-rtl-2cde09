// tb_protea_full: one complete run of the accelerator at its synthesis-time
// sizes (D_MAX 768, 8 heads, SL_MAX 64, TS_MHA 64, TS_FFN 128: no parameter
// is overridden). The runtime registers select a small model so that the run
// ends in minutes in simulation: sequence length 4, embedding dimension 128,
// all 8 heads (d_k 16), one layer. The output stream is compared with the
// golden model in protea_ref_pkg, and the run's cycle count is printed.
module tb_protea_full;
  import protea_pkg::*;
  import protea_ref_pkg::*;
  localparam int SL = 4, D = 128, NH = 8, NL = 1;
  localparam int XA = 0, WA = 1000;
  localparam int MEMB = 210000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [7:0]  s_awaddr, s_araddr;
  logic        s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic        s_arvalid, s_arready, s_rvalid, s_rready;
  logic [31:0] s_wdata, s_rdata;
  logic [3:0]  s_wstrb;
  logic [1:0]  s_bresp, s_rresp;
  logic [31:0] m_araddr;
  logic [7:0]  m_arlen, m_rdata;
  logic [2:0]  m_arsize;
  logic [1:0]  m_arburst, m_rresp;
  logic        m_arvalid, m_arready, m_rlast, m_rvalid, m_rready;
  logic        y_valid, irq_done;
  logic [15:0] y_row, y_col;
  data_t       y_data;

  protea_top dut (.*);

  hbm_model #(.BYTES(MEMB)) u_mem (
    .clk, .rst_n, .araddr(m_araddr), .arlen(m_arlen), .arsize(m_arsize), .arburst(m_arburst),
    .arvalid(m_arvalid), .arready(m_arready), .rdata(m_rdata), .rresp(m_rresp), .rlast(m_rlast),
    .rvalid(m_rvalid), .rready(m_rready));

  int checks = 0, failures = 0;
  int got [SL*D];
  int n_y = 0;

  always @(posedge clk) if (rst_n && y_valid) begin got[int'(y_row)*D + int'(y_col)] = int'(y_data); n_y++; end

  task automatic axil_write(input logic [7:0] a, input logic [31:0] v);
    s_awaddr <= a; s_awvalid <= 1; s_wdata <= v; s_wstrb <= 4'hf; s_wvalid <= 1;
    do @(posedge clk); while (!(s_awready && s_wready));
    s_awvalid <= 0; s_wvalid <= 0;
    s_bready <= 1;
    do @(posedge clk); while (!s_bvalid);
    s_bready <= 0;
  endtask

  function automatic logic [7:0] rnd(int lo, int hi);
    return 8'(int'($urandom_range(0, hi - lo)) + lo);
  endfunction

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] img [];
    int y [];
    int t0;
    s_awaddr = 0; s_awvalid = 0; s_wdata = 0; s_wstrb = 0; s_wvalid = 0; s_bready = 0;
    s_araddr = 0; s_arvalid = 0; s_rready = 0;
    for (int i = 0; i < MEMB; i++) u_mem.mem[i] = rnd(-6, 6);
    for (int i = 0; i < SL*D; i++) u_mem.mem[XA + i] = rnd(-40, 40);
    for (int i = 0; i < 3*D; i++) u_mem.mem[WA + int'(off_bias(16'(D))) + i] = rnd(-20, 20);
    for (int i = 0; i < D; i++) begin
      u_mem.mem[WA + int'(off_ln1(16'(D))) + i] = rnd(8, 24);
      u_mem.mem[WA + int'(off_ln2(16'(D))) + i] = rnd(8, 24);
    end
    img = new[MEMB];
    for (int i = 0; i < MEMB; i++) img[i] = u_mem.mem[i];
    encoder(img, XA, WA, SL, D, NH, NL, y);
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    axil_write(8'h08, 32'(SL));
    axil_write(8'h0C, 32'(D));
    axil_write(8'h10, 32'(NH));
    axil_write(8'h14, 32'(NL));
    axil_write(8'h18, 32'(XA));
    axil_write(8'h1C, 32'(WA));
    axil_write(8'h00, 32'd1);
    t0 = int'($time / 10);
    do @(posedge clk); while (!irq_done);
    $display("run of sl=%0d d=%0d h=%0d layers=%0d took %0d cycles", SL, D, NH, NL, int'($time / 10) - t0);
    checks++;
    if (n_y != SL*D) begin failures++; $display("outputs %0d, expected %0d", n_y, SL*D); end
    for (int i = 0; i < SL*D; i++) begin
      checks++;
      if (got[i] != y[i]) begin
        failures++;
        if (failures < 10) $display("y[%0d][%0d]=%0d exp %0d", i / D, i % D, got[i], y[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
