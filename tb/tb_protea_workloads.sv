// tb_protea_workloads: the encoder configurations of the evaluation table,
// run on the default-size build (no parameter overridden), as far as a
// simulation can take them.
//  * One full layer of each model that fits, compared byte for byte with the
//    golden model in protea_ref_pkg: sequence length 64 with embedding
//    dimension 768 (the main configuration, d_k 96) and 256 (d_k 32), both
//    with 8 heads. The evaluated models have 4 to 12 such layers; one is run
//    here, since the layers are identical in shape and the multi-layer path
//    is covered by the reduced end-to-end test.
//  * Configurations the build cannot hold (d 768 with 4 or 2 heads, d_k 192
//    and 384 against the 96 of the per-head buffers; sequence length 128
//    against 64) must be refused: STATUS.cfg_err set, no output, no memory
//    traffic.
// The other fitting rows of the table differ only in layer count, or have
// d 512 or sequence length 32, between the two sizes run here.
module tb_protea_workloads;
  import protea_pkg::*;
  import protea_ref_pkg::*;
  localparam int XA = 0, WA = 50000;
  localparam int MEMB = WA + 12*768*768 + 7*768;
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
  int got [SL_MAX*D_MAX];
  int dcur = 1;
  int n_y = 0;

  always @(posedge clk) if (rst_n && y_valid) begin got[int'(y_row)*dcur + int'(y_col)] = int'(y_data); n_y++; end

  task automatic axil_write(input logic [7:0] a, input logic [31:0] v);
    s_awaddr <= a; s_awvalid <= 1; s_wdata <= v; s_wstrb <= 4'hf; s_wvalid <= 1;
    do @(posedge clk); while (!(s_awready && s_wready));
    s_awvalid <= 0; s_wvalid <= 0;
    s_bready <= 1;
    do @(posedge clk); while (!s_bvalid);
    s_bready <= 0;
  endtask

  task automatic axil_read(input logic [7:0] a, output logic [31:0] v);
    s_araddr <= a; s_arvalid <= 1;
    do @(posedge clk); while (!s_arready);
    s_arvalid <= 0; s_rready <= 1;
    do @(posedge clk); while (!s_rvalid);
    v = s_rdata;
    s_rready <= 0;
  endtask

  // start a configuration that must be refused; check cfg_err and silence
  task automatic refused(input int sl, input int d, input int nh, input string what);
    logic [31:0] st;
    int ny0, nar0;
    ny0 = n_y; nar0 = u_mem.n_ar;
    axil_write(8'h08, 32'(sl));
    axil_write(8'h0C, 32'(d));
    axil_write(8'h10, 32'(nh));
    axil_write(8'h14, 32'd12);
    axil_write(8'h00, 32'd1);
    repeat (50) @(posedge clk);
    axil_read(8'h04, st);
    checks++;
    if (!st[3] || st[0]) begin failures++; $display("%s: STATUS=%h, expected refused", what, st); end
    checks++;
    if (n_y != ny0 || u_mem.n_ar != nar0) begin failures++; $display("%s: activity after refused start", what); end
    else $display("%s: refused (STATUS=%h)", what, st);
  endtask

  function automatic logic [7:0] rnd(int lo, int hi);
    return 8'(int'($urandom_range(0, hi - lo)) + lo);
  endfunction

  initial begin
    repeat (25000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one layer of an sl x d model with nh heads, checked against the model
  task automatic run_model(input int SL, input int D, input int NH);
    logic [7:0] img [];
    int y [];
    int t0;
    int NL = 1;
    for (int i = 0; i < MEMB; i++) u_mem.mem[i] = rnd(-3, 3);
    for (int i = 0; i < SL*D; i++) u_mem.mem[XA + i] = rnd(-40, 40);
    for (int i = 0; i < 3*D; i++) u_mem.mem[WA + int'(off_bias(16'(D))) + i] = rnd(-20, 20);
    for (int i = 0; i < D; i++) begin
      u_mem.mem[WA + int'(off_ln1(16'(D))) + i] = rnd(8, 24);
      u_mem.mem[WA + int'(off_ln2(16'(D))) + i] = rnd(8, 24);
    end
    img = new[MEMB];
    for (int i = 0; i < MEMB; i++) img[i] = u_mem.mem[i];
    encoder(img, XA, WA, SL, D, NH, NL, y);
    img.delete();
    dcur = D; n_y = 0;
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
  endtask

  initial begin
    s_awaddr = 0; s_awvalid = 0; s_wdata = 0; s_wstrb = 0; s_wvalid = 0; s_bready = 0;
    s_araddr = 0; s_arvalid = 0; s_rready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    run_model(64, 256, 8);
    run_model(64, 768, 8);
    refused(64, 768, 4, "sl 64 d 768 h 4");
    refused(64, 768, 2, "sl 64 d 768 h 2");
    refused(128, 768, 8, "sl 128 d 768 h 8");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
