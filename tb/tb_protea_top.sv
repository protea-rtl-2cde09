// tb_protea_top: end-to-end test of the accelerator at reduced synthesis
// sizes (SL_MAX 8, D_MAX 32, 4 heads, TS_MHA 8, TS_FFN 8).
// A host model programs the AXI4-Lite registers and starts three runs:
//   A: sl 5, d 32, 4 heads, 2 layers  (all heads active, two layers chained)
//   B: sl 3, d 16, 2 heads, 1 layer   (runtime resize, half the heads idle)
//   C: d 16 with 3 heads              (d/h not whole: must be refused)
// The weights sit at an odd base address so that some bursts cross 4 KB
// lines and must be split. Each run's output stream is compared element by
// element with the golden model in protea_ref_pkg. The mechanisms are
// counted and each must occur: tile accumulation in the Q/K/V engines, FFN
// tile reuse (with the exact counts of the tiling scheme), layer chaining,
// idle heads, 4 KB burst splits, the refused configuration, bias loading
// while the last Q/K/V tile computes.
module tb_protea_top;
  import protea_pkg::*;
  import protea_ref_pkg::*;
  localparam int SLM = 8, DM = 32, H = 4, TSM = 8, TSF = 8;
  localparam int MEMB = 40000;

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

  protea_top #(.SLM(SLM), .DM(DM), .H(H), .TSM(TSM), .TSF(TSF)) dut (.*);

  hbm_model #(.BYTES(MEMB)) u_mem (
    .clk, .rst_n, .araddr(m_araddr), .arlen(m_arlen), .arsize(m_arsize), .arburst(m_arburst),
    .arvalid(m_arvalid), .arready(m_arready), .rdata(m_rdata), .rresp(m_rresp), .rlast(m_rlast),
    .rvalid(m_rvalid), .rready(m_rready));

  int checks = 0, failures = 0;
  int got [SLM*DM];
  int n_y = 0;
  // mechanism counters
  int n_qkv_first = 0, n_qkv_acc = 0, n_ffn [3] = '{0, 0, 0}, n_req = 0, n_idle_head = 0, n_refused = 0, n_bias_ovl = 0;

  always @(posedge clk) if (rst_n) begin
    if (y_valid) begin got[int'(y_row)*DM + int'(y_col)] = int'(y_data); n_y++; end
    if (dut.g_head[0].u_qkv.start) begin
      if (dut.g_head[0].u_qkv.first) n_qkv_first++; else n_qkv_acc++;
    end
    if (dut.u_ffn1.start) n_ffn[0]++;
    if (dut.u_ffn2.start) n_ffn[1]++;
    if (dut.u_ffn3.start) n_ffn[2]++;
    if (dut.ld_valid && dut.ld_ready) n_req++;
    if (dut.g_head[0].u_qkv.busy && !dut.g_head[H-1].u_qkv.busy) n_idle_head++;
    if (dut.g_head[0].u_qkv.b_we && dut.g_head[0].u_qkv.busy) n_bias_ovl++;
  end

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
    s_arvalid <= 0;
    s_rready <= 1;
    do @(posedge clk); while (!s_rvalid);
    v = s_rdata;
    s_rready <= 0;
  endtask

  function automatic logic [7:0] rnd(int lo, int hi);
    return 8'(int'($urandom_range(0, hi - lo)) + lo);
  endfunction

  // random parameters for nl layers of width d at wa, input X at xa
  task automatic fill(int xa, int wa, int sl, int d, int nl);
    int lb = int'(layer_bytes(16'(d)));
    for (int i = 0; i < sl*d; i++) u_mem.mem[xa + i] = rnd(-40, 40);
    for (int l = 0; l < nl; l++) begin
      int b = wa + l*lb;
      for (int i = 0; i < lb; i++) u_mem.mem[b + i] = rnd(-6, 6);
      for (int i = 0; i < 3*d; i++) u_mem.mem[b + int'(off_bias(16'(d))) + i] = rnd(-20, 20);
      for (int i = 0; i < d; i++) begin
        u_mem.mem[b + int'(off_ln1(16'(d))) + i]     = rnd(8, 24);
        u_mem.mem[b + int'(off_ln1(16'(d))) + d + i] = rnd(-8, 8);
        u_mem.mem[b + int'(off_ln2(16'(d))) + i]     = rnd(8, 24);
        u_mem.mem[b + int'(off_ln2(16'(d))) + d + i] = rnd(-8, 8);
      end
    end
  endtask

  task automatic run(int xa, int wa, int sl, int d, int h, int nl);
    logic [7:0] img [];
    int y [];
    logic [31:0] st;
    int ff0 = n_ffn[0], ff1 = n_ffn[1], ff2 = n_ffn[2], tiles = n_qkv_first + n_qkv_acc;
    int nt = d / TSF;
    img = new[MEMB];
    for (int i = 0; i < MEMB; i++) img[i] = u_mem.mem[i];
    encoder(img, xa, wa, sl, d, h, nl, y);
    n_y = 0;
    axil_write(8'h08, 32'(sl));
    axil_write(8'h0C, 32'(d));
    axil_write(8'h10, 32'(h));
    axil_write(8'h14, 32'(nl));
    axil_write(8'h18, 32'(xa));
    axil_write(8'h1C, 32'(wa));
    axil_write(8'h00, 32'd1);
    do @(posedge clk); while (!irq_done);
    @(posedge clk);
    axil_read(8'h04, st);
    checks++;
    if (st[3:0] != 4'b0010) begin failures++; $display("status %b", st[3:0]); end
    checks++;
    if (n_y != sl*d) begin failures++; $display("outputs %0d, expected %0d", n_y, sl*d); end
    for (int i = 0; i < sl*d; i++) begin
      checks++;
      if (got[(i / d)*DM + (i % d)] != y[i]) begin
        failures++;
        if (failures < 10) $display("y[%0d][%0d]=%0d exp %0d", i / d, i % d, got[(i / d)*DM + (i % d)], y[i]);
      end
    end
    checks += 4;
    if (n_qkv_first + n_qkv_acc - tiles != nl * (d / TSM)) begin failures++; $display("qkv tiles %0d", n_qkv_first + n_qkv_acc - tiles); end
    if (n_ffn[0] - ff0 != nl * nt * nt)     begin failures++; $display("ffn1 tiles %0d", n_ffn[0] - ff0); end
    if (n_ffn[1] - ff1 != nl * 4 * nt * nt) begin failures++; $display("ffn2 tiles %0d", n_ffn[1] - ff1); end
    if (n_ffn[2] - ff2 != nl * nt * nt)     begin failures++; $display("ffn3 tiles %0d", n_ffn[2] - ff2); end
    $display("run sl=%0d d=%0d h=%0d layers=%0d done at %0t", sl, d, h, nl, $time);
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] st;
    s_awaddr = 0; s_awvalid = 0; s_wdata = 0; s_wstrb = 0; s_wvalid = 0; s_bready = 0;
    s_araddr = 0; s_arvalid = 0; s_rready = 0;
    for (int i = 0; i < MEMB; i++) u_mem.mem[i] = 8'h00;
    fill(64, 4083, 5, 32, 2);
    fill(30000, 30100, 3, 16, 1);
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    run(64, 4083, 5, 32, 4, 2);
    run(30000, 30100, 3, 16, 2, 1);
    // C: refused configuration
    axil_write(8'h10, 32'd3);
    axil_write(8'h00, 32'd1);
    do @(posedge clk); while (!irq_done);
    @(posedge clk);
    axil_read(8'h04, st);
    checks++;
    if (st[3] != 1'b1 || st[0] != 1'b0) begin failures++; $display("refusal status %b", st[3:0]); end
    else n_refused++;
    // every mechanism must have happened
    $display("mechanisms: qkv first=%0d accumulate=%0d ffn1=%0d ffn2=%0d ffn3=%0d idle-head cycles=%0d bias-during-compute=%0d bursts=%0d requests=%0d refused=%0d",
             n_qkv_first, n_qkv_acc, n_ffn[0], n_ffn[1], n_ffn[2], n_idle_head, n_bias_ovl, u_mem.n_ar, n_req, n_refused);
    checks += 6;
    if (n_qkv_acc == 0)        begin failures++; $display("no Q/K/V tile accumulation"); end
    if (n_ffn[1] <= n_ffn[0])  begin failures++; $display("no FFN tile reuse"); end
    if (n_idle_head == 0)      begin failures++; $display("no idle head"); end
    if (u_mem.n_ar <= n_req)   begin failures++; $display("no 4 KB burst split"); end
    if (n_refused == 0)        begin failures++; $display("no refused configuration"); end
    if (n_bias_ovl == 0)       begin failures++; $display("no bias load during computation"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
