// tb_axil_regs: self-checking test of the AXI4-Lite control registers.
// Every parameter register is written and read back, a byte-strobed write
// must change only its byte, the configuration outputs must mirror the
// registers, a write of 1 to CTRL must give exactly one start pulse and
// clear STATUS.done, a run_done pulse must set it, and the busy, memory
// error and configuration error inputs must appear in STATUS. Writes are
// issued with the address phase ahead of the data phase to exercise the
// handshake, and responses are held while BREADY / RREADY are low.
module tb_axil_regs;
  import protea_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [7:0]  s_awaddr, s_araddr;
  logic        s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic        s_arvalid, s_arready, s_rvalid, s_rready;
  logic [31:0] s_wdata, s_rdata;
  logic [3:0]  s_wstrb;
  logic [1:0]  s_bresp, s_rresp;
  cfg_t        cfg;
  logic        start, busy, run_done, mem_err, cfg_err;

  axil_regs dut (.*);

  int checks = 0, failures = 0, n_start = 0;
  always @(posedge clk) if (rst_n && start) n_start++;

  task automatic wr(input logic [7:0] a, input logic [31:0] v, input logic [3:0] strb);
    s_awaddr <= a; s_awvalid <= 1;
    @(posedge clk);
    s_wdata <= v; s_wstrb <= strb; s_wvalid <= 1;
    do @(posedge clk); while (!(s_awready && s_wready));
    s_awvalid <= 0; s_wvalid <= 0;
    repeat (2) @(posedge clk);
    s_bready <= 1;
    do @(posedge clk); while (!s_bvalid);
    s_bready <= 0;
  endtask

  task automatic rd(input logic [7:0] a, output logic [31:0] v);
    s_araddr <= a; s_arvalid <= 1;
    do @(posedge clk); while (!s_arready);
    s_arvalid <= 0;
    repeat (2) @(posedge clk);
    s_rready <= 1;
    do @(posedge clk); while (!s_rvalid);
    v = s_rdata;
    s_rready <= 0;
  endtask

  task automatic expect_eq(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("%s: got %h expected %h", what, got, exp); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] v, vals [2:7];
    s_awaddr = 0; s_awvalid = 0; s_wdata = 0; s_wstrb = 0; s_wvalid = 0; s_bready = 0;
    s_araddr = 0; s_arvalid = 0; s_rready = 0;
    busy = 0; run_done = 0; mem_err = 0; cfg_err = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int r = 2; r <= 7; r++) begin
      vals[r] = $urandom;
      wr(8'(4*r), vals[r], 4'hf);
    end
    for (int r = 2; r <= 7; r++) begin
      rd(8'(4*r), v);
      expect_eq(v, vals[r], $sformatf("reg %0d", r));
    end
    wr(8'h18, 32'hAABBCCDD, 4'b0100);
    vals[6][23:16] = 8'hBB;
    rd(8'h18, v);
    expect_eq(v, vals[6], "strobed write");
    expect_eq(32'(cfg.sl), 32'(vals[2][15:0]), "cfg.sl");
    expect_eq(32'(cfg.d_model), 32'(vals[3][15:0]), "cfg.d_model");
    expect_eq(32'(cfg.heads), 32'(vals[4][7:0]), "cfg.heads");
    expect_eq(32'(cfg.layers), 32'(vals[5][7:0]), "cfg.layers");
    expect_eq(cfg.x_base, vals[6], "cfg.x_base");
    expect_eq(cfg.w_base, vals[7], "cfg.w_base");
    // done flag set by run_done, cleared by start
    @(negedge clk); run_done = 1; @(negedge clk); run_done = 0;
    rd(8'h04, v);
    expect_eq(v, 32'h2, "status after run_done");
    wr(8'h00, 32'h1, 4'hf);
    expect_eq(32'(n_start), 32'd1, "one start pulse");
    busy = 1; mem_err = 1; cfg_err = 1;
    rd(8'h04, v);
    expect_eq(v, 32'hD, "status busy/errors, done cleared");
    wr(8'h00, 32'h0, 4'hf);
    expect_eq(32'(n_start), 32'd1, "no start on writing 0");
    rd(8'h3C, v);
    expect_eq(v, 32'h0, "unmapped reads 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
