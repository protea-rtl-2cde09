// tb_axi_read_master: self-checking test of the AXI4 read master against the
// behavioural memory model. Requests of random length (1..600 bytes) at
// random addresses, several of them straddling 4 KB lines, are issued; the
// delivered byte stream must match the memory contents in order and length,
// `done` must follow each request, and the number of bursts must equal the
// count implied by the 256-beat and 4 KB rules. The master's own assertions
// check the AR handshake and the 4 KB rule on every burst.
module tb_axi_read_master;
  localparam int MEMB = 20000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid, req_ready, done, d_valid, err;
  logic [31:0] req_addr;
  logic [23:0] req_len;
  logic [7:0]  d_data;
  logic [31:0] araddr;
  logic [7:0]  arlen, rdata;
  logic [2:0]  arsize;
  logic [1:0]  arburst, rresp;
  logic        arvalid, arready, rlast, rvalid, rready;

  axi_read_master dut (
    .clk, .rst_n, .req_valid, .req_ready, .req_addr, .req_len, .done, .d_valid, .d_data, .err,
    .m_araddr(araddr), .m_arlen(arlen), .m_arsize(arsize), .m_arburst(arburst), .m_arvalid(arvalid),
    .m_arready(arready), .m_rdata(rdata), .m_rresp(rresp), .m_rlast(rlast), .m_rvalid(rvalid), .m_rready(rready));

  hbm_model #(.BYTES(MEMB), .GAP(3)) u_mem (
    .clk, .rst_n, .araddr, .arlen, .arsize, .arburst, .arvalid, .arready, .rdata, .rresp, .rlast, .rvalid, .rready);

  int checks = 0, failures = 0;
  int n_got = 0, bad = 0;
  int cur_addr = 0;

  always @(posedge clk) if (rst_n && d_valid) begin
    if (d_data != u_mem.mem[cur_addr + n_got]) bad++;
    n_got++;
  end

  function automatic int bursts(int a, int len);
    int n = 0;
    while (len > 0) begin
      int b = 4096 - (a % 4096);
      if (b > 256) b = 256;
      if (b > len) b = len;
      a += b; len -= b; n++;
    end
    return n;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a, len, ar0;
    req_valid = 0; req_addr = 0; req_len = 0;
    for (int i = 0; i < MEMB; i++) u_mem.mem[i] = 8'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int n = 0; n < 24; n++) begin
      len = (n % 3 == 0) ? int'($urandom_range(1, 8)) : int'($urandom_range(9, 600));
      a   = (n % 4 == 1) ? 4096 * int'($urandom_range(1, 3)) - int'($urandom_range(1, 300))
                         : int'($urandom_range(0, MEMB - 700));
      cur_addr = a; n_got = 0; bad = 0; ar0 = u_mem.n_ar;
      req_valid <= 1; req_addr <= 32'(a); req_len <= 24'(len);
      do @(posedge clk); while (!req_ready);
      req_valid <= 0;
      do @(posedge clk); while (!done);
      @(posedge clk);
      checks += 3;
      if (n_got != len) begin failures++; $display("req %0d: %0d bytes, expected %0d", n, n_got, len); end
      if (bad != 0)     begin failures++; $display("req %0d: %0d wrong bytes", n, bad); end
      if (u_mem.n_ar - ar0 != bursts(a, len)) begin
        failures++; $display("req %0d: %0d bursts, expected %0d", n, u_mem.n_ar - ar0, bursts(a, len));
      end
    end
    checks++;
    if (err) begin failures++; $display("error flag set"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
