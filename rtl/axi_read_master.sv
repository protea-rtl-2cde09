// axi_read_master: fetches a run of bytes from external (HBM) memory over an
// AXI4 read channel and delivers them in order as a byte stream.
//
// The accelerator loads inputs, weights, biases and normalisation
// parameters on demand from off-chip memory through AXI4 master ports; how
// those ports are built is not described, so this is the simplest master
// that does the job. A request (req_addr, req_len in bytes) is accepted with
// req_valid && req_ready. It is split into INCR bursts of at most 256 beats
// that never cross a 4 KB boundary (an AXI4 rule). The data bus is DBYTES=1
// byte wide (ARSIZE = 0), one burst is outstanding at a time, and RREADY is
// always high while a burst is open, so the consumer must take every byte:
// d_valid / d_data, one byte per cycle at most. `done` pulses one cycle
// after the last byte of the request. Read responses other than OKAY are
// counted on `err`. ARSIZE (0) and ARBURST (INCR) are constant outputs, and
// d_data is RDATA passed straight through, qualified by d_valid.
module axi_read_master #(
  parameter int unsigned AW = 32
) (
  input  logic           clk,
  input  logic           rst_n,
  // request
  input  logic           req_valid,
  output logic           req_ready,
  input  logic [AW-1:0]  req_addr,
  input  logic [23:0]    req_len,
  output logic           done,
  // byte stream
  output logic           d_valid,
  output logic [7:0]     d_data,
  output logic           err,
  // AXI4 read address channel
  output logic [AW-1:0]  m_araddr,
  output logic [7:0]     m_arlen,
  output logic [2:0]     m_arsize,
  output logic [1:0]     m_arburst,
  output logic           m_arvalid,
  input  logic           m_arready,
  // AXI4 read data channel
  input  logic [7:0]     m_rdata,
  input  logic [1:0]     m_rresp,
  input  logic           m_rlast,
  input  logic           m_rvalid,
  output logic           m_rready
);
  typedef enum logic [1:0] {S_IDLE, S_AR, S_R} state_e;
  state_e state;

  logic [AW-1:0] addr;
  logic [23:0]   left;
  logic [12:0]   to_4k;
  logic [8:0]    blen;

  assign req_ready = (state == S_IDLE);
  assign m_arsize  = 3'd0;
  assign m_arburst = 2'b01;
  assign m_rready  = (state == S_R);
  assign d_valid   = m_rvalid && m_rready;
  assign d_data    = m_rdata;

  // beats of the next burst: min(left, 256, bytes to the 4 KB boundary)
  always_comb begin
    to_4k = 13'd4096 - {1'b0, addr[11:0]};
    blen  = 9'd256;
    if (24'(to_4k) < 24'(blen)) blen = 9'(to_4k);
    if (left < 24'(blen))       blen = 9'(left);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      addr <= '0; left <= '0;
      m_araddr <= '0; m_arlen <= '0; m_arvalid <= 1'b0;
      done <= 1'b0; err <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (req_valid) begin
          addr <= req_addr;
          left <= req_len;
          if (req_len == 24'd0) done <= 1'b1;
          else state <= S_AR;
        end
        S_AR: begin
          if (!m_arvalid) begin
            m_araddr  <= addr;
            m_arlen   <= 8'(blen - 9'd1);
            m_arvalid <= 1'b1;
          end else if (m_arready) begin
            m_arvalid <= 1'b0;
            addr  <= addr + AW'(blen);
            left  <= left - 24'(blen);
            state <= S_R;
          end
        end
        S_R: if (m_rvalid) begin
          if (m_rresp != 2'b00) err <= 1'b1;
          if (m_rlast) begin
            if (left == 24'd0) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else state <= S_AR;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // AXI4: once asserted, ARVALID and the address stay until ARREADY
  assert property (@(posedge clk) disable iff (!rst_n)
    m_arvalid && !m_arready |=> m_arvalid && $stable(m_araddr) && $stable(m_arlen));
  // a burst never crosses a 4 KB boundary
  assert property (@(posedge clk) disable iff (!rst_n)
    m_arvalid |-> (13'(m_araddr[11:0]) + 13'(m_arlen)) < 13'd4096);
endmodule
