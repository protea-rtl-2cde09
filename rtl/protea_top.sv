// protea_top: a runtime-programmable transformer-encoder accelerator.
//
// The datapath is the attention module (H_MAX parallel heads, each a Q/K/V
// engine, a Q x K^T engine, a softmax unit and an S x V engine) followed by
// the feedforward module (three tiled FFN engines and two layer-norm units),
// with on-chip buffers between the stages. The controller in this module runs
// one whole encoder stack: for every layer it
//   1. (layer 0 only) loads X (sl x d) from external memory into the layer
//      input buffer;
//   2. attention: for each of d/TS_MHA column tiles, copies the X tile into
//      every head's input BRAM, loads each head's Wq/Wk/Wv tile rows from
//      memory and runs the Q/K/V engines (accumulating over tiles); then
//      loads the biases while the last tile computes (as the original
//      does) and finalises Q/K/V, runs Q x K^T, softmax and
//      S x V in all active heads at once; S x V writes each head's result
//      into its d_k columns of the attention-score buffer (concatenation);
//   3. FFN1 (d -> d) on the attention scores into the FFN1 output buffer,
//      LN1 (residual: the layer input) into the LN1 buffer,
//      FFN2 (d -> 4d, ReLU) into the FFN2 buffer,
//      FFN3 (4d -> d) into the FFN3 output buffer,
//      LN2 (residual: the LN1 output) into the layer input buffer, which is
//      the next layer's input. In the last layer LN2's results also leave on
//      the y_* stream.
// FFN tiles are walked output tile by output tile, input tiles innermost;
// each tile pair re-copies the input tile and loads the weight tile.
//
// Runtime hyperparameters (sequence length, embedding dimension d, heads h,
// layers, base addresses) come from the AXI4-Lite registers (see axil_regs);
// d must be a multiple of TS_FFN (and so of TS_MHA), d/h must not exceed
// d_k max = D_MAX/H_MAX and sl must not exceed SL_MAX, else the start is
// refused and STATUS.cfg_err set. Heads h..H_MAX-1 stay idle.
//
// External memory layout (this design's; the original is not given): X is
// row major, sl x d bytes at XBASE; layer n's parameters start at
// WBASE + n * layer_bytes(d), laid out as in protea_pkg (matrices [out][in],
// so every tile row is one contiguous burst). All loads go through one
// 8-bit AXI4 read master, one request at a time. Apart from the Q/K/V bias
// load, which runs during the last attention tile, loads are not overlapped
// with computation (the original overlaps loading and computing); this is
// the main performance departure of this RTL.
module protea_top
  import protea_pkg::*;
#(
  parameter int unsigned SLM = SL_MAX,
  parameter int unsigned DM  = D_MAX,
  parameter int unsigned H   = H_MAX,
  parameter int unsigned TSM = TS_MHA,
  parameter int unsigned TSF = TS_FFN
) (
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite control slave
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
  // AXI4 read master to external memory
  output logic [31:0] m_araddr,
  output logic [7:0]  m_arlen,
  output logic [2:0]  m_arsize,
  output logic [1:0]  m_arburst,
  output logic        m_arvalid,
  input  logic        m_arready,
  input  logic [7:0]  m_rdata,
  input  logic [1:0]  m_rresp,
  input  logic        m_rlast,
  input  logic        m_rvalid,
  output logic        m_rready,
  // encoder output stream (last layer's LN2 results)
  output logic        y_valid,
  output logic [15:0] y_row,
  output logic [15:0] y_col,
  output data_t       y_data,
  output logic        irq_done
);
  localparam int unsigned DKM  = DM / H;
  localparam int unsigned D4   = 4 * DM;
  localparam int unsigned TSF4 = 4 * TSF;
  localparam int unsigned IW   = $clog2(SLM);
  localparam int unsigned KW   = $clog2(DKM);
  localparam int unsigned CW   = $clog2(DM);
  localparam int unsigned C4W  = $clog2(D4);
  localparam int unsigned LTM  = $clog2(TSM);
  localparam int unsigned LTF  = $clog2(TSF);

  // ------------------------------------------------------------------
  // control registers
  // ------------------------------------------------------------------
  cfg_t cfg;
  logic go, run_done, mem_err, cfg_err, busy_o;

  axil_regs u_regs (
    .clk, .rst_n,
    .s_awaddr, .s_awvalid, .s_awready, .s_wdata, .s_wstrb, .s_wvalid, .s_wready,
    .s_bresp, .s_bvalid, .s_bready, .s_araddr, .s_arvalid, .s_arready,
    .s_rdata, .s_rresp, .s_rvalid, .s_rready,
    .cfg, .start(go), .busy(busy_o), .run_done, .mem_err, .cfg_err);

  // ------------------------------------------------------------------
  // memory loader
  // ------------------------------------------------------------------
  logic        ld_valid, ld_ready, ld_done, b_valid;
  logic [31:0] ld_addr;
  logic [23:0] ld_len;
  logic [7:0]  b_data;
  logic [15:0] bcnt;

  axi_read_master u_rd (
    .clk, .rst_n,
    .req_valid(ld_valid), .req_ready(ld_ready), .req_addr(ld_addr), .req_len(ld_len), .done(ld_done),
    .d_valid(b_valid), .d_data(b_data), .err(mem_err),
    .m_araddr, .m_arlen, .m_arsize, .m_arburst, .m_arvalid, .m_arready,
    .m_rdata, .m_rresp, .m_rlast, .m_rvalid, .m_rready);

  // ------------------------------------------------------------------
  // on-chip buffers between the stages
  // ------------------------------------------------------------------
  data_t xbuf  [SLM][DM];   // layer input (LN2 output buffer), LN1 residual
  data_t abuf  [SLM][DM];   // attention scores (concatenated heads)
  data_t f1buf [SLM][DM];   // FFN1 output buffer
  data_t l1buf [SLM][DM];   // LN1 output buffer, LN2 residual
  data_t f2buf [SLM][D4];   // FFN2 output buffer
  data_t f3buf [SLM][DM];   // FFN3 output buffer
  data_t rowreg [TSF4];     // assembles one weight-tile row from the byte stream

  // ------------------------------------------------------------------
  // controller state
  // ------------------------------------------------------------------
  typedef enum logic [5:0] {
    C_IDLE, C_LX_REQ, C_LX_WAIT, C_LAYER,
    C_M_COPY, C_M_WREQ, C_M_WWAIT, C_M_WWR, C_M_RUN, C_M_RUNW,
    C_M_BREQ, C_M_BWAIT, C_M_BEND, C_M_FIN, C_M_FINW,
    C_M_QK, C_M_QKW, C_M_SM, C_M_SMW, C_M_SV, C_M_SVW,
    C_F_COPY, C_F_WREQ, C_F_WWAIT, C_F_WWR, C_F_RUN, C_F_RUNW, C_F_FIN, C_F_FINW,
    C_L_GREQ, C_L_GWAIT, C_L_FEED, C_L_WROW
  } cstate_e;
  cstate_e st;

  logic [15:0] sl_r, d_r, dk_r, nl_r, ntm_r, ntf_r;
  logic [7:0]  h_r;
  logic [31:0] xb_r, wb_r, wcur;
  logic [15:0] layer, tile, ci, cc, hd, mm, kk, ot, it, rr;
  logic [1:0]  eng;          // FFN engine in use: 0 FFN1, 1 FFN2, 2 FFN3
  logic        lsel;         // LN unit in use: 0 LN1, 1 LN2
  logic        last_layer;

  assign busy_o     = (st != C_IDLE);
  assign last_layer = (layer == nl_r - 16'd1);

  // ------------------------------------------------------------------
  // attention heads
  // ------------------------------------------------------------------
  data_t                qx_data [TSM];
  logic [H-1:0]         h_act;
  logic [H-1:0]         qkv_done, qk_done, sm_done, sv_done;
  logic [H-1:0]         sv_we;
  logic [IW-1:0]        sv_row [H];
  logic [KW-1:0]        sv_col [H];
  data_t                sv_dat [H];

  always_comb
    for (int j = 0; j < TSM; j++) qx_data[j] = xbuf[ci[IW-1:0]][CW'((32'(tile) << LTM) + 32'(j))];

  for (genvar g = 0; g < H; g++) begin : g_head
    logic [IW-1:0] q_idx, k_idx, s_idx, p_idx;
    logic [KW-1:0] v_idx;
    data_t q_row [DKM], k_row [DKM], v_col [SLM], p_row [SLM];
    score_t s_row [SLM];

    assign h_act[g] = (32'(g) < 32'(h_r));

    qkv_ce #(.SLM(SLM), .DKM(DKM), .TS(TSM)) u_qkv (
      .clk, .rst_n, .sl(sl_r), .dk(dk_r),
      .x_we(st == C_M_COPY), .x_row(ci[IW-1:0]), .x_data(qx_data),
      .w_we(st == C_M_WWR && hd == 16'(g)), .w_sel(mm[1:0]), .w_row(kk[KW-1:0]), .w_data(rowreg[0:TSM-1]),
      .b_we(st == C_M_BWAIT && b_valid && hd == 16'(g)), .b_sel(mm[1:0]), .b_idx(bcnt[KW-1:0]),
      .b_data(data_t'(b_data)),
      .start(st == C_M_RUN && h_act[g]), .first(tile == 16'd0), .fin(st == C_M_FIN && h_act[g]),
      .busy(), .done(qkv_done[g]),
      .q_idx, .q_row, .k_idx, .k_row, .v_idx, .v_col);

    qk_ce #(.SLM(SLM), .DKM(DKM)) u_qk (
      .clk, .rst_n, .sl(sl_r), .dk(dk_r), .d_model(d_r), .start(st == C_M_QK && h_act[g]),
      .busy(), .done(qk_done[g]), .q_idx, .q_row, .k_idx, .k_row, .s_idx, .s_row);

    softmax_unit #(.SLM(SLM)) u_sm (
      .clk, .rst_n, .sl(sl_r), .start(st == C_M_SM && h_act[g]), .busy(), .done(sm_done[g]),
      .s_idx, .s_row, .p_idx, .p_row);

    sv_ce #(.SLM(SLM), .DKM(DKM)) u_sv (
      .clk, .rst_n, .sl(sl_r), .dk(dk_r), .start(st == C_M_SV && h_act[g]), .busy(), .done(sv_done[g]),
      .p_idx, .p_row, .v_idx, .v_col,
      .o_we(sv_we[g]), .o_row(sv_row[g]), .o_col(sv_col[g]), .o_data(sv_dat[g]));
  end

  // ------------------------------------------------------------------
  // FFN engines
  // ------------------------------------------------------------------
  data_t f1_x [TSF], f2_x [TSF], f3_x [TSF4];
  logic  fe_done [3];
  logic  fe_we [3];
  logic [IW-1:0] fe_row [3];
  logic [C4W-1:0] fe_col [3];
  data_t fe_dat [3];
  logic [CW-1:0]  f1c, f3c;

  always_comb begin
    for (int j = 0; j < TSF; j++) begin
      f1_x[j] = abuf [ci[IW-1:0]][CW'((32'(it) << LTF) + 32'(j))];
      f2_x[j] = l1buf[ci[IW-1:0]][CW'((32'(it) << LTF) + 32'(j))];
    end
    for (int j = 0; j < TSF4; j++)
      f3_x[j] = f2buf[ci[IW-1:0]][C4W'((32'(it) << (LTF + 2)) + 32'(j))];
  end

  ffn_ce #(.SLM(SLM), .IN_TILE(TSF), .OUT_TILE(TSF), .OUT_MAX(DM), .RELU(1'b0)) u_ffn1 (
    .clk, .rst_n, .sl(sl_r), .n_out(d_r),
    .x_we(st == C_F_COPY && eng == 2'd0), .x_row(ci[IW-1:0]), .x_data(f1_x),
    .w_we(st == C_F_WWR && eng == 2'd0), .w_row(rr[LTF-1:0]), .w_data(rowreg[0:TSF-1]),
    .start(st == C_F_RUN && eng == 2'd0), .first(it == 16'd0), .ot(ot),
    .fin(st == C_F_FIN && eng == 2'd0), .busy(), .done(fe_done[0]),
    .o_we(fe_we[0]), .o_row(fe_row[0]), .o_col(f1c), .o_data(fe_dat[0]));

  ffn_ce #(.SLM(SLM), .IN_TILE(TSF), .OUT_TILE(TSF), .OUT_MAX(D4), .RELU(1'b1)) u_ffn2 (
    .clk, .rst_n, .sl(sl_r), .n_out(16'(32'(d_r) * 4)),
    .x_we(st == C_F_COPY && eng == 2'd1), .x_row(ci[IW-1:0]), .x_data(f2_x),
    .w_we(st == C_F_WWR && eng == 2'd1), .w_row(rr[LTF-1:0]), .w_data(rowreg[0:TSF-1]),
    .start(st == C_F_RUN && eng == 2'd1), .first(it == 16'd0), .ot(ot),
    .fin(st == C_F_FIN && eng == 2'd1), .busy(), .done(fe_done[1]),
    .o_we(fe_we[1]), .o_row(fe_row[1]), .o_col(fe_col[1]), .o_data(fe_dat[1]));

  ffn_ce #(.SLM(SLM), .IN_TILE(TSF4), .OUT_TILE(TSF), .OUT_MAX(DM), .RELU(1'b0)) u_ffn3 (
    .clk, .rst_n, .sl(sl_r), .n_out(d_r),
    .x_we(st == C_F_COPY && eng == 2'd2), .x_row(ci[IW-1:0]), .x_data(f3_x),
    .w_we(st == C_F_WWR && eng == 2'd2), .w_row(rr[LTF-1:0]), .w_data(rowreg),
    .start(st == C_F_RUN && eng == 2'd2), .first(it == 16'd0), .ot(ot),
    .fin(st == C_F_FIN && eng == 2'd2), .busy(), .done(fe_done[2]),
    .o_we(fe_we[2]), .o_row(fe_row[2]), .o_col(f3c), .o_data(fe_dat[2]));

  assign fe_col[0] = C4W'(f1c);
  assign fe_col[2] = C4W'(f3c);

  // ------------------------------------------------------------------
  // layer norms
  // ------------------------------------------------------------------
  logic          ln_rdy [2];
  logic          ln_yv  [2];
  logic [CW-1:0] ln_yc  [2];
  data_t         ln_yd  [2];
  logic          ln_in_valid;
  data_t         ln_x, ln_r;

  assign ln_x = lsel ? f3buf[ci[IW-1:0]][cc[CW-1:0]] : f1buf[ci[IW-1:0]][cc[CW-1:0]];
  assign ln_r = lsel ? l1buf[ci[IW-1:0]][cc[CW-1:0]] : xbuf [ci[IW-1:0]][cc[CW-1:0]];
  assign ln_in_valid = (st == C_L_FEED) && ln_rdy[lsel];

  for (genvar g = 0; g < 2; g++) begin : g_ln
    layer_norm #(.DM(DM)) u_ln (
      .clk, .rst_n, .d(d_r),
      .g_we(st == C_L_GWAIT && b_valid && lsel == g[0]), .g_sel(mm[0]), .g_idx(bcnt[CW-1:0]),
      .g_data(data_t'(b_data)),
      .in_ready(ln_rdy[g]), .in_valid(ln_in_valid && lsel == g[0]), .x_data(ln_x), .r_data(ln_r),
      .y_valid(ln_yv[g]), .y_col(ln_yc[g]), .y_data(ln_yd[g]));
  end

  assign y_valid = ln_yv[1] && last_layer && (st == C_L_FEED || st == C_L_WROW);
  assign y_row   = ci;
  assign y_col   = 16'(ln_yc[1]);
  assign y_data  = ln_yd[1];

  // ------------------------------------------------------------------
  // loader request per state
  // ------------------------------------------------------------------
  always_comb begin
    ld_valid = 1'b0;
    ld_addr  = '0;
    ld_len   = '0;
    unique case (st)
      C_LX_REQ: begin
        ld_valid = 1'b1;
        ld_addr  = xb_r + 32'(ci) * 32'(d_r);
        ld_len   = 24'(d_r);
      end
      C_M_WREQ: begin
        ld_valid = 1'b1;
        ld_addr  = wcur + 32'(mm) * 32'(d_r) * 32'(d_r)
                 + (32'(hd) * 32'(dk_r) + 32'(kk)) * 32'(d_r) + (32'(tile) << LTM);
        ld_len   = 24'(TSM);
      end
      C_M_BREQ: begin
        ld_valid = 1'b1;
        ld_addr  = wcur + off_bias(d_r) + 32'(mm) * 32'(d_r) + 32'(hd) * 32'(dk_r);
        ld_len   = 24'(dk_r);
      end
      C_F_WREQ: begin
        ld_valid = 1'b1;
        unique case (eng)
          2'd0: begin
            ld_addr = wcur + off_w1(d_r) + ((32'(ot) << LTF) + 32'(rr)) * 32'(d_r) + (32'(it) << LTF);
            ld_len  = 24'(TSF);
          end
          2'd1: begin
            ld_addr = wcur + off_w2(d_r) + ((32'(ot) << LTF) + 32'(rr)) * 32'(d_r) + (32'(it) << LTF);
            ld_len  = 24'(TSF);
          end
          default: begin
            ld_addr = wcur + off_w3(d_r) + ((32'(ot) << LTF) + 32'(rr)) * 4 * 32'(d_r) + (32'(it) << (LTF + 2));
            ld_len  = 24'(TSF4);
          end
        endcase
      end
      C_L_GREQ: begin
        ld_valid = 1'b1;
        ld_addr  = wcur + (lsel ? off_ln2(d_r) : off_ln1(d_r)) + 32'(mm) * 32'(d_r);
        ld_len   = 24'(d_r);
      end
      default: ;
    endcase
  end

  // ------------------------------------------------------------------
  // buffer writes
  // ------------------------------------------------------------------
  always_ff @(posedge clk) begin
    if (st == C_LX_WAIT && b_valid) xbuf[ci[IW-1:0]][bcnt[CW-1:0]] <= data_t'(b_data);
    if ((st == C_M_WWAIT || st == C_F_WWAIT) && b_valid) rowreg[bcnt[$clog2(TSF4)-1:0]] <= data_t'(b_data);
    for (int g = 0; g < H; g++)
      if (sv_we[g]) abuf[sv_row[g]][CW'(32'(g) * 32'(dk_r) + 32'(sv_col[g]))] <= sv_dat[g];
    if (fe_we[0]) f1buf[fe_row[0]][fe_col[0][CW-1:0]] <= fe_dat[0];
    if (fe_we[1]) f2buf[fe_row[1]][fe_col[1]]         <= fe_dat[1];
    if (fe_we[2]) f3buf[fe_row[2]][fe_col[2][CW-1:0]] <= fe_dat[2];
    if (ln_yv[0]) l1buf[ci[IW-1:0]][ln_yc[0]] <= ln_yd[0];
    if (ln_yv[1]) xbuf [ci[IW-1:0]][ln_yc[1]] <= ln_yd[1];
  end

  // ------------------------------------------------------------------
  // controller
  // ------------------------------------------------------------------
  logic bad_cfg;
  logic [15:0] dk_c;
  assign dk_c    = (cfg.heads == 8'd0) ? 16'd0 : cfg.d_model / 16'(cfg.heads);
  assign bad_cfg = (cfg.sl == 16'd0) || (32'(cfg.sl) > SLM) || (cfg.d_model == 16'd0) ||
                   (32'(cfg.d_model) > DM) || (cfg.d_model[LTF-1:0] != '0) ||
                   (cfg.heads == 8'd0) || (32'(cfg.heads) > H) || (32'(dk_c) > DKM) ||
                   (32'(dk_c) * 32'(cfg.heads) != 32'(cfg.d_model)) || (cfg.layers == 8'd0);

  // the last Q/K/V tile has finished in every active head (its done pulse
  // may come before or after the bias load ends)
  logic qkv_seen;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) qkv_seen <= 1'b0;
    else if (st == C_M_RUN) qkv_seen <= 1'b0;
    else if ((qkv_done & h_act) == h_act) qkv_seen <= 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE;
      sl_r <= '0; d_r <= '0; dk_r <= '0; nl_r <= '0; ntm_r <= '0; ntf_r <= '0; h_r <= '0;
      xb_r <= '0; wb_r <= '0; wcur <= '0;
      layer <= '0; tile <= '0; ci <= '0; cc <= '0; hd <= '0; mm <= '0; kk <= '0;
      ot <= '0; it <= '0; rr <= '0; eng <= '0; lsel <= 1'b0; bcnt <= '0;
      run_done <= 1'b0; cfg_err <= 1'b0;
    end else begin
      run_done <= 1'b0;
      if (b_valid) bcnt <= bcnt + 16'd1;
      unique case (st)
        C_IDLE: if (go) begin
          if (bad_cfg) begin
            cfg_err  <= 1'b1;
            run_done <= 1'b1;
          end else begin
            cfg_err <= 1'b0;
            sl_r  <= cfg.sl;
            d_r   <= cfg.d_model;
            h_r   <= cfg.heads;
            dk_r  <= dk_c;
            nl_r  <= 16'(cfg.layers);
            ntm_r <= cfg.d_model >> LTM;
            ntf_r <= cfg.d_model >> LTF;
            xb_r  <= cfg.x_base;
            wb_r  <= cfg.w_base;
            layer <= '0;
            ci    <= '0;
            st    <= C_LX_REQ;
          end
        end
        // ---- load X (layer 0) ----
        C_LX_REQ: if (ld_ready) begin bcnt <= '0; st <= C_LX_WAIT; end
        C_LX_WAIT: if (ld_done) begin
          if (ci == sl_r - 1) begin
            wcur <= wb_r;
            st   <= C_LAYER;
          end else begin
            ci <= ci + 1;
            st <= C_LX_REQ;
          end
        end
        C_LAYER: begin
          tile <= '0;
          ci   <= '0;
          st   <= C_M_COPY;
        end
        // ---- attention: Q/K/V tiles ----
        C_M_COPY: begin
          if (ci == sl_r - 1) begin
            ci <= '0; hd <= '0; mm <= '0; kk <= '0;
            st <= C_M_WREQ;
          end else ci <= ci + 1;
        end
        C_M_WREQ: if (ld_ready) begin bcnt <= '0; st <= C_M_WWAIT; end
        C_M_WWAIT: if (ld_done) st <= C_M_WWR;
        C_M_WWR: begin
          st <= C_M_WREQ;
          if (kk == dk_r - 1) begin
            kk <= '0;
            if (mm == 16'd2) begin
              mm <= '0;
              if (hd == 16'(h_r) - 1) begin
                hd <= '0;
                st <= C_M_RUN;
              end else hd <= hd + 1;
            end else mm <= mm + 1;
          end else kk <= kk + 1;
        end
        // the last tile's computation runs while the biases are loaded
        C_M_RUN: if (tile == ntm_r - 1) begin
          hd <= '0; mm <= '0;
          st <= C_M_BREQ;
        end else st <= C_M_RUNW;
        C_M_RUNW: if ((qkv_done & h_act) == h_act) begin
          tile <= tile + 1;
          ci   <= '0;
          st   <= C_M_COPY;
        end
        C_M_BREQ: if (ld_ready) begin bcnt <= '0; st <= C_M_BWAIT; end
        C_M_BWAIT: if (ld_done) begin
          st <= C_M_BREQ;
          if (mm == 16'd2) begin
            mm <= '0;
            if (hd == 16'(h_r) - 1) begin
              hd <= '0;
              st <= C_M_BEND;
            end else hd <= hd + 1;
          end else mm <= mm + 1;
        end
        C_M_BEND: if (qkv_seen) st <= C_M_FIN;
        C_M_FIN: st <= C_M_FINW;
        C_M_FINW: if ((qkv_done & h_act) == h_act) st <= C_M_QK;
        C_M_QK:   st <= C_M_QKW;
        C_M_QKW:  if ((qk_done & h_act) == h_act) st <= C_M_SM;
        C_M_SM:   st <= C_M_SMW;
        C_M_SMW:  if ((sm_done & h_act) == h_act) st <= C_M_SV;
        C_M_SV:   st <= C_M_SVW;
        C_M_SVW:  if ((sv_done & h_act) == h_act) begin
          eng <= 2'd0; ot <= '0; it <= '0; ci <= '0;
          st  <= C_F_COPY;
        end
        // ---- FFN engines ----
        C_F_COPY: begin
          if (ci == sl_r - 1) begin
            ci <= '0; rr <= '0;
            st <= C_F_WREQ;
          end else ci <= ci + 1;
        end
        C_F_WREQ: if (ld_ready) begin bcnt <= '0; st <= C_F_WWAIT; end
        C_F_WWAIT: if (ld_done) st <= C_F_WWR;
        C_F_WWR: begin
          if (32'(rr) == TSF - 1) begin
            rr <= '0;
            st <= C_F_RUN;
          end else begin
            rr <= rr + 1;
            st <= C_F_WREQ;
          end
        end
        C_F_RUN: st <= C_F_RUNW;
        C_F_RUNW: if (fe_done[eng]) begin
          ci <= '0;
          st <= C_F_COPY;
          if (it == ntf_r - 1) begin
            it <= '0;
            if (ot == ((eng == 2'd1) ? 16'(32'(ntf_r) * 4) : ntf_r) - 1) begin
              ot <= '0;
              st <= C_F_FIN;
            end else ot <= ot + 1;
          end else it <= it + 1;
        end
        C_F_FIN: st <= C_F_FINW;
        C_F_FINW: if (fe_done[eng]) begin
          ci <= '0; cc <= '0; mm <= '0;
          unique case (eng)
            2'd0: begin lsel <= 1'b0; st <= C_L_GREQ; end
            2'd1: begin eng <= 2'd2; it <= '0; ot <= '0; st <= C_F_COPY; end
            default: begin lsel <= 1'b1; st <= C_L_GREQ; end
          endcase
        end
        // ---- layer norms ----
        C_L_GREQ: if (ld_ready) begin bcnt <= '0; st <= C_L_GWAIT; end
        C_L_GWAIT: if (ld_done) begin
          if (mm == 16'd1) begin
            mm <= '0;
            st <= C_L_FEED;
          end else begin
            mm <= mm + 1;
            st <= C_L_GREQ;
          end
        end
        C_L_FEED: if (ln_rdy[lsel]) begin
          if (cc == d_r - 1) begin
            cc <= '0;
            st <= C_L_WROW;
          end else cc <= cc + 1;
        end
        C_L_WROW: if (ln_yv[lsel] && 32'(ln_yc[lsel]) == 32'(d_r) - 1) begin
          if (ci == sl_r - 1) begin
            ci <= '0;
            if (!lsel) begin
              eng <= 2'd1; ot <= '0; it <= '0;
              st  <= C_F_COPY;
            end else if (last_layer) begin
              run_done <= 1'b1;
              st <= C_IDLE;
            end else begin
              layer <= layer + 1;
              wcur  <= wcur + layer_bytes(d_r);
              st    <= C_LAYER;
            end
          end else begin
            ci <= ci + 1;
            st <= C_L_FEED;
          end
        end
        default: st <= C_IDLE;
      endcase
    end
  end

  assign irq_done = run_done;

  // the loader is only asked for work when it is idle
  assert property (@(posedge clk) disable iff (!rst_n) ld_valid && ld_ready |=> !ld_ready || ld_done);
endmodule
