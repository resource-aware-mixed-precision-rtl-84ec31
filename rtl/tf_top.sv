// tf_top: integer-only, mixed-precision Transformer accelerator for
// single-step time-series forecasting.
//
// Data path (one encoder layer, one attention head):
//   X (N x M) -> L_input (M -> D) -> Add_PE (+ positional encoding)
//     -> MHA -> Add_MHA (+ residual) -> BN_MHA
//     -> FFN (D -> 4D -> D, ReLU) -> Add_FFN (+ residual) -> BN_FFN
//     -> GAP (mean over the N time steps) -> L_output (D -> OUT_DIM) -> Y
// Each of the ten components has its own bitwidth parameter (B_LIN_IN ...
// B_LOUT, 4, 6 or 8 bits).  A component's input bitwidth is the bitwidth of
// the component that produced the input, so no extra rescaling is needed at
// the boundaries.  The defaults are the configuration the paper reports as
// its best on hardware for N = 12, d_model = 64:
// (8, 8, 6, 8, 6, 4, 8, 8, 8, 8) for (L_input, Add_PE, MHA, Add_MHA, BN_MHA,
// FFN, Add_FFN, BN_FFN, GAP, L_output).  Intermediate results between the
// components are kept in buffers whose resource type is STYLE (block RAM,
// LUT RAM or the tool's choice; the paper prefers the last); parameters are
// kept in block RAM.  BRAM_MIN_BITS, when non-zero, overrides STYLE for
// every intermediate buffer of at least that many bits and puts it in block
// RAM, so the larger results can be steered into block RAM by hand (the
// paper mentions ordering results by size and manual intervention; this
// threshold form is this design's choice).  The number of input features M and of outputs OUT_DIM
// are not given by the paper and are this design's defaults.
//
// The components run one after the other under a phase sequencer; each
// linear stage does one multiply-accumulate per cycle, so an inference takes
// roughly as many cycles as the model has MACs (about 0.62 M at the
// defaults).
//
// Interface:
//   - prm:   parameter-load bus (weights, biases, positional encoding,
//            softmax exponent table, batch-norm constants), used while idle.
//   - cfg:   quantisation constants of every operation; hold them stable.
//   - x_we/x_addr/x_data: write the input window, row-major N x M, while
//            idle.
//   - start: one-cycle pulse begins an inference; busy is high until done,
//            which pulses for one cycle when y holds the new forecast.
//   Immediate assertions flag a start, parameter write or input write while
//   busy (the source gives no handshake; these rules are this design's).
module tf_top
  import tf_pkg::*;
#(
  parameter int         N        = 12,
  parameter int         M        = 3,
  parameter int         D        = 64,
  parameter int         OUT_DIM  = 1,
  parameter int         X_BITS   = 8,
  parameter int         B_LIN_IN = 8,
  parameter int         B_ADD_PE = 8,
  parameter int         B_MHA    = 6,
  parameter int         B_ADD_MHA = 8,
  parameter int         B_BN_MHA = 6,
  parameter int         B_FFN    = 4,
  parameter int         B_ADD_FFN = 8,
  parameter int         B_BN_FFN = 8,
  parameter int         B_GAP    = 8,
  parameter int         B_LOUT   = 8,
  parameter ram_style_e STYLE    = RAM_AUTO,
  parameter int         BRAM_MIN_BITS = 0,
  localparam int        XAW      = clog2_1(N * M),
  localparam int        AW       = clog2_1(N * D),
  localparam int        DAW      = clog2_1(D),
  localparam int        OAW      = clog2_1(OUT_DIM)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  prm_wr_t                  prm,
  input  tf_cfg_t                  cfg,
  input  logic                     x_we,
  input  logic [XAW-1:0]           x_addr,
  input  logic signed [X_BITS-1:0] x_data,
  input  logic                     start,
  output logic                     busy,
  output logic                     done,
  output logic signed [B_LOUT-1:0] y [OUT_DIM]
);

  typedef enum logic [3:0] {
    P_IDLE, P_LIN_IN, P_ADD_PE, P_MHA, P_ADD_MHA, P_BN_MHA,
    P_FFN, P_ADD_FFN, P_BN_FFN, P_GAP, P_LOUT
  } ph_e;

  ph_e  ph;
  logic [10:0] go;   // one-cycle start pulse, indexed by phase
  logic dn_lin_in, dn_add_pe, dn_mha, dn_add_mha, dn_bn_mha;
  logic dn_ffn, dn_add_ffn, dn_bn_ffn, dn_gap, dn_lout;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph   <= P_IDLE;
      go   <= '0;
      done <= 1'b0;
    end else begin
      go   <= '0;
      done <= 1'b0;
      unique case (ph)
        P_IDLE:    if (start)      begin ph <= P_LIN_IN;  go[P_LIN_IN]  <= 1'b1; end
        P_LIN_IN:  if (dn_lin_in)  begin ph <= P_ADD_PE;  go[P_ADD_PE]  <= 1'b1; end
        P_ADD_PE:  if (dn_add_pe)  begin ph <= P_MHA;     go[P_MHA]     <= 1'b1; end
        P_MHA:     if (dn_mha)     begin ph <= P_ADD_MHA; go[P_ADD_MHA] <= 1'b1; end
        P_ADD_MHA: if (dn_add_mha) begin ph <= P_BN_MHA;  go[P_BN_MHA]  <= 1'b1; end
        P_BN_MHA:  if (dn_bn_mha)  begin ph <= P_FFN;     go[P_FFN]     <= 1'b1; end
        P_FFN:     if (dn_ffn)     begin ph <= P_ADD_FFN; go[P_ADD_FFN] <= 1'b1; end
        P_ADD_FFN: if (dn_add_ffn) begin ph <= P_BN_FFN;  go[P_BN_FFN]  <= 1'b1; end
        P_BN_FFN:  if (dn_bn_ffn)  begin ph <= P_GAP;     go[P_GAP]     <= 1'b1; end
        P_GAP:     if (dn_gap)     begin ph <= P_LOUT;    go[P_LOUT]    <= 1'b1; end
        P_LOUT:    if (dn_lout)    begin ph <= P_IDLE;    done <= 1'b1;          end
        default:   ph <= P_IDLE;
      endcase
    end
  end

  assign busy = (ph != P_IDLE);

  // Host-interface rules: start, parameter writes and input writes belong to
  // the idle state (a start or an input write while busy is ignored; a
  // parameter write while busy would change the model mid-inference), and
  // done is only raised once the sequencer is back in idle.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
    end else begin
      assert (!(start && busy)) else $error("tf_top: start while busy");
      assert (!(prm.en && busy)) else $error("tf_top: parameter write while busy");
      assert (!(x_we && busy)) else $error("tf_top: input write while busy");
      assert (!(done && busy)) else $error("tf_top: done while busy");
    end
  end

  // ======================= input module ==================================
  logic [XAW-1:0]             xin_ra;
  logic signed [X_BITS-1:0]   xin_rd;

  qbuffer #(.WIDTH(X_BITS), .DEPTH(N * M),
            .STYLE(buf_style(STYLE, (X_BITS) * (N * M), BRAM_MIN_BITS))) u_xin (
    .clk(clk), .we(x_we && !busy), .waddr(x_addr), .wdata(x_data),
    .raddr(xin_ra), .rdata(xin_rd)
  );

  logic                       lin_we;
  logic [AW-1:0]              lin_wa, lin_ra;
  logic signed [B_LIN_IN-1:0] lin_wd, lin_rd;

  qlinear #(
    .X_BITS(X_BITS), .B(B_LIN_IN), .R(N), .IN_DIM(M), .OUT_DIM(D), .RELU(1'b0),
    .SEL_W(PRM_W_IN), .SEL_B(PRM_B_IN)
  ) u_lin_in (
    .clk(clk), .rst_n(rst_n), .prm(prm), .start(go[P_LIN_IN]), .cfg(cfg.l_in),
    .busy(), .done(dn_lin_in), .x_addr(xin_ra), .x_data(xin_rd),
    .y_we(lin_we), .y_addr(lin_wa), .y_r(), .y_c(), .y_data(lin_wd)
  );

  qbuffer #(.WIDTH(B_LIN_IN), .DEPTH(N * D),
            .STYLE(buf_style(STYLE, (B_LIN_IN) * (N * D), BRAM_MIN_BITS))) u_lin_buf (
    .clk(clk), .we(lin_we), .waddr(lin_wa), .wdata(lin_wd), .raddr(lin_ra), .rdata(lin_rd)
  );

  // positional encoding table (a model parameter, block RAM)
  logic signed [B_ADD_PE-1:0] pe_rd;

  qbuffer #(.WIDTH(B_ADD_PE), .DEPTH(N * D), .STYLE(RAM_BRAM)) u_pe (
    .clk(clk), .we(prm.en && prm.sel == PRM_PE), .waddr(AW'(prm.addr)),
    .wdata(B_ADD_PE'(prm.data)), .raddr(lin_ra), .rdata(pe_rd)
  );

  logic                       emb_we;
  logic [AW-1:0]              emb_wa, emb_ra;
  logic signed [B_ADD_PE-1:0] emb_wd, emb_rd;

  qadd #(.X1_BITS(B_LIN_IN), .X2_BITS(B_ADD_PE), .Y_BITS(B_ADD_PE), .LEN(N * D)) u_add_pe (
    .clk(clk), .rst_n(rst_n), .start(go[P_ADD_PE]), .cfg(cfg.add_pe),
    .busy(), .done(dn_add_pe), .rd_addr(lin_ra), .x1_data(lin_rd), .x2_data(pe_rd),
    .y_we(emb_we), .y_addr(emb_wa), .y_data(emb_wd)
  );

  qbuffer #(.WIDTH(B_ADD_PE), .DEPTH(N * D),
            .STYLE(buf_style(STYLE, (B_ADD_PE) * (N * D), BRAM_MIN_BITS))) u_emb_buf (
    .clk(clk), .we(emb_we), .waddr(emb_wa), .wdata(emb_wd), .raddr(emb_ra), .rdata(emb_rd)
  );

  // ======================= encoder layer =================================
  logic [AW-1:0]           mha_xa;
  logic                    mha_we;
  logic [AW-1:0]           mha_wa, mha_ra;
  logic signed [B_MHA-1:0] mha_wd, mha_rd;

  mha #(.X_BITS(B_ADD_PE), .B(B_MHA), .N(N), .D(D), .STYLE(STYLE),
        .BRAM_MIN_BITS(BRAM_MIN_BITS)) u_mha (
    .clk(clk), .rst_n(rst_n), .prm(prm), .start(go[P_MHA]),
    .cfg_qkv(cfg.qkv), .cfg_score(cfg.score), .cfg_ctx(cfg.ctx), .cfg_oproj(cfg.oproj),
    .busy(), .done(dn_mha), .x_addr(mha_xa), .x_data(emb_rd),
    .y_we(mha_we), .y_addr(mha_wa), .y_data(mha_wd)
  );

  qbuffer #(.WIDTH(B_MHA), .DEPTH(N * D),
            .STYLE(buf_style(STYLE, (B_MHA) * (N * D), BRAM_MIN_BITS))) u_mha_buf (
    .clk(clk), .we(mha_we), .waddr(mha_wa), .wdata(mha_wd), .raddr(mha_ra), .rdata(mha_rd)
  );

  // the embedding buffer is read by the MHA, then by the residual addition
  logic [AW-1:0] addm_ra;
  assign emb_ra = (ph == P_MHA) ? mha_xa : addm_ra;
  assign mha_ra = addm_ra;

  logic                        addm_we;
  logic [AW-1:0]               addm_wa, addm_rb;
  logic signed [B_ADD_MHA-1:0] addm_wd, addm_rd;

  qadd #(.X1_BITS(B_ADD_PE), .X2_BITS(B_MHA), .Y_BITS(B_ADD_MHA), .LEN(N * D)) u_add_mha (
    .clk(clk), .rst_n(rst_n), .start(go[P_ADD_MHA]), .cfg(cfg.add_mha),
    .busy(), .done(dn_add_mha), .rd_addr(addm_ra), .x1_data(emb_rd), .x2_data(mha_rd),
    .y_we(addm_we), .y_addr(addm_wa), .y_data(addm_wd)
  );

  qbuffer #(.WIDTH(B_ADD_MHA), .DEPTH(N * D),
            .STYLE(buf_style(STYLE, (B_ADD_MHA) * (N * D), BRAM_MIN_BITS))) u_addm_buf (
    .clk(clk), .we(addm_we), .waddr(addm_wa), .wdata(addm_wd), .raddr(addm_rb), .rdata(addm_rd)
  );

  logic                       bnm_we;
  logic [AW-1:0]              bnm_wa, bnm_ra;
  logic signed [B_BN_MHA-1:0] bnm_wd, bnm_rd;

  qbatchnorm #(.X_BITS(B_ADD_MHA), .Y_BITS(B_BN_MHA), .R(N), .D(D), .SEL(PRM_BN_MHA)) u_bn_mha (
    .clk(clk), .rst_n(rst_n), .prm(prm), .start(go[P_BN_MHA]), .cfg(cfg.bn_mha),
    .busy(), .done(dn_bn_mha), .rd_addr(addm_rb), .x_data(addm_rd),
    .y_we(bnm_we), .y_addr(bnm_wa), .y_data(bnm_wd)
  );

  qbuffer #(.WIDTH(B_BN_MHA), .DEPTH(N * D),
            .STYLE(buf_style(STYLE, (B_BN_MHA) * (N * D), BRAM_MIN_BITS))) u_bnm_buf (
    .clk(clk), .we(bnm_we), .waddr(bnm_wa), .wdata(bnm_wd), .raddr(bnm_ra), .rdata(bnm_rd)
  );

  logic [AW-1:0]           ffn_xa;
  logic                    ffn_we;
  logic [AW-1:0]           ffn_wa, ffn_ra;
  logic signed [B_FFN-1:0] ffn_wd, ffn_rd;

  ffn #(.X_BITS(B_BN_MHA), .B(B_FFN), .N(N), .D(D), .HID(4 * D), .STYLE(STYLE),
        .BRAM_MIN_BITS(BRAM_MIN_BITS)) u_ffn (
    .clk(clk), .rst_n(rst_n), .prm(prm), .start(go[P_FFN]),
    .cfg_1(cfg.ffn1), .cfg_2(cfg.ffn2), .busy(), .done(dn_ffn),
    .x_addr(ffn_xa), .x_data(bnm_rd), .y_we(ffn_we), .y_addr(ffn_wa), .y_data(ffn_wd)
  );

  qbuffer #(.WIDTH(B_FFN), .DEPTH(N * D),
            .STYLE(buf_style(STYLE, (B_FFN) * (N * D), BRAM_MIN_BITS))) u_ffn_buf (
    .clk(clk), .we(ffn_we), .waddr(ffn_wa), .wdata(ffn_wd), .raddr(ffn_ra), .rdata(ffn_rd)
  );

  // the BN_MHA buffer is read by the FFN, then by the residual addition
  logic [AW-1:0] addf_ra;
  assign bnm_ra = (ph == P_FFN) ? ffn_xa : addf_ra;
  assign ffn_ra = addf_ra;

  logic                        addf_we;
  logic [AW-1:0]               addf_wa, addf_rb;
  logic signed [B_ADD_FFN-1:0] addf_wd, addf_rd;

  qadd #(.X1_BITS(B_BN_MHA), .X2_BITS(B_FFN), .Y_BITS(B_ADD_FFN), .LEN(N * D)) u_add_ffn (
    .clk(clk), .rst_n(rst_n), .start(go[P_ADD_FFN]), .cfg(cfg.add_ffn),
    .busy(), .done(dn_add_ffn), .rd_addr(addf_ra), .x1_data(bnm_rd), .x2_data(ffn_rd),
    .y_we(addf_we), .y_addr(addf_wa), .y_data(addf_wd)
  );

  qbuffer #(.WIDTH(B_ADD_FFN), .DEPTH(N * D),
            .STYLE(buf_style(STYLE, (B_ADD_FFN) * (N * D), BRAM_MIN_BITS))) u_addf_buf (
    .clk(clk), .we(addf_we), .waddr(addf_wa), .wdata(addf_wd), .raddr(addf_rb), .rdata(addf_rd)
  );

  logic                       bnf_we;
  logic [AW-1:0]              bnf_wa, bnf_ra;
  logic signed [B_BN_FFN-1:0] bnf_wd, bnf_rd;

  qbatchnorm #(.X_BITS(B_ADD_FFN), .Y_BITS(B_BN_FFN), .R(N), .D(D), .SEL(PRM_BN_FFN)) u_bn_ffn (
    .clk(clk), .rst_n(rst_n), .prm(prm), .start(go[P_BN_FFN]), .cfg(cfg.bn_ffn),
    .busy(), .done(dn_bn_ffn), .rd_addr(addf_rb), .x_data(addf_rd),
    .y_we(bnf_we), .y_addr(bnf_wa), .y_data(bnf_wd)
  );

  qbuffer #(.WIDTH(B_BN_FFN), .DEPTH(N * D),
            .STYLE(buf_style(STYLE, (B_BN_FFN) * (N * D), BRAM_MIN_BITS))) u_bnf_buf (
    .clk(clk), .we(bnf_we), .waddr(bnf_wa), .wdata(bnf_wd), .raddr(bnf_ra), .rdata(bnf_rd)
  );

  // ======================= output module =================================
  logic                    gap_we;
  logic [DAW-1:0]          gap_wa, gap_ra;
  logic signed [B_GAP-1:0] gap_wd, gap_rd;

  gap #(.X_BITS(B_BN_FFN), .Y_BITS(B_GAP), .R(N), .D(D)) u_gap (
    .clk(clk), .rst_n(rst_n), .start(go[P_GAP]), .cfg(cfg.gap),
    .busy(), .done(dn_gap), .rd_addr(bnf_ra), .x_data(bnf_rd),
    .y_we(gap_we), .y_addr(gap_wa), .y_data(gap_wd)
  );

  qbuffer #(.WIDTH(B_GAP), .DEPTH(D),
            .STYLE(buf_style(STYLE, (B_GAP) * (D), BRAM_MIN_BITS))) u_gap_buf (
    .clk(clk), .we(gap_we), .waddr(gap_wa), .wdata(gap_wd), .raddr(gap_ra), .rdata(gap_rd)
  );

  logic                     lo_we;
  logic [OAW-1:0]           lo_wa;
  logic signed [B_LOUT-1:0] lo_wd;

  qlinear #(
    .X_BITS(B_GAP), .B(B_LOUT), .R(1), .IN_DIM(D), .OUT_DIM(OUT_DIM), .RELU(1'b0),
    .SEL_W(PRM_W_OUT), .SEL_B(PRM_B_OUT)
  ) u_lin_out (
    .clk(clk), .rst_n(rst_n), .prm(prm), .start(go[P_LOUT]), .cfg(cfg.l_out),
    .busy(), .done(dn_lout), .x_addr(gap_ra), .x_data(gap_rd),
    .y_we(lo_we), .y_addr(lo_wa), .y_r(), .y_c(), .y_data(lo_wd)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < OUT_DIM; i++) y[i] <= '0;
    end else if (lo_we) begin
      y[lo_wa] <= lo_wd;
    end
  end

endmodule
