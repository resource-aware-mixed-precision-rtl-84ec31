// mha: single-head self-attention (the MHA block of the encoder layer with
// h = 1 and query/key/value/output width d_model, as the paper fixes them).
//
// Steps, each on its own engine and run one after the other:
//   1. QKV   [Q|K|V] = X * Wqkv^T + Bqkv   (one linear layer, D -> 3D)
//   2. SCORE S = Q * K^T                    (1/sqrt(D) folded into its m)
//   3. SM    A = softmax(S) per row         (qsoftmax)
//   4. CTX   Ctx = A * V
//   5. OPROJ Y = Ctx * Wo^T + Bo
// Only step 1 takes the mixed-precision input (X_BITS from the previous
// layer); everything after it uses the block's own bitwidth B, following the
// paper's rule that only the first layer of a module sees a mixed input.
// Q, K, V, S, A and Ctx live in intermediate buffers whose resource type is
// STYLE (BRAM, LUT RAM, or the tool's choice), or block RAM for those of
// at least BRAM_MIN_BITS bits when that parameter is non-zero.  The engine split and the
// fused QKV projection are this design's choices.
//
// Interface: pulse 'start'; X is read through x_addr/x_data (synchronous,
// one cycle latency, row-major N x D); Y is written row-major through
// y_we/y_addr/y_data; 'done' pulses with the last write.  Latency is
// N*3D*D + N*N*D + N*(3N+2) + N*N*D + N*D*D + 14 cycles exactly (two per
// engine plus one per hand-over).
module mha
  import tf_pkg::*;
#(
  parameter int         X_BITS = 8,
  parameter int         B      = 6,
  parameter int         N      = 12,
  parameter int         D      = 64,
  parameter ram_style_e STYLE  = RAM_AUTO,
  parameter int         BRAM_MIN_BITS = 0,
  localparam int        AW     = clog2_1(N * D),
  localparam int        SAW    = clog2_1(N * N)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  prm_wr_t                  prm,
  input  logic                     start,
  input  rq_cfg_t                  cfg_qkv,
  input  rq_cfg_t                  cfg_score,
  input  rq_cfg_t                  cfg_ctx,
  input  rq_cfg_t                  cfg_oproj,
  output logic                     busy,
  output logic                     done,
  output logic [AW-1:0]            x_addr,
  input  logic signed [X_BITS-1:0] x_data,
  output logic                     y_we,
  output logic [AW-1:0]            y_addr,
  output logic signed [B-1:0]      y_data
);

  typedef enum logic [2:0] {P_IDLE, P_QKV, P_SCORE, P_SM, P_CTX, P_OPROJ} ph_e;
  ph_e ph;
  logic go_qkv, go_score, go_sm, go_ctx, go_oproj;
  logic dn_qkv, dn_score, dn_sm, dn_ctx, dn_oproj;
  logic bz_qkv, bz_score, bz_sm, bz_ctx, bz_oproj;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph       <= P_IDLE;
      go_qkv   <= 1'b0;
      go_score <= 1'b0;
      go_sm    <= 1'b0;
      go_ctx   <= 1'b0;
      go_oproj <= 1'b0;
    end else begin
      go_qkv   <= 1'b0;
      go_score <= 1'b0;
      go_sm    <= 1'b0;
      go_ctx   <= 1'b0;
      go_oproj <= 1'b0;
      unique case (ph)
        P_IDLE:  if (start)    begin ph <= P_QKV;   go_qkv   <= 1'b1; end
        P_QKV:   if (dn_qkv)   begin ph <= P_SCORE; go_score <= 1'b1; end
        P_SCORE: if (dn_score) begin ph <= P_SM;    go_sm    <= 1'b1; end
        P_SM:    if (dn_sm)    begin ph <= P_CTX;   go_ctx   <= 1'b1; end
        P_CTX:   if (dn_ctx)   begin ph <= P_OPROJ; go_oproj <= 1'b1; end
        P_OPROJ: if (dn_oproj)       ph <= P_IDLE;
        default: ph <= P_IDLE;
      endcase
    end
  end

  assign busy = (ph != P_IDLE);
  assign done = dn_oproj;

  // ---- 1. fused Q/K/V projection -------------------------------------
  logic                      qkv_we;
  logic [clog2_1(N*3*D)-1:0] qkv_addr;
  logic [clog2_1(N)-1:0]     qkv_r;
  logic [clog2_1(3*D)-1:0]   qkv_c;
  logic signed [B-1:0]       qkv_data;
  logic [AW-1:0]             qkv_dst;

  qlinear #(
    .X_BITS(X_BITS), .B(B), .R(N), .IN_DIM(D), .OUT_DIM(3 * D), .RELU(1'b0),
    .SEL_W(PRM_W_QKV), .SEL_B(PRM_B_QKV)
  ) u_qkv (
    .clk(clk), .rst_n(rst_n), .prm(prm), .start(go_qkv), .cfg(cfg_qkv),
    .busy(bz_qkv), .done(dn_qkv), .x_addr(x_addr), .x_data(x_data),
    .y_we(qkv_we), .y_addr(qkv_addr), .y_r(qkv_r), .y_c(qkv_c), .y_data(qkv_data)
  );

  // column c of [Q|K|V] goes to Q (c < D), K (c < 2D) or V
  always_comb begin
    if (int'(qkv_c) < D)          qkv_dst = AW'(int'(qkv_r) * D + int'(qkv_c));
    else if (int'(qkv_c) < 2 * D) qkv_dst = AW'(int'(qkv_r) * D + int'(qkv_c) - D);
    else                          qkv_dst = AW'(int'(qkv_r) * D + int'(qkv_c) - 2 * D);
  end

  logic [AW-1:0]       q_ra, k_ra, v_ra;
  logic signed [B-1:0] q_rd, k_rd, v_rd;

  qbuffer #(.WIDTH(B), .DEPTH(N * D),
            .STYLE(buf_style(STYLE, (B) * (N * D), BRAM_MIN_BITS))) u_qbuf (
    .clk(clk), .we(qkv_we && int'(qkv_c) < D), .waddr(qkv_dst), .wdata(qkv_data),
    .raddr(q_ra), .rdata(q_rd)
  );
  qbuffer #(.WIDTH(B), .DEPTH(N * D),
            .STYLE(buf_style(STYLE, (B) * (N * D), BRAM_MIN_BITS))) u_kbuf (
    .clk(clk), .we(qkv_we && int'(qkv_c) >= D && int'(qkv_c) < 2 * D), .waddr(qkv_dst),
    .wdata(qkv_data), .raddr(k_ra), .rdata(k_rd)
  );
  qbuffer #(.WIDTH(B), .DEPTH(N * D),
            .STYLE(buf_style(STYLE, (B) * (N * D), BRAM_MIN_BITS))) u_vbuf (
    .clk(clk), .we(qkv_we && int'(qkv_c) >= 2 * D), .waddr(qkv_dst), .wdata(qkv_data),
    .raddr(v_ra), .rdata(v_rd)
  );

  // ---- 2. scores S = Q K^T -------------------------------------------
  logic                s_we;
  logic [SAW-1:0]      s_wa, s_ra;
  logic signed [B-1:0] s_wd, s_rd;

  qmatmul #(
    .A_BITS(B), .W_BITS(B), .BIAS_BITS(1), .Y_BITS(B), .R(N), .C(N), .K(D),
    .A_RSTRIDE(D), .B_CSTRIDE(D), .B_KSTRIDE(1), .HAS_BIAS(1'b0), .RELU(1'b0),
    .A_DEPTH(N * D), .B_DEPTH(N * D)
  ) u_score (
    .clk(clk), .rst_n(rst_n), .start(go_score), .cfg(cfg_score),
    .busy(bz_score), .done(dn_score),
    .a_addr(q_ra), .a_data(q_rd), .b_addr(k_ra), .b_data(k_rd),
    .bias_addr(), .bias_data(1'b0),
    .y_we(s_we), .y_addr(s_wa), .y_r(), .y_c(), .y_data(s_wd)
  );

  qbuffer #(.WIDTH(B), .DEPTH(N * N),
            .STYLE(buf_style(STYLE, (B) * (N * N), BRAM_MIN_BITS))) u_sbuf (
    .clk(clk), .we(s_we), .waddr(s_wa), .wdata(s_wd), .raddr(s_ra), .rdata(s_rd)
  );

  // ---- 3. softmax ------------------------------------------------------
  logic                a_we;
  logic [SAW-1:0]      a_wa, a_ra;
  logic signed [B-1:0] a_wd, a_rd;

  qsoftmax #(.BITS(B), .N(N), .SEL(PRM_EXP)) u_sm (
    .clk(clk), .rst_n(rst_n), .prm(prm), .start(go_sm), .busy(bz_sm), .done(dn_sm),
    .s_addr(s_ra), .s_data(s_rd), .y_we(a_we), .y_addr(a_wa), .y_data(a_wd)
  );

  qbuffer #(.WIDTH(B), .DEPTH(N * N),
            .STYLE(buf_style(STYLE, (B) * (N * N), BRAM_MIN_BITS))) u_abuf (
    .clk(clk), .we(a_we), .waddr(a_wa), .wdata(a_wd), .raddr(a_ra), .rdata(a_rd)
  );

  // ---- 4. context Ctx = A V (attention weights have zero point 0) -----
  rq_cfg_t             cfg_ctx_a0;
  logic                c_we;
  logic [AW-1:0]       c_wa, c_ra;
  logic signed [B-1:0] c_wd, c_rd;

  always_comb begin
    cfg_ctx_a0    = cfg_ctx;
    cfg_ctx_a0.za = '0;
  end

  qmatmul #(
    .A_BITS(B), .W_BITS(B), .BIAS_BITS(1), .Y_BITS(B), .R(N), .C(D), .K(N),
    .A_RSTRIDE(N), .B_CSTRIDE(1), .B_KSTRIDE(D), .HAS_BIAS(1'b0), .RELU(1'b0),
    .A_DEPTH(N * N), .B_DEPTH(N * D)
  ) u_ctx (
    .clk(clk), .rst_n(rst_n), .start(go_ctx), .cfg(cfg_ctx_a0),
    .busy(bz_ctx), .done(dn_ctx),
    .a_addr(a_ra), .a_data(a_rd), .b_addr(v_ra), .b_data(v_rd),
    .bias_addr(), .bias_data(1'b0),
    .y_we(c_we), .y_addr(c_wa), .y_r(), .y_c(), .y_data(c_wd)
  );

  qbuffer #(.WIDTH(B), .DEPTH(N * D),
            .STYLE(buf_style(STYLE, (B) * (N * D), BRAM_MIN_BITS))) u_cbuf (
    .clk(clk), .we(c_we), .waddr(c_wa), .wdata(c_wd), .raddr(c_ra), .rdata(c_rd)
  );

  // ---- 5. output projection --------------------------------------------
  qlinear #(
    .X_BITS(B), .B(B), .R(N), .IN_DIM(D), .OUT_DIM(D), .RELU(1'b0),
    .SEL_W(PRM_W_O), .SEL_B(PRM_B_O)
  ) u_oproj (
    .clk(clk), .rst_n(rst_n), .prm(prm), .start(go_oproj), .cfg(cfg_oproj),
    .busy(bz_oproj), .done(dn_oproj), .x_addr(c_ra), .x_data(c_rd),
    .y_we(y_we), .y_addr(y_addr), .y_r(), .y_c(), .y_data(y_data)
  );

endmodule
