// ffn: feed-forward block of the encoder layer: linear D -> 4D, ReLU,
// linear 4D -> D.
//
// The first linear layer takes the mixed-precision input (X_BITS, set by the
// layer before) and, like everything after it, uses the block's bitwidth B
// for weights and outputs; the second linear layer is uniform B-bit.  This
// follows the paper's mixed FFN.  The ReLU works on the quantised value and
// keeps scale and zero point, so it is max(Y, zy); it is applied as the
// first linear layer writes its results rather than as a separate pass (this
// design's choice; the result is the same).  The hidden 4D-wide tensor is
// held in an intermediate buffer of resource type STYLE (block RAM instead
// if it has at least BRAM_MIN_BITS bits and that parameter is non-zero).
//
// Interface: pulse 'start'; X is read row-major N x D through x_addr/x_data
// (synchronous, one cycle latency); Y is written row-major N x D; 'done'
// pulses with the last write.  Latency 2 * (N*HID*D + 2) + 1 cycles.
module ffn
  import tf_pkg::*;
#(
  parameter int         X_BITS = 6,
  parameter int         B      = 4,
  parameter int         N      = 12,
  parameter int         D      = 64,
  parameter int         HID    = 4 * D,
  parameter ram_style_e STYLE  = RAM_AUTO,
  parameter int         BRAM_MIN_BITS = 0,
  localparam int        AW     = clog2_1(N * D),
  localparam int        HAW    = clog2_1(N * HID)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  prm_wr_t                  prm,
  input  logic                     start,
  input  rq_cfg_t                  cfg_1,
  input  rq_cfg_t                  cfg_2,
  output logic                     busy,
  output logic                     done,
  output logic [AW-1:0]            x_addr,
  input  logic signed [X_BITS-1:0] x_data,
  output logic                     y_we,
  output logic [AW-1:0]            y_addr,
  output logic signed [B-1:0]      y_data
);

  logic dn_1, go_2, bz_1, bz_2;
  logic h_we;
  logic [HAW-1:0] h_wa, h_ra;
  logic signed [B-1:0] h_wd, h_rd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) go_2 <= 1'b0;
    else        go_2 <= dn_1;
  end

  assign busy = bz_1 | go_2 | bz_2;

  qlinear #(
    .X_BITS(X_BITS), .B(B), .R(N), .IN_DIM(D), .OUT_DIM(HID), .RELU(1'b1),
    .SEL_W(PRM_W_1), .SEL_B(PRM_B_1)
  ) u_lin1 (
    .clk(clk), .rst_n(rst_n), .prm(prm), .start(start), .cfg(cfg_1),
    .busy(bz_1), .done(dn_1), .x_addr(x_addr), .x_data(x_data),
    .y_we(h_we), .y_addr(h_wa), .y_r(), .y_c(), .y_data(h_wd)
  );

  qbuffer #(.WIDTH(B), .DEPTH(N * HID),
            .STYLE(buf_style(STYLE, (B) * (N * HID), BRAM_MIN_BITS))) u_hbuf (
    .clk(clk), .we(h_we), .waddr(h_wa), .wdata(h_wd), .raddr(h_ra), .rdata(h_rd)
  );

  qlinear #(
    .X_BITS(B), .B(B), .R(N), .IN_DIM(HID), .OUT_DIM(D), .RELU(1'b0),
    .SEL_W(PRM_W_2), .SEL_B(PRM_B_2)
  ) u_lin2 (
    .clk(clk), .rst_n(rst_n), .prm(prm), .start(go_2), .cfg(cfg_2),
    .busy(bz_2), .done(done), .x_addr(h_ra), .x_data(h_rd),
    .y_we(y_we), .y_addr(y_addr), .y_r(), .y_c(), .y_data(y_data)
  );

endmodule
