// qlinear: mixed-precision integer-only linear layer with its own weight and
// bias memories.
//
// Y[r][j] = sat_Y(zy + round(m/2^s * (B[j] + sum_i (X[r][i]-zx)(W[j][i]-zw))))
// for R rows (time steps) of IN_DIM inputs and OUT_DIM outputs.  As in the
// paper's mixed-precision scheme, the input bitwidth X_BITS is whatever the
// previous layer produced (4, 6 or 8) while weights and outputs use the
// layer's own bitwidth B; the bias width follows from the product width
// (X_BITS + B + 2: 18 bits for 8x8, 14 for 4x8).  RELU folds the ReLU that
// follows the first FFN linear layer into the output stage (max(Y, zy)).
//
// The weights are held in a block-RAM qbuffer (row-major [OUT_DIM][IN_DIM])
// and the biases in a second one; the host writes them through the prm bus
// (prm.sel equal to SEL_W or SEL_B).  The paper bakes trained parameters
// into the generated hardware; loading them at run time is this design's
// choice, so that one netlist can run any trained model of the same shape.
// Timing is that of qmatmul: R*OUT_DIM*IN_DIM + 2 cycles from start to done.
module qlinear
  import tf_pkg::*;
#(
  parameter int       X_BITS  = 8,
  parameter int       B       = 8,
  parameter int       R       = 12,
  parameter int       IN_DIM  = 64,
  parameter int       OUT_DIM = 64,
  parameter bit       RELU    = 1'b0,
  parameter prm_sel_e SEL_W   = PRM_W_IN,
  parameter prm_sel_e SEL_B   = PRM_B_IN,
  localparam int      BB      = bias_bits(X_BITS, B),
  localparam int      X_AW    = clog2_1(R * IN_DIM),
  localparam int      W_AW    = clog2_1(OUT_DIM * IN_DIM),
  localparam int      R_AW    = clog2_1(R),
  localparam int      C_AW    = clog2_1(OUT_DIM),
  localparam int      Y_AW    = clog2_1(R * OUT_DIM)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  prm_wr_t                  prm,
  input  logic                     start,
  input  rq_cfg_t                  cfg,
  output logic                     busy,
  output logic                     done,
  output logic [X_AW-1:0]          x_addr,
  input  logic signed [X_BITS-1:0] x_data,
  output logic                     y_we,
  output logic [Y_AW-1:0]          y_addr,
  output logic [R_AW-1:0]          y_r,
  output logic [C_AW-1:0]          y_c,
  output logic signed [B-1:0]      y_data
);

  logic [W_AW-1:0]          w_addr;
  logic signed [B-1:0]      w_data;
  logic [C_AW-1:0]          bias_addr;
  logic signed [BB-1:0]     bias_data;

  qbuffer #(.WIDTH(B), .DEPTH(OUT_DIM * IN_DIM), .STYLE(RAM_BRAM)) u_wmem (
    .clk   (clk),
    .we    (prm.en && prm.sel == SEL_W),
    .waddr (W_AW'(prm.addr)),
    .wdata (B'(prm.data)),
    .raddr (w_addr),
    .rdata (w_data)
  );

  qbuffer #(.WIDTH(BB), .DEPTH(OUT_DIM), .STYLE(RAM_BRAM)) u_bmem (
    .clk   (clk),
    .we    (prm.en && prm.sel == SEL_B),
    .waddr (C_AW'(prm.addr)),
    .wdata (BB'(prm.data)),
    .raddr (bias_addr),
    .rdata (bias_data)
  );

  qmatmul #(
    .A_BITS(X_BITS), .W_BITS(B), .BIAS_BITS(BB), .Y_BITS(B),
    .R(R), .C(OUT_DIM), .K(IN_DIM),
    .A_RSTRIDE(IN_DIM), .B_CSTRIDE(IN_DIM), .B_KSTRIDE(1),
    .HAS_BIAS(1'b1), .RELU(RELU)
  ) u_mm (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (start),
    .cfg       (cfg),
    .busy      (busy),
    .done      (done),
    .a_addr    (x_addr),
    .a_data    (x_data),
    .b_addr    (w_addr),
    .b_data    (w_data),
    .bias_addr (bias_addr),
    .bias_data (bias_data),
    .y_we      (y_we),
    .y_addr    (y_addr),
    .y_r       (y_r),
    .y_c       (y_c),
    .y_data    (y_data)
  );

endmodule
