// qmatmul: sequential integer matrix-product engine with requantisation.
//
// Computes, for r in [0,R) and c in [0,C):
//   acc      = bias[c] + sum_{k<K} (A[r][k] - za) * (B[c][k] - zb)
//   Y[r][c]  = sat_Y(zy + round(acc * m / 2^s))      (max(Y, zy) if RELU)
// with one multiply-accumulate per clock cycle.  A is read at address
// r*A_RSTRIDE + k and B at c*B_CSTRIDE + k*B_KSTRIDE, so the same engine
// serves a linear layer (B = weight memory, row-major [C][K]), Q*K^T and
// attention*V.  All memories are synchronous-read with one cycle of
// latency; A, B and the bias are addressed in the same cycle.
//
// Interface: pulse 'start' for one cycle; the engine then issues R*C*K
// reads, writes one result per K cycles through y_we/y_addr/y_data
// (y_addr = r*C + c; y_r and y_c give the two indices), and pulses 'done'
// in the cycle its last write is presented.  Latency is R*C*K + 2 cycles
// from start to done.  The one-MAC-per-cycle schedule and the arithmetic
// form are this design's choices; the asymmetric operands and the bias
// added in the accumulator follow the paper.
module qmatmul
  import tf_pkg::*;
#(
  parameter int A_BITS    = 8,
  parameter int W_BITS    = 8,
  parameter int BIAS_BITS = 18,
  parameter int Y_BITS    = 8,
  parameter int R         = 12,
  parameter int C         = 64,
  parameter int K         = 64,
  parameter int A_RSTRIDE = K,
  parameter int B_CSTRIDE = K,
  parameter int B_KSTRIDE = 1,
  parameter bit HAS_BIAS  = 1'b1,
  parameter bit RELU      = 1'b0,
  parameter int A_DEPTH   = R * K,
  parameter int B_DEPTH   = C * K,
  localparam int A_AW     = clog2_1(A_DEPTH),
  localparam int B_AW     = clog2_1(B_DEPTH),
  localparam int R_AW     = clog2_1(R),
  localparam int C_AW     = clog2_1(C),
  localparam int Y_AW     = clog2_1(R * C)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  rq_cfg_t                     cfg,
  output logic                        busy,
  output logic                        done,
  output logic [A_AW-1:0]             a_addr,
  input  logic signed [A_BITS-1:0]    a_data,
  output logic [B_AW-1:0]             b_addr,
  input  logic signed [W_BITS-1:0]    b_data,
  output logic [C_AW-1:0]             bias_addr,
  input  logic signed [BIAS_BITS-1:0] bias_data,
  output logic                        y_we,
  output logic [Y_AW-1:0]             y_addr,
  output logic [R_AW-1:0]             y_r,
  output logic [C_AW-1:0]             y_c,
  output logic signed [Y_BITS-1:0]    y_data
);

  // issue stage counters
  logic            run;
  int unsigned     r, c, k;
  // data stage (one cycle behind the issue stage)
  logic            v1, first1, last1;
  logic [R_AW-1:0] r1;
  logic [C_AW-1:0] c1;
  logic signed [ACC_W-1:0] acc, acc_next;
  logic signed [A_BITS:0]  da;
  logic signed [W_BITS:0]  db;
  logic signed [A_BITS+W_BITS+1:0] prod;
  logic signed [Y_BITS-1:0] yq;

  assign a_addr    = A_AW'(r * A_RSTRIDE + k);
  assign b_addr    = B_AW'(c * B_CSTRIDE + k * B_KSTRIDE);
  assign bias_addr = C_AW'(c);
  assign busy      = run | v1 | y_we;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0;
      r   <= 0;
      c   <= 0;
      k   <= 0;
    end else if (start && !run) begin
      run <= 1'b1;
      r   <= 0;
      c   <= 0;
      k   <= 0;
    end else if (run) begin
      if (k == K - 1) begin
        k <= 0;
        if (c == C - 1) begin
          c <= 0;
          if (r == R - 1) begin
            r   <= 0;
            run <= 1'b0;
          end else begin
            r <= r + 1;
          end
        end else begin
          c <= c + 1;
        end
      end else begin
        k <= k + 1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1     <= 1'b0;
      first1 <= 1'b0;
      last1  <= 1'b0;
      r1     <= '0;
      c1     <= '0;
    end else begin
      v1     <= run;
      first1 <= (k == 0);
      last1  <= (k == K - 1);
      r1     <= R_AW'(r);
      c1     <= C_AW'(c);
    end
  end

  always_comb begin
    da   = (A_BITS+1)'(a_data) - (A_BITS+1)'(cfg.za);
    db   = (W_BITS+1)'(b_data) - (W_BITS+1)'(cfg.zb);
    prod = (A_BITS+W_BITS+2)'(da) * (A_BITS+W_BITS+2)'(db);
    acc_next = (first1 ? (HAS_BIAS ? ACC_W'(bias_data) : '0) : acc) + ACC_W'(prod);
  end

  always_comb begin
    longint yv;
    yv = sat(longint'(cfg.zy) + rq_scale(longint'(acc_next), cfg.m, cfg.s), Y_BITS);
    if (RELU && yv < longint'(cfg.zy)) yv = longint'(cfg.zy);
    yq = Y_BITS'(yv);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc    <= '0;
      y_we   <= 1'b0;
      y_addr <= '0;
      y_r    <= '0;
      y_c    <= '0;
      y_data <= '0;
      done   <= 1'b0;
    end else begin
      y_we <= 1'b0;
      done <= 1'b0;
      if (v1) begin
        acc <= acc_next;
        if (last1) begin
          y_we   <= 1'b1;
          y_addr <= Y_AW'(int'(r1) * C + int'(c1));
          y_r    <= r1;
          y_c    <= c1;
          y_data <= yq;
          done   <= (int'(r1) == R - 1) && (int'(c1) == C - 1);
        end
      end
    end
  end

endmodule
