// qbatchnorm: quantised batch normalisation over the channel dimension
// (BN_MHA and BN_FFN of the Transformer encoder layer).
//
// At inference a batch-norm layer is a per-channel affine map.  Folded into
// integers it becomes, for element i of an R x D tensor in row-major order
// with channel c = i mod D:
//   Y[i] = sat_Y(zy + round(((X[i]-zx) * g[c] + beta[c]) / 2^s))
// g[c] (16-bit signed) and beta[c] (32-bit signed) are loaded through the prm
// bus with prm.sel == SEL: addresses 0..D-1 write g, D..2D-1 write beta.
// The paper names the layer only; the folding, the widths and the register
// storage of the 2*D constants are this design's choices.
//
// Interface: pulse 'start'; one element per cycle from a synchronous input
// memory; 'done' pulses with the last write.  Latency R*D + 2 cycles.
module qbatchnorm
  import tf_pkg::*;
#(
  parameter int       X_BITS = 8,
  parameter int       Y_BITS = 8,
  parameter int       R      = 12,
  parameter int       D      = 64,
  parameter prm_sel_e SEL    = PRM_BN_MHA,
  localparam int      AW     = clog2_1(R * D)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  prm_wr_t                  prm,
  input  logic                     start,
  input  bn_cfg_t                  cfg,
  output logic                     busy,
  output logic                     done,
  output logic [AW-1:0]            rd_addr,
  input  logic signed [X_BITS-1:0] x_data,
  output logic                     y_we,
  output logic [AW-1:0]            y_addr,
  output logic signed [Y_BITS-1:0] y_data
);

  logic signed [15:0] g    [D];
  logic signed [31:0] beta [D];

  always_ff @(posedge clk) begin
    if (prm.en && prm.sel == SEL) begin
      if (int'(prm.addr) < D) g[int'(prm.addr)] <= prm.data[15:0];
      else if (int'(prm.addr) < 2 * D) beta[int'(prm.addr) - D] <= prm.data;
    end
  end

  logic          run, v1, last1;
  int unsigned   i, ch, ch1;
  logic [AW-1:0] a1;
  logic signed [Y_BITS-1:0] yq;

  assign rd_addr = AW'(i);
  assign busy    = run | v1 | y_we;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run   <= 1'b0;
      i     <= 0;
      ch    <= 0;
      ch1   <= 0;
      v1    <= 1'b0;
      last1 <= 1'b0;
      a1    <= '0;
    end else begin
      v1    <= run;
      last1 <= (i == R * D - 1);
      a1    <= AW'(i);
      ch1   <= ch;
      if (start && !run) begin
        run <= 1'b1;
        i   <= 0;
        ch  <= 0;
      end else if (run) begin
        ch <= (ch == D - 1) ? 0 : ch + 1;
        if (i == R * D - 1) begin
          run <= 1'b0;
          i   <= 0;
          ch  <= 0;
        end else begin
          i <= i + 1;
        end
      end
    end
  end

  always_comb begin
    longint t;
    t  = (longint'(x_data) - longint'(cfg.zx)) * longint'(g[ch1]) + longint'(beta[ch1]);
    yq = Y_BITS'(sat(longint'(cfg.zy) + rq_scale(t, 16'd1, cfg.s), Y_BITS));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y_we   <= 1'b0;
      y_addr <= '0;
      y_data <= '0;
      done   <= 1'b0;
    end else begin
      y_we   <= v1;
      y_addr <= a1;
      y_data <= yq;
      done   <= v1 && last1;
    end
  end

endmodule
