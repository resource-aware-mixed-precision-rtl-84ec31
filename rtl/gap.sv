// gap: quantised global average pooling over the time steps.
//
// For each channel c of an R x D input (row-major, row = time step):
//   Y[c] = sat_Y(zy + round(m/2^s * sum_{t<R} (X[t][c] - zx)))
// The 1/R of the average is folded into the multiplier m together with the
// input-to-output scale ratio.  The paper gives the operation; the folding
// and the sequential schedule are this design's choices.
//
// Interface: pulse 'start'; one input read per cycle (synchronous memory,
// one cycle latency), one result written every R cycles, 'done' pulses with
// the last write.  Latency D*R + 2 cycles.
module gap
  import tf_pkg::*;
#(
  parameter int  X_BITS = 8,
  parameter int  Y_BITS = 8,
  parameter int  R      = 12,
  parameter int  D      = 64,
  localparam int AW     = clog2_1(R * D),
  localparam int D_AW   = clog2_1(D)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  rq_cfg_t                  cfg,
  output logic                     busy,
  output logic                     done,
  output logic [AW-1:0]            rd_addr,
  input  logic signed [X_BITS-1:0] x_data,
  output logic                     y_we,
  output logic [D_AW-1:0]          y_addr,
  output logic signed [Y_BITS-1:0] y_data
);

  logic            run, v1, first1, last1;
  int unsigned     c, t;
  logic [D_AW-1:0] c1;
  logic signed [ACC_W-1:0] acc, acc_next;
  logic signed [Y_BITS-1:0] yq;

  assign rd_addr = AW'(t * D + c);
  assign busy    = run | v1 | y_we;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run    <= 1'b0;
      c      <= 0;
      t      <= 0;
      v1     <= 1'b0;
      first1 <= 1'b0;
      last1  <= 1'b0;
      c1     <= '0;
    end else begin
      v1     <= run;
      first1 <= (t == 0);
      last1  <= (t == R - 1);
      c1     <= D_AW'(c);
      if (start && !run) begin
        run <= 1'b1;
        c   <= 0;
        t   <= 0;
      end else if (run) begin
        if (t == R - 1) begin
          t <= 0;
          if (c == D - 1) begin
            c   <= 0;
            run <= 1'b0;
          end else begin
            c <= c + 1;
          end
        end else begin
          t <= t + 1;
        end
      end
    end
  end

  always_comb begin
    acc_next = (first1 ? '0 : acc) + ACC_W'(longint'(x_data) - longint'(cfg.za));
    yq = Y_BITS'(sat(longint'(cfg.zy) + rq_scale(longint'(acc_next), cfg.m, cfg.s), Y_BITS));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc    <= '0;
      y_we   <= 1'b0;
      y_addr <= '0;
      y_data <= '0;
      done   <= 1'b0;
    end else begin
      y_we <= 1'b0;
      done <= 1'b0;
      if (v1) begin
        acc <= acc_next;
        if (last1) begin
          y_we   <= 1'b1;
          y_addr <= c1;
          y_data <= yq;
          done   <= (int'(c1) == D - 1);
        end
      end
    end
  end

endmodule
