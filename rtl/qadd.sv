// qadd: mixed-precision quantised element-wise addition (Add_PE, Add_MHA,
// Add_FFN of the Transformer).
//
// For i in [0,LEN):
//   Y[i] = sat_Y(zy + round(((X1[i]-z1)*m1 + (X2[i]-z2)*m2) / 2^s))
// The two inputs keep the bitwidths their producers gave them (X1_BITS,
// X2_BITS: 4, 6 or 8) and the output uses the block's own bitwidth Y_BITS,
// as in the paper's mixed addition; m1/2^s and m2/2^s are the two rescale
// factors s1/sy and s2/sy, a fixed-point form chosen by this design.
//
// Interface: pulse 'start'; the block reads both inputs at the same address
// (synchronous memories, one cycle latency), writes one result per cycle and
// pulses 'done' with its last write.  Latency LEN + 2 cycles.
module qadd
  import tf_pkg::*;
#(
  parameter int  X1_BITS = 8,
  parameter int  X2_BITS = 8,
  parameter int  Y_BITS  = 8,
  parameter int  LEN     = 768,
  localparam int AW      = clog2_1(LEN)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  add_cfg_t                  cfg,
  output logic                      busy,
  output logic                      done,
  output logic [AW-1:0]             rd_addr,
  input  logic signed [X1_BITS-1:0] x1_data,
  input  logic signed [X2_BITS-1:0] x2_data,
  output logic                      y_we,
  output logic [AW-1:0]             y_addr,
  output logic signed [Y_BITS-1:0]  y_data
);

  logic          run, v1, last1;
  int unsigned   i;
  logic [AW-1:0] a1;
  logic signed [Y_BITS-1:0] yq;

  assign rd_addr = AW'(i);
  assign busy    = run | v1 | y_we;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run   <= 1'b0;
      i     <= 0;
      v1    <= 1'b0;
      last1 <= 1'b0;
      a1    <= '0;
    end else begin
      v1    <= run;
      last1 <= (i == LEN - 1);
      a1    <= AW'(i);
      if (start && !run) begin
        run <= 1'b1;
        i   <= 0;
      end else if (run) begin
        if (i == LEN - 1) begin
          run <= 1'b0;
          i   <= 0;
        end else begin
          i <= i + 1;
        end
      end
    end
  end

  always_comb begin
    longint t;
    t  = (longint'(x1_data) - longint'(cfg.z1)) * longint'({48'd0, cfg.m1})
       + (longint'(x2_data) - longint'(cfg.z2)) * longint'({48'd0, cfg.m2});
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
