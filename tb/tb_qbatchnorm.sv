// tb_qbatchnorm: self-checking test of the folded quantised batch norm.
//
// Loads random per-channel multipliers and offsets, runs an 8-bit to 6-bit
// normalisation over a 5 x 6 tensor and compares every element with a
// behavioural reference; the latency R*D + 2 is checked.
module tb_qbatchnorm;
  import tf_pkg::*;
  import tf_ref_pkg::*;

  localparam int R = 5, D = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  prm_wr_t prm;
  bn_cfg_t cfg;
  logic start, busy, done;
  logic [4:0] rd_addr;
  logic signed [7:0] x_data;
  logic y_we;
  logic [4:0] y_addr;
  logic signed [5:0] y_data;

  int x [R*D], y [R*D], g [D], beta [D];
  always_ff @(posedge clk) begin
    x_data <= 8'(x[rd_addr]);
    if (y_we) y[y_addr] <= int'(y_data);
  end

  qbatchnorm #(.X_BITS(8), .Y_BITS(6), .R(R), .D(D), .SEL(PRM_BN_FFN)) dut (
    .clk(clk), .rst_n(rst_n), .prm(prm), .start(start), .cfg(cfg), .busy(busy), .done(done),
    .rd_addr(rd_addr), .x_data(x_data), .y_we(y_we), .y_addr(y_addr), .y_data(y_data));

  task automatic load(input int addr, input int data);
    @(negedge clk);
    prm.en = 1'b1; prm.sel = PRM_BN_FFN; prm.addr = 16'(addr); prm.data = 32'(data);
    @(negedge clk);
    prm.en = 1'b0;
  endtask

  initial begin
    int cyc;
    start = 1'b0; cfg = '0; prm = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int trial = 0; trial < 4; trial++) begin
      cfg.zx = 8'(rnd_zp(8)); cfg.zy = 8'(rnd_zp(6)); cfg.s = 6'(12);
      for (int c = 0; c < D; c++) begin
        g[c]    = int'($urandom_range(0, 2000)) - 700;
        beta[c] = int'($urandom_range(0, 200000)) - 100000;
        load(c, g[c]);
        load(D + c, beta[c]);
      end
      // a write with the wrong select must not disturb the constants
      @(negedge clk);
      prm.en = 1'b1; prm.sel = PRM_BN_MHA; prm.addr = 16'd0; prm.data = 32'd12345;
      @(negedge clk);
      prm.en = 1'b0;
      for (int i = 0; i < R*D; i++) x[i] = rnd_q(8);
      @(negedge clk); start = 1'b1;
      @(negedge clk); start = 1'b0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      @(negedge clk);
      checks++;
      if (cyc != R*D + 2) begin
        failures++;
        $display("FAIL latency %0d", cyc);
      end
      for (int i = 0; i < R*D; i++) begin
        int e;
        e = ref_rq(longint'(x[i] - int'(cfg.zx)) * g[i % D] + beta[i % D], 1, 12, int'(cfg.zy), 6);
        checks++;
        if (y[i] != e) begin
          failures++;
          $display("FAIL i=%0d got %0d exp %0d", i, y[i], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
