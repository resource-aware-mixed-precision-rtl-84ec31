// tb_gap: self-checking test of quantised global average pooling.
//
// Averages a 7 x 5 tensor over its 7 rows (time steps) with the 1/7 folded
// into the multiplier and compares each channel with a behavioural
// reference; the latency D*R + 2 is checked.
module tb_gap;
  import tf_pkg::*;
  import tf_ref_pkg::*;

  localparam int R = 7, D = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  rq_cfg_t cfg;
  logic start, busy, done;
  logic [5:0] rd_addr;
  logic signed [5:0] x_data;
  logic y_we;
  logic [2:0] y_addr;
  logic signed [7:0] y_data;

  int x [R*D], y [D];
  always_ff @(posedge clk) begin
    x_data <= 6'(x[rd_addr]);
    if (y_we) y[y_addr] <= int'(y_data);
  end

  gap #(.X_BITS(6), .Y_BITS(8), .R(R), .D(D)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .cfg(cfg), .busy(busy), .done(done),
    .rd_addr(rd_addr), .x_data(x_data), .y_we(y_we), .y_addr(y_addr), .y_data(y_data));

  initial begin
    int cyc, m, s;
    start = 1'b0; cfg = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int trial = 0; trial < 5; trial++) begin
      cfg.za = 8'(rnd_zp(6)); cfg.zy = 8'(rnd_zp(8));
      mk_ms((1.0 + trial) / R, m, s);
      cfg.m = 16'(m); cfg.s = 6'(s);
      for (int i = 0; i < R*D; i++) x[i] = rnd_q(6);
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
      for (int c = 0; c < D; c++) begin
        longint sum;
        int e;
        sum = 0;
        for (int t = 0; t < R; t++) sum += x[t*D + c] - int'(cfg.za);
        e = ref_rq(sum, m, s, int'(cfg.zy), 8);
        checks++;
        if (y[c] != e) begin
          failures++;
          $display("FAIL c=%0d got %0d exp %0d", c, y[c], e);
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
