// tb_qadd: self-checking test of the mixed-precision quantised addition.
//
// A 4-bit and a 6-bit input are added into an 8-bit output with random zero
// points and rescale factors; every output is compared with a behavioural
// reference, saturation is forced to happen, and the latency LEN + 2 is
// checked.
module tb_qadd;
  import tf_pkg::*;
  import tf_ref_pkg::*;

  localparam int LEN = 50;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0, sat_hits = 0;

  add_cfg_t cfg;
  logic start, busy, done;
  logic [5:0] rd_addr;
  logic signed [3:0] x1_data;
  logic signed [5:0] x2_data;
  logic y_we;
  logic [5:0] y_addr;
  logic signed [7:0] y_data;

  int x1 [LEN], x2 [LEN], y [LEN];
  always_ff @(posedge clk) begin
    x1_data <= 4'(x1[rd_addr]);
    x2_data <= 6'(x2[rd_addr]);
    if (y_we) y[y_addr] <= int'(y_data);
  end

  qadd #(.X1_BITS(4), .X2_BITS(6), .Y_BITS(8), .LEN(LEN)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .cfg(cfg), .busy(busy), .done(done),
    .rd_addr(rd_addr), .x1_data(x1_data), .x2_data(x2_data),
    .y_we(y_we), .y_addr(y_addr), .y_data(y_data));

  initial begin
    int cyc;
    start = 1'b0; cfg = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int trial = 0; trial < 6; trial++) begin
      cfg.z1 = 8'(rnd_zp(4)); cfg.z2 = 8'(rnd_zp(6)); cfg.zy = 8'(rnd_zp(8));
      cfg.m1 = 16'($urandom_range(1000, 30000) * (trial + 1));
      cfg.m2 = 16'($urandom_range(1000, 30000));
      cfg.s  = 6'(10 + trial % 3);
      for (int i = 0; i < LEN; i++) begin
        x1[i] = rnd_q(4);
        x2[i] = rnd_q(6);
      end
      @(negedge clk); start = 1'b1;
      @(negedge clk); start = 1'b0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      @(negedge clk);
      checks++;
      if (cyc != LEN + 2) begin
        failures++;
        $display("FAIL latency %0d", cyc);
      end
      for (int i = 0; i < LEN; i++) begin
        longint t;
        int e;
        t = longint'(x1[i] - int'(cfg.z1)) * int'(cfg.m1) + longint'(x2[i] - int'(cfg.z2)) * int'(cfg.m2);
        e = ref_rq(t, 1, int'(cfg.s), int'(cfg.zy), 8);
        if (e == 127 || e == -128) sat_hits++;
        checks++;
        if (y[i] != e) begin
          failures++;
          $display("FAIL i=%0d got %0d exp %0d", i, y[i], e);
        end
      end
    end
    checks++;
    if (sat_hits == 0) begin
      failures++;
      $display("FAIL saturation never exercised");
    end
    $display("saturations: %0d", sat_hits);
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
