// tb_ffn: self-checking test of the feed-forward block.
//
// A 3 x 4 input at 6 bits goes through a 4 -> 16 -> 4 FFN with 4-bit
// weights and activations (mixed input on the first linear layer only).
// The output is compared with a behavioural model of linear, ReLU, linear;
// the ReLU clamp must be hit at least once, and the latency is checked.
module tb_ffn;
  import tf_pkg::*;
  import tf_ref_pkg::*;

  localparam int N = 3, D = 4, H = 16, XB = 6, B = 4;
  localparam int AW = clog2_1(N * D);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0, relu_hits = 0;

  prm_wr_t prm;
  rq_cfg_t c1, c2;
  logic start, busy, done;
  logic [AW-1:0] x_addr, y_addr;
  logic signed [XB-1:0] x_data;
  logic y_we;
  logic signed [B-1:0] y_data;

  int x [N*D], y [N*D];
  always_ff @(posedge clk) begin
    x_data <= XB'(x[x_addr]);
    if (y_we) y[y_addr] <= int'(y_data);
  end

  ffn #(.X_BITS(XB), .B(B), .N(N), .D(D), .HID(H), .STYLE(RAM_DRAM)) dut (
    .clk(clk), .rst_n(rst_n), .prm(prm), .start(start), .cfg_1(c1), .cfg_2(c2),
    .busy(busy), .done(done), .x_addr(x_addr), .x_data(x_data),
    .y_we(y_we), .y_addr(y_addr), .y_data(y_data));

  int w1 [H*D], b1 [H], w2 [D*H], b2 [D];

  task automatic load(input prm_sel_e sel, input int addr, input int data);
    @(negedge clk);
    prm.en = 1'b1; prm.sel = sel; prm.addr = 16'(addr); prm.data = 32'(data);
    @(negedge clk);
    prm.en = 1'b0;
  endtask

  initial begin
    int cyc, m, s;
    int h [N*H], ye [N*D];
    start = 1'b0; prm = '0; c1 = '0; c2 = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int trial = 0; trial < 4; trial++) begin
      c1.za = 8'(rnd_zp(XB)); c1.zb = 8'(rnd_zp(B)); c1.zy = 8'(rnd_zp(B));
      mk_ms(0.02, m, s); c1.m = 16'(m); c1.s = 6'(s);
      c2.za = 8'(rnd_zp(B)); c2.zb = 8'(rnd_zp(B)); c2.zy = 8'(rnd_zp(B));
      mk_ms(0.03, m, s); c2.m = 16'(m); c2.s = 6'(s);
      for (int i = 0; i < H*D; i++) begin w1[i] = rnd_q(B); load(PRM_W_1, i, w1[i]); end
      for (int i = 0; i < H; i++)   begin b1[i] = rnd_q(8); load(PRM_B_1, i, b1[i]); end
      for (int i = 0; i < D*H; i++) begin w2[i] = rnd_q(B); load(PRM_W_2, i, w2[i]); end
      for (int i = 0; i < D; i++)   begin b2[i] = rnd_q(8); load(PRM_B_2, i, b2[i]); end
      for (int i = 0; i < N*D; i++) x[i] = rnd_q(XB);

      @(negedge clk); start = 1'b1;
      @(negedge clk); start = 1'b0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      @(negedge clk);

      for (int t = 0; t < N; t++)
        for (int j = 0; j < H; j++) begin
          longint acc;
          acc = b1[j];
          for (int i = 0; i < D; i++)
            acc += longint'(x[t*D+i] - int'(c1.za)) * (w1[j*D+i] - int'(c1.zb));
          h[t*H+j] = ref_rq(acc, int'(c1.m), int'(c1.s), int'(c1.zy), B, 1'b1);
          if (ref_rq(acc, int'(c1.m), int'(c1.s), int'(c1.zy), B) < int'(c1.zy)) relu_hits++;
        end
      for (int t = 0; t < N; t++)
        for (int j = 0; j < D; j++) begin
          longint acc;
          acc = b2[j];
          for (int i = 0; i < H; i++)
            acc += longint'(h[t*H+i] - int'(c2.za)) * (w2[j*H+i] - int'(c2.zb));
          ye[t*D+j] = ref_rq(acc, int'(c2.m), int'(c2.s), int'(c2.zy), B);
        end
      for (int i = 0; i < N*D; i++) begin
        checks++;
        if (y[i] != ye[i]) begin
          failures++;
          $display("FAIL trial %0d i=%0d got %0d exp %0d", trial, i, y[i], ye[i]);
        end
      end
      checks++;
      if (cyc != 2 * (N*H*D + 2) + 1) begin
        failures++;
        $display("FAIL latency %0d, expected %0d", cyc, 2 * (N*H*D + 2) + 1);
      end
    end
    checks++;
    if (relu_hits == 0) begin
      failures++;
      $display("FAIL ReLU never clamped");
    end
    $display("ReLU clamps: %0d", relu_hits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
