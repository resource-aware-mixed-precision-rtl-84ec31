// tb_qlinear: self-checking test of the mixed-precision linear layer.
//
// Two layers are tested: a 4-bit-input / 8-bit layer (mixed input, 14-bit
// bias) and an 8-bit-input / 4-bit layer with the folded ReLU.  Random
// weights, biases, inputs and quantisation constants are loaded; every
// output is compared with a behavioural reference, and the start-to-done
// latency is checked against R*OUT*IN + 2 cycles.
module tb_qlinear;
  import tf_pkg::*;
  import tf_ref_pkg::*;

  localparam int R = 3, IN = 5, OUT = 7;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  prm_wr_t prm;
  rq_cfg_t cfg_a, cfg_b;
  logic start_a, start_b, done_a, done_b, busy_a, busy_b;

  // input memories (synchronous read)
  int xa [R*IN];
  int xb [R*IN];
  logic [3:0] xa_addr, xb_addr;
  logic signed [3:0] xa_data;
  logic signed [7:0] xb_data;
  always_ff @(posedge clk) begin
    xa_data <= 4'(xa[xa_addr]);
    xb_data <= 8'(xb[xb_addr]);
  end

  logic ya_we, yb_we;
  logic [4:0] ya_addr, yb_addr;
  logic signed [7:0] ya_data;
  logic signed [3:0] yb_data;
  int ya [R*OUT];
  int yb [R*OUT];
  always_ff @(posedge clk) begin
    if (ya_we) ya[ya_addr] <= int'(ya_data);
    if (yb_we) yb[yb_addr] <= int'(yb_data);
  end

  qlinear #(.X_BITS(4), .B(8), .R(R), .IN_DIM(IN), .OUT_DIM(OUT), .RELU(1'b0),
            .SEL_W(PRM_W_IN), .SEL_B(PRM_B_IN)) dut_a (
    .clk(clk), .rst_n(rst_n), .prm(prm), .start(start_a), .cfg(cfg_a),
    .busy(busy_a), .done(done_a), .x_addr(xa_addr), .x_data(xa_data),
    .y_we(ya_we), .y_addr(ya_addr), .y_r(), .y_c(), .y_data(ya_data));

  qlinear #(.X_BITS(8), .B(4), .R(R), .IN_DIM(IN), .OUT_DIM(OUT), .RELU(1'b1),
            .SEL_W(PRM_W_1), .SEL_B(PRM_B_1)) dut_b (
    .clk(clk), .rst_n(rst_n), .prm(prm), .start(start_b), .cfg(cfg_b),
    .busy(busy_b), .done(done_b), .x_addr(xb_addr), .x_data(xb_data),
    .y_we(yb_we), .y_addr(yb_addr), .y_r(), .y_c(), .y_data(yb_data));

  int wa [OUT*IN], wb [OUT*IN], ba [OUT], bb [OUT];

  task automatic load(input prm_sel_e sel, input int addr, input int data);
    @(negedge clk);
    prm.en = 1'b1; prm.sel = sel; prm.addr = 16'(addr); prm.data = 32'(data);
    @(negedge clk);
    prm.en = 1'b0;
  endtask

  task automatic run_one(input bit which, output int cycles);
    @(negedge clk);
    if (which) start_b = 1'b1; else start_a = 1'b1;
    @(negedge clk);
    start_a = 1'b0; start_b = 1'b0;
    cycles = 1;
    while (!(which ? done_b : done_a)) begin
      @(negedge clk);
      cycles++;
    end
    @(negedge clk);
  endtask

  initial begin
    int m, s, cyc, relu_hits;
    prm = '0; start_a = 0; start_b = 0;
    relu_hits = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int trial = 0; trial < 4; trial++) begin
      cfg_a = '0; cfg_b = '0;
      cfg_a.za = 8'(rnd_zp(4)); cfg_a.zb = 8'(rnd_zp(8)); cfg_a.zy = 8'(rnd_zp(8));
      mk_ms(1.0 / (8.0 * 128.0) * (trial + 1), m, s);
      cfg_a.m = 16'(m); cfg_a.s = 6'(s);
      cfg_b.za = 8'(rnd_zp(8)); cfg_b.zb = 8'(rnd_zp(4)); cfg_b.zy = 8'(rnd_zp(4));
      mk_ms(1.0 / (128.0 * 8.0) * (trial + 1), m, s);
      cfg_b.m = 16'(m); cfg_b.s = 6'(s);
      for (int i = 0; i < OUT*IN; i++) begin
        wa[i] = rnd_q(8); load(PRM_W_IN, i, wa[i]);
        wb[i] = rnd_q(4); load(PRM_W_1, i, wb[i]);
      end
      for (int j = 0; j < OUT; j++) begin
        ba[j] = rnd_q(14) / 4; load(PRM_B_IN, j, ba[j]);
        bb[j] = rnd_q(14) / 4; load(PRM_B_1, j, bb[j]);
      end
      for (int i = 0; i < R*IN; i++) begin
        xa[i] = rnd_q(4);
        xb[i] = rnd_q(8);
      end
      run_one(1'b0, cyc);
      checks++;
      if (cyc != R*OUT*IN + 2) begin
        failures++;
        $display("FAIL latency a: %0d cycles, expected %0d", cyc, R*OUT*IN + 2);
      end
      run_one(1'b1, cyc);
      checks++;
      if (cyc != R*OUT*IN + 2) begin
        failures++;
        $display("FAIL latency b: %0d cycles", cyc);
      end
      for (int r = 0; r < R; r++) begin
        for (int j = 0; j < OUT; j++) begin
          longint acc_a, acc_b;
          int exp_a, exp_b;
          acc_a = ba[j];
          acc_b = bb[j];
          for (int i = 0; i < IN; i++) begin
            acc_a += longint'(xa[r*IN+i] - int'(cfg_a.za)) * (wa[j*IN+i] - int'(cfg_a.zb));
            acc_b += longint'(xb[r*IN+i] - int'(cfg_b.za)) * (wb[j*IN+i] - int'(cfg_b.zb));
          end
          exp_a = ref_rq(acc_a, int'(cfg_a.m), int'(cfg_a.s), int'(cfg_a.zy), 8);
          exp_b = ref_rq(acc_b, int'(cfg_b.m), int'(cfg_b.s), int'(cfg_b.zy), 4, 1'b1);
          if (ref_rq(acc_b, int'(cfg_b.m), int'(cfg_b.s), int'(cfg_b.zy), 4) < int'(cfg_b.zy))
            relu_hits++;
          checks += 2;
          if (ya[r*OUT+j] != exp_a) begin
            failures++;
            $display("FAIL a r=%0d j=%0d got %0d exp %0d", r, j, ya[r*OUT+j], exp_a);
          end
          if (yb[r*OUT+j] != exp_b) begin
            failures++;
            $display("FAIL b r=%0d j=%0d got %0d exp %0d", r, j, yb[r*OUT+j], exp_b);
          end
        end
      end
    end
    checks++;
    if (relu_hits == 0) begin
      failures++;
      $display("FAIL ReLU clamp never exercised");
    end
    $display("ReLU clamps exercised: %0d", relu_hits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
