// tb_mha: self-checking test of the single-head self-attention block.
//
// A small instance (N = 4 time steps, D = 4) with 8-bit input and 6-bit
// internals is loaded with random projection weights and biases and with an
// exponent table exp(-d * 0.15) * 65535; the block's output is compared
// with a behavioural model that recomputes Q, K, V, the scores, the softmax,
// the context and the output projection.  The total latency is checked
// against the sum of the five engine latencies.
module tb_mha;
  import tf_pkg::*;
  import tf_ref_pkg::*;

  localparam int N = 4, D = 4, XB = 8, B = 6;
  localparam int AW = clog2_1(N * D);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  prm_wr_t prm;
  rq_cfg_t c_qkv, c_score, c_ctx, c_oproj;
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

  mha #(.X_BITS(XB), .B(B), .N(N), .D(D), .STYLE(RAM_AUTO)) dut (
    .clk(clk), .rst_n(rst_n), .prm(prm), .start(start),
    .cfg_qkv(c_qkv), .cfg_score(c_score), .cfg_ctx(c_ctx), .cfg_oproj(c_oproj),
    .busy(busy), .done(done), .x_addr(x_addr), .x_data(x_data),
    .y_we(y_we), .y_addr(y_addr), .y_data(y_data));

  int wqkv [3*D*D], bqkv [3*D], wo [D*D], bo [D], lut [1 << B];

  task automatic load(input prm_sel_e sel, input int addr, input int data);
    @(negedge clk);
    prm.en = 1'b1; prm.sel = sel; prm.addr = 16'(addr); prm.data = 32'(data);
    @(negedge clk);
    prm.en = 1'b0;
  endtask

  function automatic void set_cfg(ref rq_cfg_t c, input int za, input int zb, input int zy,
                                  input real f);
    int m, s;
    mk_ms(f, m, s);
    c.za = 8'(za); c.zb = 8'(zb); c.zy = 8'(zy); c.m = 16'(m); c.s = 6'(s);
  endfunction

  initial begin
    int cyc, exp_cyc;
    int q [N*D], k [N*D], v [N*D], sc [N*N], a [N*N], cx [N*D], ye [N*D];
    start = 1'b0; prm = '0;
    c_qkv = '0; c_score = '0; c_ctx = '0; c_oproj = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int d = 0; d < (1 << B); d++) begin
      lut[d] = int'($floor($exp(-0.15 * d) * 65535.0 + 0.5));
      load(PRM_EXP, d, lut[d]);
    end
    for (int trial = 0; trial < 3; trial++) begin
      set_cfg(c_qkv, rnd_zp(XB), rnd_zp(B), rnd_zp(B), 0.003);
      set_cfg(c_score, rnd_zp(B), rnd_zp(B), rnd_zp(B), 0.01 * (trial + 1));
      set_cfg(c_ctx, 7, rnd_zp(B), rnd_zp(B), 1.0 / 32.0);   // za ignored: forced to 0
      set_cfg(c_oproj, rnd_zp(B), rnd_zp(B), rnd_zp(B), 0.008);
      for (int i = 0; i < 3*D*D; i++) begin wqkv[i] = rnd_q(B); load(PRM_W_QKV, i, wqkv[i]); end
      for (int i = 0; i < 3*D; i++)   begin bqkv[i] = rnd_q(12); load(PRM_B_QKV, i, bqkv[i]); end
      for (int i = 0; i < D*D; i++)   begin wo[i] = rnd_q(B); load(PRM_W_O, i, wo[i]); end
      for (int i = 0; i < D; i++)     begin bo[i] = rnd_q(10); load(PRM_B_O, i, bo[i]); end
      for (int i = 0; i < N*D; i++) x[i] = rnd_q(XB);

      @(negedge clk); start = 1'b1;
      @(negedge clk); start = 1'b0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      @(negedge clk);

      // reference model
      for (int t = 0; t < N; t++)
        for (int j = 0; j < 3*D; j++) begin
          longint acc;
          int val;
          acc = bqkv[j];
          for (int i = 0; i < D; i++)
            acc += longint'(x[t*D+i] - int'(c_qkv.za)) * (wqkv[j*D+i] - int'(c_qkv.zb));
          val = ref_rq(acc, int'(c_qkv.m), int'(c_qkv.s), int'(c_qkv.zy), B);
          if (j < D) q[t*D+j] = val;
          else if (j < 2*D) k[t*D+j-D] = val;
          else v[t*D+j-2*D] = val;
        end
      for (int t = 0; t < N; t++)
        for (int u = 0; u < N; u++) begin
          longint acc;
          acc = 0;
          for (int i = 0; i < D; i++)
            acc += longint'(q[t*D+i] - int'(c_score.za)) * (k[u*D+i] - int'(c_score.zb));
          sc[t*N+u] = ref_rq(acc, int'(c_score.m), int'(c_score.s), int'(c_score.zy), B);
        end
      for (int t = 0; t < N; t++) begin
        int mx;
        longint sum;
        int e [N];
        mx = sc[t*N];
        for (int u = 1; u < N; u++) if (sc[t*N+u] > mx) mx = sc[t*N+u];
        sum = 0;
        for (int u = 0; u < N; u++) begin e[u] = lut[mx - sc[t*N+u]]; sum += e[u]; end
        for (int u = 0; u < N; u++) begin
          longint qv;
          qv = (longint'(e[u]) * (1 << (B - 1)) + sum / 2) / sum;
          if (qv > (1 << (B - 1)) - 1) qv = (1 << (B - 1)) - 1;
          a[t*N+u] = int'(qv);
        end
      end
      for (int t = 0; t < N; t++)
        for (int j = 0; j < D; j++) begin
          longint acc;
          acc = 0;
          for (int u = 0; u < N; u++) acc += longint'(a[t*N+u]) * (v[u*D+j] - int'(c_ctx.zb));
          cx[t*D+j] = ref_rq(acc, int'(c_ctx.m), int'(c_ctx.s), int'(c_ctx.zy), B);
        end
      for (int t = 0; t < N; t++)
        for (int j = 0; j < D; j++) begin
          longint acc;
          acc = bo[j];
          for (int i = 0; i < D; i++)
            acc += longint'(cx[t*D+i] - int'(c_oproj.za)) * (wo[j*D+i] - int'(c_oproj.zb));
          ye[t*D+j] = ref_rq(acc, int'(c_oproj.m), int'(c_oproj.s), int'(c_oproj.zy), B);
        end

      for (int i = 0; i < N*D; i++) begin
        checks++;
        if (y[i] != ye[i]) begin
          failures++;
          $display("FAIL trial %0d i=%0d got %0d exp %0d", trial, i, y[i], ye[i]);
        end
      end
      // QKV + score + softmax + context + projection, each with its
      // start/done hand-over
      exp_cyc = (N*3*D*D + 2) + 1 + (N*N*D + 2) + 1 + (N*(3*N + 2) + 2) + 1
              + (N*D*N + 2) + 1 + (N*D*D + 2);
      checks++;
      if (cyc != exp_cyc) begin
        failures++;
        $display("FAIL latency %0d, expected about %0d", cyc, exp_cyc);
      end
      $display("trial %0d: latency %0d cycles (model %0d)", trial, cyc, exp_cyc);
    end
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
