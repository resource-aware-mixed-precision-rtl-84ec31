// tf_e2e_run: end-to-end checker for one configuration of the accelerator.
//
// Used by the workload testbench to run the network at the sequence lengths
// and bitwidth combinations other than the default one.  It builds tf_top
// with the given parameters, generates a random model and random
// quantisation constants, loads them through the parameter bus, runs RUNS
// inferences on random input windows and compares the embedding, MHA, FFN
// and BN_FFN buffers and the forecast with a behavioural model of the whole
// network (the same model as the default-size end-to-end test).  It drives
// its own clock and reset; when it is finished it raises 'fin' and reports
// its check and failure counts, the mechanism counters (saturation, ReLU
// clamp, buffer hand-overs, every sequencer phase) and the cycle count of
// the last inference.  The cycle count is checked against the sum of the
// engine latencies; the paper's measured time is only printed next to it.
module tf_e2e_run #(
  parameter string NAME = "default",
  parameter int N = 12, parameter int M = 3, parameter int D = 64, parameter int OUT = 1,
  parameter int XB = 8,
  parameter int B_LIN_IN = 8, parameter int B_ADD_PE = 8, parameter int B_MHA = 6,
  parameter int B_ADD_MHA = 8, parameter int B_BN_MHA = 6, parameter int B_FFN = 4,
  parameter int B_ADD_FFN = 8, parameter int B_BN_FFN = 8, parameter int B_GAP = 8,
  parameter int B_LOUT = 8,
  parameter int BRAM_MIN_BITS = 0,
  parameter int RUNS = 1,
  parameter real PAPER_MS = 0.0
) (
  output logic fin,
  output int   checks,
  output int   failures,
  output int   cycles
);
  import tf_pkg::*;
  import tf_ref_pkg::*;

  localparam int H = 4 * D;

  typedef int arr_t[];

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  initial begin checks = 0; failures = 0; fin = 1'b0; cycles = 0; end
  int n_sat = 0, n_relu = 0;

  prm_wr_t prm;
  tf_cfg_t cfg;
  logic x_we, start, busy, done;
  logic [clog2_1(N*M)-1:0] x_addr;
  logic signed [XB-1:0] x_data;
  logic signed [B_LOUT-1:0] y [OUT];

  tf_top #(
    .N(N), .M(M), .D(D), .OUT_DIM(OUT), .X_BITS(XB),
    .B_LIN_IN(B_LIN_IN), .B_ADD_PE(B_ADD_PE), .B_MHA(B_MHA), .B_ADD_MHA(B_ADD_MHA),
    .B_BN_MHA(B_BN_MHA), .B_FFN(B_FFN), .B_ADD_FFN(B_ADD_FFN), .B_BN_FFN(B_BN_FFN),
    .B_GAP(B_GAP), .B_LOUT(B_LOUT), .BRAM_MIN_BITS(BRAM_MIN_BITS)) dut (
    .clk(clk), .rst_n(rst_n), .prm(prm), .cfg(cfg), .x_we(x_we), .x_addr(x_addr),
    .x_data(x_data), .start(start), .busy(busy), .done(done), .y(y));

  // ---------------- phase / mechanism monitors -----------------------------
  int phase_seen [11];
  int emb_handover = 0, bnm_handover = 0;
  always @(negedge clk) begin
    for (int p = 0; p < 11; p++) if (dut.go[p]) phase_seen[p]++;
    if (dut.go[4]) emb_handover++;   // P_ADD_MHA takes over the embedding buffer
    if (dut.go[7]) bnm_handover++;   // P_ADD_FFN takes over the BN_MHA buffer
  end

  // ---------------- reference model ----------------------------------------
  function automatic int rq_cnt(input longint acc, input int m, input int s, input int zy,
                                input int bits, input bit relu = 1'b0);
    int r0;
    r0 = ref_rq(acc, m, s, zy, bits);
    if (r0 == (1 << (bits - 1)) - 1 || r0 == -(1 << (bits - 1))) n_sat++;
    if (relu && r0 < zy) n_relu++;
    return ref_rq(acc, m, s, zy, bits, relu);
  endfunction

  // Y[r][j] for A (R x K, row-major) and B (C x K, row-major)
  function automatic arr_t mm(input arr_t a, input arr_t b, input arr_t bias, input int R,
                              input int C, input int K, input rq_cfg_t c, input int ybits,
                              input bit relu = 1'b0);
    arr_t y;
    y = new[R * C];
    for (int r = 0; r < R; r++)
      for (int j = 0; j < C; j++) begin
        longint acc;
        acc = (bias.size() > 0) ? bias[j] : 0;
        for (int k = 0; k < K; k++)
          acc += longint'(a[r*K+k] - int'(c.za)) * (b[j*K+k] - int'(c.zb));
        y[r*C+j] = rq_cnt(acc, int'(c.m), int'(c.s), int'(c.zy), ybits, relu);
      end
    return y;
  endfunction

  function automatic arr_t add(input arr_t a, input arr_t b, input add_cfg_t c, input int ybits);
    arr_t y;
    y = new[a.size()];
    for (int i = 0; i < a.size(); i++)
      y[i] = rq_cnt(longint'(a[i] - int'(c.z1)) * int'(c.m1) + longint'(b[i] - int'(c.z2)) * int'(c.m2),
                    1, int'(c.s), int'(c.zy), ybits);
    return y;
  endfunction

  function automatic arr_t bn(input arr_t a, input arr_t g, input arr_t be, input bn_cfg_t c,
                              input int ybits);
    arr_t y;
    y = new[a.size()];
    for (int i = 0; i < a.size(); i++)
      y[i] = rq_cnt(longint'(a[i] - int'(c.zx)) * g[i % D] + be[i % D], 1, int'(c.s),
                    int'(c.zy), ybits);
    return y;
  endfunction

  function automatic arr_t transpose(input arr_t a, input int R, input int C);
    arr_t y;
    y = new[R * C];
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) y[c*R+r] = a[r*C+c];
    return y;
  endfunction

  // ---------------- model parameters --------------------------------------
  arr_t w_in, b_in, pe, w_qkv, b_qkv, w_o, b_o, w1, b1, w2, b2, w_out, b_out;
  arr_t g_mha, be_mha, g_ffn, be_ffn, lut, none;
  arr_t r_lin, r_emb, r_mha, r_addm, r_bnm, r_ffn, r_addf, r_bnf, r_gap, r_y;

  // ---------------- intermediate buffers of the design -------------------
  // The buffers that the size rule (BRAM_MIN_BITS) moves to block RAM sit in
  // the qbuffer's g_bram branch, the others in g_auto; the GAP buffer is
  // always small and must stay in g_auto.
  int pk_emb [N*D], pk_mha [N*D], pk_ffn [N*D], pk_bnf [N*D];
  if (BRAM_MIN_BITS == 0) begin : g_peek
    task automatic snap();
      for (int i = 0; i < N * D; i++) begin
        pk_emb[i] = int'($signed(dut.u_emb_buf.g_auto.mem[i]));
        pk_mha[i] = int'($signed(dut.u_mha_buf.g_auto.mem[i]));
        pk_ffn[i] = int'($signed(dut.u_ffn_buf.g_auto.mem[i]));
        pk_bnf[i] = int'($signed(dut.u_bnf_buf.g_auto.mem[i]));
      end
    endtask
  end else begin : g_peek
    task automatic snap();
      for (int i = 0; i < N * D; i++) begin
        pk_emb[i] = int'($signed(dut.u_emb_buf.g_bram.mem[i]));
        pk_mha[i] = int'($signed(dut.u_mha_buf.g_bram.mem[i]));
        pk_ffn[i] = int'($signed(dut.u_ffn_buf.g_bram.mem[i]));
        pk_bnf[i] = int'($signed(dut.u_bnf_buf.g_bram.mem[i]));
      end
      if (int'($signed(dut.u_gap_buf.g_auto.mem[0])) != r_gap[0]) begin
        failures++;
        $display("FAIL %s: gap[0] %0d exp %0d", NAME, $signed(dut.u_gap_buf.g_auto.mem[0]), r_gap[0]);
      end
      checks++;
    endtask
  end

  task automatic load(input prm_sel_e sel, input int addr, input int data);
    prm.en = 1'b1; prm.sel = sel; prm.addr = 16'(addr); prm.data = 32'(data);
    @(negedge clk);
    prm.en = 1'b0;
  endtask

  task automatic load_arr(input prm_sel_e sel, input arr_t a, input int offset = 0);
    for (int i = 0; i < a.size(); i++) load(sel, offset + i, a[i]);
  endtask

  // random bias width: 'want' bits, but no wider than the layer's bias
  function automatic int bw(input int want, input int a, input int w);
    return (want < bias_bits(a, w)) ? want : bias_bits(a, w);
  endfunction

  function automatic arr_t rnd_arr(input int n, input int bits);
    arr_t a;
    a = new[n];
    foreach (a[i]) a[i] = rnd_q(bits);
    return a;
  endfunction

  // scale so that a K-term product of a-bit and w-bit values lands at about
  // a third of the y-bit range
  function automatic rq_cfg_t lin_cfg(input int a, input int w, input int ybits, input int K);
    rq_cfg_t c;
    int m, s;
    real sd;
    sd = (2.0 ** (a - 1)) / 1.8 * (2.0 ** (w - 1)) / 1.8 * $sqrt(real'(K));
    mk_ms((2.0 ** (ybits - 1)) / 3.0 / sd, m, s);
    c.za = 8'(rnd_zp(a)); c.zb = 8'(rnd_zp(w)); c.zy = 8'(rnd_zp(ybits));
    c.m = 16'(m); c.s = 6'(s);
    return c;
  endfunction

  function automatic add_cfg_t add_cfg(input int a, input int b, input int ybits);
    add_cfg_t c;
    int sh;
    c.z1 = 8'(rnd_zp(a)); c.z2 = 8'(rnd_zp(b)); c.zy = 8'(rnd_zp(ybits));
    sh = 14;
    while (sh > 0 && (2.0 ** (ybits - ((a < b) ? a : b))) * 0.6 * (2.0 ** sh) > 65535.0) sh--;
    c.s  = 6'(sh);
    c.m1 = 16'(int'((2.0 ** (ybits - a)) * 0.6 * (2.0 ** sh)));
    c.m2 = 16'(int'((2.0 ** (ybits - b)) * 0.6 * (2.0 ** sh)));
    return c;
  endfunction

  function automatic bn_cfg_t bn_cfg(output arr_t g, output arr_t be, input int a,
                                     input int ybits);
    bn_cfg_t c;
    int sh;
    sh = (ybits - a > 2) ? 14 - (ybits - a) : 12;
    c.zx = 8'(rnd_zp(a)); c.zy = 8'(rnd_zp(ybits)); c.s = 6'(sh);
    g = new[D]; be = new[D];
    foreach (g[i]) begin
      g[i]  = int'((2.0 ** (ybits - a + sh)) * (0.5 + $urandom_range(0, 100) / 100.0));
      be[i] = int'($urandom_range(0, (1 << sh) * 8)) - (1 << sh) * 4;
    end
    return c;
  endfunction

  initial begin
    int cyc, exp_cyc;
    prm = '0; cfg = '0; x_we = 1'b0; x_addr = '0; x_data = '0; start = 1'b0;
    none = new[0];
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // ---- random model and quantisation constants
    cfg.l_in = lin_cfg(XB, B_LIN_IN, B_LIN_IN, M);
    cfg.add_pe = add_cfg(B_LIN_IN, B_ADD_PE, B_ADD_PE);
    cfg.qkv = lin_cfg(B_ADD_PE, B_MHA, B_MHA, D);
    cfg.score = lin_cfg(B_MHA, B_MHA, B_MHA, D);
    cfg.ctx = lin_cfg(B_MHA, B_MHA, B_MHA, N);
    cfg.ctx.za = '0;
    cfg.ctx.m  = 16'(int'(cfg.ctx.m) * 4);
    cfg.oproj = lin_cfg(B_MHA, B_MHA, B_MHA, D);
    cfg.add_mha = add_cfg(B_ADD_PE, B_MHA, B_ADD_MHA);
    cfg.bn_mha = bn_cfg(g_mha, be_mha, B_ADD_MHA, B_BN_MHA);
    cfg.ffn1 = lin_cfg(B_BN_MHA, B_FFN, B_FFN, D);
    cfg.ffn2 = lin_cfg(B_FFN, B_FFN, B_FFN, H);
    cfg.add_ffn = add_cfg(B_BN_MHA, B_FFN, B_ADD_FFN);
    cfg.bn_ffn = bn_cfg(g_ffn, be_ffn, B_ADD_FFN, B_BN_FFN);
    cfg.gap = lin_cfg(B_BN_FFN, 1, B_GAP, 1);
    cfg.gap.zb = '0;
    cfg.gap.m  = 16'(int'(cfg.gap.m) / N * 3);
    cfg.l_out = lin_cfg(B_GAP, B_LOUT, B_LOUT, D);

    w_in  = rnd_arr(D * M, B_LIN_IN);  b_in  = rnd_arr(D, bw(12, XB, B_LIN_IN));
    pe    = rnd_arr(N * D, B_ADD_PE);
    w_qkv = rnd_arr(3 * D * D, B_MHA); b_qkv = rnd_arr(3 * D, bw(10, B_ADD_PE, B_MHA));
    w_o   = rnd_arr(D * D, B_MHA);     b_o   = rnd_arr(D, bw(10, B_MHA, B_MHA));
    w1    = rnd_arr(H * D, B_FFN);     b1    = rnd_arr(H, bw(8, B_BN_MHA, B_FFN));
    w2    = rnd_arr(D * H, B_FFN);     b2    = rnd_arr(D, bw(8, B_FFN, B_FFN));
    w_out = rnd_arr(OUT * D, B_LOUT);  b_out = rnd_arr(OUT, bw(12, B_GAP, B_LOUT));
    lut   = new[1 << B_MHA];
    foreach (lut[d]) lut[d] = int'($floor($exp(-0.2 * d) * 65535.0 + 0.5));

    load_arr(PRM_W_IN, w_in);   load_arr(PRM_B_IN, b_in);   load_arr(PRM_PE, pe);
    load_arr(PRM_W_QKV, w_qkv); load_arr(PRM_B_QKV, b_qkv);
    load_arr(PRM_W_O, w_o);     load_arr(PRM_B_O, b_o);     load_arr(PRM_EXP, lut);
    load_arr(PRM_BN_MHA, g_mha); load_arr(PRM_BN_MHA, be_mha, D);
    load_arr(PRM_W_1, w1);      load_arr(PRM_B_1, b1);
    load_arr(PRM_W_2, w2);      load_arr(PRM_B_2, b2);
    load_arr(PRM_BN_FFN, g_ffn); load_arr(PRM_BN_FFN, be_ffn, D);
    load_arr(PRM_W_OUT, w_out); load_arr(PRM_B_OUT, b_out);

    for (int run = 0; run < RUNS; run++) begin
      arr_t x, q, k, v, sc, a, cx;
      x = rnd_arr(N * M, XB);
      for (int i = 0; i < N * M; i++) begin
        x_we = 1'b1; x_addr = $bits(x_addr)'(i); x_data = XB'(x[i]);
        @(negedge clk);
      end
      x_we = 1'b0;

      @(negedge clk); start = 1'b1;
      @(negedge clk); start = 1'b0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end

      // ---- reference
      r_lin  = mm(x, w_in, b_in, N, D, M, cfg.l_in, B_LIN_IN);
      r_emb  = add(r_lin, pe, cfg.add_pe, B_ADD_PE);
      begin
        arr_t qkv, vt;
        qkv = mm(r_emb, w_qkv, b_qkv, N, 3 * D, D, cfg.qkv, B_MHA);
        q = new[N * D]; k = new[N * D]; v = new[N * D];
        for (int t = 0; t < N; t++)
          for (int j = 0; j < D; j++) begin
            q[t*D+j] = qkv[t*3*D+j];
            k[t*D+j] = qkv[t*3*D+D+j];
            v[t*D+j] = qkv[t*3*D+2*D+j];
          end
        sc = mm(q, k, none, N, N, D, cfg.score, B_MHA);
        a  = new[N * N];
        for (int t = 0; t < N; t++) begin
          int mx;
          longint sum;
          mx = sc[t*N];
          for (int u = 1; u < N; u++) if (sc[t*N+u] > mx) mx = sc[t*N+u];
          sum = 0;
          for (int u = 0; u < N; u++) sum += lut[mx - sc[t*N+u]];
          for (int u = 0; u < N; u++) begin
            longint qv;
            qv = (longint'(lut[mx - sc[t*N+u]]) * (1 << (B_MHA - 1)) + sum / 2) / sum;
            a[t*N+u] = (qv > (1 << (B_MHA - 1)) - 1) ? (1 << (B_MHA - 1)) - 1 : int'(qv);
          end
        end
        vt = transpose(v, N, D);
        cx = mm(a, vt, none, N, D, N, cfg.ctx, B_MHA);
        r_mha = mm(cx, w_o, b_o, N, D, D, cfg.oproj, B_MHA);
      end
      r_addm = add(r_emb, r_mha, cfg.add_mha, B_ADD_MHA);
      r_bnm  = bn(r_addm, g_mha, be_mha, cfg.bn_mha, B_BN_MHA);
      begin
        arr_t hdn;
        hdn   = mm(r_bnm, w1, b1, N, H, D, cfg.ffn1, B_FFN, 1'b1);
        r_ffn = mm(hdn, w2, b2, N, D, H, cfg.ffn2, B_FFN);
      end
      r_addf = add(r_bnm, r_ffn, cfg.add_ffn, B_ADD_FFN);
      r_bnf  = bn(r_addf, g_ffn, be_ffn, cfg.bn_ffn, B_BN_FFN);
      begin
        arr_t ones, xt;
        ones = new[1]; ones[0] = 1;
        xt = transpose(r_bnf, N, D);          // D rows of N samples
        r_gap = new[D];
        for (int c = 0; c < D; c++) begin
          longint s;
          s = 0;
          for (int t = 0; t < N; t++) s += xt[c*N+t] - int'(cfg.gap.za);
          r_gap[c] = rq_cnt(s, int'(cfg.gap.m), int'(cfg.gap.s), int'(cfg.gap.zy), B_GAP);
        end
      end
      r_y = mm(r_gap, w_out, b_out, 1, OUT, D, cfg.l_out, B_LOUT);

      // ---- compare intermediate buffers and the forecast
      g_peek.snap();
      for (int i = 0; i < N * D; i++) begin
        checks += 4;
        if (pk_emb[i] != r_emb[i]) begin
          failures++; if (failures < 10) $display("FAIL %s: emb[%0d] %0d exp %0d", NAME, i, pk_emb[i], r_emb[i]);
        end
        if (pk_mha[i] != r_mha[i]) begin
          failures++; if (failures < 10) $display("FAIL %s: mha[%0d] %0d exp %0d", NAME, i, pk_mha[i], r_mha[i]);
        end
        if (pk_ffn[i] != r_ffn[i]) begin
          failures++; if (failures < 10) $display("FAIL %s: ffn[%0d] %0d exp %0d", NAME, i, pk_ffn[i], r_ffn[i]);
        end
        if (pk_bnf[i] != r_bnf[i]) begin
          failures++; if (failures < 10) $display("FAIL %s: bnf[%0d] %0d exp %0d", NAME, i, pk_bnf[i], r_bnf[i]);
        end
      end
      for (int j = 0; j < OUT; j++) begin
        checks++;
        if (int'(y[j]) != r_y[j]) begin
          failures++;
          $display("FAIL %s: y[%0d] %0d exp %0d", NAME, j, y[j], r_y[j]);
        end
      end
      $display("%s run %0d: forecast y = %0d (model %0d), gap[0..3] = %0d %0d %0d %0d",
               NAME, run, y[0], r_y[0], r_gap[0], r_gap[1], r_gap[2], r_gap[3]);

      exp_cyc = (N*D*M + 2) + (N*D + 2)
              + (N*3*D*D + 2) + 1 + (N*N*D + 2) + 1 + (N*(3*N + 2) + 2) + 1
              + (N*D*N + 2) + 1 + (N*D*D + 2)
              + 3 * (N*D + 2) + (2 * (N*H*D + 2) + 1) + 2 * (N*D + 2) + (D*OUT + 2)
              + 11;
      checks++;
      if (cyc < exp_cyc - 3 || cyc > exp_cyc + 3) begin
        failures++;
        $display("FAIL %s: latency %0d cycles, engine sum %0d", NAME, cyc, exp_cyc);
      end
      cycles = cyc;
      if (PAPER_MS > 0.0)
        $display("%s run %0d: %0d cycles (engine sum %0d); reported: %0.2f ms at 100 MHz = %0d cycles",
                 NAME, run, cyc, exp_cyc, PAPER_MS, int'(PAPER_MS * 100000.0));
      else
        $display("%s run %0d: %0d cycles (engine sum %0d)", NAME, run, cyc, exp_cyc);
      @(negedge clk);
    end

    // ---- every mechanism must have happened
    for (int p = 1; p < 11; p++) begin
      checks++;
      if (phase_seen[p] != RUNS) begin
        failures++;
        $display("FAIL %s: phase %0d started %0d times", NAME, p, phase_seen[p]);
      end
    end
    checks += 4;
    if (n_sat == 0)        begin failures++; $display("FAIL %s: no saturation", NAME); end
    if (n_relu == 0)       begin failures++; $display("FAIL %s: no ReLU clamp", NAME); end
    if (emb_handover == 0) begin failures++; $display("FAIL %s: no embedding-buffer hand-over", NAME); end
    if (bnm_handover == 0) begin failures++; $display("FAIL %s: no BN_MHA-buffer hand-over", NAME); end
    $display("%s mechanisms: saturations %0d, ReLU clamps %0d, hand-overs %0d/%0d",
             NAME, n_sat, n_relu, emb_handover, bnm_handover);
    fin = 1'b1;
  end

endmodule
