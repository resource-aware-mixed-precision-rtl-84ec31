// tb_tf_workloads: runs the accelerator at the other configurations the
// paper evaluates, each end to end against the behavioural network model.
//
//   * n = 18, bitwidths (8, 6, 4, 4, 6, 4, 4, 4, 8, 8), d_model = 64:
//     the deployed n = 18 accelerator, reported at 8.79 ms.
//   * n = 24, bitwidths (6, 8, 4, 4, 4, 4, 4, 4, 8, 8), d_model = 64:
//     the deployed n = 24 accelerator, reported at 11.92 ms.
//   * n = 24, d_model = 32, uniform 8 bits, and n = 24, d_model = 64,
//     uniform 4 bits: the two uniform-precision models used to evaluate the
//     choice of buffer resource.
//   * the default n = 12 configuration with the size rule of buffer
//     placement switched on (BRAM_MIN_BITS = 3072), so that the activation
//     buffers are built as block RAM while the small ones are not.
//   * two small points of the uniform-precision sweep over n, d_model and b
//     that motivated the mixed scheme: (6, 8, 6 bits) and (12, 16, 4 bits).
//
// The bitwidth order is L_input, Add_PE, MHA, Add_MHA, BN_MHA, FFN,
// Add_FFN, BN_FFN, GAP, L_output.  The number of input features (3) and
// outputs (1) are this design's choice, as at the default size.  The seven
// configurations run concurrently, each with its own clock, one inference
// each; the cycle counts are printed next to the reported times (which
// include the 100 MHz clock).  Every configuration must make each sequencer
// phase, saturation, the ReLU clamp and both buffer hand-overs happen.
module tb_tf_workloads;

  logic fin [7];
  int   chk [7], fl [7], cyc [7];

  tf_e2e_run #(.NAME("n18_table6"), .N(18), .D(64),
    .B_LIN_IN(8), .B_ADD_PE(6), .B_MHA(4), .B_ADD_MHA(4), .B_BN_MHA(6),
    .B_FFN(4), .B_ADD_FFN(4), .B_BN_FFN(4), .B_GAP(8), .B_LOUT(8), .PAPER_MS(8.79))
    u_n18 (.fin(fin[0]), .checks(chk[0]), .failures(fl[0]), .cycles(cyc[0]));

  tf_e2e_run #(.NAME("n24_table6"), .N(24), .D(64),
    .B_LIN_IN(6), .B_ADD_PE(8), .B_MHA(4), .B_ADD_MHA(4), .B_BN_MHA(4),
    .B_FFN(4), .B_ADD_FFN(4), .B_BN_FFN(4), .B_GAP(8), .B_LOUT(8), .PAPER_MS(11.92))
    u_n24 (.fin(fin[1]), .checks(chk[1]), .failures(fl[1]), .cycles(cyc[1]));

  tf_e2e_run #(.NAME("n24_d32_uniform8"), .N(24), .D(32),
    .B_LIN_IN(8), .B_ADD_PE(8), .B_MHA(8), .B_ADD_MHA(8), .B_BN_MHA(8),
    .B_FFN(8), .B_ADD_FFN(8), .B_BN_FFN(8), .B_GAP(8), .B_LOUT(8))
    u_u8 (.fin(fin[2]), .checks(chk[2]), .failures(fl[2]), .cycles(cyc[2]));

  tf_e2e_run #(.NAME("n24_d64_uniform4"), .N(24), .D(64),
    .B_LIN_IN(4), .B_ADD_PE(4), .B_MHA(4), .B_ADD_MHA(4), .B_BN_MHA(4),
    .B_FFN(4), .B_ADD_FFN(4), .B_BN_FFN(4), .B_GAP(4), .B_LOUT(4))
    u_u4 (.fin(fin[3]), .checks(chk[3]), .failures(fl[3]), .cycles(cyc[3]));

  // default configuration with the size rule: every buffer of at least
  // 3072 bits (all N x D activation buffers) placed in block RAM
  tf_e2e_run #(.NAME("n12_bram_by_size"), .BRAM_MIN_BITS(3072), .PAPER_MS(5.78))
    u_sz (.fin(fin[4]), .checks(chk[4]), .failures(fl[4]), .cycles(cyc[4]));

  // two points of the uniform-precision (n, d_model, b) sweep
  tf_e2e_run #(.NAME("n6_d8_uniform6"), .N(6), .D(8),
    .B_LIN_IN(6), .B_ADD_PE(6), .B_MHA(6), .B_ADD_MHA(6), .B_BN_MHA(6),
    .B_FFN(6), .B_ADD_FFN(6), .B_BN_FFN(6), .B_GAP(6), .B_LOUT(6))
    u_t1 (.fin(fin[5]), .checks(chk[5]), .failures(fl[5]), .cycles(cyc[5]));

  tf_e2e_run #(.NAME("n12_d16_uniform4"), .N(12), .D(16),
    .B_LIN_IN(4), .B_ADD_PE(4), .B_MHA(4), .B_ADD_MHA(4), .B_BN_MHA(4),
    .B_FFN(4), .B_ADD_FFN(4), .B_BN_FFN(4), .B_GAP(4), .B_LOUT(4))
    u_t2 (.fin(fin[6]), .checks(chk[6]), .failures(fl[6]), .cycles(cyc[6]));

  logic clk = 1'b0;
  always #5 clk = ~clk;

  initial begin
    int checks, failures;
    #1;
    wait (fin[0] && fin[1] && fin[2] && fin[3] && fin[4] && fin[5] && fin[6]);
    #1;
    checks = 0; failures = 0;
    for (int i = 0; i < 7; i++) begin
      checks += chk[i];
      failures += fl[i];
    end
    $display("cycles per inference: n18 %0d, n24 %0d, n24/d32/8b %0d, n24/d64/4b %0d, n12/size rule %0d, n6/d8/6b %0d, n12/d16/4b %0d",
             cyc[0], cyc[1], cyc[2], cyc[3], cyc[4], cyc[5], cyc[6]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int checks, failures;
    repeat (4000000) @(posedge clk);
    checks = 0; failures = 1;
    for (int i = 0; i < 7; i++) begin
      checks += chk[i];
      failures += fl[i];
    end
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
