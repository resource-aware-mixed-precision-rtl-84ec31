// tb_qbuffer: self-checking test of the intermediate-result buffer in all
// three resource styles.
//
// Writes random words to random addresses, keeps a shadow copy, and checks
// that every read returns the shadow value exactly one cycle after the
// address, including a read of an address written in the same cycle (which
// must return the old word: read-before-write).
module tb_qbuffer;
  import tf_pkg::*;

  localparam int W = 6, DEPTH = 40, AW = 6;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic          we;
  logic [AW-1:0] waddr, raddr;
  logic [W-1:0]  wdata;
  logic [W-1:0]  rd [3];

  qbuffer #(.WIDTH(W), .DEPTH(DEPTH), .STYLE(RAM_BRAM)) dut_b (
    .clk(clk), .we(we), .waddr(waddr), .wdata(wdata), .raddr(raddr), .rdata(rd[0]));
  qbuffer #(.WIDTH(W), .DEPTH(DEPTH), .STYLE(RAM_DRAM)) dut_d (
    .clk(clk), .we(we), .waddr(waddr), .wdata(wdata), .raddr(raddr), .rdata(rd[1]));
  qbuffer #(.WIDTH(W), .DEPTH(DEPTH), .STYLE(RAM_AUTO)) dut_a (
    .clk(clk), .we(we), .waddr(waddr), .wdata(wdata), .raddr(raddr), .rdata(rd[2]));

  logic [W-1:0] shadow [DEPTH];

  initial begin
    logic [W-1:0] expv;
    we = 1'b0; waddr = '0; raddr = '0; wdata = '0;
    // fill
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1'b1; waddr = AW'(i); wdata = W'($urandom); shadow[i] = wdata;
    end
    // random mixed traffic
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      we    = 1'($urandom);
      waddr = AW'($urandom_range(0, DEPTH - 1));
      wdata = W'($urandom);
      raddr = (n % 5 == 0) ? waddr : AW'($urandom_range(0, DEPTH - 1));
      expv  = shadow[raddr];
      @(posedge clk);
      if (we) shadow[waddr] = wdata;
      #1;
      for (int k = 0; k < 3; k++) begin
        checks++;
        if (rd[k] !== expv) begin
          failures++;
          $display("FAIL style %0d addr %0d got %0h exp %0h", k, raddr, rd[k], expv);
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
