// qbuffer: memory for intermediate results (and for parameters) with a
// selectable FPGA resource type.
//
// One synchronous write port and one synchronous read port (read data is
// valid the cycle after the address).  STYLE picks the storage resource the
// synthesis tool should use: RAM_BRAM puts the array in block RAM, RAM_DRAM
// in LUT RAM (distributed), RAM_AUTO leaves the choice to the tool.  The
// three-way choice for intermediate results is the paper's; that it is a
// per-buffer parameter expressed through the ram_style attribute is this
// design's choice.  The contents are not reset.
module qbuffer
  import tf_pkg::*;
#(
  parameter int         WIDTH = 8,
  parameter int         DEPTH = 768,
  parameter ram_style_e STYLE = RAM_AUTO,
  localparam int        AW    = clog2_1(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  if (STYLE == RAM_BRAM) begin : g_bram
    (* ram_style = "block" *) logic [WIDTH-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (we) mem[waddr] <= wdata;
      rdata <= mem[raddr];
    end
  end else if (STYLE == RAM_DRAM) begin : g_dram
    (* ram_style = "distributed" *) logic [WIDTH-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (we) mem[waddr] <= wdata;
      rdata <= mem[raddr];
    end
  end else begin : g_auto
    logic [WIDTH-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (we) mem[waddr] <= wdata;
      rdata <= mem[raddr];
    end
  end

endmodule
