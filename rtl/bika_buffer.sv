// bika_buffer: on-chip synchronous RAM with one write port and one read port.
//
// Used three times by the accelerator, as activation, threshold and output
// buffer, each word holding one 8-bit value per array lane. A write happens at
// the clock edge when `we` is high; a read started with `re` in cycle t puts
// the word on `rdata` in cycle t+1, and rdata holds it until the next read.
// A read of the address written in the same cycle returns the old word. The
// paper reports only the block-RAM count of its accelerator; the organisation
// and depths are this design's choice. Written as a plain array so an FPGA or
// ASIC flow maps it onto RAM blocks.
module bika_buffer #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule
