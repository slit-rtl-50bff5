// sram: hit-data storage memory, one of the two SRAMs of the memory
// controller.
//
// A simple two-port memory written as an array: one synchronous write port
// and one synchronous read port, each on its own clock. The chip uses SRAM
// macros of the process; this array has the same function so that the design
// can be simulated and synthesised without them. Read data appear one rclk
// cycle after re is asserted (registered output).
//
// Interface: wclk, we, waddr, wdata; rclk, re, raddr, rdata.
//
// Depth and width follow the paper (8192 samples of 128 channels over two
// memories, so 4096 x 128 each); separate read and write clocks and the
// one-cycle read latency are this design's own choices.
module sram #(
  parameter int unsigned DEPTH = slit_pkg::MEM_SAMPLES / 2,
  parameter int unsigned WIDTH = slit_pkg::NUM_CH,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             wclk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             rclk,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge wclk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge rclk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule
