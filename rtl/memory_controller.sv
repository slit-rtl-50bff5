// memory_controller: hit-data storage of the SliT128C.
//
// Holds the memory-write controller, the two SRAMs and the memory-read
// controller. The CLK_P sample stream goes to SRAM P, the CLK_N stream to
// SRAM N; each SRAM is DEPTH words of WIDTH (= channel count) bits, so the two
// together keep 2*DEPTH samples of 5 ns per channel (8192, i.e. 40.96 us, at
// the defaults). After Read Start the read controller streams the contents out
// in time order over a valid/ready handshake.
//
// Interface: clk_p, clk_n, rst_n; write_start, read_start (clk200-domain
// strobes from the timing generator); data_p, data_n from the signal
// interface; out_valid/out_ready/out_data to the serializer; writing, full,
// reading status.
//
// The structure (write controller, two SRAMs, read controller) follows the
// paper's block diagram; see the sub-modules for their own choices.
module memory_controller #(
  parameter  int unsigned DEPTH = slit_pkg::MEM_SAMPLES / 2,
  parameter  int unsigned WIDTH = slit_pkg::NUM_CH,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk_p,
  input  logic             clk_n,
  input  logic             rst_n,
  input  logic             write_start,
  input  logic             read_start,
  input  logic [WIDTH-1:0] data_p,
  input  logic [WIDTH-1:0] data_n,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic             writing,
  output logic             full,
  output logic             reading
);

  logic             we_p, we_n, re_p, re_n;
  logic [AW-1:0]    waddr_p, waddr_n, raddr_p, raddr_n;
  logic [WIDTH-1:0] wdata_p, wdata_n, rdata_p, rdata_n;

  mem_write_ctrl #(.DEPTH(DEPTH), .WIDTH(WIDTH)) u_wr (
    .clk_p, .clk_n, .rst_n,
    .start (write_start),
    .data_p, .data_n,
    .we_p, .waddr_p, .wdata_p,
    .we_n, .waddr_n, .wdata_n,
    .writing, .full
  );

  sram #(.DEPTH(DEPTH), .WIDTH(WIDTH)) u_sram_p (
    .wclk (clk_p), .we (we_p), .waddr (waddr_p), .wdata (wdata_p),
    .rclk (clk_p), .re (re_p), .raddr (raddr_p), .rdata (rdata_p)
  );

  sram #(.DEPTH(DEPTH), .WIDTH(WIDTH)) u_sram_n (
    .wclk (clk_n), .we (we_n), .waddr (waddr_n), .wdata (wdata_n),
    .rclk (clk_p), .re (re_n), .raddr (raddr_n), .rdata (rdata_n)
  );

  mem_read_ctrl #(.DEPTH(DEPTH), .WIDTH(WIDTH)) u_rd (
    .clk (clk_p), .rst_n,
    .start (read_start),
    .re_p, .raddr_p, .rdata_p,
    .re_n, .raddr_n, .rdata_n,
    .out_valid, .out_ready, .out_data,
    .reading
  );

endmodule
