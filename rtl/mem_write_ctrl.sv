// mem_write_ctrl: memory-write controller of the SliT128C memory controller.
//
// It takes the two 128-bit sample streams of the signal interface, one in the
// CLK_P domain and one in the CLK_N domain, and writes each into its own
// SRAM. On the Write Start strobe both sides restart at address 0 and write
// one word on every rising edge of their clock until the last address has
// been written; then they stop and hold "full" until the next Write Start.
// With 4096 words per SRAM and two 100 MHz phases, a fill covers
// 8192 x 5 ns = 40.96 us. A Write Start that arrives during a fill restarts it.
//
// Interface: clk_p / clk_n / rst_n; start (clk200-domain strobe, 2 clk200
// cycles wide, seen once by each clock); data_p, data_n in; per side we,
// waddr, wdata out to the SRAMs; writing and full status out.
// Timing: the first CLK_P edge inside the strobe writes the first word of
// SRAM P, the following CLK_N edge the first word of SRAM N; DEPTH words per
// side take DEPTH cycles of 10 ns.
//
// From the paper: writing starts on Write Start and continues until the SRAMs
// are full; 8192 words of 5 ns per channel. The restart rule and the status
// outputs are this design's own choices.
module mem_write_ctrl #(
  parameter  int unsigned DEPTH = slit_pkg::MEM_SAMPLES / 2,
  parameter  int unsigned WIDTH = slit_pkg::NUM_CH,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk_p,
  input  logic             clk_n,
  input  logic             rst_n,
  input  logic             start,
  input  logic [WIDTH-1:0] data_p,
  input  logic [WIDTH-1:0] data_n,
  output logic             we_p,
  output logic [AW-1:0]    waddr_p,
  output logic [WIDTH-1:0] wdata_p,
  output logic             we_n,
  output logic [AW-1:0]    waddr_n,
  output logic [WIDTH-1:0] wdata_n,
  output logic             writing,
  output logic             full
);

  // One write side: address counter and active flag in its own clock domain.
  logic          act_p, act_n;
  logic [AW-1:0] cnt_p, cnt_n;
  logic          full_p, full_n;

  // The word written on a start edge is the current sample, at address 0.
  assign we_p    = start | act_p;
  assign waddr_p = start ? '0 : cnt_p;
  assign wdata_p = data_p;
  assign we_n    = start | act_n;
  assign waddr_n = start ? '0 : cnt_n;
  assign wdata_n = data_n;

  always_ff @(posedge clk_p or negedge rst_n) begin
    if (!rst_n) begin
      act_p  <= 1'b0;
      cnt_p  <= '0;
      full_p <= 1'b0;
    end else if (we_p) begin
      if (waddr_p == AW'(DEPTH - 1)) begin
        act_p  <= 1'b0;
        full_p <= 1'b1;
      end else begin
        act_p  <= 1'b1;
        full_p <= 1'b0;
        cnt_p  <= waddr_p + 1'b1;
      end
    end
  end

  always_ff @(posedge clk_n or negedge rst_n) begin
    if (!rst_n) begin
      act_n  <= 1'b0;
      cnt_n  <= '0;
      full_n <= 1'b0;
    end else if (we_n) begin
      if (waddr_n == AW'(DEPTH - 1)) begin
        act_n  <= 1'b0;
        full_n <= 1'b1;
      end else begin
        act_n  <= 1'b1;
        full_n <= 1'b0;
        cnt_n  <= waddr_n + 1'b1;
      end
    end
  end

  assign writing = act_p | act_n;
  assign full    = full_p & full_n;

endmodule
