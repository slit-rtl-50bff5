// timing_generator: clocks and start strobes for the SliT128C digital part.
//
// From the external 200 MHz clock it derives the two 100 MHz sampling clocks
// CLK_P and CLK_N, which are 180 degrees apart (CLK_N is the inverse of
// CLK_P), and the 50 MHz clock that goes out with the serial data. The divider
// toggles on the falling edge of clk200, so every 100 MHz edge lies half a
// 200 MHz period after the clk200 edge that launched the data it samples.
//
// The external "Write Start" and "Read Start" inputs are asynchronous levels.
// Each is synchronised to clk200 by two flip-flops; its rising edge becomes a
// strobe two clk200 cycles long. The strobe is started only in the clk200
// cycle whose following falling edge is a rising edge of CLK_P, so CLK_P sees
// it first and CLK_N half a 100 MHz period later, each exactly once. This
// fixes the time order of the two sample streams: within one memory address,
// the CLK_P sample is the earlier one.
//
// Interface: clk200 / rst_n in; clk_p, clk_n, clk50 out; write_start_i,
// read_start_i in (asynchronous); write_start_o, read_start_o out (clk200
// domain, 2 cycles wide).
// Timing: a start edge shows on the strobe 2 or 3 clk200 cycles after the
// first clk200 edge that samples it.
//
// From the paper: the block exists, derives the two 100 MHz clocks in
// opposite phase and hands Write Start and Read Start, synchronised to the
// 200 MHz clock, to the memory controller. The falling-edge divider, the
// synchroniser, the phase alignment and the strobe width are this design's
// own choices.
module timing_generator (
  input  logic clk200,
  input  logic rst_n,
  input  logic write_start_i,
  input  logic read_start_i,
  output logic clk_p,
  output logic clk_n,
  output logic clk50,
  output logic write_start_o,
  output logic read_start_o
);

  logic       ph;          // 100 MHz phase divider (falling edge of clk200)
  logic       ph50;        // 50 MHz divider, toggles on every CLK_P edge
  logic [2:0] ws_sync;     // two synchroniser flops plus edge history
  logic [2:0] rs_sync;
  logic       ws_pend, rs_pend;   // edge seen, waiting for the CLK_P phase
  logic       ws_hold, rs_hold;   // second cycle of the strobe

  always_ff @(negedge clk200 or negedge rst_n) begin
    if (!rst_n) ph <= 1'b0;
    else        ph <= ~ph;
  end

  assign clk_p = ph;
  assign clk_n = ~ph;

  always_ff @(posedge clk_p or negedge rst_n) begin
    if (!rst_n) ph50 <= 1'b0;
    else        ph50 <= ~ph50;
  end

  assign clk50 = ph50;

  // ph == 0 now means the next falling edge of clk200 raises CLK_P.
  logic ws_go, rs_go;
  assign ws_go = (ws_pend | (ws_sync[1] & ~ws_sync[2])) & ~ph;
  assign rs_go = (rs_pend | (rs_sync[1] & ~rs_sync[2])) & ~ph;

  always_ff @(posedge clk200 or negedge rst_n) begin
    if (!rst_n) begin
      ws_sync       <= '0;
      rs_sync       <= '0;
      ws_pend       <= 1'b0;
      rs_pend       <= 1'b0;
      ws_hold       <= 1'b0;
      rs_hold       <= 1'b0;
      write_start_o <= 1'b0;
      read_start_o  <= 1'b0;
    end else begin
      ws_sync <= {ws_sync[1:0], write_start_i};
      rs_sync <= {rs_sync[1:0], read_start_i};
      ws_pend <= (ws_pend | (ws_sync[1] & ~ws_sync[2])) & ph;
      rs_pend <= (rs_pend | (rs_sync[1] & ~rs_sync[2])) & ph;
      write_start_o <= ws_go | ws_hold;
      ws_hold       <= ws_go;
      read_start_o  <= rs_go | rs_hold;
      rs_hold       <= rs_go;
    end
  end

endmodule
