// serializer: parallel-to-serial conversion of the stored hit maps.
//
// Each 128-bit word from the memory-read controller is shifted out MSB first
// (channel WIDTH-1 first), one bit per CLK_P cycle. The bit line leaves the
// chip through an LVDS driver together with the 50 MHz clock, whose every
// edge (rising and falling) marks one bit: the double-data-rate link the paper
// describes, 100 Mbit/s on one line. A second line, sdata_valid, is high for
// every bit that belongs to a word. A holding handshake lets the next word be
// taken in the cycle the last bit of the current one goes out, so a readout
// is one unbroken run of 2*DEPTH*WIDTH bits.
//
// Interface: clk (CLK_P), rst_n; in_valid / in_ready / in_data (valid/ready:
// a word moves when both are high; the sender keeps valid and data steady
// until then); sdata, sdata_valid out.
// Timing: the MSB of a word is on sdata right after the clock edge that takes
// the word;
// sdata and sdata_valid change on rising CLK_P edges, which are also the edges
// of the 50 MHz clock (edge-aligned DDR; the receiver samples mid-bit).
//
// From the paper: a serializer feeds the LVDS drivers, which run with a 50 MHz
// clock read in DDR mode. The bit order, the number of data lines (one) and
// the sdata_valid line are this design's own choices.
module serializer #(
  parameter int unsigned WIDTH = slit_pkg::NUM_CH
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             sdata,
  output logic             sdata_valid
);

  localparam int unsigned CW = $clog2(WIDTH);

  logic [WIDTH-1:0] shreg;
  logic [CW-1:0]    bitcnt;   // bits of the current word still to send, less one
  logic             busy;

  assign in_ready    = !busy || (bitcnt == '0);
  assign sdata       = shreg[WIDTH-1];
  assign sdata_valid = busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg  <= '0;
      bitcnt <= '0;
      busy   <= 1'b0;
    end else if (in_ready) begin
      if (in_valid) begin
        shreg  <= in_data;
        bitcnt <= CW'(WIDTH - 1);
        busy   <= 1'b1;
      end else begin
        shreg  <= '0;
        busy   <= 1'b0;
      end
    end else begin
      shreg  <= {shreg[WIDTH-2:0], 1'b0};
      bitcnt <= bitcnt - 1'b1;
    end
  end

  // Handshake rule: a word that is offered stays offered, unchanged, until taken.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid && !in_ready |=> in_valid && $stable(in_data));

endmodule
