// param_ctrl: slow-control parameter controller of the SliT128C.
//
// Holds the 20-bit control register of every channel (test-pulse switch,
// x2 inverting-amplifier switch, the two discriminator enables, the monitor
// switches and the two 7-bit baseline-tuning DACs, see slit_pkg::ch_cfg_t)
// and drives them to the analog part. The registers are written through a
// serial shift chain of NUM_CH*20 bits clocked by sc_clk: sc_din enters at the
// least significant end, and the bit that falls off the far end appears on
// sc_dout, so a host reads the previous contents back while it writes new
// ones. While sc_load is high on a rising sc_clk edge the chain is copied into
// the active registers in one step instead of shifting, so the analog switches
// never see a half-shifted pattern. Channel NUM_CH-1 occupies the top 20 bits
// of the chain and is therefore shifted in first.
//
// Interface: sc_clk, rst_n, sc_din, sc_load in; sc_dout out; cfg[NUM_CH] out.
// Timing: loading takes effect on the sc_clk edge that samples sc_load.
// Reset: all active registers and the chain clear to zero, which leaves every
// channel's discriminators, test pulse and monitors off.
//
// From the paper: a slow-control block sets the registers of the analog and
// digital parts, and each channel has 20 bits of control switches and DACs.
// The serial protocol, the bit layout and the reset values are this design's
// own choices; the paper does not describe them.
module param_ctrl #(
  parameter int unsigned NUM_CH = slit_pkg::NUM_CH
) (
  input  logic              sc_clk,
  input  logic              rst_n,
  input  logic              sc_din,
  input  logic              sc_load,
  output logic              sc_dout,
  output slit_pkg::ch_cfg_t cfg [NUM_CH]
);

  import slit_pkg::*;

  localparam int unsigned CHAIN = NUM_CH * CFG_BITS;

  logic [CHAIN-1:0] chain;

  assign sc_dout = chain[CHAIN-1];

  always_ff @(posedge sc_clk or negedge rst_n) begin
    if (!rst_n) begin
      chain <= '0;
    end else if (!sc_load) begin
      chain <= {chain[CHAIN-2:0], sc_din};
    end
  end

  always_ff @(posedge sc_clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < NUM_CH; c++) cfg[c] <= '0;
    end else if (sc_load) begin
      for (int c = 0; c < NUM_CH; c++) cfg[c] <= ch_cfg_t'(chain[c*CFG_BITS +: CFG_BITS]);
    end
  end

endmodule
