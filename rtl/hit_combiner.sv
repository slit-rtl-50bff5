// hit_combiner: final hit signal of each channel from its two discriminators.
//
// Every channel has one discriminator on the CR-RC shaper and one on the
// differentiator (CR-RC-CR) path. The differentiator output crosses the
// baseline at the shaper's peak whatever the charge, so its discriminator
// gives the time-walk-free leading edge; the shaper discriminator, being less
// noisy, vetoes noise triggers and sets the trailing edge. The final pulse is
// the AND of the two. Each discriminator has an enable (ENB_COMP1 for the
// differentiator, ENB_COMP2 for the shaper); a disabled discriminator is taken
// out of the AND, so with only the shaper enabled the hit is the plain CR-RC
// time over threshold. With both disabled the channel is silent.
//
// Interface: disc_diff[NUM_CH], disc_crrc[NUM_CH] (discriminator outputs),
// enb_comp1[NUM_CH], enb_comp2[NUM_CH]; hit[NUM_CH] out. Purely combinational.
//
// From the paper: the AND of the two discriminators and the two enables, and
// that the leading edge can come from either the differentiator or the CR-RC
// shaper alone by register setting. What a disabled discriminator presents to
// the AND, and the silent channel when both are off, are this design's
// choices. On the chip this gate sits in each analog channel.
module hit_combiner #(
  parameter int unsigned NUM_CH = slit_pkg::NUM_CH
) (
  input  logic [NUM_CH-1:0] disc_diff,
  input  logic [NUM_CH-1:0] disc_crrc,
  input  logic [NUM_CH-1:0] enb_comp1,
  input  logic [NUM_CH-1:0] enb_comp2,
  output logic [NUM_CH-1:0] hit
);

  always_comb begin
    for (int c = 0; c < NUM_CH; c++) begin
      hit[c] = (enb_comp1[c] | enb_comp2[c])
             & (disc_diff[c] | ~enb_comp1[c])
             & (disc_crrc[c] | ~enb_comp2[c]);
    end
  end

endmodule
