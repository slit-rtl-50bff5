// slit_pkg: constants and types shared by the digital part of the SliT128C
// strip-sensor readout chip.
//
// The channel count (128), the memory depth (8192 samples of 5 ns per channel,
// i.e. 40.96 us) and the 20-bit per-channel control register follow the paper.
// The split of the 8192 samples over two SRAMs of 4096 words (one per 100 MHz
// sampling phase) and the bit layout of the control register are this
// design's own choices.
package slit_pkg;

  // Number of strip channels on the chip.
  localparam int unsigned NUM_CH = 128;

  // Samples stored per channel: 8192 x 5 ns = 40.96 us.
  localparam int unsigned MEM_SAMPLES = 8192;

  // Width of the per-channel control register.
  localparam int unsigned CFG_BITS = 20;

  // Width of each baseline-adjustment (threshold tuning) DAC.
  localparam int unsigned DAC_BITS = 7;

  // Per-channel control register, 20 bits. Field order (MSB first) is a
  // choice of this design; the paper lists the switches but not their bits.
  typedef struct packed {
    logic [DAC_BITS-1:0] dac_diff;    // baseline tuning DAC, differentiator path
    logic [DAC_BITS-1:0] dac_crrc;    // baseline tuning DAC, CR-RC shaper path
    logic [1:0]          mon_en;      // analog monitor-line switches
    logic                enb_comp2;   // enable CR-RC shaper discriminator
    logic                enb_comp1;   // enable differentiator discriminator
    logic                enb_gain2;   // enable the x2 inverting amplifier
    logic                tp_en;       // test-pulse injection switch (TPENB)
  } ch_cfg_t;

endpackage
