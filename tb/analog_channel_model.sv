// analog_channel_model: behavioural model of one SliT128C analog channel,
// from the charge input to the two discriminator outputs. Not synthesizable;
// for simulation only.
//
// The charge-sensitive amplifier, pole-zero cancellation and CR-RC shaper are
// reduced to the ideal CR-RC pulse v(t) = q * x * exp(1 - x), x = t / T_PEAK,
// which peaks at t = T_PEAK with the value q (in fC of input charge). The CR
// differentiator that follows is modelled by the shape's derivative, scaled to
// the same units: w(t) = q * (1 - x) * exp(1 - x). w is positive before the
// peak and crosses the baseline exactly at the peak, whatever q is.
//
// Discriminators:
//   disc_crrc = enb_comp2 and v > dac_crrc * LSB_CRRC    (time over threshold)
//   disc_diff = enb_comp1 and w < -dac_diff * LSB_DIFF   (after the zero crossing)
// The differentiator discriminator therefore rises just after the peak, the
// sooner the larger the charge but by well under a nanosecond between 0.5 and
// 3 MIP, while the shaper discriminator rises earlier for larger charges.
// The 35.1 ns peaking time and the CR-RC LSB of 0.043 fC are values measured
// or simulated for the chip; the differentiator LSB is a model choice. The x2
// inverting amplifier scales signal and threshold alike and is not modelled,
// nor are noise, pile-up or the baseline offsets the DACs correct.
//
// A pulse starts on a rising edge of ain (sensor charge ain_q_fc) or of tp
// when the channel's test-pulse switch is on (charge tp_q_fc). The waveform is
// evaluated every 0.1 ns for 400 ns; pulses on one channel must be further
// apart than that.
module analog_channel_model #(
  parameter real T_PEAK_NS   = 35.1,
  parameter real LSB_CRRC_FC = 0.043,
  parameter real LSB_DIFF_FC = 0.01
) (
  input  logic              tp,
  input  real               tp_q_fc,
  input  logic              ain,
  input  real               ain_q_fc,
  input  slit_pkg::ch_cfg_t cfg,
  output logic              disc_diff,
  output logic              disc_crrc
);

  initial begin
    disc_diff = 1'b0;
    disc_crrc = 1'b0;
  end

  task automatic pulse(input real q);
    real x, v, w, vth_c, vth_d;
    for (int i = 1; i <= 4000; i++) begin
      #0.1;
      x = (i * 0.1) / T_PEAK_NS;
      v = q * x * $exp(1.0 - x);
      w = q * (1.0 - x) * $exp(1.0 - x);
      vth_c = real'(cfg.dac_crrc) * LSB_CRRC_FC;
      vth_d = real'(cfg.dac_diff) * LSB_DIFF_FC;
      disc_crrc = cfg.enb_comp2 && (v > vth_c);
      disc_diff = cfg.enb_comp1 && (w < -vth_d);
    end
    disc_crrc = 1'b0;
    disc_diff = 1'b0;
  endtask

  always @(posedge ain) pulse(ain_q_fc);
  always @(posedge tp) if (cfg.tp_en) pulse(tp_q_fc);

endmodule
