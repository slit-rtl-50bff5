// slit128c: digital part of the SliT128C 128-channel strip readout chip, with
// the per-channel hit logic that closes each analog channel.
//
// A fill starts with Write Start: from then on the hit state of every channel
// is sampled every 5 ns (200 MHz) and stored, 8192 samples deep (40.96 us),
// after which storing stops. Read Start then sends the whole memory out on a
// single serial line, one 128-bit hit map per 5 ns slot in time order, at
// 100 Mbit/s (a 50 MHz clock, both edges used). A slow-control shift chain
// sets each channel's 20-bit control register.
//
// Data path: disc_diff/disc_crrc -> hit_combiner (AND, per-channel enables)
// -> signal_if (200 MHz flop, then CLK_P and CLK_N flops) -> memory_controller
// (write controller, two SRAMs, read controller) -> serializer -> sdata.
// timing_generator makes CLK_P, CLK_N, the 50 MHz clock and the start
// strobes; param_ctrl holds the control registers.
//
// Interface: clk200 (external 200 MHz), rst_n (asynchronous, active low);
// write_start, read_start (asynchronous levels, acted on at their rising
// edge); disc_diff, disc_crrc (discriminator outputs of the analog
// channels); sc_clk, sc_din, sc_load, sc_dout (slow control); cfg (control
// registers to the analog channels); sclk, sdata, sdata_valid (serial output,
// to the LVDS drivers).
// Timing: a full readout at the defaults is 8192 words x 128 bits = 1,048,576
// bit periods of 10 ns, about 10.5 ms, well inside the 40 ms between 25 Hz
// beam spills.
//
// The block structure, clocks, memory depth and channel count follow the
// paper. The reset, the slow-control protocol, the single serial line with its
// valid line, and the word order are this design's own choices.
module slit128c #(
  parameter int unsigned NUM_CH = slit_pkg::NUM_CH,
  parameter int unsigned DEPTH  = slit_pkg::MEM_SAMPLES / 2
) (
  input  logic              clk200,
  input  logic              rst_n,
  input  logic              write_start,
  input  logic              read_start,
  input  logic [NUM_CH-1:0] disc_diff,
  input  logic [NUM_CH-1:0] disc_crrc,
  input  logic              sc_clk,
  input  logic              sc_din,
  input  logic              sc_load,
  output logic              sc_dout,
  output slit_pkg::ch_cfg_t cfg [NUM_CH],
  output logic              sclk,
  output logic              sdata,
  output logic              sdata_valid
);

  logic              clk_p, clk_n;
  logic              wr_start, rd_start;
  logic [NUM_CH-1:0] enb_comp1, enb_comp2, hit;
  logic [NUM_CH-1:0] data_p, data_n;
  logic              word_valid, word_ready;
  logic [NUM_CH-1:0] word;

  timing_generator u_tg (
    .clk200, .rst_n,
    .write_start_i (write_start),
    .read_start_i  (read_start),
    .clk_p, .clk_n,
    .clk50 (sclk),
    .write_start_o (wr_start),
    .read_start_o  (rd_start)
  );

  param_ctrl #(.NUM_CH(NUM_CH)) u_param (
    .sc_clk, .rst_n, .sc_din, .sc_load, .sc_dout, .cfg
  );

  always_comb begin
    for (int c = 0; c < NUM_CH; c++) begin
      enb_comp1[c] = cfg[c].enb_comp1;
      enb_comp2[c] = cfg[c].enb_comp2;
    end
  end

  hit_combiner #(.NUM_CH(NUM_CH)) u_hit (
    .disc_diff, .disc_crrc, .enb_comp1, .enb_comp2, .hit
  );

  signal_if #(.NUM_CH(NUM_CH)) u_sif (
    .clk200, .clk_p, .clk_n,
    .hit_i (hit),
    .data_p, .data_n
  );

  memory_controller #(.DEPTH(DEPTH), .WIDTH(NUM_CH)) u_mem (
    .clk_p, .clk_n, .rst_n,
    .write_start (wr_start),
    .read_start  (rd_start),
    .data_p, .data_n,
    .out_valid (word_valid),
    .out_ready (word_ready),
    .out_data  (word),
    .writing (), .full (), .reading ()
  );

  serializer #(.WIDTH(NUM_CH)) u_ser (
    .clk (clk_p), .rst_n,
    .in_valid (word_valid),
    .in_ready (word_ready),
    .in_data  (word),
    .sdata, .sdata_valid
  );

endmodule
