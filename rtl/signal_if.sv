// signal_if: sampling of the 128 discriminator outputs.
//
// Each hit line from the analog part is first sampled by a flip-flop on the
// external 200 MHz clock. The sampled value is then re-sampled by two further
// flip-flops, one on CLK_P and one on CLK_N, the two 100 MHz clocks of
// opposite phase. data_p therefore carries the 200 MHz samples of one
// phase and data_n those of the other; together they hold every 5 ns sample
// while each downstream path only runs at 100 MHz.
//
// Interface: hit_i[NUM_CH] (asynchronous levels), data_p / data_n
// (NUM_CH bits, in the CLK_P / CLK_N domains).
// Timing: CLK_P and CLK_N rise on falling edges of clk200, so a sample taken
// on a rising clk200 edge reaches data_p or data_n half a clk200 period later
// and stays there for 10 ns.
//
// This three-flip-flop structure is the one the paper describes. No reset is
// used on these data flops (an assumption: the stored data only matter after
// Write Start, long after any reset).
module signal_if #(
  parameter int unsigned NUM_CH = slit_pkg::NUM_CH
) (
  input  logic              clk200,
  input  logic              clk_p,
  input  logic              clk_n,
  input  logic [NUM_CH-1:0] hit_i,
  output logic [NUM_CH-1:0] data_p,
  output logic [NUM_CH-1:0] data_n
);

  logic [NUM_CH-1:0] s200;

  always_ff @(posedge clk200) s200   <= hit_i;
  always_ff @(posedge clk_p)  data_p <= s200;  // CLK_P, CLK_N rise on clk200 falling edges
  always_ff @(posedge clk_n)  data_n <= s200;

endmodule
