// tb_signal_if: checks the 200 MHz sampling and the two 100 MHz resamplings.
//
// The testbench makes clk200 (5 ns) and CLK_P / CLK_N rising on alternate
// falling clk200 edges, as the timing generator does. It drives a new random
// 128-bit hit pattern 1 ns after every rising clk200 edge and keeps the
// pattern present at each rising edge. At every CLK_P (CLK_N) rising edge it
// checks that data_p (data_n), 0.1 ns later, equals the pattern sampled on the
// rising clk200 edge half a period before. Both streams together must then
// contain every 5 ns sample exactly once.
module tb_signal_if;
  localparam int unsigned N = 128;
  logic clk200 = 0, clk_p = 0, clk_n = 1;
  logic [N-1:0] hit_i = '0, data_p, data_n;
  logic [N-1:0] sampled;      // pattern present at the last rising clk200 edge
  int checks = 0, failures = 0, n_p = 0, n_n = 0;

  signal_if #(.NUM_CH(N)) dut (.*);

  always #2.5 clk200 = ~clk200;
  always @(negedge clk200) begin clk_p = ~clk_p; clk_n = ~clk_p; end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk200) begin
    sampled = hit_i;
    #1;
    for (int w = 0; w < N / 32; w++) hit_i[w*32 +: 32] = $urandom;
  end

  always @(posedge clk_p) begin
    logic [N-1:0] e;
    e = sampled;
    #0.1;
    if ($time > 20) begin
      checks++; n_p++;
      if (data_p !== e) begin failures++; $display("data_p mismatch at %0t", $time); end
    end
  end
  always @(posedge clk_n) begin
    logic [N-1:0] e;
    e = sampled;
    #0.1;
    if ($time > 20) begin
      checks++; n_n++;
      if (data_n !== e) begin failures++; $display("data_n mismatch at %0t", $time); end
    end
  end

  initial begin
    #5000;
    checks++;
    if (n_p < 490 || n_n < 490) failures++;   // both streams run at 100 MHz
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
