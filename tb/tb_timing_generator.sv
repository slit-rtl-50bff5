// tb_timing_generator: checks the clocks and start strobes.
//
// clk200 runs with a 5 ns period. The test checks that CLK_P has a 10 ns
// period and rises on falling clk200 edges, that CLK_N is its inverse, that
// the 50 MHz clock toggles on every CLK_P rising edge, and that each Write
// Start / Read Start rising edge gives a strobe exactly two clk200 cycles wide,
// 2 to 3 cycles after the edge is first sampled, which CLK_P samples once
// first and CLK_N once after it. A held level gives no second strobe.
module tb_timing_generator;
  logic clk200 = 0, rst_n = 0;
  logic write_start_i = 0, read_start_i = 0;
  logic clk_p, clk_n, clk50, write_start_o, read_start_o;
  int checks = 0, failures = 0;

  timing_generator dut (.*);

  always #2.5 clk200 = ~clk200;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // clock relations
  realtime last_p = 0;
  int p_edges = 0;
  logic c50_prev;
  always @(posedge clk_p) if (rst_n) begin
    check(clk200 == 1'b0, "CLK_P rises on a falling clk200 edge");
    if (p_edges > 0) check($realtime - last_p == 10.0, "CLK_P period 10 ns");
    last_p = $realtime;
    p_edges++;
    #0.1 check(clk50 != c50_prev, "clk50 toggles on CLK_P");
  end
  always @(negedge clk_p) c50_prev = clk50;
  always @(clk200) #0.1 if (rst_n) check(clk_n == ~clk_p, "CLK_N is inverse of CLK_P");

  // strobe observers: how many CLK_P / CLK_N edges see each strobe
  int wp = 0, wn = 0, rp = 0, rn = 0;
  bit w_first_p = 0;
  always @(posedge clk_p) begin
    if (write_start_o) begin wp++; if (wn == 0) w_first_p = 1; end
    if (read_start_o) rp++;
  end
  always @(posedge clk_n) begin
    if (write_start_o) wn++;
    if (read_start_o) rn++;
  end

  task automatic pulse_test(input bit is_write, input real offset);
    int width, lat;
    wp = 0; wn = 0; rp = 0; rn = 0; w_first_p = 0;
    @(posedge clk200);
    #(offset);
    if (is_write) write_start_i = 1; else read_start_i = 1;
    // latency counted from the first rising clk200 edge that samples the level
    lat = 0;
    @(posedge clk200);
    do begin
      @(posedge clk200); #0.1; lat++;
    end while (!(is_write ? write_start_o : read_start_o) && lat < 20);
    check(lat >= 2 && lat <= 3, $sformatf("strobe latency %0d in [2,3]", lat));
    width = 0;
    while (is_write ? write_start_o : read_start_o) begin
      width++;
      @(posedge clk200); #0.1;
    end
    check(width == 2, $sformatf("strobe width %0d == 2", width));
    repeat (10) @(posedge clk200);
    if (is_write) begin
      check(wp == 1 && wn == 1, "write strobe seen once by each 100 MHz clock");
      check(w_first_p, "CLK_P sees the write strobe first");
    end else begin
      check(rp == 1 && rn == 1, "read strobe seen once by each 100 MHz clock");
    end
    // held high: no further strobe
    wp = 0; wn = 0; rp = 0; rn = 0;
    repeat (20) @(posedge clk200);
    check((is_write ? wp + wn : rp + rn) == 0, "no strobe while level stays high");
    if (is_write) write_start_i = 0; else read_start_i = 0;
    repeat (10) @(posedge clk200);
  endtask

  initial begin
    #12 rst_n = 1;
    repeat (5) @(posedge clk200);
    for (int i = 0; i < 8; i++) begin
      pulse_test(1'b1, 0.3 + 0.5 * (i % 4));
      pulse_test(1'b0, 0.7 + 0.5 * (i % 3));
      if (i % 2 == 1) @(posedge clk200);   // vary the divider phase
    end
    check(p_edges > 100, "CLK_P running");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
