// tb_mem_write_ctrl: checks filling of the two SRAMs.
//
// Clocks as on the chip: clk200 (5 ns), CLK_P and CLK_N rising on alternate
// falling clk200 edges. The start strobe is two clk200 cycles wide and placed
// so that CLK_P sees it first. data_p and data_n are fresh random words after
// every edge of their clock. A reference tracks, per side, the next expected
// address: on each rising edge inside a fill the side must write exactly that
// address with the current data; outside a fill it must not write. A fill must
// take DEPTH cycles of 10 ns, then raise "full" and stop. The test runs two
// complete fills, then a fill restarted by a second Write Start half-way.
module tb_mem_write_ctrl;
  localparam int unsigned D = 16, W = 8, AW = $clog2(D);
  logic clk200 = 0, clk_p = 0, clk_n = 1, rst_n = 0, start = 0;
  logic [W-1:0] data_p = '0, data_n = '0;
  logic we_p, we_n, writing, full;
  logic [AW-1:0] waddr_p, waddr_n;
  logic [W-1:0] wdata_p, wdata_n;
  int checks = 0, failures = 0;

  mem_write_ctrl #(.DEPTH(D), .WIDTH(W)) dut (.*);

  always #2.5 clk200 = ~clk200;
  always @(negedge clk200) begin clk_p = ~clk_p; clk_n = ~clk_p; end
  always @(posedge clk_p) #1 data_p = W'($urandom);
  always @(posedge clk_n) #1 data_n = W'($urandom);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  int exp_p = -1, exp_n = -1, fills_p = 0, fills_n = 0;
  realtime first_p, last_p;
  always @(posedge clk_p) if (rst_n) begin
    if (start) begin exp_p = 0; first_p = $realtime; end
    if (exp_p >= 0) begin
      chk(we_p && waddr_p == AW'(exp_p) && wdata_p == data_p, "P side write");
      exp_p++;
      if (exp_p == D) begin
        exp_p = -1; fills_p++; last_p = $realtime;
        chk(last_p - first_p == (D - 1) * 10.0, "fill takes DEPTH cycles of 10 ns");
      end
    end else chk(!we_p, "P side idle");
  end
  always @(posedge clk_n) if (rst_n) begin
    if (start) exp_n = 0;
    if (exp_n >= 0) begin
      chk(we_n && waddr_n == AW'(exp_n) && wdata_n == data_n, "N side write");
      exp_n++;
      if (exp_n == D) begin exp_n = -1; fills_n++; end
    end else chk(!we_n, "N side idle");
  end

  // start strobe, aligned so that the next falling clk200 edge raises CLK_P
  task automatic strobe();
    do @(posedge clk200); while (clk_p);
    #0.5 start = 1;
    @(posedge clk200); @(posedge clk200);
    #0.5 start = 0;
  endtask

  initial begin
    #12 rst_n = 1;
    repeat (4) @(posedge clk200);
    chk(!full && !writing, "idle after reset");
    strobe();
    repeat (2 * D + 4) @(posedge clk200);
    chk(full && !writing, "full after first fill");
    repeat (20) @(posedge clk200);
    strobe();
    #1 chk(!full, "full clears on Write Start");
    repeat (2 * D + 4) @(posedge clk200);
    chk(full, "full after second fill");
    strobe();
    repeat (D) @(posedge clk200);
    chk(writing, "writing mid-fill");
    strobe();          // restart
    repeat (2 * D + 4) @(posedge clk200);
    chk(full && !writing, "full after restarted fill");
    chk(fills_p == 3 && fills_n == 3, "three complete fills per side");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
