// tb_memory_controller: fill and readout through the whole memory controller.
//
// Clocks as on the chip (clk200, CLK_P and CLK_N on alternate falling clk200
// edges). data_p and data_n are random after every edge of their clock. The
// testbench records the expected time-ordered sample stream itself: from the
// CLK_P edge inside the Write Start strobe on, it alternately takes the
// current data_p and data_n, 2*DEPTH samples in all. It checks that "full"
// rises (DEPTH-1)*10 + 5 ns after the first CLK_P write, that data arriving after the
// memory is full are not stored, and that the readout (random ready) returns
// exactly the recorded stream. Two fill/readout rounds are run.
module tb_memory_controller;
  localparam int unsigned D = 16, W = 8;
  logic clk200 = 0, clk_p = 0, clk_n = 1, rst_n = 0;
  logic write_start = 0, read_start = 0, out_ready = 0;
  logic [W-1:0] data_p = '0, data_n = '0, out_data;
  logic out_valid, writing, full, reading;
  logic [W-1:0] exp_q [$];
  int checks = 0, failures = 0;

  memory_controller #(.DEPTH(D), .WIDTH(W)) dut (.*);

  always #2.5 clk200 = ~clk200;
  always @(negedge clk200) begin clk_p = ~clk_p; clk_n = ~clk_p; end
  always @(posedge clk_p) #1 data_p = W'($urandom);
  always @(posedge clk_n) #1 data_n = W'($urandom);

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // expected stream
  bit recording = 0; int nrec = 0;
  realtime t_start;
  always @(posedge clk_p) begin
    if (write_start) begin recording = 1; nrec = 0; exp_q.delete(); t_start = $realtime; end
    if (recording && nrec < 2 * D) begin exp_q.push_back(data_p); nrec++; end
  end
  always @(posedge clk_n) begin
    if (recording && nrec < 2 * D) begin exp_q.push_back(data_n); nrec++; end
    if (nrec == 2 * D) recording = 0;
  end

  // consumer
  int got = 0;
  always @(posedge clk_p) if (rst_n) begin
    if (out_valid && out_ready) begin
      if (exp_q.size() == 0) chk(0, "word beyond the recorded stream");
      else chk(out_data == exp_q.pop_front(), $sformatf("readout word %0d", got));
      got++;
    end
    #1 out_ready = 1'($urandom);
  end

  task automatic strobe(input bit wr);
    do @(posedge clk200); while (clk_p);
    #0.5 if (wr) write_start = 1; else read_start = 1;
    @(posedge clk200); @(posedge clk200);
    #0.5 write_start = 0; read_start = 0;
  endtask

  initial begin
    #12 rst_n = 1;
    repeat (4) @(posedge clk200);
    for (int round = 0; round < 2; round++) begin
      strobe(1);
      @(posedge full);
      // last CLK_P write D-1 cycles after the first, then the CLK_N one 5 ns later
      chk($realtime - t_start == (D - 1) * 10.0 + 5.0,
          $sformatf("full %0t after start, expect %0d ns", $realtime - t_start, (D - 1) * 10 + 5));
      repeat (3 * D) @(posedge clk200);    // data keep arriving; must not be stored
      got = 0;
      strobe(0);
      wait (!reading);
      chk(got == 2 * D, "2*DEPTH words read");
      chk(exp_q.size() == 0, "recorded stream fully consumed");
      repeat (10) @(posedge clk200);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
