// tb_sram: checks the two-port hit-data memory.
//
// Writes random words to every address on one clock, then reads them back on
// a second, unrelated clock in a random order, with the read enable sometimes
// low: a read must return the word last written, one read-clock cycle after
// re, and the output must hold when re is low. Then rewrites half the
// addresses and checks again. A 64-word, 128-bit memory is used.
module tb_sram;
  localparam int unsigned D = 64, W = 128, AW = $clog2(D);
  logic wclk = 0, rclk = 0, we = 0, re = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [W-1:0] wdata = '0, rdata;
  logic [W-1:0] model [D];
  int checks = 0, failures = 0;

  sram #(.DEPTH(D), .WIDTH(W)) dut (.*);

  always #5 wclk = ~wclk;
  always #3.7 rclk = ~rclk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] rnd();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  task automatic write_all(input int step);
    for (int a = 0; a < D; a += step) begin
      @(negedge wclk);
      we = 1; waddr = AW'(a); wdata = rnd(); model[a] = wdata;
    end
    @(negedge wclk); we = 0;
  endtask

  task automatic read_check(input int n);
    logic [W-1:0] held;
    for (int i = 0; i < n; i++) begin
      int a;
      a = $urandom_range(D - 1);
      @(negedge rclk);
      re = 1; raddr = AW'(a);
      @(posedge rclk); #0.1;
      re = 0;
      checks++;
      if (rdata !== model[a]) begin failures++; $display("read %0d mismatch", a); end
      held = rdata;
      // with re low the output holds
      raddr = AW'($urandom_range(D - 1));
      @(posedge rclk); #0.1;
      checks++;
      if (rdata !== held) begin failures++; $display("rdata did not hold"); end
    end
  endtask

  initial begin
    write_all(1);
    read_check(200);
    write_all(2);
    read_check(200);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
