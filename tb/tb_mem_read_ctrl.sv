// tb_mem_read_ctrl: checks the read order and handshake of the readout.
//
// The two SRAMs are modelled in the testbench (random contents, one-cycle
// read latency). A consumer takes words with out_ready random, holds a
// reference of the expected order P[0], N[0], P[1], N[1], ... and compares
// every accepted word. It checks that an offered word stays steady until
// taken, that exactly 2*DEPTH words come out, that a Read Start during a
// readout is ignored, and that with out_ready always high one word is
// delivered every 3 cycles after one cycle to start.
module tb_mem_read_ctrl;
  localparam int unsigned D = 8, W = 16, AW = $clog2(D);
  logic clk = 0, rst_n = 0, start = 0, out_ready = 0;
  logic re_p, re_n, out_valid, reading;
  logic [AW-1:0] raddr_p, raddr_n;
  logic [W-1:0] rdata_p, rdata_n, out_data;
  logic [W-1:0] mem_p [D], mem_n [D];
  int checks = 0, failures = 0;

  mem_read_ctrl #(.DEPTH(D), .WIDTH(W)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (re_p) rdata_p <= mem_p[raddr_p];
    if (re_n) rdata_n <= mem_n[raddr_n];
  end

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

  int idx = 0;            // index of the next expected word
  bit random_ready = 1;
  int cyc = 0;
  logic [W-1:0] held; bit pending = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (pending) chk(out_valid && out_data == held, "offered word held until taken");
    if (out_valid && out_ready) begin
      logic [W-1:0] e;
      e = idx[0] ? mem_n[idx / 2] : mem_p[idx / 2];
      chk(idx < 2 * D, "no word beyond the memory");
      chk(out_data == e, $sformatf("word %0d in time order", idx));
      idx++;
      pending = 0;
    end else if (out_valid) begin
      pending = 1; held = out_data;
    end
    #1 out_ready = random_ready ? 1'($urandom) : 1'b1;
  end

  task automatic readout(input bit rnd, input bit restart_mid);
    int c0;
    for (int a = 0; a < D; a++) begin mem_p[a] = W'($urandom); mem_n[a] = W'($urandom); end
    idx = 0; random_ready = rnd;
    @(negedge clk); start = 1; c0 = cyc;
    @(negedge clk); start = 0;
    if (restart_mid) begin
      wait (idx == D);
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
    end
    wait (!reading);
    chk(idx == 2 * D, "all words read");
    if (!rnd) chk(cyc - c0 == 3 * 2 * D + 1, $sformatf("readout cycles %0d == 1 + 3 per word", cyc - c0));
    repeat (5) @(posedge clk);
    chk(idx == 2 * D && !out_valid, "idle after readout");
  endtask

  initial begin
    #22 rst_n = 1;
    readout(0, 0);
    readout(1, 0);
    readout(1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
