// tb_serializer: checks the parallel-to-serial conversion.
//
// An 8-bit serializer is fed random words over valid/ready, first with random
// gaps on the sending side, then back to back. On every rising clock edge the
// testbench records sdata while sdata_valid is high and rebuilds the words,
// MSB first; each must equal the word sent. In the back-to-back run the line
// must stay valid without a gap: N words take exactly N*WIDTH cycles.
module tb_serializer;
  localparam int unsigned W = 8;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, sdata, sdata_valid;
  logic [W-1:0] in_data = '0;
  logic [W-1:0] sent [$];
  int checks = 0, failures = 0;

  serializer #(.WIDTH(W)) dut (.*);

  always #5 clk = ~clk;

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

  // receiver
  logic [W-1:0] sh; int nb = 0, nwords = 0, valid_bits = 0;
  always @(posedge clk) if (rst_n) begin
    if (sdata_valid) begin
      sh = {sh[W-2:0], sdata}; nb++; valid_bits++;
      if (nb == W) begin
        nb = 0; nwords++;
        if (sent.size() == 0) chk(0, "word without a sent word");
        else chk(sh == sent.pop_front(), "received word matches");
      end
    end
  end

  task automatic send(input logic [W-1:0] d);
    in_valid = 1; in_data = d;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    sent.push_back(d);
    #1 in_valid = 0; in_data = W'($urandom);
  endtask

  initial begin
    int v0, c0;
    #22 rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 40; i++) begin
      repeat ($urandom_range(12)) @(negedge clk);
      send(W'($urandom));
    end
    wait (sent.size() == 0 && !sdata_valid);
    chk(nwords == 40, "40 words with gaps");
    // back to back
    @(negedge clk);
    v0 = valid_bits;
    for (int i = 0; i < 30; i++) send(W'($urandom));
    wait (sent.size() == 0 && !sdata_valid);
    chk(valid_bits - v0 == 30 * W, "30 back-to-back words");
    chk(nwords == 70, "70 words in all");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // gapless: once valid, sdata_valid stays high while words keep coming
  int run = 0, max_run = 0;
  always @(posedge clk) begin
    if (sdata_valid) run++; else run = 0;
    if (run > max_run) max_run = run;
  end
  initial begin
    wait (nwords == 70);
    chk(max_run >= 30 * W, $sformatf("unbroken run of %0d bits", max_run));
  end
endmodule
