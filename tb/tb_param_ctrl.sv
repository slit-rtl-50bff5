// tb_param_ctrl: checks the slow-control shift chain and register load.
//
// With 6 channels (120 chain bits) the testbench shifts in a random image,
// pulses sc_load and checks every field of every channel register against the
// image (channel c takes chain bits [20c+19:20c], the last 20 bits shifted in
// being channel 0). It then shifts a second image while comparing sc_dout
// with the first one (readback, first-shifted bit first), and checks that the
// registers do not change until the next load. It also checks the all-zero
// reset state.
module tb_param_ctrl;
  import slit_pkg::*;
  localparam int unsigned N = 6, L = N * CFG_BITS;
  logic sc_clk = 0, rst_n = 0, sc_din = 0, sc_load = 0, sc_dout;
  ch_cfg_t cfg [N];
  logic [L-1:0] img1, img2;
  int checks = 0, failures = 0;

  param_ctrl #(.NUM_CH(N)) dut (.*);

  always #10 sc_clk = ~sc_clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  // Shift an image MSB first; returns what came out of sc_dout. Both tasks
  // start and end just after a falling sc_clk edge.
  task automatic shift_in(input logic [L-1:0] img, output logic [L-1:0] outv);
    for (int i = L - 1; i >= 0; i--) begin
      sc_din = img[i];
      outv[i] = sc_dout;
      @(negedge sc_clk);
    end
  endtask

  task automatic load();
    sc_load = 1;
    @(negedge sc_clk);
    sc_load = 0;
  endtask

  task automatic check_regs(input logic [L-1:0] img, input string tag);
    for (int c = 0; c < N; c++) begin
      logic [CFG_BITS-1:0] f;
      f = img[c*CFG_BITS +: CFG_BITS];
      chk(cfg[c].dac_diff  == f[19:13], {tag, " dac_diff"});
      chk(cfg[c].dac_crrc  == f[12:6],  {tag, " dac_crrc"});
      chk(cfg[c].mon_en    == f[5:4],   {tag, " mon_en"});
      chk(cfg[c].enb_comp2 == f[3],     {tag, " enb_comp2"});
      chk(cfg[c].enb_comp1 == f[2],     {tag, " enb_comp1"});
      chk(cfg[c].enb_gain2 == f[1],     {tag, " enb_gain2"});
      chk(cfg[c].tp_en     == f[0],     {tag, " tp_en"});
    end
  endtask

  initial begin
    logic [L-1:0] back;
    for (int w = 0; w < L; w += 32) begin
      img1[w +: 32] = $urandom;
      img2[w +: 32] = $urandom;
    end
    #25 rst_n = 1;
    @(negedge sc_clk);
    check_regs('0, "reset");
    shift_in(img1, back);
    chk(back == '0, "readback after reset is zero");
    check_regs('0, "no change before load");
    load();
    check_regs(img1, "image 1");
    shift_in(img2, back);
    chk(back == img1, "readback of image 1");
    check_regs(img1, "held during shift");
    load();
    check_regs(img2, "image 2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
