// tb_slit128c_rate: the full-size SliT128C at the highest hit rate it is
// specified for, 1.4 MHz per strip on all 128 strips at once.
//
// Instead of the analog model, every channel's two discriminator outputs are
// driven directly with random pulse trains: hits arrive with a mean spacing of
// 714 ns (1.4 MHz), a random exponential gap plus the pulse itself. For each hit the
// CR-RC discriminator is high for 40 to 100 ns; the differentiator
// discriminator rises 3 to 30 ns after it and stays high 20 ns longer, so the
// final hit (their AND) runs from the differentiator's rising edge to the
// CR-RC falling edge. Between hits, isolated short pulses on the
// differentiator discriminator alone stand for noise triggers; the AND must
// suppress them. All edges fall 0.05 ns off the 2.5 ns clock grid.
//
// After programming every channel with both discriminators on, the test
// records one fill (8192 samples) and reads it out over the serial line. It
// compares all 8192 words with the hit maps it builds itself at every
// 200 MHz sample, counts the hits found in the readout, and checks that their
// rate is 1.4 MHz per strip within 10 percent and that noise triggers
// occurred and left no trace.
module tb_slit128c_rate;
  import slit_pkg::*;
  localparam int unsigned N = NUM_CH;
  localparam int unsigned S = MEM_SAMPLES;
  localparam int unsigned L = N * CFG_BITS;
  localparam real MEAN_NS = 1000.0 / 1.4;

  logic clk200 = 0, rst_n = 1, write_start = 0, read_start = 0;
  logic sc_free = 0, sc_en = 0, sc_din = 0, sc_load = 0, sc_dout;
  logic sc_clk;
  logic sclk, sdata, sdata_valid;
  logic [N-1:0] disc_diff = '0, disc_crrc = '0;
  ch_cfg_t cfg [N];
  int checks = 0, failures = 0;

  assign sc_clk = sc_free & sc_en;

  slit128c dut (.*);

  always #2.5 clk200 = ~clk200;
  initial begin
    #1.3;
    forever #5 sc_free = ~sc_free;
  end

  initial begin
    #15ms;
    failures++;
    $display("watchdog: %0d words received", rx_words);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---------------- pulse trains ----------------
  bit run_trains = 0;
  int n_noise = 0;
  function automatic real expo(input real mean);
    real u;
    u = (real'($urandom_range(1_000_000, 1)) / 1_000_001.0);
    return -mean * $ln(u);
  endfunction
  // round a delay so that edges land on a 0.1 ns grid offset by 0.05 ns
  function automatic real grid(input real d);
    return real'(int'(d * 10.0)) / 10.0;
  endfunction

  for (genvar c = 0; c < N; c++) begin : g_ch
    initial begin
      real gap, w, d;
      #0.05;
      wait (run_trains);
      while (run_trains) begin
        // the pulse itself and the 5 ns pause take about 95 ns of each interval
        gap = grid(expo(MEAN_NS - 95.0));
        // a noise trigger in some gaps that are long enough
        if (gap > 200.0 && $urandom_range(3) == 0) begin
          #(grid(gap / 2.0));
          disc_diff[c] = 1;
          #(grid(4.0 + real'($urandom_range(60)) / 10.0));
          disc_diff[c] = 0;
          n_noise++;
          #(grid(gap / 2.0));
        end else begin
          #(gap + 5.0);
        end
        w = grid(40.0 + real'($urandom_range(600)) / 10.0);
        d = grid(3.0 + real'($urandom_range(270)) / 10.0);
        disc_crrc[c] = 1;
        #(d);
        disc_diff[c] = 1;
        #(w - d);
        disc_crrc[c] = 0;
        #20.0;
        disc_diff[c] = 0;
      end
    end
  end

  // ---------------- expected hit maps ----------------
  logic [N-1:0] ref_hist [3];
  logic [N-1:0] exp_mem [S];
  int nexp = -1;
  bit ws_seen = 0;
  always @(posedge clk200) begin
    logic [N-1:0] r;
    r = disc_diff & disc_crrc;
    if (rst_n && dut.wr_start && !ws_seen) begin
      ws_seen = 1;
      nexp = 0;
      exp_mem[nexp++] = ref_hist[2];
      exp_mem[nexp++] = ref_hist[1];
      exp_mem[nexp++] = ref_hist[0];
    end
    if (nexp >= 0 && nexp < S) exp_mem[nexp++] = r;
    ref_hist[2] = ref_hist[1]; ref_hist[1] = ref_hist[0]; ref_hist[0] = r;
  end

  // ---------------- serial receiver ----------------
  logic [N-1:0] rx_mem [S];
  logic [N-1:0] rx_sh;
  int rx_bits = 0, rx_words = 0;
  always @(sclk) begin
    #5;
    if (sdata_valid) begin
      rx_sh = {rx_sh[N-2:0], sdata};
      rx_bits++;
      if (rx_bits % N == 0) begin
        if (rx_words < S) rx_mem[rx_words] = rx_sh;
        rx_words++;
      end
    end
  end

  initial begin
    logic [L-1:0] chain;
    ch_cfg_t f;
    for (int c = 0; c < N; c++) begin
      f = '0;
      f.dac_crrc = 7'd36; f.dac_diff = 7'd5; f.enb_comp1 = 1; f.enb_comp2 = 1;
      chain[c*CFG_BITS +: CFG_BITS] = f;
    end
    #1 rst_n = 0;
    #20 rst_n = 1;
    @(negedge sc_free);
    sc_en = 1;
    for (int i = L - 1; i >= 0; i--) begin
      sc_din = chain[i];
      @(negedge sc_free);
    end
    sc_load = 1;
    @(negedge sc_free);
    sc_load = 0; sc_en = 0;
    for (int c = 0; c < N; c++) chk(cfg[c].enb_comp1 && cfg[c].enb_comp2, "both discriminators on");

    run_trains = 1;
    #3000;
    write_start = 1;
    wait (dut.u_mem.full);
    #2000;
    run_trains = 0;
    write_start = 0;
    #2000;
    read_start = 1;
    wait (rx_words == S);
    #1000;
    read_start = 0;
    analyse();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic analyse();
    int bad = 0, hits = 0;
    real rate;
    for (int k = 0; k < S; k++) begin
      checks++;
      if (rx_mem[k] !== exp_mem[k]) begin
        failures++; bad++;
        if (bad < 8) $display("word %0d: got %h expected %h", k, rx_mem[k], exp_mem[k]);
      end
      if (k > 0) hits += $countones(rx_mem[k] & ~rx_mem[k-1]);
    end
    rate = real'(hits) / (N * S * 5.0e-9) / 1.0e6;
    $display("%0d hits stored, %0.3f MHz per strip; %0d noise triggers", hits, rate, n_noise);
    chk(rate > 1.26 && rate < 1.54, "hit rate 1.4 MHz per strip within 10 percent");
    chk(n_noise > 0, "noise triggers occurred");
  endtask
endmodule
