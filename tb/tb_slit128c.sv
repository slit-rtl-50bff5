// tb_slit128c: end-to-end test of the SliT128C at its full size (128
// channels, 8192 samples), one complete fill and readout.
//
// 128 behavioural analog channels (analog_channel_model) feed the chip's
// discriminator inputs. The testbench
//  1. programs all channel registers through the slow-control chain (image A:
//     both discriminators on, CR-RC threshold 36 LSB = 1.55 fC ~ 0.3 MIP,
//     test pulse on every eighth channel, channel 127 fully off, channel 126
//     shaper discriminator only) and loads them;
//  2. raises Write Start and, during the 40.96 us fill, injects sensor
//     charges of 0.26 to 3 MIP into many channels and one test pulse;
//  3. meanwhile shifts image B (differentiator discriminators off: CR-RC time
//     over threshold only) into the chain, checks that the readback equals
//     image A, and loads B half-way through the fill (the mode switch), then
//     injects more charges and a second test pulse;
//  4. injects one more charge after the memory is full, which must not be
//     stored;
//  5. raises Read Start, receives the 1,048,576-bit serial stream on sdata,
//     sampling each bit 5 ns after the sclk edge that starts it (DDR), and
//     compares all 8192 words with the hit maps it recorded itself from the
//     model outputs at every 200 MHz sample.
// It also checks the fill time (40.96 us) and readout time (8192*128 bit
// periods of 10 ns), that the leading edge in the AND mode does not move with
// the charge by more than one 5 ns sample, that it does in the CR-RC-only
// mode, that the time over threshold is shorter in the AND mode, and it
// counts every mechanism it means to exercise, failing any that never
// happened.
module tb_slit128c;
  import slit_pkg::*;
  localparam int unsigned N = NUM_CH;
  localparam int unsigned S = MEM_SAMPLES;       // samples per fill
  localparam int unsigned L = N * CFG_BITS;

  logic clk200 = 0, rst_n = 1, write_start = 0, read_start = 0;
  logic sc_free = 0, sc_en = 0, sc_din = 0, sc_load = 0, sc_dout;
  logic sc_clk;
  assign sc_clk = sc_free & sc_en;   // the host clocks the chain only when it uses it
  logic sclk, sdata, sdata_valid;
  logic [N-1:0] disc_diff, disc_crrc;
  ch_cfg_t cfg [N];

  logic tp = 0;
  real  tp_q = 3.84;
  logic [N-1:0] ain = '0;
  real  ain_q [N];

  int checks = 0, failures = 0;

  slit128c dut (.*);

  for (genvar c = 0; c < N; c++) begin : g_ch
    analog_channel_model u_ach (
      .tp, .tp_q_fc (tp_q), .ain (ain[c]), .ain_q_fc (ain_q[c]), .cfg (cfg[c]),
      .disc_diff (disc_diff[c]), .disc_crrc (disc_crrc[c])
    );
  end

  always #2.5 clk200 = ~clk200;
  initial begin
    #1.3;
    forever #5 sc_free = ~sc_free;   // 100 MHz slow-control clock, off the 200 MHz edges
  end

  initial begin
    #15ms;
    failures++;
    $display("watchdog: %0d bits %0d words received, reading=%b", rx_bits, rx_words, dut.u_mem.reading);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---------------- configuration images ----------------
  logic [CFG_BITS-1:0] img_a [N], img_b [N];
  logic [L-1:0] chain_a, chain_b, back;
  logic [N-1:0] act_e1, act_e2;      // enables the testbench knows to be active

  function automatic logic [CFG_BITS-1:0] mk(input int c, input bit diff_on);
    ch_cfg_t f;
    f.dac_diff  = 7'd5;
    f.dac_crrc  = 7'd36;
    f.mon_en    = 2'($urandom);
    f.enb_comp2 = (c != 127);
    f.enb_comp1 = diff_on && (c != 127) && (c != 126);
    f.enb_gain2 = 1'($urandom);
    f.tp_en     = (c % 8 == 3);
    return f;
  endfunction

  // Both tasks start and end just after a falling edge of the free clock.
  task automatic shift_chain(input logic [L-1:0] img, output logic [L-1:0] outv);
    sc_en = 1;
    for (int i = L - 1; i >= 0; i--) begin
      sc_din = img[i];
      outv[i] = sc_dout;
      @(negedge sc_free);
    end
    sc_en = 0;
  endtask

  int n_load = 0;
  task automatic load(input logic [CFG_BITS-1:0] img [N]);
    sc_load = 1;
    sc_en = 1;
    @(posedge sc_free);
    for (int c = 0; c < N; c++) begin act_e1[c] = img[c][2]; act_e2[c] = img[c][3]; end
    n_load++;
    @(negedge sc_free);
    sc_load = 0;
    sc_en = 0;
  endtask

  // ---------------- expected hit maps ----------------
  // The reference samples the model outputs at every rising clk200 edge and
  // combines them with the enables it loaded itself.
  logic [N-1:0] ref_hist [3];
  logic [N-1:0] exp_mem [S];
  int  nexp = -1;                 // -1: not recording
  realtime t_slot0;
  bit  ws_seen = 0;
  always @(posedge clk200) begin
    logic [N-1:0] r;
    for (int c = 0; c < N; c++)
      r[c] = (act_e1[c] | act_e2[c]) & (disc_diff[c] | ~act_e1[c]) & (disc_crrc[c] | ~act_e2[c]);
    // The first word written is the sample taken two clk200 edges before the
    // edge that raised the internal write strobe (the strobe is seen here one
    // edge after it rose).
    if (rst_n && dut.wr_start && !ws_seen) begin
      ws_seen = 1;
      nexp = 0;
      t_slot0 = $realtime - 15.0;
      exp_mem[nexp++] = ref_hist[2];
      exp_mem[nexp++] = ref_hist[1];
      exp_mem[nexp++] = ref_hist[0];
    end
    if (nexp >= 0 && nexp < S) exp_mem[nexp++] = r;
    ref_hist[2] = ref_hist[1]; ref_hist[1] = ref_hist[0]; ref_hist[0] = r;
  end

  // ---------------- injections ----------------
  typedef struct { int ch; int slot; real q; bit and_mode; } inj_t;
  inj_t injs [$];
  real qs [5] = '{1.92, 3.84, 7.68, 11.52, 1.0};
  int n_inj = 0;

  // inject a charge 1.05 ns after a rising clk200 edge
  task automatic inject(input int c, input real q, input bit and_mode);
    inj_t r;
    @(posedge clk200);
    #1.05;
    ain_q[c] = q;
    ain[c] = 1;
    r.ch = c; r.q = q; r.and_mode = and_mode;
    r.slot = int'(($realtime - t_slot0 - 1.05) / 5.0);
    injs.push_back(r);
    n_inj++;
    #2 ain[c] = 0;
  endtask

  int tp_slot [2];
  task automatic test_pulse(input int k);
    @(posedge clk200);
    #1.05 tp = 1;
    tp_slot[k] = int'(($realtime - t_slot0 - 1.05) / 5.0);
    #2 tp = 0;
  endtask

  task automatic inject_series(input realtime t_end, input bit and_mode, inout int i);
    while ($realtime < t_end) begin
      int c;
      c = (i * 37) % 126;               // channels 0..125
      if (c % 8 == 3) c = c + 1;        // keep test-pulse channels for test pulses
      inject(c, qs[i % 5], and_mode);
      i++;
      #400;
    end
  endtask

  // ---------------- serial receiver ----------------
  logic [N-1:0] rx_mem [S];
  logic [N-1:0] rx_sh;
  int rx_bits = 0, rx_words = 0, ddr_rise = 0, ddr_fall = 0;
  realtime t_first_bit, t_last_bit;
  always @(sclk) begin
    if (sclk) ddr_rise++; else ddr_fall++;
    #5;
    if (sdata_valid) begin
      if (rx_bits == 0) t_first_bit = $realtime;
      t_last_bit = $realtime;
      rx_sh = {rx_sh[N-2:0], sdata};
      rx_bits++;
      if (rx_bits % N == 0) begin
        if (rx_words < S) rx_mem[rx_words] = rx_sh;
        rx_words++;
      end
    end
  end

  realtime t_full;
  always @(posedge dut.u_mem.full) t_full = $realtime;

  int n_backpressure = 0;
  always @(posedge dut.clk_p) if (dut.word_valid && !dut.word_ready) n_backpressure++;

  // ---------------- stimulus ----------------
  initial begin
    realtime t_ws;
    int i = 0;
    for (int c = 0; c < N; c++) begin ain_q[c] = 0.0; img_a[c] = mk(c, 1); end
    for (int c = 0; c < N; c++) begin img_b[c] = img_a[c]; img_b[c][2] = 1'b0; end
    for (int c = 0; c < N; c++) begin
      chain_a[c*CFG_BITS +: CFG_BITS] = img_a[c];
      chain_b[c*CFG_BITS +: CFG_BITS] = img_b[c];
    end
    act_e1 = '0; act_e2 = '0;
    #1 rst_n = 0;
    #20 rst_n = 1;
    @(negedge sc_free);
    shift_chain(chain_a, back);
    chk(back == '0, "readback after reset is zero");
    load(img_a);
    for (int c = 0; c < N; c++)
      chk(cfg[c] == ch_cfg_t'(img_a[c]), $sformatf("cfg of channel %0d after load", c));

    // fill
    #1000;
    write_start = 1;
    t_ws = $realtime;
    fork
      begin     // image B shifted during the fill, loaded after 26 us
        @(negedge sc_free);
        shift_chain(chain_b, back);
        chk(back == chain_a, "readback of image A while shifting image B");
        for (int c = 0; c < N; c++)
          chk(cfg[c] == ch_cfg_t'(img_a[c]), "registers unchanged while shifting");
        wait ($realtime > t_ws + 26.5us);
        @(negedge sc_free);
        load(img_b);
      end
      begin     // injections
        wait (ws_seen);
        #500;
        inject_series(t_ws + 9.5us, 1'b1, i);
        test_pulse(0);
        #600;
        inject(127, 3.84, 1'b1);        // channel with both discriminators off
        #400;
        inject_series(t_ws + 25.5us, 1'b1, i);
        wait ($realtime > t_ws + 27.5us);
        inject_series(t_ws + 33.5us, 1'b0, i);
        test_pulse(1);
        #600;
        inject_series(t_ws + 41us, 1'b0, i);
      end
    join
    write_start = 0;
    wait (dut.u_mem.full);
    chk(t_full - t_slot0 > 40.9us && t_full - t_slot0 < 41.0us,
        $sformatf("fill of 8192 x 5 ns took %0t", t_full - t_slot0));
    #1000;
    inject(5, 7.68, 1'b1);              // after the memory is full: not stored
    #1000;

    // readout
    read_start = 1;
    $display("fill done at %0t, readout started", $realtime);
    wait (rx_words == S);
    #200;
    read_start = 0;
    chk((t_last_bit - t_first_bit) == (S * N - 1) * 10.0,
        $sformatf("readout of %0d bits took %0t", S * N, t_last_bit - t_first_bit + 10.0));
    #1000;
    chk(rx_bits == S * N, $sformatf("received %0d bits", rx_bits));
    chk(!sdata_valid, "serial line idle after readout");
    analyse();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- analysis ----------------
  task automatic analyse();
    int bad = 0, n_and = 0, n_crrc = 0, n_sub = 0, n_silent = 0, n_tp = 0, n_tp_masked = 0;
    int lead_and_min = 99, lead_and_max = -1, lead_crrc_min = 99, lead_crrc_max = -1;
    int tot_and = 0, tot_crrc = 0, cnt_tot_and = 0, cnt_tot_crrc = 0;
    bit any127 = 0;
    for (int k = 0; k < S; k++) begin
      checks++;
      if (rx_mem[k] !== exp_mem[k]) begin
        failures++; bad++;
        if (bad < 8) $display("word %0d: got %h expected %h", k, rx_mem[k], exp_mem[k]);
      end
      if (rx_mem[k][127]) any127 = 1;
    end
    // per injection: leading edge and time over threshold from the received data
    foreach (injs[j]) begin
      int lead, tot, c;
      c = injs[j].ch; lead = -1; tot = 0;
      if (injs[j].slot >= S - 100) continue;
      for (int k = injs[j].slot; k < injs[j].slot + 80 && k < S; k++) begin
        if (rx_mem[k][c]) begin
          if (lead < 0) lead = k - injs[j].slot;
          tot++;
        end
      end
      if (c == 127) begin
        if (lead < 0) n_silent++;
        continue;
      end
      if (injs[j].q < 1.5) begin
        if (lead < 0) n_sub++;
        else chk(0, "sub-threshold charge gave a hit");
        continue;
      end
      chk(lead >= 0, $sformatf("hit for %0.2f fC on channel %0d", injs[j].q, c));
      if (lead < 0) continue;
      if (injs[j].and_mode && c != 126) begin
        n_and++;
        if (lead < lead_and_min) lead_and_min = lead;
        if (lead > lead_and_max) lead_and_max = lead;
        if (injs[j].q == 3.84) begin tot_and += tot; cnt_tot_and++; end
      end else if (!injs[j].and_mode) begin
        n_crrc++;
        if (lead < lead_crrc_min) lead_crrc_min = lead;
        if (lead > lead_crrc_max) lead_crrc_max = lead;
        if (injs[j].q == 3.84) begin tot_crrc += tot; cnt_tot_crrc++; end
      end
    end
    // test pulses: enabled channels hit, others quiet at that time
    for (int p = 0; p < 2; p++) begin
      for (int c = 0; c < N; c++) begin
        bit h = 0;
        for (int k = tp_slot[p]; k < tp_slot[p] + 40; k++) if (rx_mem[k][c]) h = 1;
        if (c % 8 == 3 && c != 127) begin
          chk(h, $sformatf("test pulse %0d reached channel %0d", p, c));
          if (h) n_tp++;
        end else if (!h) n_tp_masked++;
      end
    end
    $display("AND mode: %0d hits, leading edge %0d..%0d samples after injection",
             n_and, lead_and_min, lead_and_max);
    $display("CR-RC mode: %0d hits, leading edge %0d..%0d samples after injection",
             n_crrc, lead_crrc_min, lead_crrc_max);
    if (cnt_tot_and > 0 && cnt_tot_crrc > 0)
      $display("1 MIP time over threshold: AND %0d ns, CR-RC %0d ns",
               5 * tot_and / cnt_tot_and, 5 * tot_crrc / cnt_tot_crrc);
    chk(lead_and_max - lead_and_min <= 1, "AND mode: leading edge independent of charge");
    chk(lead_crrc_max - lead_crrc_min >= 2, "CR-RC mode: leading edge walks with charge");
    chk(cnt_tot_and > 0 && cnt_tot_crrc > 0 && tot_and * cnt_tot_crrc < tot_crrc * cnt_tot_and,
        "time over threshold shorter in AND mode");
    chk(!any127, "channel 127 (both discriminators off) silent");
    // mechanisms
    $display("mechanisms: loads=%0d injections=%0d and_hits=%0d crrc_hits=%0d subthreshold=%0d silent=%0d tp_hits=%0d tp_masked=%0d backpressure=%0d ddr_edges=%0d/%0d",
             n_load, n_inj, n_and, n_crrc, n_sub, n_silent, n_tp, n_tp_masked, n_backpressure, ddr_rise, ddr_fall);
    chk(n_load >= 2, "mode switch by a register load during the fill");
    chk(n_and > 0, "hits in AND mode");
    chk(n_crrc > 0, "hits in CR-RC-only mode");
    chk(n_sub > 0, "sub-threshold charges rejected");
    chk(n_silent > 0, "charge into a disabled channel");
    chk(n_tp > 0, "test-pulse hits");
    chk(n_tp_masked > 0, "test pulse blocked where its switch is off");
    chk(n_backpressure > 0, "read controller waited for the serializer");
    chk(ddr_rise > 0 && ddr_fall > 0, "bits on both clock edges");
  endtask
endmodule
