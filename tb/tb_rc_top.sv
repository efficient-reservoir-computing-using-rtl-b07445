// tb_rc_top: end-to-end test of rc_top at its default sizes (400-tap filter,
// 1000-sample delay line, 100 cycles per sample, 1024-word stream buffers)
// with the loop closed through optical_loop_model (RF DAC -> sin^2 modulator
// -> detector -> ADC).
//
// The processor side is played by the testbench: it programs gain 0.58,
// offset 32768, delay 400 (the published operating point), 400 random filter
// coefficients and a calibration code, streams 1000 random input samples and
// starts the loop. A reference model in the testbench takes the ADC codes the
// model served and recomputes, for every sample n, the delayed sample, the
// filter output s[n], the input u[n] (0 once the stream has run dry) and the
// DAC code. The loop latency is checked too: the DAC word of sample n is
// loaded before conversion n+2 starts and after conversion n+1 starts. Each DAC word received by the model and each state on the DMA
// output (with m_tlast every 400th state) is compared with it. It also checks
// the sample rate at the DAC (one word per 100 cycles).
//
// Mechanisms that must each occur at least once: input underflow, a clipped
// DAC code (the gain is raised to 1.5 for the second run), state-buffer overflow (the DMA output is stalled for 1100 samples
// at the end), a calibration DAC update, a frame marker, and a change of the
// delay between runs. Overruns must never occur.
module tb_rc_top;
  import rc_pkg::*;

  localparam int unsigned TAPS   = NUM_TAPS;
  localparam int unsigned NIN    = 1000;   // input samples streamed for the first run
  localparam int unsigned NRUN1  = 1300;   // samples of the first run
  localparam int unsigned NRUN2  = 1200;   // samples of the second run (DMA stalled)
  localparam int unsigned NMAX   = 4000;

  logic        clk = 0, rst_n = 0;
  logic        reg_we;
  reg_addr_e   reg_addr;
  logic [31:0] reg_wdata, reg_rdata;
  logic [15:0] s_tdata;
  logic        s_tvalid, s_tready;
  logic [15:0] m_tdata;
  logic        m_tvalid, m_tlast, m_tready;
  logic        adc_cs_n, adc_sclk, adc_miso;
  logic        dac_cs_n, dac_sclk, dac_mosi;
  logic        cal_cs_n, cal_sclk, cal_mosi;

  int          adc_n, dac_n, cal_n;
  logic [15:0] adc_word, dac_word, cal_word;

  int          checks = 0, failures = 0;
  int          h [TAPS];
  int          adc_hist [NMAX];     // ADC codes in conversion order
  int          u_in [NMAX];
  int          s_ref [NMAX];
  int          dly;
  int          gain_v, offset_v;
  int          base;                // sample index origin of the reference
  int          run_first = 0;       // first sample index of the current run
  int          run2_first = 1 << 30;
  int          uidx = 0;            // next streamed input to be consumed
  int          n_dac_checked = 0, n_state = 0, n_tlast = 0;
  int          ev_sat = 0, ev_underflow = 0, ev_overflow = 0, ev_cal = 0, ev_delay_change = 0;
  bit          check_states;
  longint      cyc = 0, last_dac_cyc = 0;

  rc_top dut (.*);

  optical_loop_model model (
    .adc_cs_n, .adc_sclk, .adc_miso,
    .dac_cs_n, .dac_sclk, .dac_mosi,
    .cal_cs_n, .cal_sclk, .cal_mosi,
    .adc_n, .adc_word, .dac_n, .dac_word, .cal_n, .cal_word
  );

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #200_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model ----------------
  // x[n] = adc[n - delay] within the current run's history (zero before it
  // exists), s[n] = sat16(floor(sum h[j] x[n-j] / 2^15)).
  // The delayed sample of index n is fixed with the delay in force when it is
  // first needed; samples are processed in order and the delay is changed
  // only between runs, so this matches the hardware.
  int x_ref [NMAX];
  bit x_known [NMAX];
  function automatic int xdel(input int n);
    int i;
    if (!x_known[n]) begin
      i = n - dly;
      x_ref[n]   = (i >= 0) ? adc_hist[i] : 0;
      x_known[n] = 1'b1;
    end
    return x_ref[n];
  endfunction

  function automatic int s_model(input int n);
    longint acc = 0, q;
    for (int j = 0; j < TAPS; j++)
      if (n - j >= 0) acc += longint'(h[j]) * longint'(xdel(n - j));
    q = acc >>> 15;
    if (q > 32767) q = 32767;
    if (q < -32768) q = -32768;
    return int'(q);
  endfunction

  function automatic int dac_model(input int s, input int u, output bit sat);
    longint v;
    v = ((longint'(s) + longint'(u)) * longint'(gain_v)) >>> 14;
    v = v + longint'(offset_v);
    sat = (v < 0) || (v > 65535);
    return (v < 0) ? 0 : (v > 65535) ? 65535 : int'(v);
  endfunction

  // record ADC codes as they are served
  // Also checks the loop latency: the DAC word of sample a-2 must already be
  // loaded (and a-1 not yet) when conversion a starts, i.e. a round trip of
  // the programmed delay plus two samples.
  int adc_seen = 0;
  int n_latency_checked = 0;
  always @(posedge clk) begin
    if (adc_n != adc_seen) begin
      adc_hist[adc_n - 1] = int'(adc_word);
      adc_seen = adc_n;
      if (adc_n >= 2 && adc_n <= NRUN1) begin
        checks++;
        n_latency_checked++;
        if (dac_n != adc_n - 2) begin
          failures++;
          if (failures < 10) $display("FAIL latency: conversion %0d sees %0d DAC words", adc_n - 1, dac_n);
        end
      end
    end
  end

  // check every DAC word
  int dac_seen = 0;
  always @(posedge clk) begin
    if (dac_n != dac_seen) begin
      int n, s, e, u;
      bit sat;
      n = dac_n - 1;
      dac_seen = dac_n;
      s = s_model(n - base) ;
      s_ref[n] = s;
      if (n < NIN || n >= run2_first) begin
        u = u_in[uidx];
        uidx++;
      end else begin
        u = 0;
        ev_underflow++;
      end
      e = dac_model(s, u, sat);
      if (sat) ev_sat++;
      checks++;
      if (int'(dac_word) != e) begin
        failures++;
        if (failures < 10) $display("FAIL dac n=%0d got=%0d exp=%0d (s=%0d u=%0d)", n, dac_word, e, s, u);
      end
      if (n > run_first) begin
        checks++;
        if (cyc - last_dac_cyc != CLK_PER_SAMPLE) begin
          failures++;
          if (failures < 10) $display("FAIL dac interval %0d", cyc - last_dac_cyc);
        end
      end
      last_dac_cyc = cyc;
      n_dac_checked++;
    end
  end

  // check the state stream
  always @(posedge clk) if (rst_n && m_tvalid && m_tready) begin
    if (check_states) begin
      checks++;
      // the state of sample n leaves before or about when its DAC word arrives
      if ($signed(m_tdata) != 16'(s_model(n_state - base)) ||
          m_tlast != ((n_state % NUM_NODES) == NUM_NODES - 1)) begin
        failures++;
        if (failures < 10) $display("FAIL state n=%0d got=%0d exp=%0d", n_state, $signed(m_tdata), s_model(n_state - base));
      end
    end
    if (m_tlast) n_tlast++;
    n_state++;
  end

  always @(posedge clk) if (cal_n != ev_cal) ev_cal = cal_n;

  // ---------------- processor side ----------------
  // bus writes are driven at the falling edge, away from the sampling edge
  task automatic wr(input reg_addr_e a, input int d);
    @(negedge clk);
    reg_we = 1'b1; reg_addr = a; reg_wdata = 32'(d);
    @(negedge clk);
    reg_we = 1'b0;
  endtask

  task automatic rd(input reg_addr_e a, output int d);
    @(negedge clk);
    reg_addr = a;
    #1;
    d = int'(reg_rdata);
  endtask

  // stream inputs first..first+count-1 into the DMA input port
  task automatic feed(input int first, input int count);
    for (int i = first; i < first + count; i++) begin
      @(negedge clk);
      s_tvalid = 1'b1; s_tdata = 16'(u_in[i]);
      @(posedge clk);
      while (!s_tready) @(posedge clk);
      @(negedge clk);
      s_tvalid = 1'b0;
    end
  endtask

  initial begin
    int v;
    reg_we = 0; reg_addr = REG_CTRL; reg_wdata = 0;
    s_tdata = 0; s_tvalid = 0; m_tready = 1; check_states = 1;
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    gain_v = 9503; offset_v = 32768; dly = 400; base = 0;
    wr(REG_GAIN, gain_v);
    wr(REG_OFFSET, offset_v);
    wr(REG_DELAY, dly);
    wr(REG_FRAME, NUM_NODES);
    wr(REG_CAL, 16'h9000);
    // random coefficients, larger in the first 8 taps, small enough that the
    // filter output rarely saturates
    wr(REG_COEF_ADDR, 0);
    for (int j = 0; j < TAPS; j++) begin
      h[j] = (j < 8) ? int'($urandom_range(0, 5000)) - 2500 : int'($urandom_range(0, 40)) - 20;
      wr(REG_COEF_DATA, h[j] & 16'hFFFF);
    end
    // input samples; some are large to clip the DAC
    for (int i = 0; i < NMAX; i++)
      u_in[i] = (i % 97 == 13) ? 32000 : int'($urandom_range(0, 12000)) - 6000;
    feed(0, NIN);

    // run 1
    wr(REG_CTRL, 1);
    wait (dac_n == NRUN1);
    wr(REG_CTRL, 0);
    repeat (400) @(posedge clk);
    rd(REG_SAMPLES, v);
    checks++;
    if (v != dac_n) begin failures++; $display("FAIL sample counter %0d vs %0d", v, dac_n); end
    rd(REG_UNDERFLOW, v);
    checks++;
    if (v != dac_n - NIN) begin failures++; $display("FAIL underflow counter %0d", v); end
    checks++;
    if (n_state != dac_n) begin failures++; $display("FAIL states %0d", n_state); end

    // run 2: new delay, DMA output stalled so the state buffer overflows.
    // The delay line keeps its history, so the reference continues from it.
    dly = 123; ev_delay_change++;
    run_first = dac_n;
    wr(REG_DELAY, dly);
    gain_v = 24576;                 // 1.5: large inputs now clip the DAC code
    wr(REG_GAIN, gain_v);
    check_states = 0;
    m_tready <= 1'b0;
    run2_first = dac_n;
    fork
      feed(NIN, NRUN2 + 10);
    join_none
    repeat (2000) @(posedge clk);
    wr(REG_CTRL, 1);
    wait (dac_n == NRUN1 + NRUN2);
    wr(REG_CTRL, 0);
    repeat (400) @(posedge clk);
    rd(REG_OVERFLOW, v);
    ev_overflow = v;
    checks++;
    if (v != dac_n - n_state - 1024) begin failures++; $display("FAIL overflow counter %0d", v); end
    rd(REG_SATURATE, v);
    checks++;
    if (v != ev_sat) begin failures++; $display("FAIL saturate counter %0d vs %0d", v, ev_sat); end
    rd(REG_OVERRUN, v);
    checks++;
    if (v != 0) begin failures++; $display("FAIL overruns %0d", v); end
    checks++;
    if (cal_word != 16'h9000) begin failures++; $display("FAIL cal word %h", cal_word); end
    m_tready <= 1'b1;
    repeat (1100) @(posedge clk);

    $display("mechanisms: underflow=%0d saturate=%0d overflow=%0d cal_update=%0d tlast=%0d delay_change=%0d dac_words=%0d",
             ev_underflow, ev_sat, ev_overflow, ev_cal, n_tlast, ev_delay_change, n_dac_checked);
    checks++;
    if (ev_underflow == 0 || ev_sat == 0 || ev_overflow == 0 || ev_cal == 0 || n_tlast == 0 || ev_delay_change == 0) begin
      failures++;
      $display("FAIL a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
