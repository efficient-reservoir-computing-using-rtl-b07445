// tb_rc_workloads: runs rc_top, at its default sizes and with the loop closed
// through optical_loop_model, in the three configurations of the reservoir's
// benchmark tasks. The tasks' input series are prepared the way the host does
// it (a mask of N values per input step, times the input, times a scale) and
// streamed in; the testbench checks every RF DAC word and every reservoir
// state against its own model of the logic, and that states arrive in frames
// of N (m_tlast on every N-th state), one frame per input step.
//
//   1. NARMA10:        N = 400, inputs u_k uniform in [0, 0.5], 60 steps,
//                      mask uniform in [-1, 1]. The NARMA10 target series
//                      y_{k+1} = 0.3 y_k + 0.05 y_k sum_{i=0..9} y_{k-i}
//                                + 1.5 u_k u_{k-9} + 0.1
//                      is also generated and must stay bounded.
//   2. one-step series prediction: N = 950 (the largest reservoir used),
//                      20 steps of a chaotic series (logistic map, standing in
//                      for the laser data, which is not reproduced here).
//   3. spoken digit:   N = 400, 77 frequency channels, 12 time frames; each
//                      node's input is the mask row (77 values in [-1, 1])
//                      times the channel vector of the frame.
//
// Readout training is done on the host and is not part of this test.
module tb_rc_workloads;
  import rc_pkg::*;

  localparam int unsigned TAPS = NUM_TAPS;
  localparam int unsigned NMAX = 30000;

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
  int          adc_hist [NMAX];
  int          u_in [NMAX];
  int          x_ref [NMAX];
  bit          x_known [NMAX];
  int          dly, gain_v, offset_v, n_total, nodes;
  int          adc_base, dac_base;   // model counters at the start of a configuration
  int          n_state, n_frames;
  bit          active = 0;

  rc_top dut (.*);

  optical_loop_model model (
    .adc_cs_n, .adc_sclk, .adc_miso,
    .dac_cs_n, .dac_sclk, .dac_mosi,
    .cal_cs_n, .cal_sclk, .cal_mosi,
    .adc_n, .adc_word, .dac_n, .dac_word, .cal_n, .cal_word
  );

  always #5 clk = ~clk;

  initial begin
    #900_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model of the logic ----------------
  function automatic int xdel(input int n);
    if (!x_known[n]) begin
      x_ref[n]   = (n - dly >= 0) ? adc_hist[n - dly] : 0;
      x_known[n] = 1'b1;
    end
    return x_ref[n];
  endfunction

  function automatic int s_model(input int n);
    longint acc = 0, q;
    for (int j = 0; j < TAPS; j++)
      if (n - j >= 0) acc += longint'(h[j]) * longint'(xdel(n - j));
    q = acc >>> 15;
    return (q > 32767) ? 32767 : (q < -32768) ? -32768 : int'(q);
  endfunction

  function automatic int dac_model(input int s, input int u);
    longint v;
    v = (((longint'(s) + longint'(u)) * longint'(gain_v)) >>> 14) + longint'(offset_v);
    return (v < 0) ? 0 : (v > 65535) ? 65535 : int'(v);
  endfunction

  int adc_seen = 0, dac_seen = 0;
  always @(posedge clk) begin
    if (adc_n != adc_seen) begin
      adc_seen = adc_n;
      if (active) adc_hist[adc_n - 1 - adc_base] = int'(adc_word);
    end
    if (dac_n != dac_seen) begin
      int n, e;
      dac_seen = dac_n;
      if (active) begin
        n = dac_n - 1 - dac_base;
        e = dac_model(s_model(n), (n < n_total) ? u_in[n] : 0);
        checks++;
        if (int'(dac_word) != e) begin
          failures++;
          if (failures < 10) $display("FAIL N=%0d dac n=%0d got=%0d exp=%0d", nodes, n, dac_word, e);
        end
      end
    end
  end

  always @(posedge clk) if (active && m_tvalid && m_tready) begin
    checks++;
    if ($signed(m_tdata) != 16'(s_model(n_state)) ||
        m_tlast != ((n_state % nodes) == nodes - 1)) begin
      failures++;
      if (failures < 10) $display("FAIL N=%0d state n=%0d got=%0d exp=%0d", nodes, n_state, $signed(m_tdata), s_model(n_state));
    end
    if (m_tlast) n_frames++;
    n_state++;
  end

  // ---------------- host side ----------------
  task automatic wr(input reg_addr_e a, input int d);
    @(negedge clk);
    reg_we = 1'b1; reg_addr = a; reg_wdata = 32'(d);
    @(negedge clk);
    reg_we = 1'b0;
  endtask

  task automatic feed(input int count);
    for (int i = 0; i < count; i++) begin
      @(negedge clk);
      s_tvalid = 1'b1; s_tdata = 16'(u_in[i]);
      @(posedge clk);
      while (!s_tready) @(posedge clk);
      @(negedge clk);
      s_tvalid = 1'b0;
    end
  endtask

  function automatic real urand(); // uniform in [0, 1)
    return real'($urandom) / 4294967296.0;
  endfunction

  // run one configuration: u_in[0 .. steps*n-1] must already hold the inputs
  task automatic run_config(input int n, input int steps, input int g);
    for (int i = 0; i < NMAX; i++) x_known[i] = 1'b0;
    rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    nodes = n; dly = n; gain_v = g; offset_v = 32768; n_total = steps * n;
    n_state = 0; n_frames = 0;
    adc_base = adc_n; dac_base = dac_n; active = 1;
    wr(REG_GAIN, gain_v);
    wr(REG_OFFSET, offset_v);
    wr(REG_DELAY, dly);
    wr(REG_FRAME, nodes);
    wr(REG_COEF_ADDR, 0);
    for (int j = 0; j < TAPS; j++) wr(REG_COEF_DATA, h[j] & 16'hFFFF);
    fork
      feed(n_total);
    join_none
    repeat (2000) @(posedge clk);
    wr(REG_CTRL, 1);
    wait (dac_n - dac_base >= n_total);
    wr(REG_CTRL, 0);
    repeat (400) @(posedge clk);
    active = 0;
    checks++;
    if (n_frames != steps) begin
      failures++;
      $display("FAIL N=%0d frames=%0d expected %0d", n, n_frames, steps);
    end
    $display("configuration N=%0d: %0d samples, %0d state frames", n, dac_n - dac_base, n_frames);
  endtask

  initial begin
    real mask [1000];
    real uk [200];
    real y [200];
    real coch [77];
    real m2 [400][77];
    real acc, ymax;
    reg_we = 0; reg_addr = REG_CTRL; reg_wdata = 0;
    s_tdata = 0; s_tvalid = 0; m_tready = 1;
    // filter: a short band-pass-like kernel (high first taps, small tail)
    for (int j = 0; j < TAPS; j++)
      h[j] = (j < 8) ? int'($urandom_range(0, 5000)) - 2500 : int'($urandom_range(0, 40)) - 20;

    // 1. NARMA10, N = 400, gain 0.58
    for (int i = 0; i < 400; i++) mask[i] = 2.0 * urand() - 1.0;
    for (int k = 0; k < 60; k++) uk[k] = 0.5 * urand();
    for (int k = 0; k < 60; k++) y[k] = 0.0;
    ymax = 0.0;
    for (int k = 9; k < 59; k++) begin
      acc = 0.0;
      for (int i = 0; i < 10; i++) acc += y[k - i];
      y[k + 1] = 0.3 * y[k] + 0.05 * y[k] * acc + 1.5 * uk[k] * uk[k - 9] + 0.1;
      if (y[k + 1] > ymax) ymax = y[k + 1];
    end
    checks++;
    if (!(ymax > 0.1 && ymax < 1.0)) begin failures++; $display("FAIL NARMA10 target out of range %f", ymax); end
    for (int k = 0; k < 60; k++)
      for (int i = 0; i < 400; i++)
        u_in[k * 400 + i] = int'($rtoi(mask[i] * uk[k] * 24000.0));
    run_config(400, 60, 9503);

    // 2. one-step prediction series, N = 950, gain 0.58
    for (int i = 0; i < 950; i++) mask[i] = 2.0 * urand() - 1.0;
    uk[0] = 0.3;
    for (int k = 1; k < 20; k++) uk[k] = 3.9 * uk[k - 1] * (1.0 - uk[k - 1]);
    for (int k = 0; k < 20; k++)
      for (int i = 0; i < 950; i++)
        u_in[k * 950 + i] = int'($rtoi(mask[i] * uk[k] * 12000.0));
    run_config(950, 20, 9503);

    // 3. spoken digit, N = 400, 77 channels, 12 frames, gain 0.5
    for (int i = 0; i < 400; i++)
      for (int c = 0; c < 77; c++) m2[i][c] = 2.0 * urand() - 1.0;
    for (int k = 0; k < 12; k++) begin
      for (int c = 0; c < 77; c++) coch[c] = urand() * ((c % 11 == k % 11) ? 1.0 : 0.2);
      for (int i = 0; i < 400; i++) begin
        acc = 0.0;
        for (int c = 0; c < 77; c++) acc += m2[i][c] * coch[c];
        u_in[k * 400 + i] = int'($rtoi(acc * 1500.0));
      end
    end
    run_config(400, 12, 8192);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
