// tb_fir_filter: checks fir_filter at its full 400-tap size with 8 lanes.
// Random coefficients are loaded through the write port; random inputs are
// fed one per 100-cycle period. Every output is compared with a sum computed
// by the testbench in 64-bit arithmetic, shifted right by 15 and saturated.
// The latency (STEPS + 1 = 51 cycles from input to output) is checked, and an
// input sent while busy must raise `overrun` and be ignored. A final set of
// large coefficients drives the output into positive saturation.
module tb_fir_filter;
  localparam int unsigned TAPS  = 400;
  localparam int unsigned LANES = 8;
  localparam int unsigned STEPS = (TAPS + LANES - 1) / LANES;
  localparam int unsigned NS    = 900;

  logic               clk = 0, rst_n = 0;
  logic               coef_we;
  logic [8:0]         coef_addr;
  logic signed [15:0] coef_data;
  logic               in_valid;
  logic [15:0]        in_data;
  logic               out_valid, busy, overrun;
  logic signed [15:0] out_data;
  int                 checks = 0, failures = 0;
  int                 h [TAPS];
  int                 x [NS + 10];
  int                 nin;

  fir_filter dut (.*);

  always #5 clk = ~clk;

  initial begin
    #50_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int expected(input int n);
    longint acc = 0;
    longint q;
    for (int j = 0; j < TAPS; j++)
      if (n - j >= 0) acc += longint'(h[j]) * longint'(x[n - j]);
    q = acc >>> 15;
    if (q > 32767) q = 32767;
    if (q < -32768) q = -32768;
    return int'(q);
  endfunction

  task automatic load_coefs(input int mode);
    for (int j = 0; j < TAPS; j++) begin
      if (mode == 0) h[j] = $signed(16'($urandom)) / 8;
      else           h[j] = 32767;
      coef_we   <= 1'b1;
      coef_addr <= 9'(j);
      coef_data <= 16'(h[j]);
      @(posedge clk);
    end
    coef_we <= 1'b0;
  endtask

  task automatic feed(input logic [15:0] d);
    int lat, e;
    in_valid <= 1'b1;
    in_data  <= d;
    x[nin]    = int'(d);
    @(posedge clk);
    in_valid <= 1'b0;
    lat = 0;
    #1;
    do begin
      @(posedge clk);
      #1;
      lat++;
    end while (!out_valid && lat < 200);
    e = expected(nin);
    checks++;
    if (out_data !== 16'(e)) begin
      failures++;
      if (failures < 10) $display("FAIL n=%0d got=%0d exp=%0d", nin, out_data, e);
    end
    checks++;
    if (lat != STEPS + 1) begin
      failures++;
      $display("FAIL latency %0d, expected %0d", lat, STEPS + 1);
    end
    nin++;
    repeat (100 - lat - 1) @(posedge clk);
  endtask

  initial begin
    coef_we = 0; coef_addr = 0; coef_data = 0; in_valid = 0; in_data = 0; nin = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    load_coefs(0);
    for (int i = 0; i < NS - 20; i++) feed(16'($urandom));
    // input while busy: must be flagged and dropped
    in_valid <= 1'b1; in_data <= 16'h1234; x[nin] = 16'h1234;
    @(posedge clk);
    in_valid <= 1'b1; in_data <= 16'hFFFF;
    @(posedge clk);
    in_valid <= 1'b0;
    #1;
    checks++;
    if (!overrun) begin failures++; $display("FAIL no overrun"); end
    wait (out_valid);
    #1;
    checks++;
    if (out_data !== 16'(expected(nin))) begin failures++; $display("FAIL after overrun"); end
    nin++;
    @(posedge clk);
    // saturation
    load_coefs(1);
    for (int i = 0; i < 5; i++) feed(16'hFFFF);
    checks++;
    if (out_data !== 16'sh7FFF) begin failures++; $display("FAIL no saturation"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
