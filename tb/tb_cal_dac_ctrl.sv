// tb_cal_dac_ctrl: checks cal_dac_ctrl with a 24-bit SPI slave model. Every
// frame must be the command byte 0x01 followed by the code last written.
// Writes spaced wider than a frame must each produce one frame; a burst of
// writes during a frame must produce one further frame carrying the newest
// code.
module tb_cal_dac_ctrl;
  logic        clk = 0, rst_n = 0;
  logic        cal_we;
  logic [15:0] cal_code, cal_value;
  logic        pending, sent;
  logic        cal_cs_n, cal_sclk, cal_mosi;
  int          checks = 0, failures = 0;
  logic [23:0] rx;
  logic [15:0] newest;
  int          nbits, frames = 0;

  cal_dac_ctrl dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge cal_cs_n) nbits = 0;
  always @(posedge cal_sclk) if (!cal_cs_n) begin
    rx = {rx[22:0], cal_mosi};
    nbits++;
  end
  always @(posedge cal_cs_n) if (rst_n) frames++;

  task automatic write(input logic [15:0] c);
    cal_we <= 1'b1; cal_code <= c; newest = c;
    @(posedge clk);
    cal_we <= 1'b0;
  endtask

  task automatic check_last();
    checks++;
    if (nbits != 24 || rx !== {8'h01, newest} || cal_value !== newest) begin
      failures++;
      if (failures < 10) $display("FAIL bits=%0d got=%h exp=%h", nbits, rx, {8'h01, newest});
    end
  endtask

  initial begin
    int f0;
    cal_we = 0; cal_code = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int i = 0; i < 50; i++) begin
      f0 = frames;
      write(16'($urandom));
      repeat (120) @(posedge clk);
      checks++;
      if (frames != f0 + 1) begin failures++; $display("FAIL frame count"); end
      check_last();
    end
    // burst during a frame
    f0 = frames;
    write(16'h1111);
    repeat (5) @(posedge clk);
    write(16'h2222);
    write(16'h3333);
    #1;
    checks++;
    if (!pending) begin failures++; $display("FAIL not pending"); end
    repeat (300) @(posedge clk);
    checks++;
    if (frames != f0 + 2) begin failures++; $display("FAIL burst frames=%0d", frames - f0); end
    check_last();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
