// tb_adc_spi_ctrl: checks adc_spi_ctrl against an ADC model in the testbench
// that puts a new random code on MISO, MSB first, when CS_N falls and shifts
// the next bit out after each falling SCLK edge. Each `sample` must equal the
// code the model sent; samples must come exactly SAMPLE_DIV = 100 cycles apart
// (1 Msps at 100 MHz); and no conversion may start while `en` is low.
module tb_adc_spi_ctrl;
  localparam int unsigned DIV = 100;

  logic        clk = 0, rst_n = 0;
  logic        en;
  logic        adc_cs_n, adc_sclk, adc_miso;
  logic [15:0] sample;
  logic        sample_valid;
  int          checks = 0, failures = 0;
  logic [15:0] word, sh;
  int          conversions = 0, samples = 0;
  longint      last_cyc, cyc;

  adc_spi_ctrl dut (.*);

  always #5 clk = ~clk;

  initial begin
    #20_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ADC model
  always @(negedge adc_cs_n) begin
    word = 16'($urandom);
    sh   = word;
    adc_miso = sh[15];
    conversions++;
  end
  always @(negedge adc_sclk) if (!adc_cs_n) begin
    sh = {sh[14:0], 1'b0};
    adc_miso = sh[15];
  end

  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && sample_valid) begin
    samples++;
    checks++;
    if (sample !== word) begin
      failures++;
      if (failures < 10) $display("FAIL got=%h exp=%h", sample, word);
    end
    if (samples > 1 && en) begin
      checks++;
      if (cyc - last_cyc != DIV) begin
        failures++;
        $display("FAIL sample interval %0d", cyc - last_cyc);
      end
    end
    last_cyc <= cyc;
  end

  initial begin
    en = 0; adc_miso = 0; cyc = 0; last_cyc = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (500) @(posedge clk);
    checks++;
    if (conversions != 0) begin failures++; $display("FAIL conversion while disabled"); end
    en = 1;
    repeat (DIV * 1000 + 10) @(posedge clk);
    en = 0;
    repeat (DIV * 3) @(posedge clk);
    checks++;
    if (samples != 1001 || conversions != 1001) begin
      failures++;
      $display("FAIL samples=%0d conversions=%0d", samples, conversions);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
