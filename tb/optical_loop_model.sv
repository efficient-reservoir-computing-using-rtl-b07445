// optical_loop_model: behavioural model (not synthesizable) of everything
// outside the logic that closes the reservoir loop: the RF DAC, the
// calibration DAC, the Mach-Zehnder modulator, the photodetector and the ADC.
//
// RF DAC: receives 16-bit words (MSB first, latched on rising SCLK) and loads
// them when CS_N rises. Calibration DAC: receives 24-bit frames the same way
// and keeps their low 16 bits. Modulator and detector: the optical power is
//   P = sin^2( pi*v/(2*Vpi) + phi ),  v = (dac - 32768)/32768 * VSPAN + cal term
// and the detector voltage is proportional to P. ADC: a conversion starts when
// CS_N falls; the code round(ADC_FS * P) is then shifted out MSB first, the
// first bit at the CS_N fall and the others after each falling SCLK edge.
//
// For checking, the model counts the words it serves and receives and shows
// the latest ones (adc_n/adc_word, dac_n/dac_word, cal_n/cal_word).
module optical_loop_model #(
  parameter real PHI     = 0.1 * 3.14159265358979,  // bias phase
  parameter real VSPAN   = 1.0,                       // DAC full scale / Vpi
  parameter real ADC_FS  = 60000.0
) (
  input  logic        adc_cs_n,
  input  logic        adc_sclk,
  output logic        adc_miso,
  input  logic        dac_cs_n,
  input  logic        dac_sclk,
  input  logic        dac_mosi,
  input  logic        cal_cs_n,
  input  logic        cal_sclk,
  input  logic        cal_mosi,
  output int          adc_n,
  output logic [15:0] adc_word,
  output int          dac_n,
  output logic [15:0] dac_word,
  output int          cal_n,
  output logic [15:0] cal_word
);

  localparam real PI = 3.14159265358979;

  logic [15:0] adc_sh;
  logic [15:0] dac_sh;
  logic [23:0] cal_sh;
  int          dac_bits, cal_bits;

  initial begin
    adc_n = 0; dac_n = 0; cal_n = 0;
    adc_word = '0; dac_word = 16'h8000; cal_word = '0;
    adc_miso = 1'b0; adc_sh = '0; dac_sh = '0; cal_sh = '0;
    dac_bits = 0; cal_bits = 0;
  end

  function automatic logic [15:0] detector(input logic [15:0] dac, input logic [15:0] cal);
    real v, p, c;
    v = (real'(dac) - 32768.0) / 32768.0 * VSPAN;
    v = v + (real'(cal) - 32768.0) / 327680.0;     // small calibration trim
    p = $sin(PI * v / 2.0 + PHI);
    p = p * p;
    c = ADC_FS * p + 0.5;
    if (c > 65535.0) c = 65535.0;
    return 16'(int'($floor(c)));
  endfunction

  // ADC
  always @(negedge adc_cs_n) begin
    adc_word = detector(dac_word, cal_word);
    adc_n    = adc_n + 1;
    adc_sh   = adc_word;
    adc_miso = adc_sh[15];
  end
  always @(negedge adc_sclk) begin
    if (!adc_cs_n) begin
      adc_sh   = {adc_sh[14:0], 1'b0};
      adc_miso = adc_sh[15];
    end
  end

  // RF DAC
  always @(negedge dac_cs_n) dac_bits = 0;
  always @(posedge dac_sclk) if (!dac_cs_n) begin
    dac_sh   = {dac_sh[14:0], dac_mosi};
    dac_bits = dac_bits + 1;
  end
  always @(posedge dac_cs_n) if (dac_bits == 16) begin
    dac_word = dac_sh;
    dac_n    = dac_n + 1;
  end

  // calibration DAC
  always @(negedge cal_cs_n) cal_bits = 0;
  always @(posedge cal_sclk) if (!cal_cs_n) begin
    cal_sh   = {cal_sh[22:0], cal_mosi};
    cal_bits = cal_bits + 1;
  end
  always @(posedge cal_cs_n) if (cal_bits == 24) begin
    cal_word = cal_sh[15:0];
    cal_n    = cal_n + 1;
  end

endmodule
