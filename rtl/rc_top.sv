// rc_top: programmable-logic part of a delay-based opto-electronic reservoir
// computer.
//
// One physical nonlinear node (a Mach-Zehnder modulator, sin^2 response, with
// a photodetector) is time-multiplexed into N virtual nodes. The loop closes
// through this logic:
//
//   detector -> ADC -> delay_line -> fir_filter -> (+ input u) -> gain -> + offset -> RF DAC -> modulator
//                                          |
//                                          +-> states to the DMA (to the host)
//
// Per sample period (SAMPLE_DIV = 100 cycles of a 100 MHz clock, 1 Msps):
// adc_spi_ctrl reads one detector sample; delay_line delays it by `delay`
// samples (one sample = one node spacing); fir_filter forms s[k] from the
// last TAPS delayed samples; rc_stream_if supplies the next streamed input
// sample and queues s[k] as a reservoir state for the DMA; gain_offset forms
// the DAC code G*(s[k] + u[k]) + offset, and dac_spi_tx writes it to the RF
// DAC. cal_dac_ctrl independently keeps the calibration DAC, which corrects the
// modulator bias drift, at the code written by the processor. rc_regs holds
// all settings and event counters.
//
// The stages are chained by one-cycle valid pulses; each takes less than a
// sample period (ADC 66, delay 1, filter 51, gain 1, DAC 66 cycles), so the
// chain sustains one sample per period. The DAC frame for sample k starts
// about 120 cycles after conversion k starts and loads the DAC about 186
// cycles after it, so conversion k+2 is the first to see it. The feedback
// delay tau seen by the physical loop is the programmed delay plus these two
// samples plus the analog settling.
//
// Interfaces: a 32-bit register bus (reg_we, reg_addr, reg_wdata, reg_rdata)
// for the processor, an AXI4-Stream style input (s_*) and output (m_*) for the
// DMA, and three SPI ports for the ADC, the RF DAC and the calibration DAC.
//
// The chain of blocks, the 1000-sample delay limit, the 400-tap filter, the
// 16-bit converters and the 1 Msps rate follow the paper; clocking, stream
// buffering, number formats and the register map are this design's choices.
module rc_top
  import rc_pkg::*;
#(
  parameter int unsigned SAMPLE_DIV = CLK_PER_SAMPLE,
  parameter int unsigned TAPS       = NUM_TAPS,
  parameter int unsigned LANES      = 8,
  parameter int unsigned FIFO_DEPTH = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  // register bus from the processor
  input  logic        reg_we,
  input  reg_addr_e   reg_addr,
  input  logic [31:0] reg_wdata,
  output logic [31:0] reg_rdata,
  // input stream from the DMA
  input  logic [15:0] s_tdata,
  input  logic        s_tvalid,
  output logic        s_tready,
  // state stream to the DMA
  output logic [15:0] m_tdata,
  output logic        m_tvalid,
  output logic        m_tlast,
  input  logic        m_tready,
  // detector ADC
  output logic        adc_cs_n,
  output logic        adc_sclk,
  input  logic        adc_miso,
  // RF DAC driving the modulator
  output logic        dac_cs_n,
  output logic        dac_sclk,
  output logic        dac_mosi,
  // calibration DAC
  output logic        cal_cs_n,
  output logic        cal_sclk,
  output logic        cal_mosi
);

  // settings
  logic                    run;
  gain_t                   gain;
  dac_code_t               offset;
  logic [9:0]              delay;
  logic [15:0]             frame_len;
  logic                    cal_we;
  logic [15:0]             cal_code;
  logic                    coef_we;
  logic [$clog2(TAPS)-1:0] coef_addr;
  coef_t                   coef_data;

  // datapath
  adc_code_t adc_sample;
  logic      adc_valid;
  adc_code_t dly_data;
  logic      dly_valid;
  state_t    s_k;
  logic      s_valid;
  logic      fir_busy, fir_overrun;
  logic [15:0] u_value;
  logic      u_underflow, st_overflow;
  dac_code_t dac_code;
  logic      dac_valid, dac_sat;
  logic      dac_busy, dac_done, dac_drop;

  rc_regs #(.TAPS(TAPS)) u_regs (
    .clk, .rst_n,
    .reg_we, .reg_addr, .reg_wdata, .reg_rdata,
    .run, .gain, .offset, .delay, .frame_len,
    .cal_we, .cal_code, .coef_we, .coef_addr, .coef_data,
    .ev_sample    (dac_valid),
    .ev_underflow (u_underflow),
    .ev_overflow  (st_overflow),
    .ev_saturate  (dac_sat),
    .ev_overrun   (fir_overrun | dac_drop)
  );

  adc_spi_ctrl #(.BITS(SAMPLE_W), .SAMPLE_DIV(SAMPLE_DIV)) u_adc (
    .clk, .rst_n,
    .en           (run),
    .adc_cs_n, .adc_sclk, .adc_miso,
    .sample       (adc_sample),
    .sample_valid (adc_valid)
  );

  delay_line #(.W(SAMPLE_W), .MAX_DELAY(MAX_DELAY)) u_delay (
    .clk, .rst_n,
    .delay     (delay),
    .in_valid  (adc_valid),
    .in_data   (adc_sample),
    .out_valid (dly_valid),
    .out_data  (dly_data)
  );

  fir_filter #(.TAPS(TAPS), .LANES(LANES), .IN_W(SAMPLE_W), .COEF_W(COEF_W),
               .COEF_FRAC(COEF_FRAC), .OUT_W(SAMPLE_W)) u_fir (
    .clk, .rst_n,
    .coef_we, .coef_addr, .coef_data,
    .in_valid  (dly_valid),
    .in_data   (dly_data),
    .out_valid (s_valid),
    .out_data  (s_k),
    .busy      (fir_busy),
    .overrun   (fir_overrun)
  );

  rc_stream_if #(.DEPTH(FIFO_DEPTH)) u_stream (
    .clk, .rst_n,
    .frame_len,
    .s_tdata, .s_tvalid, .s_tready,
    .u_take      (s_valid),
    .u_value     (u_value),
    .u_underflow (u_underflow),
    .state_valid (s_valid),
    .state_data  (s_k),
    .s_overflow  (st_overflow),
    .m_tdata, .m_tvalid, .m_tlast, .m_tready
  );

  gain_offset u_gain (
    .clk, .rst_n,
    .in_valid  (s_valid),
    .s         (s_k),
    .u         (u_value),
    .gain      (gain),
    .offset    (offset),
    .out_valid (dac_valid),
    .code      (dac_code),
    .sat       (dac_sat)
  );

  dac_spi_tx #(.BITS(SAMPLE_W)) u_rf_dac (
    .clk, .rst_n,
    .start    (dac_valid),
    .data     (dac_code),
    .busy     (dac_busy),
    .done     (dac_done),
    .drop     (dac_drop),
    .dac_cs_n, .dac_sclk, .dac_mosi
  );

  cal_dac_ctrl u_cal (
    .clk, .rst_n,
    .cal_we, .cal_code,
    .cal_value (),
    .pending   (),
    .sent      (),
    .cal_cs_n, .cal_sclk, .cal_mosi
  );

  // each stage must finish within one sample period
  assert property (@(posedge clk) disable iff (!rst_n) !(dly_valid && fir_busy));
  assert property (@(posedge clk) disable iff (!rst_n) !(dac_valid && dac_busy));

endmodule
