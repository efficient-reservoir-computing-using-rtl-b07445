// adc_spi_ctrl: conversion timer and SPI read-out for the detector ADC.
//
// While `en` is high the module starts one conversion every SAMPLE_DIV clock
// cycles (1 Msps at a 100 MHz clock, the sample rate of the published system)
// and reads the 16-bit result, MSB first, over SPI. A frame is: CS_N falls,
// which starts the conversion, then BITS SCLK pulses; SCLK idles low, the ADC
// drives MISO after CS_N falls and after every falling SCLK edge, and this
// module samples MISO at each rising SCLK edge. CS_N then rises and the word
// appears on `sample` with a one-cycle `sample_valid` pulse.
//
// Timing: a frame lasts 1 + 2*SCLK_HALF*BITS + 1 cycles (66 with the defaults),
// which must be shorter than SAMPLE_DIV. `sample_valid` comes that many cycles
// after the conversion start.
//
// The 1 Msps rate and the 16-bit width follow the paper. The SPI frame format
// and the SCLK rate (clock/4) are this design's choice: the paper only says the
// ADC is connected over a serial peripheral interface.
module adc_spi_ctrl #(
  parameter int unsigned BITS       = 16,
  parameter int unsigned SAMPLE_DIV = 100,  // clock cycles per sample
  parameter int unsigned SCLK_HALF  = 2     // clock cycles per SCLK half period
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            en,
  // SPI pins
  output logic            adc_cs_n,
  output logic            adc_sclk,
  input  logic            adc_miso,
  // result
  output logic [BITS-1:0] sample,
  output logic            sample_valid
);

  typedef enum logic [1:0] {S_IDLE, S_SHIFT, S_DONE} state_e;

  state_e                          state;
  logic [$clog2(SAMPLE_DIV)-1:0]   rate_cnt;
  logic [$clog2(SCLK_HALF+1)-1:0]  half_cnt;
  logic [$clog2(BITS+1)-1:0]       bit_cnt;
  logic [BITS-1:0]                 shreg;
  logic                            tick;

  // sample-rate timer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                rate_cnt <= '0;
    else if (!en)                              rate_cnt <= '0;
    else if (rate_cnt == $bits(rate_cnt)'(SAMPLE_DIV - 1)) rate_cnt <= '0;
    else                                       rate_cnt <= rate_cnt + 1'b1;
  end
  assign tick = en && (rate_cnt == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      adc_cs_n     <= 1'b1;
      adc_sclk     <= 1'b0;
      half_cnt     <= '0;
      bit_cnt      <= '0;
      shreg        <= '0;
      sample       <= '0;
      sample_valid <= 1'b0;
    end else begin
      sample_valid <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (tick) begin
            adc_cs_n <= 1'b0;
            adc_sclk <= 1'b0;
            half_cnt <= '0;
            bit_cnt  <= '0;
            state    <= S_SHIFT;
          end
        end
        S_SHIFT: begin
          if (half_cnt == $bits(half_cnt)'(SCLK_HALF - 1)) begin
            half_cnt <= '0;
            adc_sclk <= ~adc_sclk;
            if (!adc_sclk) begin
              // rising edge: sample the bit the ADC is driving
              shreg   <= {shreg[BITS-2:0], adc_miso};
              bit_cnt <= bit_cnt + 1'b1;
            end else if (bit_cnt == $bits(bit_cnt)'(BITS)) begin
              // falling edge after the last bit ends the frame
              state <= S_DONE;
            end
          end else begin
            half_cnt <= half_cnt + 1'b1;
          end
        end
        S_DONE: begin
          adc_cs_n     <= 1'b1;
          sample       <= shreg;
          sample_valid <= 1'b1;
          state        <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
