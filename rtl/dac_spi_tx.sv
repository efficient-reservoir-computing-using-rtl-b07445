// dac_spi_tx: SPI writer for a serial DAC (the 16-bit RF DAC of the feedback
// loop; also used, with a 24-bit frame, for the calibration DAC).
//
// A one-cycle `start` with `data` begins a frame: CS_N falls with the MSB on
// MOSI, then BITS SCLK pulses follow (SCLK idles low). The DAC latches MOSI at
// each rising SCLK edge; MOSI changes after each falling edge. After the last
// falling edge CS_N rises, which loads the DAC output, and `done` pulses once.
// `busy` is high from the cycle after `start` until `done`; a `start` while
// busy is ignored and reported by a one-cycle `drop` pulse.
//
// Timing: a frame takes 2*SCLK_HALF*BITS + 2 cycles (66 for 16 bits with the
// defaults), so one RF DAC update fits in each 100-cycle sample period.
//
// The paper gives the DAC width (16 bits) and says it is driven over SPI; the
// frame format and the SCLK rate (clock/4) are this design's choice.
module dac_spi_tx #(
  parameter int unsigned BITS      = 16,
  parameter int unsigned SCLK_HALF = 2
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [BITS-1:0] data,
  output logic            busy,
  output logic            done,
  output logic            drop,
  // SPI pins
  output logic            dac_cs_n,
  output logic            dac_sclk,
  output logic            dac_mosi
);

  logic [$clog2(SCLK_HALF+1)-1:0] half_cnt;
  logic [$clog2(BITS+1)-1:0]      bit_cnt;
  logic [BITS-1:0]                shreg;

  assign dac_mosi = shreg[BITS-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      done     <= 1'b0;
      drop     <= 1'b0;
      dac_cs_n <= 1'b1;
      dac_sclk <= 1'b0;
      half_cnt <= '0;
      bit_cnt  <= '0;
      shreg    <= '0;
    end else begin
      done <= 1'b0;
      drop <= start && busy;
      if (!busy) begin
        if (start) begin
          busy     <= 1'b1;
          dac_cs_n <= 1'b0;
          dac_sclk <= 1'b0;
          shreg    <= data;
          half_cnt <= '0;
          bit_cnt  <= '0;
        end
      end else if (bit_cnt == $bits(bit_cnt)'(BITS)) begin
        // all bits clocked: release CS_N to load the DAC
        dac_cs_n <= 1'b1;
        busy     <= 1'b0;
        done     <= 1'b1;
      end else if (half_cnt == $bits(half_cnt)'(SCLK_HALF - 1)) begin
        half_cnt <= '0;
        dac_sclk <= ~dac_sclk;
        if (dac_sclk) begin
          // falling edge: present the next bit
          shreg   <= {shreg[BITS-2:0], 1'b0};
          bit_cnt <= bit_cnt + 1'b1;
        end
      end else begin
        half_cnt <= half_cnt + 1'b1;
      end
    end
  end

endmodule
