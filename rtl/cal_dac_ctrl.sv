// cal_dac_ctrl: keeps the calibration DAC at the code last written by the
// processor. The calibration DAC adds a slowly varying voltage to the RF DAC
// output to compensate the bias drift of the electro-optic modulator.
//
// A one-cycle `cal_we` with `cal_code` stores the code and sends it to the DAC
// as one SPI frame of FRAME_BITS = 24 bits: an 8-bit command CMD followed by the
// 16-bit code, MSB first (see dac_spi_tx for the pin timing). A write that
// arrives while a frame is still being sent is not lost: the newest code is kept
// and sent as soon as the current frame ends (`pending`). `sent` pulses when a
// frame has finished.
//
// The paper names the part (a 16-bit calibration DAC fed from the processing
// system) and its purpose; the 24-bit frame with command byte 0x01 is this
// design's assumption about the device's serial format.
module cal_dac_ctrl #(
  parameter int unsigned CODE_W    = 16,
  parameter int unsigned CMD_W     = 8,
  parameter logic [7:0]  CMD       = 8'h01,
  parameter int unsigned SCLK_HALF = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cal_we,
  input  logic [CODE_W-1:0] cal_code,
  output logic [CODE_W-1:0] cal_value,   // code held in the register
  output logic              pending,
  output logic              sent,
  // SPI pins
  output logic              cal_cs_n,
  output logic              cal_sclk,
  output logic              cal_mosi
);

  localparam int unsigned FRAME_BITS = CMD_W + CODE_W;

  logic busy, start, drop;

  // start a frame whenever a code waits and the writer is free
  assign start = pending && !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cal_value <= '0;
      pending   <= 1'b0;
    end else begin
      if (cal_we) begin
        cal_value <= cal_code;
        pending   <= 1'b1;
      end else if (start) begin
        pending   <= 1'b0;
      end
    end
  end

  dac_spi_tx #(.BITS(FRAME_BITS), .SCLK_HALF(SCLK_HALF)) u_spi (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (start),
    .data     ({CMD[CMD_W-1:0], cal_value}),
    .busy     (busy),
    .done     (sent),
    .drop     (drop),
    .dac_cs_n (cal_cs_n),
    .dac_sclk (cal_sclk),
    .dac_mosi (cal_mosi)
  );

  // start is only raised while the writer is idle
  assert property (@(posedge clk) disable iff (!rst_n) !drop);

endmodule
