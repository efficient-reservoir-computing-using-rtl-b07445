// rc_pkg: widths, fixed-point formats, default settings and the register map
// shared by the reservoir-computer logic.
//
// The sample widths (16 bits) follow the 16-bit ADC and DACs of the system.
// The defaults of gain (0.58), delay (400 samples = 400 virtual nodes), filter
// length (400 taps) and delay limit (1000 samples) are the values of the
// published operating point. Fixed-point formats, the register map and the
// 100 MHz logic clock are this design's own choices.
package rc_pkg;

  // Data widths
  localparam int unsigned SAMPLE_W  = 16;   // ADC code, DAC code, state, input
  localparam int unsigned COEF_W    = 16;   // filter coefficient, signed Q1.15
  localparam int unsigned COEF_FRAC = 15;
  localparam int unsigned GAIN_W    = 16;   // gain, signed Q2.14
  localparam int unsigned GAIN_FRAC = 14;

  // Sizes of the published design
  localparam int unsigned MAX_DELAY = 1000; // delay-line limit in samples
  localparam int unsigned NUM_TAPS  = 400;  // FIR filter length
  localparam int unsigned NUM_NODES = 400;  // virtual nodes of the main operating point

  // Timing (own choice): 100 MHz logic clock, 1 Msps sample rate
  localparam int unsigned CLK_PER_SAMPLE = 100;

  typedef logic        [SAMPLE_W-1:0] adc_code_t;  // unsigned ADC result
  typedef logic        [SAMPLE_W-1:0] dac_code_t;  // unsigned (straight binary) DAC code
  typedef logic signed [SAMPLE_W-1:0] state_t;     // filter output s[k], signed
  typedef logic signed [SAMPLE_W-1:0] input_t;     // pre-masked input gamma*u[k], signed
  typedef logic signed [COEF_W-1:0]   coef_t;
  typedef logic signed [GAIN_W-1:0]   gain_t;

  // Reset values of the programmable settings
  localparam gain_t       GAIN_RESET   = 16'sd9503;   // 0.58 in Q2.14
  localparam dac_code_t   OFFSET_RESET = 16'd0;
  localparam int unsigned DELAY_RESET  = NUM_NODES;
  localparam int unsigned FRAME_RESET  = NUM_NODES;

  // Register map (word addresses of a 32-bit register bus)
  typedef enum logic [3:0] {
    REG_CTRL      = 4'd0,   // [0] run, [1] clear counters (write 1, self-clearing)
    REG_GAIN      = 4'd1,   // [15:0] signed Q2.14
    REG_OFFSET    = 4'd2,   // [15:0] DAC code added after the gain
    REG_DELAY     = 4'd3,   // [9:0] delay in samples, 0..1000
    REG_CAL       = 4'd4,   // [15:0] calibration DAC code, a write starts an SPI frame
    REG_FRAME     = 4'd5,   // [15:0] states per DMA frame (TLAST period)
    REG_COEF_ADDR = 4'd6,   // [8:0] coefficient index for the next REG_COEF_DATA write
    REG_COEF_DATA = 4'd7,   // [15:0] coefficient, index then increments
    REG_SAMPLES   = 4'd8,   // read only: samples sent to the RF DAC
    REG_UNDERFLOW = 4'd9,   // read only: samples that found no streamed input
    REG_OVERFLOW  = 4'd10,  // read only: states dropped, state buffer full
    REG_SATURATE  = 4'd11,  // read only: DAC codes clipped at 0 or 65535
    REG_OVERRUN   = 4'd12   // read only: samples lost because a stage was still busy
  } reg_addr_e;

endpackage
