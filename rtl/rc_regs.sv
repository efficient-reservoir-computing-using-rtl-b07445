// rc_regs: control and status registers of the reservoir logic, written and
// read by the processor over a simple 32-bit register bus.
//
// The programmable settings are the run bit, the loop gain, the offset, the
// delay (in samples), the calibration DAC code, the DMA frame length and the
// filter coefficients. Coefficients are loaded indirectly: write the first
// index to REG_COEF_ADDR, then write the coefficients one after another to
// REG_COEF_DATA; each write produces a one-cycle `coef_we` and advances the
// index. A write to REG_CAL produces a one-cycle `cal_we`. Five event counters
// (samples sent to the DAC, input underflows, state overflows, clipped DAC
// codes, overruns) count the one-cycle event inputs and are cleared by writing
// 1 to bit 1 of REG_CTRL. See rc_pkg for the map.
//
// Timing: a write takes effect at the clock edge where `reg_we` is high; reads
// are combinational (`reg_rdata` follows `reg_addr`). A delay above 1000 is
// clipped to 1000.
//
// The paper says gain, offset and delay are programmable and that the
// calibration DAC is fed from the processor; the register map, the reset
// values (gain 0.58, delay 400, taken from the published operating point) and
// the counters are this design's choices.
module rc_regs
  import rc_pkg::*;
#(
  parameter int unsigned TAPS = NUM_TAPS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // register bus
  input  logic                    reg_we,
  input  reg_addr_e               reg_addr,
  input  logic [31:0]             reg_wdata,
  output logic [31:0]             reg_rdata,
  // settings
  output logic                    run,
  output gain_t                   gain,
  output dac_code_t               offset,
  output logic [9:0]              delay,
  output logic [15:0]             frame_len,
  output logic                    cal_we,
  output logic [15:0]             cal_code,
  output logic                    coef_we,
  output logic [$clog2(TAPS)-1:0] coef_addr,
  output coef_t                   coef_data,
  // events
  input  logic                    ev_sample,
  input  logic                    ev_underflow,
  input  logic                    ev_overflow,
  input  logic                    ev_saturate,
  input  logic                    ev_overrun
);

  logic [31:0] cnt_sample, cnt_underflow, cnt_overflow, cnt_saturate, cnt_overrun;
  logic        clear;
  logic [$clog2(TAPS)-1:0] coef_idx;

  assign clear = reg_we && (reg_addr == REG_CTRL) && reg_wdata[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run       <= 1'b0;
      gain      <= GAIN_RESET;
      offset    <= OFFSET_RESET;
      delay     <= 10'(DELAY_RESET);
      frame_len <= 16'(FRAME_RESET);
      cal_we    <= 1'b0;
      cal_code  <= '0;
      coef_we   <= 1'b0;
      coef_addr <= '0;
      coef_data <= '0;
      coef_idx  <= '0;
    end else begin
      cal_we  <= 1'b0;
      coef_we <= 1'b0;
      if (reg_we) begin
        unique case (reg_addr)
          REG_CTRL:      run       <= reg_wdata[0];
          REG_GAIN:      gain      <= reg_wdata[15:0];
          REG_OFFSET:    offset    <= reg_wdata[15:0];
          REG_DELAY:     delay     <= (reg_wdata[15:0] > 16'(MAX_DELAY)) ? 10'(MAX_DELAY) : reg_wdata[9:0];
          REG_CAL: begin
            cal_code <= reg_wdata[15:0];
            cal_we   <= 1'b1;
          end
          REG_FRAME:     frame_len <= (reg_wdata[15:0] == 16'd0) ? 16'd1 : reg_wdata[15:0];
          REG_COEF_ADDR: coef_idx  <= reg_wdata[$clog2(TAPS)-1:0];
          REG_COEF_DATA: begin
            coef_we   <= 1'b1;
            coef_addr <= coef_idx;
            coef_data <= reg_wdata[15:0];
            coef_idx  <= (coef_idx == ($clog2(TAPS))'(TAPS - 1)) ? '0 : coef_idx + 1'b1;
          end
          default: ;
        endcase
      end
    end
  end

  // event counters
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_sample    <= '0;
      cnt_underflow <= '0;
      cnt_overflow  <= '0;
      cnt_saturate  <= '0;
      cnt_overrun   <= '0;
    end else if (clear) begin
      cnt_sample    <= '0;
      cnt_underflow <= '0;
      cnt_overflow  <= '0;
      cnt_saturate  <= '0;
      cnt_overrun   <= '0;
    end else begin
      cnt_sample    <= cnt_sample    + 32'(ev_sample);
      cnt_underflow <= cnt_underflow + 32'(ev_underflow);
      cnt_overflow  <= cnt_overflow  + 32'(ev_overflow);
      cnt_saturate  <= cnt_saturate  + 32'(ev_saturate);
      cnt_overrun   <= cnt_overrun   + 32'(ev_overrun);
    end
  end

  always_comb begin
    unique case (reg_addr)
      REG_CTRL:      reg_rdata = {31'd0, run};
      REG_GAIN:      reg_rdata = {{16{gain[15]}}, gain};
      REG_OFFSET:    reg_rdata = {16'd0, offset};
      REG_DELAY:     reg_rdata = {22'd0, delay};
      REG_CAL:       reg_rdata = {16'd0, cal_code};
      REG_FRAME:     reg_rdata = {16'd0, frame_len};
      REG_COEF_ADDR: reg_rdata = 32'(coef_idx);
      REG_SAMPLES:   reg_rdata = cnt_sample;
      REG_UNDERFLOW: reg_rdata = cnt_underflow;
      REG_OVERFLOW:  reg_rdata = cnt_overflow;
      REG_SATURATE:  reg_rdata = cnt_saturate;
      REG_OVERRUN:   reg_rdata = cnt_overrun;
      default:       reg_rdata = 32'd0;
    endcase
  end

endmodule
