// gain_offset: forms the RF DAC code from the filter output and the input.
//
//   code = clip_0..65535( floor( gain * (s + u) / 2^GAIN_FRAC ) + offset )
//
// s is the filter output (signed), u the pre-masked, pre-scaled input sample
// streamed from the processor (signed), gain a signed Q2.14 number and offset
// an unsigned DAC code. This is the RF signal v = G[s + gamma*u] of the loop
// equation plus the programmable offset that sets the modulator's operating
// point. The result is registered: `out_valid` follows `in_valid` by one cycle,
// and `sat` marks a result that had to be clipped to the DAC range.
//
// The order of operations (add input, then gain, then offset) follows the
// block diagram of the paper; the number formats and the clipping are this
// design's choices.
module gain_offset
  import rc_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  state_t    s,
  input  input_t    u,
  input  gain_t     gain,
  input  dac_code_t offset,
  output logic      out_valid,
  output dac_code_t code,
  output logic      sat
);

  logic signed [SAMPLE_W:0]              sum;       // 17 bits
  logic signed [SAMPLE_W+GAIN_W:0]       prod;      // 33 bits
  logic signed [SAMPLE_W+GAIN_W+1:0]     v;         // 34 bits

  always_comb begin
    sum  = (SAMPLE_W+1)'(s) + (SAMPLE_W+1)'(u);
    prod = (SAMPLE_W+GAIN_W+1)'(sum) * (SAMPLE_W+GAIN_W+1)'(gain);
    v    = (SAMPLE_W+GAIN_W+2)'(prod >>> GAIN_FRAC) + (SAMPLE_W+GAIN_W+2)'($signed({1'b0, offset}));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      code      <= '0;
      sat       <= 1'b0;
    end else begin
      out_valid <= in_valid;
      sat       <= 1'b0;
      if (in_valid) begin
        if (v < 0) begin
          code <= '0;
          sat  <= 1'b1;
        end else if (v > (SAMPLE_W+GAIN_W+2)'(2**SAMPLE_W - 1)) begin
          code <= '1;
          sat  <= 1'b1;
        end else begin
          code <= v[SAMPLE_W-1:0];
        end
      end
    end
  end

endmodule
