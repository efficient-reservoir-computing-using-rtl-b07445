// fir_filter: the programmable digital filter of the feedback loop.
//
// It computes   s[k] = sum_{j=0}^{TAPS-1} h[j] * x[k-j]
// for each delayed detector sample x[k] (unsigned), with signed Q1.15
// coefficients h[j]. The filter couples neighbouring virtual nodes: with the
// delay line in front, s[k] mixes the detector samples of nodes k-N .. k-N-TAPS+1,
// which is the sum of the reservoir state equation.
//
// Structure: a history register of the last TAPS inputs and a coefficient
// array written through (`coef_we`, `coef_addr`, `coef_data`). A new input is
// accepted only when idle; the sum is then formed LANES taps per clock cycle,
// so a result takes ceil(TAPS/LANES) + 1 cycles (51 with the defaults, within
// the 100-cycle sample period). The accumulator is wide enough never to
// overflow; the result is shifted right by COEF_FRAC (floor) and saturated to
// signed 16 bits. An input that arrives while busy is dropped and flagged by a
// one-cycle `overrun` pulse.
//
// The filter length (400 taps), its programmability and its place after the
// delay follow the paper; the time-multiplexed MAC with LANES = 8 multipliers,
// the number formats and the saturation are this design's choices.
module fir_filter #(
  parameter int unsigned TAPS      = 400,
  parameter int unsigned LANES     = 8,
  parameter int unsigned IN_W      = 16,
  parameter int unsigned COEF_W    = 16,
  parameter int unsigned COEF_FRAC = 15,
  parameter int unsigned OUT_W     = 16
) (
  input  logic                             clk,
  input  logic                             rst_n,
  // coefficient write port
  input  logic                             coef_we,
  input  logic [$clog2(TAPS)-1:0]          coef_addr,
  input  logic signed [COEF_W-1:0]         coef_data,
  // sample stream
  input  logic                             in_valid,
  input  logic [IN_W-1:0]                  in_data,
  output logic                             out_valid,
  output logic signed [OUT_W-1:0]          out_data,
  output logic                             busy,
  output logic                             overrun
);

  localparam int unsigned STEPS = (TAPS + LANES - 1) / LANES;
  localparam int unsigned ACC_W = IN_W + 1 + COEF_W + $clog2(TAPS) + 1;
  localparam int unsigned SW    = $clog2(STEPS + 1);

  logic        [IN_W-1:0]   hist [TAPS];
  logic signed [COEF_W-1:0] coef [TAPS];
  logic signed [ACC_W-1:0]  acc, lane_sum;
  logic        [SW-1:0]     step;

  // products of the LANES taps handled in this step
  always_comb begin
    lane_sum = '0;
    for (int l = 0; l < LANES; l++) begin
      int unsigned j;
      j = step * LANES + l;
      if (j < TAPS)
        lane_sum = lane_sum + ACC_W'($signed({1'b0, hist[j]}) * coef[j]);
    end
  end

  // saturating output conversion
  function automatic logic signed [OUT_W-1:0] sat_out(input logic signed [ACC_W-1:0] a);
    logic signed [ACC_W-1:0] q;
    q = a >>> COEF_FRAC;
    if (q > ACC_W'(2**(OUT_W-1) - 1))      return {1'b0, {(OUT_W-1){1'b1}}};
    else if (q < -ACC_W'(2**(OUT_W-1)))    return {1'b1, {(OUT_W-1){1'b0}}};
    else                                   return q[OUT_W-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < TAPS; j++) coef[j] <= '0;
    end else if (coef_we) begin
      coef[coef_addr] <= coef_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < TAPS; j++) hist[j] <= '0;
      acc       <= '0;
      step      <= '0;
      busy      <= 1'b0;
      out_valid <= 1'b0;
      out_data  <= '0;
      overrun   <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      overrun   <= in_valid && busy;
      if (!busy) begin
        if (in_valid) begin
          hist[0] <= in_data;
          for (int j = 1; j < TAPS; j++) hist[j] <= hist[j-1];
          acc  <= '0;
          step <= '0;
          busy <= 1'b1;
        end
      end else if (step == SW'(STEPS)) begin
        out_data  <= sat_out(acc);
        out_valid <= 1'b1;
        busy      <= 1'b0;
      end else begin
        acc  <= acc + lane_sum;
        step <= step + 1'b1;
      end
    end
  end

endmodule
