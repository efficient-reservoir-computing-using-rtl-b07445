// delay_line: programmable sample delay of the reservoir feedback loop.
//
// Every `in_valid` writes `in_data` into a circular buffer of MAX_DELAY words
// and, one cycle later, `out_valid` presents the sample written `delay`
// samples earlier (out[k] = in[k - delay]). One sample of delay is one
// virtual-node spacing theta, so `delay` sets how many virtual nodes the loop
// holds (the fixed latency of converters and filter adds to it). `delay` = 0
// bypasses the buffer (out[k] = in[k]). Until `delay` samples have been
// written since reset, the missing history reads as zero.
//
// The delay limit of 1000 samples and its meaning (one unit per node spacing)
// follow the paper; the circular-buffer structure, the bypass at zero and the
// zero fill are this design's choices. The buffer is a plain array so it maps
// to block RAM. Reading before writing the same address in a cycle gives the
// full MAX_DELAY delay with a MAX_DELAY-word buffer.
module delay_line #(
  parameter int unsigned W         = 16,
  parameter int unsigned MAX_DELAY = 1000
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic [$clog2(MAX_DELAY+1)-1:0]   delay,     // 0..MAX_DELAY samples
  input  logic                             in_valid,
  input  logic [W-1:0]                     in_data,
  output logic                             out_valid,
  output logic [W-1:0]                     out_data
);

  localparam int unsigned AW = $clog2(MAX_DELAY);
  localparam int unsigned DW = $clog2(MAX_DELAY+1);

  logic [W-1:0]  mem [MAX_DELAY];
  logic [AW-1:0] wr_ptr;
  logic [AW:0]   rd_sum;
  logic [AW-1:0] rd_ptr;
  logic [DW-1:0] filled;        // samples written so far, saturating at MAX_DELAY
  logic [W-1:0]  rd_data;
  logic          use_bypass, use_zero;
  logic [W-1:0]  in_q;

  // read address = wr_ptr - delay, modulo MAX_DELAY
  always_comb begin
    if ({1'b0, wr_ptr} >= (AW+1)'(delay)) rd_sum = {1'b0, wr_ptr} - (AW+1)'(delay);
    else                                  rd_sum = {1'b0, wr_ptr} + (AW+1)'(MAX_DELAY) - (AW+1)'(delay);
    rd_ptr = rd_sum[AW-1:0];
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      mem[wr_ptr] <= in_data;
      rd_data     <= mem[rd_ptr];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr     <= '0;
      filled     <= '0;
      out_valid  <= 1'b0;
      use_bypass <= 1'b0;
      use_zero   <= 1'b1;
      in_q       <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        wr_ptr     <= (wr_ptr == AW'(MAX_DELAY - 1)) ? '0 : wr_ptr + 1'b1;
        if (filled != DW'(MAX_DELAY)) filled <= filled + 1'b1;
        use_bypass <= (delay == '0);
        use_zero   <= (filled < delay);
        in_q       <= in_data;
      end
    end
  end

  always_comb begin
    if (use_bypass)    out_data = in_q;
    else if (use_zero) out_data = '0;
    else               out_data = rd_data;
  end

  assert property (@(posedge clk) disable iff (!rst_n) delay <= DW'(MAX_DELAY));

endmodule
