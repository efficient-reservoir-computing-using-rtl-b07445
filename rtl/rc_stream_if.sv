// rc_stream_if: the logic side of the two DMA streams of the reservoir.
//
// Input stream: the processor streams the masked and scaled input samples
// gamma*u[k] (one signed 16-bit word per virtual-node time slot) over an
// AXI4-Stream style port (s_tdata/s_tvalid/s_tready). They are buffered in a
// DEPTH-word buffer. Once per sample period the loop takes one word
// (`u_take`); `u_value` shows the word to be taken, or 0 if the buffer is
// empty, in which case `u_underflow` pulses in the same cycle.
//
// State stream: every filter output s[k] (`state_valid`, `state_data`) is a
// reservoir state and is buffered for the DMA (m_tdata/m_tvalid/m_tready).
// m_tlast marks every `frame_len`-th state, so that with frame_len = N one DMA
// packet holds the N virtual-node states of one delay period. A state that
// finds the buffer full is dropped and `s_overflow` pulses; the node count
// still advances so that m_tlast stays aligned with the node index.
//
// Timing: both ports follow the valid/ready rule (a word moves in a cycle
// where valid and ready are both high). The streams and their direction
// follow the block diagram of the paper; the buffering, the zero input on
// underflow and the frame marker are this design's choices.
module rc_stream_if #(
  parameter int unsigned DEPTH = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] frame_len,
  // input stream from the DMA
  input  logic [15:0] s_tdata,
  input  logic        s_tvalid,
  output logic        s_tready,
  // input samples to the loop
  input  logic        u_take,
  output logic [15:0] u_value,
  output logic        u_underflow,
  // reservoir states from the filter
  input  logic        state_valid,
  input  logic [15:0] state_data,
  output logic        s_overflow,
  // state stream to the DMA
  output logic [15:0] m_tdata,
  output logic        m_tvalid,
  output logic        m_tlast,
  input  logic        m_tready
);

  logic [15:0] in_head;
  logic        in_empty, in_full;
  logic [16:0] out_head;
  logic        out_empty, out_full;
  logic [15:0] node_idx;
  logic        last;

  // ---------------- input side ----------------
  assign s_tready    = !in_full;
  assign u_value     = in_empty ? 16'd0 : in_head;
  assign u_underflow = u_take && in_empty;

  sync_fifo #(.W(16), .DEPTH(DEPTH)) u_in_fifo (
    .clk   (clk),
    .rst_n (rst_n),
    .push  (s_tvalid),
    .wdata (s_tdata),
    .pop   (u_take),
    .rdata (in_head),
    .empty (in_empty),
    .full  (in_full),
    .count ()
  );

  // ---------------- state side ----------------
  assign last = (node_idx >= frame_len - 16'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) node_idx <= '0;
    else if (state_valid) node_idx <= last ? 16'd0 : node_idx + 16'd1;
  end

  assign s_overflow = state_valid && out_full;

  sync_fifo #(.W(17), .DEPTH(DEPTH)) u_out_fifo (
    .clk   (clk),
    .rst_n (rst_n),
    .push  (state_valid),
    .wdata ({last, state_data}),
    .pop   (m_tready),
    .rdata (out_head),
    .empty (out_empty),
    .full  (out_full),
    .count ()
  );

  assign m_tvalid = !out_empty;
  assign m_tdata  = out_head[15:0];
  assign m_tlast  = out_head[16];

endmodule
