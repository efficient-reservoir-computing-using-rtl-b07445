// tb_rc_stream_if: checks rc_stream_if with an 8-word buffer so that full and
// empty are reached quickly. Input side: words streamed in with random valid
// must come out of `u_value` in order, the input port must refuse words when
// the buffer is full, and a take from the empty buffer must give 0 with
// `u_underflow`. State side: states pushed one per few cycles must leave on
// the output port in order with m_tlast on every frame_len-th (5th) state,
// under random m_tready; with m_tready held low the buffer fills and further
// states are dropped with `s_overflow`.
module tb_rc_stream_if;
  localparam int unsigned DEPTH = 8;

  logic        clk = 0, rst_n = 0;
  logic [15:0] frame_len;
  logic [15:0] s_tdata;
  logic        s_tvalid, s_tready;
  logic        u_take;
  logic [15:0] u_value;
  logic        u_underflow;
  logic        state_valid;
  logic [15:0] state_data;
  logic        s_overflow;
  logic [15:0] m_tdata;
  logic        m_tvalid, m_tlast, m_tready;
  int          checks = 0, failures = 0;
  int          in_q[$], st_q[$], last_q[$];
  int          nin = 0, nstate = 0, overflows = 0, underflows = 0;

  rc_stream_if #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output side monitor
  always @(posedge clk) if (rst_n && m_tvalid && m_tready) begin
    int e, l;
    checks++;
    e = st_q.pop_front();
    l = last_q.pop_front();
    if (m_tdata !== 16'(e) || m_tlast !== l[0]) begin
      failures++;
      if (failures < 10) $display("FAIL state got=%h/%b exp=%h/%0d", m_tdata, m_tlast, e, l);
    end
  end

  // input side: check takes against the words accepted in earlier cycles,
  // then record the word accepted in this cycle
  always @(posedge clk) if (rst_n) begin
   if (u_take) begin
    checks++;
    if (in_q.size() == 0) begin
      underflows++;
      if (!u_underflow || u_value !== 16'd0) begin failures++; $display("FAIL underflow"); end
    end else begin
      int e;
      e = in_q.pop_front();
      if (u_underflow || u_value !== 16'(e)) begin
        failures++;
        if (failures < 10) $display("FAIL input got=%h exp=%h", u_value, e);
      end
    end
   end
   if (s_tvalid && s_tready) in_q.push_back(int'(s_tdata));
  end

  // state pushes
  always @(posedge clk) if (rst_n && state_valid) begin
    if (s_overflow) overflows++;
    else begin
      st_q.push_back(int'(state_data));
      last_q.push_back((nstate % 5) == 4);
    end
    nstate++;
  end

  initial begin
    frame_len = 16'd5;
    s_tdata = 0; s_tvalid = 0; u_take = 0; state_valid = 0; state_data = 0; m_tready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // fill past full
    for (int i = 0; i < 12; i++) begin
      s_tvalid <= 1'b1; s_tdata <= 16'($urandom);
      @(posedge clk);
    end
    s_tvalid <= 1'b0;
    #1;
    checks++;
    if (s_tready) begin failures++; $display("FAIL ready while full"); end
    // mixed traffic
    for (int i = 0; i < 3000; i++) begin
      s_tvalid    <= ($urandom_range(0, 2) == 0);
      s_tdata     <= 16'($urandom);
      u_take      <= ($urandom_range(0, 2) == 0);
      state_valid <= ($urandom_range(0, 3) == 0);
      state_data  <= 16'($urandom);
      m_tready    <= (i > 2000 && i < 2300) ? 1'b0 : ($urandom_range(0, 1) == 0);
      @(posedge clk);
    end
    s_tvalid <= 0; state_valid <= 0; u_take <= 0; m_tready <= 1;
    repeat (20) @(posedge clk);
    checks++;
    if (underflows == 0 || overflows == 0 || st_q.size() != 0) begin
      failures++;
      $display("FAIL underflows=%0d overflows=%0d left=%0d", underflows, overflows, st_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
