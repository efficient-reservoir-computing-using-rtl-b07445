// tb_rc_regs: checks rc_regs. Reset values (gain 0.58 = 9503 in Q2.14, delay
// 400, frame 400, not running) are read back; every setting register is
// written and both its output and its read-back are compared; a delay above
// 1000 must be clipped; the calibration write must give one `cal_we` pulse;
// coefficient writes must give `coef_we` with consecutive indices; the event
// counters must count random event pulses and clear on command.
module tb_rc_regs;
  import rc_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        reg_we;
  reg_addr_e   reg_addr;
  logic [31:0] reg_wdata, reg_rdata;
  logic        run;
  gain_t       gain;
  dac_code_t   offset;
  logic [9:0]  delay;
  logic [15:0] frame_len;
  logic        cal_we;
  logic [15:0] cal_code;
  logic        coef_we;
  logic [8:0]  coef_addr;
  coef_t       coef_data;
  logic        ev_sample, ev_underflow, ev_overflow, ev_saturate, ev_overrun;
  int          checks = 0, failures = 0;
  int          n_ev[5];
  int          cal_pulses = 0;

  rc_regs dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (cal_we) cal_pulses++;

  task automatic wr(input reg_addr_e a, input logic [31:0] d);
    reg_we <= 1'b1; reg_addr <= a; reg_wdata <= d;
    @(posedge clk);
    reg_we <= 1'b0;
    #1;
  endtask

  task automatic expect_rd(input reg_addr_e a, input logic [31:0] e);
    reg_addr = a;
    #1;
    checks++;
    if (reg_rdata !== e) begin
      failures++;
      $display("FAIL read %s got=%h exp=%h", a.name(), reg_rdata, e);
    end
  endtask

  task automatic expect_eq(input string what, input logic [31:0] got, input logic [31:0] e);
    checks++;
    if (got !== e) begin failures++; $display("FAIL %s got=%h exp=%h", what, got, e); end
  endtask

  initial begin
    reg_we = 0; reg_addr = REG_CTRL; reg_wdata = 0;
    {ev_sample, ev_underflow, ev_overflow, ev_saturate, ev_overrun} = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    expect_rd(REG_GAIN, 32'd9503);
    expect_rd(REG_DELAY, 32'd400);
    expect_rd(REG_FRAME, 32'd400);
    expect_rd(REG_CTRL, 32'd0);
    wr(REG_CTRL, 32'd1);          expect_eq("run", 32'(run), 1);
    wr(REG_GAIN, 32'h0000_C000);  expect_eq("gain", {16'd0, gain}, 32'h0000_C000);
    expect_rd(REG_GAIN, 32'hFFFF_C000);
    wr(REG_OFFSET, 32'd40000);    expect_eq("offset", 32'(offset), 40000);
    expect_rd(REG_OFFSET, 32'd40000);
    wr(REG_DELAY, 32'd777);       expect_eq("delay", 32'(delay), 777);
    wr(REG_DELAY, 32'd5000);      expect_eq("delay clip", 32'(delay), 1000);
    wr(REG_FRAME, 32'd950);       expect_eq("frame", 32'(frame_len), 950);
    wr(REG_CAL, 32'h0000_ABCD);   expect_eq("cal", 32'(cal_code), 32'hABCD);
    expect_eq("cal pulses", cal_pulses, 1);
    // coefficient load
    wr(REG_COEF_ADDR, 32'd397);
    for (int i = 0; i < 5; i++) begin
      reg_we <= 1'b1; reg_addr <= REG_COEF_DATA; reg_wdata <= 32'(1000 + i);
      @(posedge clk);
      reg_we <= 1'b0;
      #1;
      expect_eq("coef_we", 32'(coef_we), 1);
      expect_eq("coef_addr", 32'(coef_addr), 32'((397 + i) % 400));
      expect_eq("coef_data", 32'(coef_data), 32'(1000 + i));
      @(posedge clk);
      #1;
      expect_eq("coef_we low", 32'(coef_we), 0);
    end
    // events
    n_ev = '{default: 0};
    for (int i = 0; i < 500; i++) begin
      logic [4:0] ev;
      ev = 5'($urandom);
      {ev_sample, ev_underflow, ev_overflow, ev_saturate, ev_overrun} <= ev;
      for (int b = 0; b < 5; b++) if (ev[4-b]) n_ev[b]++;
      @(posedge clk);
    end
    {ev_sample, ev_underflow, ev_overflow, ev_saturate, ev_overrun} <= '0;
    @(posedge clk);
    expect_rd(REG_SAMPLES,   32'(n_ev[0]));
    expect_rd(REG_UNDERFLOW, 32'(n_ev[1]));
    expect_rd(REG_OVERFLOW,  32'(n_ev[2]));
    expect_rd(REG_SATURATE,  32'(n_ev[3]));
    expect_rd(REG_OVERRUN,   32'(n_ev[4]));
    wr(REG_CTRL, 32'd3);
    expect_rd(REG_SAMPLES, 32'd0);
    expect_rd(REG_OVERRUN, 32'd0);
    expect_rd(REG_CTRL, 32'd1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
