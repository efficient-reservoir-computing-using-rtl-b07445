// tb_delay_line: checks delay_line at its full 1000-sample size. Random
// samples are written with random gaps; the delay is changed several times,
// including the bypass (0), one sample and the 1000-sample limit. Each output
// is compared with the input history kept by the testbench
// (out[k] = in[k-delay], or 0 before that sample exists), and each output must
// come exactly one cycle after its input.
module tb_delay_line;
  localparam int unsigned MAXD = 1000;
  localparam int unsigned NS   = 6000;

  logic        clk = 0, rst_n = 0;
  logic [9:0]  delay;
  logic        in_valid;
  logic [15:0] in_data, out_data;
  logic        out_valid;
  int          checks = 0, failures = 0;
  logic [15:0] hist [NS];
  int          k;

  delay_line dut (.*);

  always #5 clk = ~clk;

  initial begin
    #20_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic push_and_check(input logic [15:0] d);
    int exp_idx;
    logic [15:0] expv;
    in_valid <= 1'b1;
    in_data  <= d;
    hist[k]   = d;
    @(posedge clk);
    in_valid <= 1'b0;
    #1;
    exp_idx = k - int'(delay);
    expv = (exp_idx >= 0) ? hist[exp_idx] : 16'd0;
    checks++;
    if (!out_valid || out_data !== expv) begin
      failures++;
      if (failures < 10)
        $display("FAIL k=%0d delay=%0d valid=%b got=%h exp=%h", k, delay, out_valid, out_data, expv);
    end
    k++;
    repeat ($urandom_range(0, 2)) begin
      @(posedge clk);
      #1;
      checks++;
      if (out_valid) failures++;
    end
  endtask

  initial begin
    in_valid = 0; in_data = 0; delay = 10'd5; k = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int i = 0; i < NS; i++) begin
      case (i)
        1500: delay = 10'd0;
        1700: delay = 10'd1;
        1900: delay = 10'd1000;
        3100: delay = 10'd999;
        3500: delay = 10'd400;
        4500: delay = 10'($urandom_range(2, 998));
        default: ;
      endcase
      push_and_check(16'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
