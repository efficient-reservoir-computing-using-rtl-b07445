// tb_gain_offset: checks gain_offset against code = clip(floor(G*(s+u)/2^14)
// + offset) computed by the testbench in 64-bit arithmetic, for random
// operands and for directed cases at and beyond both ends of the DAC range.
// The result and the `sat` flag must appear one cycle after `in_valid`.
module tb_gain_offset;
  import rc_pkg::*;

  logic      clk = 0, rst_n = 0;
  logic      in_valid, out_valid, sat;
  state_t    s;
  input_t    u;
  gain_t     gain;
  dac_code_t offset, code;
  int        checks = 0, failures = 0;

  gain_offset dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(input int si, input int ui, input int gi, input int oi);
    longint v;
    logic   esat;
    int     ecode;
    in_valid <= 1'b1;
    s <= 16'(si); u <= 16'(ui); gain <= 16'(gi); offset <= 16'(oi);
    @(posedge clk);
    in_valid <= 1'b0;
    #1;
    v = ((longint'(si) + longint'(ui)) * longint'(gi)) >>> 14;
    v = v + longint'(oi);
    esat = (v < 0) || (v > 65535);
    ecode = (v < 0) ? 0 : (v > 65535) ? 65535 : int'(v);
    checks++;
    if (!out_valid || code !== 16'(ecode) || sat !== esat) begin
      failures++;
      if (failures < 10)
        $display("FAIL s=%0d u=%0d g=%0d o=%0d got=%0d/%b exp=%0d/%b", si, ui, gi, oi, code, sat, ecode, esat);
    end
  endtask

  initial begin
    in_valid = 0; s = 0; u = 0; gain = 0; offset = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    apply(1000, 2000, 9503, 32768);            // G = 0.58
    apply(-1000, 0, 16384, 100);               // clip at 0
    apply(32767, 32767, 32767, 65535);         // clip at 65535
    apply(-32768, -32768, -32768, 0);          // most negative operands
    apply(0, 0, 0, 65535);                     // exactly full scale
    for (int i = 0; i < 20000; i++)
      apply($signed(16'($urandom)), $signed(16'($urandom)), $signed(16'($urandom)), int'(16'($urandom)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
