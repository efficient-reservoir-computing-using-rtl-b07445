// tb_dac_spi_tx: checks dac_spi_tx with a 16-bit frame. A slave model in the
// testbench shifts MOSI in at each rising SCLK edge while CS_N is low and,
// when CS_N rises, compares the 16 bits with the word that was sent. Also
// checked: the frame length (2*2*16 + 2 = 66 cycles from start to done), the
// SCLK idle level, and that a start while busy is ignored with a `drop` pulse.
module tb_dac_spi_tx;
  localparam int unsigned BITS = 16;

  logic            clk = 0, rst_n = 0;
  logic            start, busy, done, drop;
  logic [BITS-1:0] data;
  logic            dac_cs_n, dac_sclk, dac_mosi;
  int              checks = 0, failures = 0;
  logic [BITS-1:0] rx, sent;
  int              nbits, frames = 0;

  dac_spi_tx dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge dac_cs_n) nbits = 0;
  always @(posedge dac_sclk) if (!dac_cs_n) begin
    rx = {rx[BITS-2:0], dac_mosi};
    nbits++;
  end
  always @(posedge dac_cs_n) if (rst_n) begin
    frames++;
    checks++;
    if (nbits != BITS || rx !== sent) begin
      failures++;
      if (failures < 10) $display("FAIL frame bits=%0d got=%h exp=%h", nbits, rx, sent);
    end
  end

  task automatic send(input logic [BITS-1:0] d, input bit poke);
    int cyc;
    start <= 1'b1; data <= d; sent = d;
    @(posedge clk);
    start <= 1'b0;
    cyc = 0;
    do begin
      @(posedge clk);
      #1;
      cyc++;
      if (poke && cyc == 10) begin
        start <= 1'b1; data <= ~d;
        @(posedge clk);
        start <= 1'b0;
        #1;
        cyc++;
        checks++;
        if (!drop) begin failures++; $display("FAIL no drop"); end
      end
    end while (!done && cyc < 500);
    checks++;
    if (cyc != 2 * 2 * BITS + 1) begin
      failures++;
      $display("FAIL frame took %0d cycles after start", cyc);
    end
    checks++;
    if (dac_sclk !== 1'b0) failures++;
    repeat ($urandom_range(0, 3)) @(posedge clk);
  endtask

  initial begin
    start = 0; data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    send(16'h8001, 0);
    send(16'h0000, 0);
    send(16'hFFFF, 0);
    send(16'hA55A, 1);
    for (int i = 0; i < 300; i++) send(16'($urandom), 0);
    checks++;
    if (frames != 304) begin failures++; $display("FAIL frames=%0d", frames); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
