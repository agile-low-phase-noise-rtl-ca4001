// uart_tx_tb: asks the transmitter for random bytes, decodes the serial line
// independently by sampling the middle of each bit after the start edge, and
// checks the decoded byte, the stop bit, and that `busy` lasts exactly 10 bit
// times (10 * CLKS_PER_BIT clocks) per frame.
module uart_tx_tb;
  localparam int unsigned CPB = 8;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, txd;
  logic [7:0] data = '0;
  int checks = 0, failures = 0;
  byte unsigned expq[$];
  int decoded = 0;

  uart_tx #(.CLKS_PER_BIT(CPB)) dut (.clk, .rst_n, .data, .start, .busy, .txd);

  always #10 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Line decoder
  initial begin
    forever begin
      logic [7:0] b;
      @(negedge txd);
      repeat (CPB / 2) @(posedge clk);
      check(txd == 1'b0, "start bit");
      for (int i = 0; i < 8; i++) begin
        repeat (CPB) @(posedge clk);
        b[i] = txd;
      end
      repeat (CPB) @(posedge clk);
      check(txd == 1'b1, "stop bit");
      check(expq.size() > 0, "unexpected frame");
      if (expq.size() > 0) begin
        automatic byte unsigned e = expq.pop_front();
        check(b == e, $sformatf("decoded %02x expected %02x", b, e));
      end
      decoded++;
    end
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (5) @(posedge clk);
    check(txd == 1'b1, "idle high");
    for (int n = 0; n < 100; n++) begin
      int busy_len;
      @(negedge clk);
      data  = 8'($urandom);
      start = 1'b1;
      expq.push_back(data);
      @(negedge clk);
      start = 1'b0;
      data  = 8'($urandom);           // must not matter once started
      busy_len = 0;
      while (busy) begin busy_len++; @(negedge clk); end
      check(busy_len == 10 * CPB, $sformatf("busy for %0d clocks", busy_len));
      repeat ($urandom_range(0, 5)) @(negedge clk);
    end
    repeat (2 * CPB) @(posedge clk);
    check(decoded == 100, $sformatf("decoded %0d frames", decoded));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
