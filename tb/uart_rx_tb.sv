// uart_rx_tb: sends random 8N1 frames to the receiver at 8 clocks per bit,
// with random idle gaps (including none), and checks every received byte
// against the byte sent. A frame with a low stop bit must be dropped. The
// receiver's latency is checked too: `valid` comes in the middle of the stop
// bit, 9.5 bit times after the start edge, give or take the synchroniser.
module uart_rx_tb;
  localparam int unsigned CPB = 8;
  logic clk = 1'b0, rst_n = 1'b0, rxd = 1'b1;
  logic [7:0] data;
  logic valid;
  int checks = 0, failures = 0;
  byte unsigned expq[$];
  longint cyc = 0, start_cyc = 0;
  int received = 0;

  uart_rx #(.CLKS_PER_BIT(CPB)) dut (.clk, .rst_n, .rxd, .data, .valid);

  always #10 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send(input logic [7:0] b, input logic stop);
    logic [9:0] fr;
    fr = {stop, b, 1'b0};
    @(negedge clk);
    start_cyc = cyc;
    for (int i = 0; i < 10; i++) begin
      rxd = fr[i];
      repeat (CPB) @(negedge clk);
    end
    rxd = 1'b1;
  endtask

  always @(posedge clk) if (rst_n && valid) begin
    received++;
    check(expq.size() > 0, "unexpected byte");
    if (expq.size() > 0) begin
      automatic byte unsigned e = expq.pop_front();
      check(data == e, $sformatf("got %02x expected %02x", data, e));
    end
    // 9.5 bits plus 2 synchroniser clocks, +-1
    check((cyc - start_cyc) >= longint'(CPB * 19 / 2) && (cyc - start_cyc) <= longint'(CPB * 19 / 2 + 4),
          $sformatf("latency %0d", cyc - start_cyc));
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
    for (int n = 0; n < 200; n++) begin
      automatic logic [7:0] b = 8'($urandom);
      automatic bit bad = (n % 17) == 16;
      if (!bad) expq.push_back(b);
      send(b, !bad);
      if (bad) repeat (2 * CPB) @(negedge clk);   // line idles before the next frame
      else if ($urandom_range(0, 1)) repeat ($urandom_range(1, 3 * CPB)) @(negedge clk);
    end
    repeat (4 * CPB) @(posedge clk);
    check(expq.size() == 0, $sformatf("%0d bytes not received", expq.size()));
    check(received == 189, $sformatf("received %0d", received));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
