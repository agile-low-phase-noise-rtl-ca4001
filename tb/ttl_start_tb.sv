// ttl_start_tb: drives the TTL input with random levels held for random
// times, counts rising edges independently, and checks that the block gives
// exactly one one-clock pulse per rising edge, two clocks after it.
module ttl_start_tb;
  logic clk = 1'b0, rst_n = 1'b0, ttl_in = 1'b0, pulse;
  int checks = 0, failures = 0;
  int edges = 0, pulses = 0;
  longint cyc = 0;
  longint edge_cyc[$];

  ttl_start dut (.clk, .rst_n, .ttl_in, .pulse);

  always #10 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && pulse) begin
    pulses++;
    check(edge_cyc.size() > 0, "pulse without edge");
    if (edge_cyc.size() > 0) begin
      automatic longint e = edge_cyc.pop_front();
      check(cyc - e == 2, $sformatf("latency %0d", cyc - e));
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    repeat (200) begin
      automatic logic nv;
      nv = 1'($urandom_range(0, 1));
      @(negedge clk);
      if (nv && !ttl_in) begin edges++; edge_cyc.push_back(cyc); end
      ttl_in = nv;
      repeat ($urandom_range(3, 20)) @(posedge clk);
    end
    repeat (10) @(posedge clk);
    check(edges > 20, "enough edges");
    check(pulses == edges, $sformatf("pulses %0d edges %0d", pulses, edges));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
