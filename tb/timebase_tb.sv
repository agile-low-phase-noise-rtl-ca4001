// timebase_tb: checks the 1 us tick divider at its default N_CYCLE = 50.
// It measures the distance between ticks, checks that each tick lasts one
// clock, and that after `restart` the next tick is high exactly N_CYCLE
// clocks after the restart clock, whatever the phase of the divider.
module timebase_tb;
  localparam int unsigned N = 50;
  logic clk = 1'b0, rst_n = 1'b0, restart = 1'b0, tick;
  int checks = 0, failures = 0;
  longint cyc = 0, last_tick = -1, rcyc = 0;
  int ticks = 0, restarts = 0;
  bit measuring = 1'b0, armed = 1'b0;

  timebase #(.N_CYCLE(N)) dut (.clk, .rst_n, .restart, .tick);

  always #10 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Everything is sampled on the clock edge.
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && !measuring && tick) begin
      if (last_tick >= 0) check(cyc - last_tick == N, $sformatf("tick spacing %0d", cyc - last_tick));
      last_tick = cyc;
      ticks++;
    end
    if (rst_n && !measuring && tick && last_tick != cyc)
      check(1'b0, "tick longer than one clock");
    if (measuring) begin
      if (restart) begin rcyc = cyc; armed = 1'b1; end
      else if (tick && armed) begin
        check(cyc - rcyc == N, $sformatf("tick %0d cycles after restart", cyc - rcyc));
        restarts++;
        armed = 1'b0;
      end
    end
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    wait (ticks == 12);
    @(negedge clk);
    measuring = 1'b1;
    repeat (20) begin
      repeat ($urandom_range(1, 120)) @(posedge clk);
      restart <= 1'b1;
      @(posedge clk);
      restart <= 1'b0;
      @(posedge clk iff tick);
      @(posedge clk);
    end
    check(restarts == 20, "all restarts measured");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
