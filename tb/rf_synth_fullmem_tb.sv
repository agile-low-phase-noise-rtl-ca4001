// rf_synth_fullmem_tb: the memory-length workload. The top at its default
// sizes (262,144 words, 50 clocks per sample, 10 zones) but with the serial
// link sped up to 4 clocks per bit, so that the full 1 MB load fits in a
// simulation. The load is a linear ramp of DDS tuning words from 1 MHz to
// 3 MHz (for a 60 MHz DDS clock): 262,143 words played at one word per
// microsecond in zone 0, i.e. a 262 ms ramp in steps of about 7.6 Hz, and
// the last word (3 MHz), alone in zone 9, at a 1000 us step, then held: the
// shape of the loading ramp of an RF-dressed trap. Every DDS update is checked (see rf_synth_harness).
module rf_synth_fullmem_tb;
  import rf_synth_pkg::seq_state_t;
  logic clk, rst_n, uart_rxd, uart_txd, ttl_in;
  logic [17:0] sram_addr;
  logic sram_ce_n, sram_oe_n, sram_we_n, sram_dq_oe;
  logic [31:0] sram_dq_o, sram_dq_i;
  logic [7:0] dds_d;
  logic dds_wclk, dds_fqud, dds_reset, loaded;
  seq_state_t seq_state;
  logic [3:0] seq_group;

  rf_synth_top #(.CLKS_PER_BIT(4)) dut (.*);

  // Safety net in case the harness hangs: about twice the expected run.
  initial begin : overall_watchdog
    repeat (120_000_000) @(posedge clk);
    $display("FAIL: overall watchdog");
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end
  rf_synth_harness #(.CPB(4), .NCYC(50), .AW(18), .MODE(2), .WATCHDOG(100_000_000)) harness (.*);
endmodule
