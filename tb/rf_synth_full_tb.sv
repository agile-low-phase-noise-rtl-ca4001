// rf_synth_full_tb: the generator at its default sizes (262,144-word memory,
// 115200 baud at 50 MHz, 50 clocks per sample, 10 zones) taken through one
// complete operation: a short load over the serial port, a TTL start, the
// ramp, the hold of the last frequency and the TTL end (see rf_synth_harness).
module rf_synth_full_tb;
  import rf_synth_pkg::seq_state_t;
  logic clk, rst_n, uart_rxd, uart_txd, ttl_in;
  logic [17:0] sram_addr;
  logic sram_ce_n, sram_oe_n, sram_we_n, sram_dq_oe;
  logic [31:0] sram_dq_o, sram_dq_i;
  logic [7:0] dds_d;
  logic dds_wclk, dds_fqud, dds_reset, loaded;
  seq_state_t seq_state;
  logic [3:0] seq_group;

  rf_synth_top dut (.*);
  rf_synth_harness #(.CPB(434), .NCYC(50), .AW(18), .MODE(1), .WATCHDOG(3_000_000)) harness (.*);
endmodule
