// rf_synth_top_tb: end-to-end test of the generator at reduced size: 256-word
// memory and 8 clocks per serial bit, the sample period kept at 50 clocks.
// The harness sends the loads over the serial port, starts and ends the ramps
// on the TTL input and checks every DDS update (see rf_synth_harness).
module rf_synth_top_tb;
  import rf_synth_pkg::seq_state_t;
  localparam int unsigned CPB = 8, NCYC = 50, AW = 8;
  logic clk, rst_n, uart_rxd, uart_txd, ttl_in;
  logic [AW-1:0] sram_addr;
  logic sram_ce_n, sram_oe_n, sram_we_n, sram_dq_oe;
  logic [31:0] sram_dq_o, sram_dq_i;
  logic [7:0] dds_d;
  logic dds_wclk, dds_fqud, dds_reset, loaded;
  seq_state_t seq_state;
  logic [3:0] seq_group;

  rf_synth_top #(.CLKS_PER_BIT(CPB), .N_CYCLE(NCYC), .N_GROUPS(10), .ADDR_W(AW)) dut (.*);
  rf_synth_harness #(.CPB(CPB), .NCYC(NCYC), .AW(AW), .MODE(0), .WATCHDOG(3_000_000)) harness (.*);
endmodule
