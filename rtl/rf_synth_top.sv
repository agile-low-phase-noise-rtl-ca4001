// rf_synth_top: FPGA design of an agile DDS radio-frequency ramp generator.
//
// The generator plays a list of up to 2^ADDR_W (262,144) DDS tuning words,
// stored in an external asynchronous SRAM, into an AD9851 DDS chip, one word
// every few microseconds or every few seconds, with no phase jump between
// frequencies. A host PC sends the list over the serial port; a TTL edge
// starts the ramp; the last frequency is kept until a second TTL edge ends
// the sequence.
//
// Data path: uart_rx -> mem_loader -> (group_table, sram_ctrl write port).
// Playback: ttl_start -> ramp_sequencer, which reads the group table and the
// SRAM read port and, paced by the 1 us timebase, commands dds_if, which
// drives the AD9851 parallel load pins. mem_loader echoes each received byte
// through uart_tx. A start is accepted only once a load is complete.
//
// Ports: clk is the 50 MHz board clock, rst_n a synchronous active-low reset.
// The SRAM data bus is split into out, out-enable and in; the board wrapper
// owns the tristate pads. seq_state and seq_group report progress, loaded
// says that a complete list is in memory.
//
// Structure and sizes (50 MHz, 50 clocks per sample, 10 zones, 262,144 words
// of 32 bits, serial port, TTL start, AD9851) follow the paper; the baud rate
// and the other details noted in each block are this design's choices.
module rf_synth_top
  import rf_synth_pkg::group_t, rf_synth_pkg::GRP_IDX_W, rf_synth_pkg::seq_state_t;
#(
  parameter int unsigned CLKS_PER_BIT = 434,
  parameter int unsigned N_CYCLE      = 50,
  parameter int unsigned N_GROUPS     = 10,
  parameter int unsigned ADDR_W       = 18
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // serial port
  input  logic                 uart_rxd,
  output logic                 uart_txd,
  // TTL start / end
  input  logic                 ttl_in,
  // external SRAM
  output logic [ADDR_W-1:0]    sram_addr,
  output logic                 sram_ce_n,
  output logic                 sram_oe_n,
  output logic                 sram_we_n,
  output logic [31:0]          sram_dq_o,
  output logic                 sram_dq_oe,
  input  logic [31:0]          sram_dq_i,
  // AD9851 DDS
  output logic [7:0]           dds_d,
  output logic                 dds_wclk,
  output logic                 dds_fqud,
  output logic                 dds_reset,
  // status
  output logic                 loaded,
  output seq_state_t           seq_state,
  output logic [GRP_IDX_W-1:0] seq_group
);
  localparam int unsigned MEM_WORDS = 1 << ADDR_W;

  // serial link
  logic [7:0] rx_data, tx_data;
  logic       rx_valid, tx_start, tx_busy;
  // group table
  logic                 grp_we;
  logic [GRP_IDX_W-1:0] grp_widx, grp_ridx;
  group_t               grp_wdata, grp_rdata;
  // SRAM ports
  logic              rd_req, rd_ack, wr_req, wr_ack;
  logic [ADDR_W-1:0] rd_addr, wr_addr;
  logic [31:0]       rd_data, wr_data;
  // playback
  logic        ttl_pulse, tick, tb_restart, loader_busy;
  logic        dds_start, dds_busy;
  logic [31:0] dds_word;

  uart_rx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_rx (
    .clk, .rst_n, .rxd(uart_rxd), .data(rx_data), .valid(rx_valid));

  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_tx (
    .clk, .rst_n, .data(tx_data), .start(tx_start), .busy(tx_busy), .txd(uart_txd));

  mem_loader #(.N_GROUPS(N_GROUPS), .MEM_WORDS(MEM_WORDS), .ADDR_W(ADDR_W)) u_loader (
    .clk, .rst_n, .rx_data, .rx_valid, .tx_data, .tx_start, .tx_busy,
    .grp_we, .grp_idx(grp_widx), .grp_wdata,
    .wr_req, .wr_addr, .wr_data, .wr_ack,
    .loaded, .busy(loader_busy));

  group_table #(.N_GROUPS(N_GROUPS)) u_table (
    .clk, .rst_n, .we(grp_we), .widx(grp_widx), .wdata(grp_wdata),
    .ridx(grp_ridx), .rdata(grp_rdata));

  sram_ctrl #(.ADDR_W(ADDR_W), .DATA_W(32)) u_sram (
    .clk, .rst_n,
    .rd_req, .rd_addr, .rd_ack, .rd_data,
    .wr_req, .wr_addr, .wr_data, .wr_ack,
    .sram_addr, .sram_ce_n, .sram_oe_n, .sram_we_n,
    .sram_dq_o, .sram_dq_oe, .sram_dq_i);

  ttl_start u_ttl (.clk, .rst_n, .ttl_in, .pulse(ttl_pulse));

  timebase #(.N_CYCLE(N_CYCLE)) u_timebase (
    .clk, .rst_n, .restart(tb_restart), .tick);

  ramp_sequencer #(.N_GROUPS(N_GROUPS), .ADDR_W(ADDR_W)) u_seq (
    .clk, .rst_n,
    .start_pulse(ttl_pulse), .enable(loaded && !loader_busy), .tick, .tb_restart,
    .grp_idx(grp_ridx), .grp_data(grp_rdata),
    .rd_req, .rd_addr, .rd_ack, .rd_data,
    .dds_start, .dds_word, .dds_busy,
    .state(seq_state), .cur_grp(seq_group));

  dds_if u_dds (
    .clk, .rst_n, .start(dds_start), .word(dds_word), .busy(dds_busy),
    .dds_d, .dds_wclk, .dds_fqud, .dds_reset);
endmodule
