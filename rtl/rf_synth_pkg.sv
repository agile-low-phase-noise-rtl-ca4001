// rf_synth_pkg: types and constants shared by the FPGA side of the DDS
// radio-frequency ramp generator.
//
// The generator plays up to 262,144 32-bit DDS tuning words from an external
// 1 MB asynchronous SRAM. The memory is divided into 10 consecutive zones
// ("groups"); each group has its own number of points and its own time step,
// counted in 1 us ticks of a 50 MHz clock divided by 50. These numbers follow
// the published device. The 32-bit encoding of the time step and the AD9851
// control byte below are choices of this implementation; the control byte
// follows the AD9851 data sheet.
package rf_synth_pkg;

  // Zone index width: enough for the 10 zones of the device (N_GROUPS, a
  // parameter of the modules, defaults to 10).
  localparam int unsigned GRP_IDX_W = 4;

  // One memory zone: how many words it holds and how many 1 us ticks each
  // word is held on the DDS output.
  typedef struct packed {
    logic [31:0] length;   // number of points (0 = zone unused)
    logic [31:0] period;   // time step in 1 us ticks (0 is treated as 1)
  } group_t;

  // Sequencer state, visible on the top for status LEDs and testbenches
  typedef enum logic [1:0] {
    SEQ_IDLE = 2'd0,   // waiting for a TTL start
    SEQ_RUN  = 2'd1,   // playing the ramp
    SEQ_HOLD = 2'd2    // last word kept on the output until the next TTL edge
  } seq_state_t;

  // AD9851 control byte W0 (data sheet layout): phase[4:0], power-down,
  // a bit that must be 0, 6x reference multiplier enable.
  function automatic logic [7:0] ad9851_w0(input logic [4:0] phase,
                                           input logic       power_down,
                                           input logic       refclk_x6);
    return {phase, power_down, 1'b0, refclk_x6};
  endfunction

endpackage
