// ramp_sequencer: plays the frequency ramp stored in memory.
//
// A ramp is the list of tuning words in SRAM, split into consecutive zones
// whose lengths and time steps come from the group table. On a TTL start the
// sequencer restarts the 1 us timebase and, on the first tick, sends word 0 to
// the DDS. Each word is then held for its zone's time step (a number of ticks)
// before the next word is sent, zone after zone, so one zone can hold a fine
// ramp at a short step and the next a single word for seconds. Zones of length
// 0 are skipped and a time step of 0 counts as 1 tick. After the last word the
// sequencer enters HOLD: the DDS keeps the last frequency, with no further
// loads, until the next TTL edge ends the sequence; it then sends tuning word 0
// (output at DC) and returns to IDLE, ready for another start.
//
// The word of the next point is read from SRAM right after the current point
// has been sent, so it is ready when the current point's time is up; a load
// command therefore leaves exactly (time step) x (tick period) clocks after
// the previous one. Searching the table and reading memory take at most
// N_GROUPS + 12 clocks (the read may wait for a loader write in progress),
// which must be shorter than one tick period (50 clocks by default).
//
// Interface: `start_pulse` is the synchronised TTL edge; it is ignored while
// the sequencer runs and while `enable` (memory loaded, loader idle) is low.
// `tb_restart` realigns the timebase; `grp_idx`/`grp_data` read the group
// table; `rd_*` is the SRAM read port; `dds_start`/`dds_word`/`dds_busy`
// command the DDS interface. `state` and `cur_grp` report progress.
//
// The zones, their time steps, the hold of the last frequency and the end on
// a second TTL pulse are the paper's; what the output does after the end, and
// ignoring TTL edges while a ramp runs, are this design's choices.
module ramp_sequencer
  import rf_synth_pkg::group_t, rf_synth_pkg::GRP_IDX_W, rf_synth_pkg::seq_state_t, rf_synth_pkg::SEQ_IDLE, rf_synth_pkg::SEQ_RUN, rf_synth_pkg::SEQ_HOLD;
#(
  parameter int unsigned N_GROUPS = 10,
  parameter int unsigned ADDR_W   = 18
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start_pulse,
  input  logic                 enable,
  input  logic                 tick,
  output logic                 tb_restart,
  // group table read port
  output logic [GRP_IDX_W-1:0] grp_idx,
  input  group_t               grp_data,
  // SRAM read port
  output logic                 rd_req,
  output logic [ADDR_W-1:0]    rd_addr,
  input  logic                 rd_ack,
  input  logic [31:0]          rd_data,
  // DDS interface
  output logic                 dds_start,
  output logic [31:0]          dds_word,
  input  logic                 dds_busy,
  // status
  output seq_state_t           state,
  output logic [GRP_IDX_W-1:0] cur_grp
);
  typedef enum logic [2:0] {P_IDLE, P_FIND, P_FETCH, P_WAIT, P_HOLD, P_END} phase_t;
  phase_t phase;

  // The next point to play
  logic [GRP_IDX_W-1:0] n_grp;
  logic [31:0]          n_left;     // points left in n_grp, this one included
  logic [31:0]          n_period;
  logic [31:0]          n_word;
  // The point on the output
  logic [31:0]          remain;     // ticks left for it
  logic                 played;     // a word has been sent since the start

  assign grp_idx = n_grp;

  always_comb begin
    unique case (phase)
      P_IDLE:  state = SEQ_IDLE;
      P_HOLD,
      P_END:   state = SEQ_HOLD;
      default: state = SEQ_RUN;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      phase      <= P_IDLE;
      tb_restart <= 1'b0;
      n_grp      <= '0;
      n_left     <= '0;
      n_period   <= 32'd1;
      n_word     <= '0;
      remain     <= 32'd1;
      rd_req     <= 1'b0;
      rd_addr    <= '0;
      dds_start  <= 1'b0;
      dds_word   <= '0;
      cur_grp    <= '0;
      played     <= 1'b0;
    end else begin
      tb_restart <= 1'b0;
      dds_start  <= 1'b0;
      if (tick && remain > 32'd1) remain <= remain - 1'b1;

      unique case (phase)
        P_IDLE: begin
          if (start_pulse && enable) begin
            tb_restart <= 1'b1;
            n_grp      <= '0;
            n_left     <= '0;
            rd_addr    <= '0;
            remain     <= 32'd1;     // first word goes out on the first tick
            played     <= 1'b0;
            phase      <= P_FIND;
          end
        end

        // Find the zone of the next point, starting from n_grp.
        P_FIND: begin
          if (n_left != '0) begin
            rd_req <= 1'b1;
            phase  <= P_FETCH;
          end else if (n_grp >= GRP_IDX_W'(N_GROUPS)) begin
            // no point left: hold what is on the output (or, if nothing was
            // ever played, stay idle)
            phase <= played ? P_HOLD : P_IDLE;
          end else if (grp_data.length != '0) begin
            n_left   <= grp_data.length;
            n_period <= (grp_data.period == '0) ? 32'd1 : grp_data.period;
          end else begin
            n_grp <= n_grp + 1'b1;
          end
        end

        P_FETCH: begin
          if (rd_ack) begin
            rd_req <= 1'b0;
            n_word <= rd_data;
            phase  <= P_WAIT;
          end
        end

        // Send the fetched word when the point on the output is over.
        P_WAIT: begin
          if (tick && remain == 32'd1 && !dds_busy) begin
            dds_start <= 1'b1;
            dds_word  <= n_word;
            cur_grp   <= n_grp;
            played    <= 1'b1;
            remain    <= n_period;
            rd_addr   <= rd_addr + 1'b1;
            n_left    <= n_left - 1'b1;
            if (n_left == 32'd1) n_grp <= n_grp + 1'b1;
            phase     <= P_FIND;
          end
        end

        P_HOLD: begin
          if (start_pulse) phase <= P_END;
        end

        // End of sequence: bring the output to DC.
        P_END: begin
          if (!dds_busy) begin
            dds_start <= 1'b1;
            dds_word  <= '0;
            phase     <= P_IDLE;
          end
        end

        default: phase <= P_IDLE;
      endcase
    end
  end

  // The next word must be ready before the current point is over.
  a_ready_in_time: assert property (@(posedge clk) disable iff (!rst_n)
    (tick && remain == 32'd1 && state == SEQ_RUN) |-> phase == P_WAIT);
  a_req_held: assert property (@(posedge clk) disable iff (!rst_n)
    (rd_req && !rd_ack) |=> rd_req);
endmodule
