// timebase: the 1 us sample clock of the generator.
//
// A counter divides the FPGA clock by N_CYCLE and gives a one-cycle `tick`
// every N_CYCLE clocks. With the published 50 MHz clock and N_CYCLE = 50 the
// tick period is 1 us, the shortest time a frequency point can be held, and
// the fastest rate at which tuning words are sent to the DDS (1 MHz).
// `restart` realigns the counter so that the next tick is high exactly N_CYCLE
// clocks after the clock in which restart is high; the sequencer uses it to align the ramp on the TTL edge.
// The divider ratio is the paper's; the restart input and the synchronous
// active-low reset are this design's choices.
module timebase #(
  parameter int unsigned N_CYCLE = 50
) (
  input  logic clk,
  input  logic rst_n,
  input  logic restart,
  output logic tick
);
  localparam int unsigned CW = (N_CYCLE > 1) ? $clog2(N_CYCLE) : 1;
  logic [CW-1:0] cnt;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt  <= '0;
      tick <= 1'b0;
    end else if (restart) begin
      // the restart clock counts as the first of the period
      cnt  <= (N_CYCLE > 1) ? CW'(1) : '0;
      tick <= (N_CYCLE == 1);
    end else if (cnt == CW'(N_CYCLE - 1)) begin
      cnt  <= '0;
      tick <= 1'b1;
    end else begin
      cnt  <= cnt + 1'b1;
      tick <= 1'b0;
    end
  end
endmodule
