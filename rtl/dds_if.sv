// dds_if: loads tuning words into the AD9851 DDS chip.
//
// The AD9851 takes a 40-bit word: a control byte W0 (5-bit phase offset,
// power-down, a zero bit, 6x reference multiplier enable) and the 32-bit
// frequency tuning word w, with f_out = f_clk * w / 2^32. This block uses the
// chip's parallel mode: five bytes on D7..D0, each latched by a rising edge of
// W_CLK, then a pulse on FQ_UD that moves the new word into the phase
// accumulator's frequency register. The accumulator itself is not reset, so a
// new frequency starts from the present phase and the output has no phase
// jump.
//
// Timing, in FPGA clocks from the `start` cycle: a byte is put on D one clock
// before its W_CLK high clock, the five bytes take 10 clocks, W_CLK stays low
// for one more clock and FQ_UD is high in the 12th clock; `busy` is high for
// those 12 clocks and `start` is accepted only while `busy` is low. The delay
// from `start` to FQ_UD is constant, so FQ_UD pulses keep the spacing of the
// commands. After reset, RESET_CYCLES clocks of the chip's RESET pin come first
// (with `busy` high), leaving it in parallel mode.
//
// The paper gives the chip, its 32-bit word and the 6x multiplier; the load
// mode, the byte layout (from the chip's data sheet) and the timing are this
// design's choices. Parallel mode is used because a serial 40-bit load would
// not fit in the 50-clock sample period.
module dds_if
  import rf_synth_pkg::ad9851_w0;
#(
  parameter logic [4:0]  PHASE        = 5'd0,
  parameter logic        REFCLK_X6    = 1'b1,
  parameter int unsigned RESET_CYCLES = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] word,
  output logic        busy,
  output logic [7:0]  dds_d,
  output logic        dds_wclk,
  output logic        dds_fqud,
  output logic        dds_reset
);
  localparam int unsigned RW = $clog2(RESET_CYCLES + 1);

  logic [39:0]   shadow;      // W0..W4, W0 in the top byte
  logic [3:0]    step;        // 0..11 while loading
  logic          loading;
  logic [RW-1:0] rst_cnt;

  assign busy = loading || dds_reset;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      shadow    <= '0;
      step      <= '0;
      loading   <= 1'b0;
      rst_cnt   <= RW'(RESET_CYCLES);
      dds_reset <= 1'b1;
      dds_d     <= '0;
      dds_wclk  <= 1'b0;
      dds_fqud  <= 1'b0;
    end else if (dds_reset) begin
      if (rst_cnt == '0) dds_reset <= 1'b0;
      else               rst_cnt   <= rst_cnt - 1'b1;
    end else if (!loading) begin
      dds_wclk <= 1'b0;
      dds_fqud <= 1'b0;
      if (start) begin
        shadow  <= {ad9851_w0(PHASE, 1'b0, REFCLK_X6), word};
        dds_d   <= ad9851_w0(PHASE, 1'b0, REFCLK_X6);
        step    <= 4'd1;
        loading <= 1'b1;
      end
    end else begin
      step <= step + 1'b1;
      if (step < 4'd10) begin
        // odd steps: W_CLK high on the byte set up in the previous clock;
        // even steps: next byte on D with W_CLK low
        dds_wclk <= step[0];
        if (!step[0]) dds_d <= shadow[39 - 8*(int'(step) >> 1) -: 8];
      end else if (step == 4'd10) begin
        dds_wclk <= 1'b0;
      end else if (step == 4'd11) begin
        dds_fqud <= 1'b1;
      end else begin
        dds_fqud <= 1'b0;
        loading  <= 1'b0;
      end
    end
  end

  a_start_when_free: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> !busy);
endmodule
