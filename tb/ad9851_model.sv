// ad9851_model: behavioural model of the AD9851 DDS load port and phase
// accumulator, for simulation only.
//
// Parallel mode: each rising edge of W_CLK takes D7..D0 as the next of five
// bytes (W0 = phase[4:0], power-down, 0, 6x enable; then the tuning word, most
// significant byte first); a rising edge of FQ_UD moves the 40 bits into the
// active registers and restarts the byte count. RESET clears the input
// registers and the accumulator. The 32-bit phase accumulator adds the active
// tuning word on every `refclk` edge and is never cleared by a new word, as in
// the real chip, so frequency changes keep the phase continuous.
// For testbenches it counts updates, resets and malformed updates.
module ad9851_model (
  input  logic       refclk,
  input  logic [7:0] d,
  input  logic       wclk,
  input  logic       fqud,
  input  logic       reset
);
  logic [39:0] in_reg;
  int unsigned bytes_in = 0;
  logic [31:0] fword = '0;
  logic [7:0]  w0 = '0;
  logic [31:0] acc = '0;
  int unsigned updates = 0;
  int unsigned resets = 0;
  int unsigned bad_updates = 0;   // FQ_UD after a byte count other than 5

  always @(posedge wclk) begin
    if (!reset) begin
      in_reg   = {in_reg[31:0], d};
      bytes_in = bytes_in + 1;
    end
  end

  always @(posedge fqud) begin
    if (!reset) begin
      if (bytes_in != 5) bad_updates++;
      w0       = in_reg[39:32];
      fword    = in_reg[31:0];
      bytes_in = 0;
      updates++;
    end
  end

  always @(negedge reset) resets++;   // completed reset pulses

  always @(posedge reset) begin
    bytes_in = 0;
    fword    = '0;
    w0       = '0;
    acc      = '0;
  end

  always @(posedge refclk) acc <= acc + fword;
endmodule
