// uart_rx: serial receiver for the link to the host PC.
//
// Receives 8N1 frames (start bit, 8 data bits LSB first, stop bit) at
// CLKS_PER_BIT clocks per bit; the default is 50 MHz / 115200 baud. The line
// is synchronised by two flip-flops, the falling edge of the start bit is
// found, and each bit is sampled in its middle. When the stop bit is high the
// byte appears on `data` with a one-cycle `valid`; a frame whose stop bit is
// low is dropped. The paper names a UART on the serial port but gives neither
// baud rate nor framing; those are this design's choices.
module uart_rx #(
  parameter int unsigned CLKS_PER_BIT = 434
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rxd,
  output logic [7:0] data,
  output logic       valid
);
  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1);

  typedef enum logic [1:0] {RX_IDLE, RX_START, RX_DATA, RX_STOP} rx_state_t;
  rx_state_t      state;
  logic [CW-1:0]  cnt;
  logic [2:0]     bitn;
  logic [7:0]     shreg;
  logic [1:0]     sync;
  logic           rx;

  always_ff @(posedge clk) begin
    if (!rst_n) sync <= 2'b11;
    else        sync <= {sync[0], rxd};
  end
  assign rx = sync[1];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= RX_IDLE;
      cnt   <= '0;
      bitn  <= '0;
      shreg <= '0;
      data  <= '0;
      valid <= 1'b0;
    end else begin
      valid <= 1'b0;
      unique case (state)
        RX_IDLE: begin
          cnt <= '0;
          if (!rx) state <= RX_START;
        end
        RX_START: begin           // wait half a bit, check start bit still low
          if (cnt == CW'(CLKS_PER_BIT / 2 - 1)) begin
            cnt   <= '0;
            bitn  <= '0;
            state <= rx ? RX_IDLE : RX_DATA;
          end else cnt <= cnt + 1'b1;
        end
        RX_DATA: begin
          if (cnt == CW'(CLKS_PER_BIT - 1)) begin
            cnt   <= '0;
            shreg <= {rx, shreg[7:1]};
            bitn  <= bitn + 1'b1;
            if (bitn == 3'd7) state <= RX_STOP;
          end else cnt <= cnt + 1'b1;
        end
        RX_STOP: begin
          if (cnt == CW'(CLKS_PER_BIT - 1)) begin
            cnt   <= '0;
            state <= RX_IDLE;
            if (rx) begin
              data  <= shreg;
              valid <= 1'b1;
            end
          end else cnt <= cnt + 1'b1;
        end
        default: state <= RX_IDLE;
      endcase
    end
  end
endmodule
