// uart_tx: serial transmitter for the link to the host PC.
//
// Sends `data` as an 8N1 frame (start bit, 8 data bits LSB first, stop bit) at
// CLKS_PER_BIT clocks per bit when `start` is high and `busy` is low. `busy`
// rises on the cycle after `start` and falls when the stop bit has been sent,
// 10 * CLKS_PER_BIT clocks later; `txd` idles high. The paper names the UART
// only; baud rate and framing are this design's choices.
module uart_tx #(
  parameter int unsigned CLKS_PER_BIT = 434
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] data,
  input  logic       start,
  output logic       busy,
  output logic       txd
);
  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1);

  logic [CW-1:0] cnt;
  logic [3:0]    bitn;     // 0 = start bit, 1..8 = data, 9 = stop
  logic [9:0]    frame;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      txd   <= 1'b1;
      cnt   <= '0;
      bitn  <= '0;
      frame <= '1;
    end else if (!busy) begin
      txd <= 1'b1;
      if (start) begin
        frame <= {1'b1, data, 1'b0};
        busy  <= 1'b1;
        cnt   <= '0;
        bitn  <= '0;
        txd   <= 1'b0;
      end
    end else begin
      if (cnt == CW'(CLKS_PER_BIT - 1)) begin
        cnt <= '0;
        if (bitn == 4'd9) begin
          busy <= 1'b0;
          txd  <= 1'b1;
        end else begin
          bitn <= bitn + 1'b1;
          txd  <= frame[bitn + 1'b1];
        end
      end else cnt <= cnt + 1'b1;
    end
  end
endmodule
