// mem_loader: turns the byte stream from the host into memory contents.
//
// The host sends one load as a single stream of bytes, every 4-byte value most
// significant byte first:
//   * N_GROUPS descriptors of 8 bytes: the zone's number of points, then its
//     time step in 1 us ticks;
//   * then the 32-bit tuning words of zone 0, zone 1, ... in playing order.
// The descriptors go to the group table as each one completes. The lengths are
// summed, each clamped so that the total never exceeds MEM_WORDS, and the
// loader then expects exactly that many words. Each completed word is written
// to the next SRAM address, starting at 0, through a request/acknowledge write
// port; the four bytes of the following word can arrive meanwhile. When the
// last word is written `loaded` rises and the loader waits for a new
// descriptor block; `loaded` falls on the first byte of the next load. `busy`
// is high from the first byte of a load to its last write.
//
// Every received byte is also echoed on the transmit side, so that the host
// can check the transfer; one byte waits if the transmitter is busy.
//
// In the published device this job is done by a PicoBlaze program that is not
// given; the fields and their sizes (10 groups, 4 bytes per length, per time
// step and per frequency) are the paper's, while the order of the bytes in the
// stream and the echo are this design's choices.
module mem_loader
  import rf_synth_pkg::group_t, rf_synth_pkg::GRP_IDX_W;
#(
  parameter int unsigned N_GROUPS  = 10,
  parameter int unsigned MEM_WORDS = 262144,
  parameter int unsigned ADDR_W    = 18
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // from the UART receiver
  input  logic [7:0]           rx_data,
  input  logic                 rx_valid,
  // echo to the UART transmitter
  output logic [7:0]           tx_data,
  output logic                 tx_start,
  input  logic                 tx_busy,
  // group table write port
  output logic                 grp_we,
  output logic [GRP_IDX_W-1:0] grp_idx,
  output group_t               grp_wdata,
  // SRAM write port
  output logic                 wr_req,
  output logic [ADDR_W-1:0]    wr_addr,
  output logic [31:0]          wr_data,
  input  logic                 wr_ack,
  // status
  output logic                 loaded,
  output logic                 busy
);
  localparam int unsigned HDR_N = N_GROUPS * 8;
  localparam int unsigned HW    = $clog2(HDR_N + 1);

  typedef enum logic {L_HDR, L_WORDS} lstate_t;
  lstate_t      state;
  logic [HW-1:0] hdr_cnt;        // descriptor bytes received
  logic [1:0]    byte_cnt;       // bytes of the current 4-byte value
  logic [23:0]   shreg;          // first three bytes of the current value
  logic [31:0]   cur_len;        // length field of the current descriptor
  logic [31:0]   total;          // words expected (sum of clamped lengths)
  logic [31:0]   words_done;     // words received so far
  logic [31:0]   room;           // words still free in memory
  logic [31:0]   value;          // the 4-byte value completed by rx_data

  assign value = {shreg, rx_data};
  assign room  = 32'(MEM_WORDS) - total;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= L_HDR;
      hdr_cnt    <= '0;
      byte_cnt   <= '0;
      shreg      <= '0;
      cur_len    <= '0;
      total      <= '0;
      words_done <= '0;
      grp_we     <= 1'b0;
      grp_idx    <= '0;
      grp_wdata  <= '0;
      wr_req     <= 1'b0;
      wr_addr    <= '0;
      wr_data    <= '0;
      loaded     <= 1'b0;
      busy       <= 1'b0;
    end else begin
      grp_we <= 1'b0;
      if (wr_req && wr_ack) begin
        wr_req <= 1'b0;
        if (words_done == total) begin  // that was the last word
          busy   <= 1'b0;
          loaded <= 1'b1;
        end
      end

      if (rx_valid) begin
        byte_cnt <= byte_cnt + 1'b1;
        shreg    <= {shreg[15:0], rx_data};
        unique case (state)
          L_HDR: begin
            if (hdr_cnt == '0) begin     // first byte of a new load
              total  <= '0;
              loaded <= 1'b0;
              busy   <= 1'b1;
            end
            hdr_cnt <= hdr_cnt + 1'b1;
            if (byte_cnt == 2'd3) begin
              if (hdr_cnt[2] == 1'b0) begin
                // length field: clamp to the room left in memory
                cur_len <= (value > room) ? room : value;
              end else begin
                // time step field: descriptor complete
                grp_we    <= 1'b1;
                grp_idx   <= GRP_IDX_W'(hdr_cnt >> 3);
                grp_wdata <= '{length: cur_len, period: value};
                total     <= total + cur_len;
                if (hdr_cnt == HW'(HDR_N - 1)) begin
                  hdr_cnt    <= '0;
                  words_done <= '0;
                  if ((total + cur_len) == '0) begin
                    busy   <= 1'b0;       // empty sequence
                    loaded <= 1'b1;
                  end else begin
                    state <= L_WORDS;
                  end
                end
              end
            end
          end
          L_WORDS: begin
            if (byte_cnt == 2'd3) begin
              wr_req     <= 1'b1;
              wr_addr    <= ADDR_W'(words_done);
              wr_data    <= value;
              words_done <= words_done + 1'b1;
              if (words_done + 1 == total) state <= L_HDR;
            end
          end
          default: state <= L_HDR;
        endcase
      end
    end
  end

  // Echo path with one byte of buffering.
  logic       echo_pend;
  logic [7:0] echo_byte;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      echo_pend <= 1'b0;
      echo_byte <= '0;
      tx_start  <= 1'b0;
      tx_data   <= '0;
    end else begin
      tx_start <= 1'b0;
      if (rx_valid) begin
        echo_pend <= 1'b1;
        echo_byte <= rx_data;
      end else if (echo_pend && !tx_busy && !tx_start) begin
        tx_start  <= 1'b1;
        tx_data   <= echo_byte;
        echo_pend <= 1'b0;
      end
    end
  end

  // A word must be written before the next one is complete.
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
    (state == L_WORDS && rx_valid && byte_cnt == 2'd3) |-> (!wr_req || wr_ack));
endmodule
