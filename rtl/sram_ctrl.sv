// sram_ctrl: controller of the external asynchronous SRAM.
//
// The tuning words live in a 1 MB asynchronous SRAM organised as 2^ADDR_W
// words of DATA_W bits (262,144 x 32 bits by default). The controller has a
// read port, used by the sequencer while a ramp plays, and a write port, used
// by the loader; a read is served first when both are pending. Each port is a
// request/acknowledge pair: the client raises `*_req` with a stable address
// (and data) and holds it until `*_ack` is high for one cycle; for a read,
// `rd_data` is valid in that cycle and stays valid until the next read.
//
// All SRAM pins are driven from flip-flops. A read drives CE and OE with the
// address for 1 + RD_WAIT clocks and samples the data bus at the end (2 clocks
// from request to acknowledge, plus RD_WAIT). A write drives address and data,
// pulses WE low for one clock between a clock of setup and a clock of hold, and
// acknowledges 4 clocks after the request. After each acknowledge the
// controller rests one clock, so that the client can drop its request. The
// data bus is split into out, out-enable and in; the tristate pad belongs to
// the board wrapper. The memory size is the paper's; the organisation and
// timing are this design's choices, suited to 10 ns parts at 50 MHz.
module sram_ctrl #(
  parameter int unsigned ADDR_W  = 18,
  parameter int unsigned DATA_W  = 32,
  parameter int unsigned RD_WAIT = 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // read port (priority)
  input  logic              rd_req,
  input  logic [ADDR_W-1:0] rd_addr,
  output logic              rd_ack,
  output logic [DATA_W-1:0] rd_data,
  // write port
  input  logic              wr_req,
  input  logic [ADDR_W-1:0] wr_addr,
  input  logic [DATA_W-1:0] wr_data,
  output logic              wr_ack,
  // SRAM pins
  output logic [ADDR_W-1:0] sram_addr,
  output logic              sram_ce_n,
  output logic              sram_oe_n,
  output logic              sram_we_n,
  output logic [DATA_W-1:0] sram_dq_o,
  output logic              sram_dq_oe,
  input  logic [DATA_W-1:0] sram_dq_i
);
  typedef enum logic [2:0] {S_IDLE, S_READ, S_WPULSE, S_WHOLD, S_WEND, S_GAP} state_t;
  state_t state;
  localparam int unsigned WW = (RD_WAIT > 0) ? $clog2(RD_WAIT + 1) : 1;
  logic [WW-1:0] wait_cnt;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      wait_cnt   <= '0;
      rd_ack     <= 1'b0;
      rd_data    <= '0;
      wr_ack     <= 1'b0;
      sram_addr  <= '0;
      sram_ce_n  <= 1'b1;
      sram_oe_n  <= 1'b1;
      sram_we_n  <= 1'b1;
      sram_dq_o  <= '0;
      sram_dq_oe <= 1'b0;
    end else begin
      rd_ack <= 1'b0;
      wr_ack <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (rd_req) begin
            sram_addr <= rd_addr;
            sram_ce_n <= 1'b0;
            sram_oe_n <= 1'b0;
            wait_cnt  <= '0;
            state     <= S_READ;
          end else if (wr_req) begin
            sram_addr  <= wr_addr;
            sram_dq_o  <= wr_data;
            sram_dq_oe <= 1'b1;
            sram_ce_n  <= 1'b0;
            state      <= S_WPULSE;
          end
        end
        S_READ: begin
          if (wait_cnt == WW'(RD_WAIT)) begin
            rd_data   <= sram_dq_i;
            rd_ack    <= 1'b1;
            sram_ce_n <= 1'b1;
            sram_oe_n <= 1'b1;
            state     <= S_GAP;
          end else wait_cnt <= wait_cnt + 1'b1;
        end
        S_WPULSE: begin
          sram_we_n <= 1'b0;
          state     <= S_WHOLD;
        end
        S_WHOLD: begin
          sram_we_n <= 1'b1;
          state     <= S_WEND;
        end
        S_WEND: begin
          sram_dq_oe <= 1'b0;
          sram_ce_n  <= 1'b1;
          wr_ack     <= 1'b1;
          state      <= S_GAP;
        end
        S_GAP:   state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // Never drive the bus while the SRAM drives it.
  a_no_contention: assert property (@(posedge clk) disable iff (!rst_n)
    !(sram_dq_oe && !sram_oe_n));
  // Write strobe only with the data bus driven.
  a_we_with_data: assert property (@(posedge clk) disable iff (!rst_n)
    !sram_we_n |-> sram_dq_oe);
endmodule
