// sram_model: behavioural model of the external asynchronous SRAM, for
// simulation only.
//
// 2^ADDR_W words of DATA_W bits. With CE and OE low the addressed word is
// driven on `dq_o` at once (zero access time; the controller's own wait
// states cover a real 10 ns part). A write takes the data bus on the rising
// edge of WE while CE is low. The tristate bus of the real chip is split into
// the controller's out/out-enable and this model's output. `writes` and
// `reads_seen` count accesses for testbenches; a word never written reads as 0.
module sram_model #(
  parameter int unsigned ADDR_W = 18,
  parameter int unsigned DATA_W = 32
) (
  input  logic [ADDR_W-1:0] addr,
  input  logic              ce_n,
  input  logic              oe_n,
  input  logic              we_n,
  input  logic [DATA_W-1:0] dq_i,
  input  logic              dq_oe,
  output logic [DATA_W-1:0] dq_o
);
  logic [DATA_W-1:0] mem [2**ADDR_W];
  int unsigned writes = 0;
  int unsigned bad_writes = 0;

  initial for (int i = 0; i < 2**ADDR_W; i++) mem[i] = '0;

  always @(posedge we_n) begin
    if (!ce_n) begin
      if (!dq_oe) bad_writes++;
      mem[addr] = dq_i;
      writes++;
    end
  end

  assign dq_o = (!ce_n && !oe_n) ? mem[addr] : '0;
endmodule
