// ttl_start: input stage for the TTL trigger of the generator.
//
// The external TTL line is asynchronous to the FPGA clock. It passes through a
// two flip-flop synchroniser, and a third flip-flop gives the previous level so
// that a rising edge produces a single one-cycle `pulse`, high in the second
// clock after the edge is first sampled. The paper only says that synthesis
// starts (and, with a second pulse, ends) on a TTL signal; the rising edge and
// the synchroniser depth are this design's choices.
module ttl_start (
  input  logic clk,
  input  logic rst_n,
  input  logic ttl_in,
  output logic pulse
);
  logic [2:0] sync;

  always_ff @(posedge clk) begin
    if (!rst_n) sync <= '0;
    else        sync <= {sync[1:0], ttl_in};
  end

  assign pulse = sync[1] & ~sync[2];
endmodule
