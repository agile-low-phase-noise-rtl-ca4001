// group_table: descriptors of the memory zones of the generator.
//
// The tuning words in memory are split into N_GROUPS consecutive zones, each
// with its own number of points and its own time step, so that part of a ramp
// can be played fast and part slowly (for instance a fine ramp at 10 us per
// point followed by a single word held for 10 s). This register file keeps one
// group_t {length, period} per zone. It is written by the loader, one zone per
// cycle, and read asynchronously by the sequencer. Reset clears every length,
// so an unloaded table describes an empty sequence. The 10 zones and their
// two 4-byte fields are the paper's; keeping them in registers is this
// design's choice.
module group_table
  import rf_synth_pkg::group_t, rf_synth_pkg::GRP_IDX_W;
#(
  parameter int unsigned N_GROUPS = 10
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 we,
  input  logic [GRP_IDX_W-1:0] widx,
  input  group_t               wdata,
  input  logic [GRP_IDX_W-1:0] ridx,
  output group_t               rdata
);
  group_t tbl [N_GROUPS];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(N_GROUPS); i++) tbl[i] <= '0;
    end else if (we && (widx < GRP_IDX_W'(N_GROUPS))) begin
      tbl[widx] <= wdata;
    end
  end

  // Reads beyond the last zone return an empty descriptor.
  always_comb begin
    rdata = '0;
    for (int i = 0; i < int'(N_GROUPS); i++)
      if (ridx == GRP_IDX_W'(i)) rdata = tbl[i];
  end
endmodule
