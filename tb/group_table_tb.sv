// group_table_tb: writes random descriptors to random zones, keeps a
// reference copy, and compares every zone after each write; checks that
// reset leaves all zones empty and that indexes past the last zone read as
// empty and are not written.
module group_table_tb;
  import rf_synth_pkg::group_t;
  localparam int unsigned NG = 10;
  logic clk = 1'b0, rst_n = 1'b0, we = 1'b0;
  logic [3:0] widx = '0, ridx = '0;
  group_t wdata = '0, rdata;
  group_t ref_tbl [16];
  int checks = 0, failures = 0;

  group_table #(.N_GROUPS(NG)) dut (.clk, .rst_n, .we, .widx, .wdata, .ridx, .rdata);

  always #10 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic compare_all();
    for (int i = 0; i < 16; i++) begin
      ridx = 4'(i);
      #1;
      check(rdata == ref_tbl[i], $sformatf("zone %0d: %h vs %h", i, rdata, ref_tbl[i]));
    end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 16; i++) ref_tbl[i] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    compare_all();
    repeat (200) begin
      @(negedge clk);
      widx  = 4'($urandom_range(0, 11));
      wdata = '{length: $urandom, period: $urandom};
      we    = 1'b1;
      if (widx < NG) ref_tbl[widx] = wdata;
      @(negedge clk);
      we = 1'b0;
      compare_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
