// sram_ctrl_tb: the controller with the behavioural SRAM. Random reads and
// writes arrive on both ports, often together; a reference array predicts
// every read. Checks: read data, acknowledge latency (2 + RD_WAIT clocks for
// a read from an idle controller, 4 for a write), that a read pending at the
// same time as a write is served first, and the bus rules asserted in the
// controller (no drive while the SRAM drives, WE only with data driven).
module sram_ctrl_tb;
  localparam int unsigned AW = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  logic rd_req = 1'b0, wr_req = 1'b0, rd_ack, wr_ack;
  logic [AW-1:0] rd_addr = '0, wr_addr = '0;
  logic [31:0] rd_data, wr_data = '0;
  logic [AW-1:0] sram_addr;
  logic sram_ce_n, sram_oe_n, sram_we_n, sram_dq_oe;
  logic [31:0] sram_dq_o, sram_dq_i;
  logic [31:0] refm [2**AW];
  int checks = 0, failures = 0;
  int both = 0, read_first = 0;

  sram_ctrl #(.ADDR_W(AW), .DATA_W(32), .RD_WAIT(1)) dut (
    .clk, .rst_n, .rd_req, .rd_addr, .rd_ack, .rd_data,
    .wr_req, .wr_addr, .wr_data, .wr_ack,
    .sram_addr, .sram_ce_n, .sram_oe_n, .sram_we_n, .sram_dq_o, .sram_dq_oe, .sram_dq_i);

  sram_model #(.ADDR_W(AW), .DATA_W(32)) mem (
    .addr(sram_addr), .ce_n(sram_ce_n), .oe_n(sram_oe_n), .we_n(sram_we_n),
    .dq_i(sram_dq_o), .dq_oe(sram_dq_oe), .dq_o(sram_dq_i));

  always #10 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2**AW; i++) refm[i] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);
    repeat (600) begin
      automatic int kind = $urandom_range(0, 2);   // 0 read, 1 write, 2 both
      automatic int lat = 0;
      automatic bit rdone = 1'b0, wdone = 1'b0, rfirst = 1'b0;
      automatic logic [AW-1:0] ra = AW'($urandom), wa = AW'($urandom);
      automatic logic [31:0] wd = $urandom;
      automatic logic [31:0] expect_rd = refm[ra];  // read served first
      @(negedge clk);
      if (kind != 1) begin rd_req = 1'b1; rd_addr = ra; end
      if (kind != 0) begin wr_req = 1'b1; wr_addr = wa; wr_data = wd; end
      while ((rd_req && !rdone) || (wr_req && !wdone)) begin
        @(posedge clk);
        #1;
        lat++;
        if (rd_ack) begin
          rdone = 1'b1;
          check(rd_data == expect_rd, $sformatf("read %0d: %h vs %h", ra, rd_data, expect_rd));
          if (kind == 0) check(lat == 3, $sformatf("read latency %0d", lat));  // 2 + RD_WAIT
          if (!wdone) rfirst = 1'b1;
        end
        if (wr_ack) begin
          wdone = 1'b1;
          if (kind == 1) check(lat == 4, $sformatf("write latency %0d", lat));
        end
        @(negedge clk);
        if (rdone) rd_req = 1'b0;
        if (wdone) wr_req = 1'b0;
        if (lat > 40) begin check(1'b0, "no acknowledge"); break; end
      end
      if (kind != 0) refm[wa] = wd;
      if (kind == 2) begin both++; if (rfirst) read_first++; end
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    check(both > 50 && read_first == both, $sformatf("read first %0d of %0d", read_first, both));
    // read back the whole array
    for (int i = 0; i < 2**AW; i++) begin
      @(negedge clk);
      rd_req = 1'b1; rd_addr = AW'(i);
      @(posedge clk iff rd_ack);
      #1 check(rd_data == refm[i], $sformatf("final read %0d", i));
      @(negedge clk);
      rd_req = 1'b0;
    end
    check(mem.bad_writes == 0, "write without data driven");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
