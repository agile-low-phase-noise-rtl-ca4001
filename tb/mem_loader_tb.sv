// mem_loader_tb: plays the host. It sends whole loads byte by byte, with
// random gaps, to the loader and answers its SRAM write requests after random
// delays. A reference model of the stream (descriptors first, then the words,
// most significant byte first, lengths clamped to the room left in memory)
// predicts every group-table write and every SRAM write. Three loads are
// sent: an ordinary one with empty zones, one whose lengths overflow the
// (reduced) memory, and an empty one. `loaded`, `busy` and the echo of every
// byte are checked as well.
module mem_loader_tb;
  import rf_synth_pkg::group_t;
  localparam int unsigned NG = 10, MW = 64, AW = 6;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [7:0] rx_data = '0, tx_data;
  logic rx_valid = 1'b0, tx_start, tx_busy = 1'b0;
  logic grp_we;
  logic [3:0] grp_idx;
  group_t grp_wdata;
  logic wr_req, wr_ack = 1'b0;
  logic [AW-1:0] wr_addr;
  logic [31:0] wr_data;
  logic loaded, busy;
  int checks = 0, failures = 0;

  // expected events
  group_t      exp_tbl [NG];
  logic [31:0] exp_mem [$];
  int tbl_writes = 0, mem_writes = 0, echoes = 0;
  byte unsigned echo_q [$];

  mem_loader #(.N_GROUPS(NG), .MEM_WORDS(MW), .ADDR_W(AW)) dut (
    .clk, .rst_n, .rx_data, .rx_valid, .tx_data, .tx_start, .tx_busy,
    .grp_we, .grp_idx, .grp_wdata, .wr_req, .wr_addr, .wr_data, .wr_ack,
    .loaded, .busy);

  always #10 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // group table writes
  always @(posedge clk) if (rst_n && grp_we) begin
    check(grp_idx < NG, "zone index");
    if (grp_idx < NG) check(grp_wdata == exp_tbl[grp_idx],
      $sformatf("zone %0d: %h vs %h", grp_idx, grp_wdata, exp_tbl[grp_idx]));
    tbl_writes++;
  end

  // SRAM write responder
  initial begin
    forever begin
      @(posedge clk iff (rst_n && wr_req));
      repeat ($urandom_range(0, 5)) @(posedge clk);
      check(wr_req, "request held");
      check(mem_writes < exp_mem.size(), "unexpected write");
      if (mem_writes < exp_mem.size())
        check(wr_addr == AW'(mem_writes) && wr_data == exp_mem[mem_writes],
              $sformatf("write %0d: addr %0d data %h", mem_writes, wr_addr, wr_data));
      mem_writes++;
      @(negedge clk) wr_ack = 1'b1;
      @(negedge clk) wr_ack = 1'b0;
      @(negedge clk);
    end
  end

  // transmitter model: busy for 10 clocks after each start
  initial begin
    forever begin
      @(posedge clk iff (rst_n && tx_start));
      echoes++;
      check(echo_q.size() > 0 && tx_data == echo_q[0], "echoed byte");
      if (echo_q.size() > 0) void'(echo_q.pop_front());
      @(negedge clk) tx_busy = 1'b1;
      repeat (10) @(negedge clk);
      tx_busy = 1'b0;
    end
  end

  task automatic send_byte(input logic [7:0] b);
    repeat ($urandom_range(14, 30)) @(negedge clk);
    rx_data = b; rx_valid = 1'b1;
    echo_q.push_back(b);
    @(negedge clk);
    rx_valid = 1'b0;
  endtask

  task automatic send_u32(input logic [31:0] v);
    for (int i = 3; i >= 0; i--) send_byte(v[8*i +: 8]);
  endtask

  // one complete load; lengths as the host asks, before clamping
  task automatic do_load(input int unsigned lens [NG]);
    automatic int unsigned total = 0;
    logic [31:0] per [NG];
    exp_mem.delete();
    mem_writes = 0;
    tbl_writes = 0;
    for (int g = 0; g < NG; g++) begin
      automatic int unsigned l = (lens[g] > MW - total) ? MW - total : lens[g];
      per[g] = $urandom_range(0, 1000);
      exp_tbl[g] = '{length: l, period: per[g]};
      total += l;
    end
    for (int i = 0; i < total; i++) exp_mem.push_back($urandom);
    for (int g = 0; g < NG; g++) begin
      send_u32(lens[g]);
      if (g == 0) check(busy && !loaded, "busy during load");
      send_u32(per[g]);
    end
    repeat (3) @(negedge clk);
    check(tbl_writes == NG, $sformatf("%0d zone writes", tbl_writes));
    for (int i = 0; i < total; i++) begin
      check(!loaded, "not loaded before the last word");
      send_u32(exp_mem[i]);
    end
    repeat (20) @(negedge clk);
    check(mem_writes == total, $sformatf("%0d words written, %0d expected", mem_writes, total));
    check(loaded && !busy, "loaded after the last word");
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    check(!loaded && !busy, "nothing loaded after reset");
    do_load('{3, 0, 5, 1, 0, 0, 2, 0, 0, 4});
    do_load('{40, 30, 10, 0, 0, 0, 0, 0, 0, 7});      // clamped to 40 + 24
    do_load('{0, 0, 0, 0, 0, 0, 0, 0, 0, 0});
    repeat (40) @(negedge clk);
    check(echo_q.size() == 0, $sformatf("%0d bytes not echoed", echo_q.size()));
    check(echoes == 80 * 3 + 4 * (15 + 64), $sformatf("%0d echoes", echoes));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
