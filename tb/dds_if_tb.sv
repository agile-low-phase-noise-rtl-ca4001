// dds_if_tb: the AD9851 load interface with the behavioural DDS model.
// Checks the RESET pulse after reset, that each command loads exactly five
// bytes and one FQ_UD, that the model ends up with the commanded tuning word
// and control byte 0x01 (phase 0, powered up, 6x multiplier on), that `busy`
// lasts 12 clocks and FQ_UD rises 12 clocks after the command clock, and that the
// bytes on D appear in the order W0, then the tuning word MSB first.
module dds_if_tb;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy;
  logic [31:0] word = '0;
  logic [7:0] dds_d;
  logic dds_wclk, dds_fqud, dds_reset;
  int checks = 0, failures = 0;
  logic [7:0] seen [$];
  longint cyc = 0, start_cyc = 0, fq_cyc = 0;

  dds_if dut (.clk, .rst_n, .start, .word, .busy, .dds_d, .dds_wclk, .dds_fqud, .dds_reset);
  ad9851_model dds (.refclk(clk), .d(dds_d), .wclk(dds_wclk), .fqud(dds_fqud), .reset(dds_reset));

  always #10 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge dds_wclk) seen.push_back(dds_d);
  always @(posedge dds_fqud) fq_cyc = cyc;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    check(dds_reset == 1'b1 && busy, "reset pulse after reset");
    while (busy) @(negedge clk);
    check(dds.resets == 1 && !dds_reset, "one DDS reset");
    for (int n = 0; n < 100; n++) begin
      automatic logic [31:0] w = (n == 0) ? 32'h8000_0001 : $urandom;
      automatic int blen = 0;
      seen.delete();
      @(negedge clk);
      word = w; start = 1'b1;
      start_cyc = cyc;
      @(negedge clk);
      start = 1'b0; word = ~w;     // the word is captured at start
      while (busy) begin blen++; @(negedge clk); end
      check(blen == 12, $sformatf("busy for %0d clocks", blen));
      check(fq_cyc - start_cyc == 12, $sformatf("FQ_UD %0d clocks after start", fq_cyc - start_cyc));
      check(dds.updates == n + 1 && dds.bad_updates == 0, "one well-formed update");
      check(dds.fword == w, $sformatf("tuning word %h vs %h", dds.fword, w));
      check(dds.w0 == 8'h01, $sformatf("control byte %h", dds.w0));
      check(seen.size() == 5, "five bytes");
      if (seen.size() == 5)
        check({seen[1], seen[2], seen[3], seen[4]} == w && seen[0] == 8'h01, "byte order");
      repeat ($urandom_range(0, 20)) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
