// ramp_sequencer_tb: the sequencer with the real timebase (25 clocks per tick
// here), a group table and an SRAM read port modelled in the testbench (random
// 1-4 clock read delay), and a DDS interface model that is busy for 12 clocks
// per load. For each test table the testbench computes the list of
// (word, zone, time step) to play and checks every load: its word, its zone,
// and its clock: the first one tick after the start, each next one
// (time step of the previous point) x 25 clocks later. It also checks the
// HOLD state after the last word with no further loads, the end of the
// sequence on a second start (tuning word 0, back to IDLE), that a start
// during a ramp and a start while `enable` is low are ignored, and that an
// empty table never leaves IDLE.
module ramp_sequencer_tb;
  import rf_synth_pkg::*;
  localparam int unsigned NG = 10, AW = 8, NC = 25;
  logic clk = 1'b0, rst_n = 1'b0;
  logic start_pulse = 1'b0, enable = 1'b1, tick, tb_restart;
  logic [3:0] grp_idx;
  group_t grp_data;
  logic rd_req, rd_ack = 1'b0;
  logic [AW-1:0] rd_addr;
  logic [31:0] rd_data = '0;
  logic dds_start, dds_busy = 1'b0;
  logic [31:0] dds_word;
  seq_state_t state;
  logic [3:0] cur_grp;

  group_t      tbl [16];
  logic [31:0] mem [2**AW];
  int checks = 0, failures = 0;
  longint cyc = 0;

  typedef struct { logic [31:0] word; int grp; longint at; } load_t;
  load_t loads [$];

  timebase #(.N_CYCLE(NC)) u_tb (.clk, .rst_n, .restart(tb_restart), .tick);

  ramp_sequencer #(.N_GROUPS(NG), .ADDR_W(AW)) dut (
    .clk, .rst_n, .start_pulse, .enable, .tick, .tb_restart,
    .grp_idx, .grp_data, .rd_req, .rd_addr, .rd_ack, .rd_data,
    .dds_start, .dds_word, .dds_busy, .state, .cur_grp);

  always #10 clk = ~clk;
  assign grp_data = tbl[grp_idx];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  longint restart_at = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && tb_restart) restart_at = cyc;
    if (rst_n && dds_start) begin
      loads.push_back('{word: dds_word, grp: int'(cur_grp), at: cyc});
      check(!dds_busy, "start while busy");
    end
  end

  // SRAM read port model
  initial begin
    forever begin
      @(posedge clk iff (rst_n && rd_req));
      repeat ($urandom_range(0, 3)) @(posedge clk);
      @(negedge clk) begin rd_ack = 1'b1; rd_data = mem[rd_addr]; end
      @(negedge clk) rd_ack = 1'b0;
      @(negedge clk);
    end
  end

  // DDS interface model
  initial begin
    forever begin
      @(posedge clk iff (rst_n && dds_start));
      @(negedge clk) dds_busy = 1'b1;
      repeat (11) @(negedge clk);
      dds_busy = 1'b0;
    end
  end

  task automatic pulse_start();
    @(negedge clk) start_pulse = 1'b1;
    @(negedge clk) start_pulse = 1'b0;
  endtask

  // Play one table; `disturb` adds a start in the middle of the ramp.
  task automatic play(input int unsigned lens [NG], input int unsigned pers [NG], input bit disturb);
    load_t exp [$];
    automatic int a = 0;
    automatic longint t;
    automatic longint total_ticks = 0;
    for (int g = 0; g < 16; g++) tbl[g] = '0;
    for (int g = 0; g < NG; g++) begin
      tbl[g] = '{length: lens[g], period: pers[g]};
      for (int k = 0; k < int'(lens[g]); k++) begin
        mem[a] = $urandom;
        exp.push_back('{word: mem[a], grp: g, at: (pers[g] == 0) ? 1 : pers[g]});
        total_ticks += (pers[g] == 0) ? 1 : pers[g];
        a++;
      end
    end
    loads.delete();
    repeat (5) @(negedge clk);
    check(state == SEQ_IDLE, "idle before start");
    pulse_start();
    if (exp.size() == 0) begin
      repeat (10 * NC) @(negedge clk);
      check(state == SEQ_IDLE && loads.size() == 0, "empty table stays idle");
      return;
    end
    repeat (3) @(negedge clk);
    check(state == SEQ_RUN, "running after start");
    if (disturb) begin
      repeat (3 * NC) @(negedge clk);
      pulse_start();
      check(state == SEQ_RUN, "start during the ramp ignored");
    end
    // wait past the end of the ramp
    while (state == SEQ_RUN) @(negedge clk);
    check(state == SEQ_HOLD, "hold after the last word");
    repeat (20 * NC) @(negedge clk);
    check(state == SEQ_HOLD, "still holding");
    check(loads.size() == exp.size(), $sformatf("%0d loads, %0d expected", loads.size(), exp.size()));
    t = restart_at + NC + 1;   // the load command follows the tick by one clock
    for (int i = 0; i < exp.size() && i < loads.size(); i++) begin
      check(loads[i].word == exp[i].word, $sformatf("load %0d word", i));
      check(loads[i].grp == exp[i].grp, $sformatf("load %0d zone %0d vs %0d", i, loads[i].grp, exp[i].grp));
      check(loads[i].at == t, $sformatf("load %0d at %0d, expected %0d", i, loads[i].at - restart_at, t - restart_at));
      t += exp[i].at * NC;
    end
    // end of sequence
    pulse_start();
    repeat (20) @(negedge clk);
    check(state == SEQ_IDLE, "idle after the end pulse");
    check(loads.size() == exp.size() + 1 && loads[$].word == 32'd0, "DC word at the end");
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int g = 0; g < 16; g++) tbl[g] = '0;
    for (int i = 0; i < 2**AW; i++) mem[i] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    play('{2, 0, 3, 0, 0, 1, 0, 0, 0, 2}, '{1, 9, 2, 9, 9, 7, 9, 9, 9, 0}, 1'b0);
    play('{0, 0, 0, 0, 0, 0, 0, 0, 0, 20}, '{0, 0, 0, 0, 0, 0, 0, 0, 0, 1}, 1'b1);
    play('{1, 1, 1, 1, 1, 1, 1, 1, 1, 1}, '{1, 2, 3, 4, 5, 6, 7, 8, 9, 10}, 1'b0);
    play('{0, 0, 0, 0, 0, 0, 0, 0, 0, 0}, '{1, 1, 1, 1, 1, 1, 1, 1, 1, 1}, 1'b0);
    // start ignored while not enabled
    tbl[0] = '{length: 2, period: 1};
    enable = 1'b0;
    loads.delete();
    pulse_start();
    repeat (5 * NC) @(negedge clk);
    check(state == SEQ_IDLE && loads.size() == 0, "start ignored while disabled");
    enable = 1'b1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
