// rf_synth_harness: board and host around rf_synth_top, for simulation.
//
// It makes the clock and reset, plays the host PC on the serial port (sends
// each load as descriptors then words, 8N1, and decodes the echo of every
// byte), drives the TTL input, and holds behavioural models of the SRAM and of
// the AD9851. The DDS pins are decoded independently of the chip model: five
// bytes per FQ_UD give the tuning word, and the clock of each FQ_UD is kept.
// For every load the harness works out the list of words to play, with zone
// and time step, and checks each DDS update: word, and spacing (the previous
// point's time step times NCYC clocks). It then checks the hold of the last
// word and the DC word written at the end of the sequence.
//
// MODE 0: end-to-end test at reduced size: a TTL edge before any load, a ramp
//         with empty zones and several time steps, a TTL edge during the ramp,
//         the end, then a load whose lengths overflow memory and are clamped.
// MODE 1: one short load and one complete sequence (for the full-size top).
// MODE 2: a ramp filling the whole memory: tuning words for 1 MHz to 3 MHz,
//         all but the last word at a 1-tick step in zone 0, the last word
//         (3 MHz) alone in zone 9 at a 1000-tick step, then held.
// Each mechanism met is counted; one the mode should meet and never did is a
// failure. The result line is printed by this module.
module rf_synth_harness
  import rf_synth_pkg::seq_state_t, rf_synth_pkg::SEQ_IDLE, rf_synth_pkg::SEQ_RUN,
         rf_synth_pkg::SEQ_HOLD;
#(
  parameter int unsigned CPB  = 8,
  parameter int unsigned NCYC = 50,
  parameter int unsigned AW   = 8,
  parameter int unsigned MODE = 0,
  parameter longint      WATCHDOG = 5_000_000
) (
  output logic          clk,
  output logic          rst_n,
  output logic          uart_rxd,
  input  logic          uart_txd,
  output logic          ttl_in,
  input  logic [AW-1:0] sram_addr,
  input  logic          sram_ce_n,
  input  logic          sram_oe_n,
  input  logic          sram_we_n,
  input  logic [31:0]   sram_dq_o,
  input  logic          sram_dq_oe,
  output logic [31:0]   sram_dq_i,
  input  logic [7:0]    dds_d,
  input  logic          dds_wclk,
  input  logic          dds_fqud,
  input  logic          dds_reset,
  input  logic          loaded,
  input  seq_state_t    seq_state,
  input  logic [3:0]    seq_group
);
  localparam int unsigned NG = 10;
  localparam longint unsigned MEMW = 64'd1 << AW;

  int checks = 0, failures = 0;
  longint cyc = 0;

  // mechanism counters
  int n_ignored_unloaded = 0, n_ignored_running = 0, n_loads = 0, n_zone_switch = 0;
  int n_empty_skip = 0, n_steps_gt1 = 0, n_holds = 0, n_ends = 0, n_clamps = 0;
  int n_echo = 0, n_updates_checked = 0;

  initial begin clk = 1'b0; forever #10 clk = ~clk; end
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic finish();
    $display("mechanisms: ignored_unloaded=%0d ignored_running=%0d loads=%0d zone_switch=%0d empty_skip=%0d steps_gt1=%0d holds=%0d ends=%0d clamps=%0d echoes=%0d updates=%0d",
      n_ignored_unloaded, n_ignored_running, n_loads, n_zone_switch, n_empty_skip, n_steps_gt1,
      n_holds, n_ends, n_clamps, n_echo, n_updates_checked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin : watchdog
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    finish();
  end

  // ---------------- board models ----------------
  sram_model #(.ADDR_W(AW), .DATA_W(32)) u_mem (
    .addr(sram_addr), .ce_n(sram_ce_n), .oe_n(sram_oe_n), .we_n(sram_we_n),
    .dq_i(sram_dq_o), .dq_oe(sram_dq_oe), .dq_o(sram_dq_i));

  ad9851_model u_dds (.refclk(clk), .d(dds_d), .wclk(dds_wclk), .fqud(dds_fqud), .reset(dds_reset));

  // ---------------- DDS pin decoder ----------------
  logic [31:0] upd_word [$];
  longint      upd_at   [$];
  logic [39:0] pin_sh;
  int          pin_bytes = 0;
  always @(posedge dds_wclk) if (!dds_reset) begin pin_sh = {pin_sh[31:0], dds_d}; pin_bytes++; end
  always @(posedge dds_fqud) if (!dds_reset) begin
    check(pin_bytes == 5 && pin_sh[39:32] == 8'h01, "five bytes, W0 = 6x multiplier on");
    upd_word.push_back(pin_sh[31:0]);
    upd_at.push_back(cyc);
    pin_bytes = 0;
  end

  // ---------------- serial host ----------------
  byte unsigned echo_q [$];
  task automatic send_byte(input logic [7:0] b);
    logic [9:0] fr;
    fr = {1'b1, b, 1'b0};
    echo_q.push_back(b);
    for (int i = 0; i < 10; i++) begin
      uart_rxd = fr[i];
      repeat (CPB) @(negedge clk);
    end
    uart_rxd = 1'b1;
    repeat (CPB / 2) @(negedge clk);    // a little idle between frames
  endtask
  task automatic send_u32(input logic [31:0] v);
    for (int i = 3; i >= 0; i--) send_byte(v[8*i +: 8]);
  endtask

  initial begin : echo_decoder
    forever begin
      logic [7:0] b;
      @(negedge uart_txd);
      if (rst_n) begin
        repeat (CPB / 2) @(posedge clk);
        for (int i = 0; i < 8; i++) begin
          repeat (CPB) @(posedge clk);
          b[i] = uart_txd;
        end
        repeat (CPB) @(posedge clk);
        check(uart_txd, "echo stop bit");
        check(echo_q.size() > 0 && echo_q[0] == b, $sformatf("echo %02x", b));
        if (echo_q.size() > 0) void'(echo_q.pop_front());
        n_echo++;
      end
    end
  end

  task automatic ttl_pulse();
    @(negedge clk) ttl_in = 1'b1;
    repeat (6) @(negedge clk);
    ttl_in = 1'b0;
    repeat (6) @(negedge clk);
  endtask

  // ---------------- one load and its expected ramp ----------------
  typedef struct { logic [31:0] word; int zone; longint step; } point_t;
  point_t exp_pts [$];

  // Test words: a scrambled index, or for salt 4 a linear ramp of tuning
  // words from 1 MHz to 3 MHz over MEMW-1 points with a 60 MHz DDS clock,
  // w = f * 2^32 / 60e6, ending on 3 MHz.
  localparam longint unsigned W_1MHZ = (64'd1_000_000 << 32) / 64'd60_000_000;
  localparam longint unsigned W_3MHZ = (64'd3_000_000 << 32) / 64'd60_000_000;
  function automatic logic [31:0] word_of(input int i, input int salt);
    if (salt == 4) begin
      if (longint'(i) >= longint'(MEMW) - 2) return 32'(W_3MHZ);
      return 32'(W_1MHZ + ((W_3MHZ - W_1MHZ) * longint'(i)) / (MEMW - 2));
    end
    return (32'(i) * 32'h9E37_79B9) ^ 32'(salt * 32'h0101_0101) ^ 32'h00C0_FFEE;
  endfunction

  task automatic load(input longint unsigned lens [NG], input longint unsigned pers [NG], input int salt);
    automatic longint unsigned total = 0;
    automatic int last_used = -1;
    exp_pts.delete();
    for (int g = 0; g < NG; g++) begin
      automatic longint unsigned l = (lens[g] > MEMW - total) ? MEMW - total : lens[g];
      if (l != lens[g]) n_clamps++;
      if (l != 0) begin
        if (last_used >= 0 && g > last_used + 1) n_empty_skip++;
        last_used = g;
      end
      for (longint unsigned k = 0; k < l; k++)
        exp_pts.push_back('{word: word_of(int'(total + k), salt), zone: g,
                            step: (pers[g] == 0) ? 1 : longint'(pers[g])});
      total += l;
    end
    for (int g = 0; g < NG; g++) begin
      send_u32(32'(lens[g]));
      send_u32(32'(pers[g]));
    end
    for (longint unsigned i = 0; i < total; i++) send_u32(word_of(int'(i), salt));
    repeat (4 * CPB) @(negedge clk);
    check(loaded, "loaded after the last byte");
    if (loaded) n_loads++;
  endtask

  // Start the ramp, optionally disturb it, wait for the hold, check, end it.
  task automatic play(input bit disturb, input longint hold_clocks);
    automatic longint t0;
    upd_word.delete();
    upd_at.delete();
    check(seq_state == SEQ_IDLE, "idle before start");
    ttl_pulse();
    check(seq_state == SEQ_RUN, "running after TTL");
    if (disturb) begin
      repeat (2 * NCYC) @(negedge clk);
      ttl_pulse();
      if (seq_state == SEQ_RUN) n_ignored_running++;
      else check(1'b0, "TTL during the ramp stopped it");
    end
    while (seq_state == SEQ_RUN) @(negedge clk);
    check(seq_state == SEQ_HOLD, "hold after the ramp");
    if (seq_state == SEQ_HOLD) n_holds++;
    repeat (hold_clocks) @(negedge clk);
    check(seq_state == SEQ_HOLD && upd_word.size() == exp_pts.size(),
          $sformatf("%0d DDS updates, %0d expected", upd_word.size(), exp_pts.size()));
    for (int i = 0; i < exp_pts.size() && i < upd_word.size(); i++) begin
      check(upd_word[i] == exp_pts[i].word, $sformatf("update %0d word %h vs %h", i, upd_word[i], exp_pts[i].word));
      if (i > 0) begin
        check(upd_at[i] - upd_at[i-1] == exp_pts[i-1].step * NCYC,
              $sformatf("update %0d after %0d clocks, expected %0d", i, upd_at[i] - upd_at[i-1], exp_pts[i-1].step * NCYC));
        if (exp_pts[i].zone != exp_pts[i-1].zone) n_zone_switch++;
      end
      if (exp_pts[i].step > 1) n_steps_gt1++;
      n_updates_checked++;
    end
    // end of the sequence: the output goes to DC
    ttl_pulse();
    repeat (30) @(negedge clk);
    check(seq_state == SEQ_IDLE, "idle after the end pulse");
    check(upd_word.size() == exp_pts.size() + 1 && upd_word[$] == 32'd0, "DC word at the end");
    if (seq_state == SEQ_IDLE && upd_word[$] == 32'd0) n_ends++;
    check(u_dds.resets == 1 && u_dds.bad_updates == 0, "DDS never reset again, every update well formed");
  endtask

  // ---------------- scenario ----------------
  initial begin : scenario
    uart_rxd = 1'b1;
    ttl_in   = 1'b0;
    rst_n    = 1'b0;
    repeat (5) @(negedge clk);
    rst_n = 1'b1;
    repeat (20) @(negedge clk);
    if (MODE == 0) begin
      ttl_pulse();
      repeat (3 * NCYC) @(negedge clk);
      if (seq_state == SEQ_IDLE && upd_word.size() == 0) n_ignored_unloaded++;
      else check(1'b0, "start before any load was taken");
      load('{3, 0, 4, 0, 0, 0, 0, 0, 2, 0}, '{2, 9, 1, 9, 9, 9, 9, 9, 3, 9}, 1);
      play(1'b1, 10 * NCYC);
      load('{MEMW - 20, 12, 30, 0, 0, 0, 0, 0, 0, 5}, '{1, 2, 1, 1, 1, 1, 1, 1, 1, 1}, 2);
      play(1'b0, 10 * NCYC);
    end else if (MODE == 1) begin
      load('{4, 0, 0, 0, 0, 0, 0, 0, 0, 1}, '{1, 0, 0, 0, 0, 0, 0, 0, 0, 5}, 3);
      play(1'b1, 10 * NCYC);
    end else begin
      load('{MEMW - 1, 0, 0, 0, 0, 0, 0, 0, 0, 1}, '{1, 0, 0, 0, 0, 0, 0, 0, 0, 1000}, 4);
      play(1'b0, 20 * NCYC);
    end
    repeat (20 * CPB) @(negedge clk);
    check(echo_q.size() == 0, $sformatf("%0d bytes never echoed", echo_q.size()));
    // every mechanism of the mode must have happened
    check(n_loads > 0 && n_holds > 0 && n_ends > 0 && n_updates_checked > 0 && n_echo > 0,
          "load, ramp, hold, end and echo happened");
    if (MODE == 0)
      check(n_ignored_unloaded > 0 && n_ignored_running > 0 && n_zone_switch > 0 &&
            n_empty_skip > 0 && n_steps_gt1 > 0 && n_clamps > 0, "every mechanism happened");
    if (MODE == 1) check(n_ignored_running > 0 && n_zone_switch > 0 && n_empty_skip > 0, "mechanisms of the short run");
    if (MODE == 2) check(n_updates_checked == int'(MEMW) && n_zone_switch > 0, "whole memory played");
    finish();
  end
endmodule
