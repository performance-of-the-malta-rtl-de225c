// tlu_top_tb: end-to-end test of the Trigger Logic Unit at its default
// parameters (7 inputs, 10 SMA outputs, 320 MHz) and reset settings.
//
// The testbench plays the control PC (IPbus master) and the detectors: each
// particle gives 2 ns fast pulses on the selected sensor planes, spread by up
// to 15 ns, and a later scintillator pulse. Every L1A seen on the outputs is
// compared with what the event should give, worked out here from the
// channel settings: all selected channels hit, within each other's stretched
// window, during a run, outside the max-rate veto. Checked on the way: L1A
// length, its latency from the scintillator edge, SMA fan-out through the
// mask, the per-channel and L1A counters read over IPbus, counter clear, and
// a change of trigger configuration. Each mechanism (run gating, missing
// plane, too-wide spread, input veto, max-rate veto, reconfiguration, counter
// clear) is counted and must occur at least once.
`timescale 1ns/1ps
module tlu_top_tb;
  import tlu_pkg::*;

  logic clk = 1'b0, rst_n = 1'b1;
  logic [N_IN-1:0] fast_in = '0;
  ipb_wbus_t ipb_w = '0;
  ipb_rbus_t ipb_r;
  logic [N_OUT-1:0] sma_out;
  logic l1a, trig_vetoed;

  int checks = 0, failures = 0;
  int cyc = 0;
  // observed
  int l1a_seen = 0, l1a_len = 0, run_len = 0, l1a_rise_cyc = 0;
  realtime l1a_rise_t = 0;
  // L1A time after the scintillator edge, over all triggers
  real dt_min = 1.0e9, dt_max = -1.0e9;
  int vetoed_seen = 0, in_ignored = 0;
  // mechanisms
  int m_run_gate = 0, m_missing = 0, m_spread = 0, m_in_veto = 0, m_rate_veto = 0;
  int m_reconfig = 0, m_clear = 0, m_fire = 0;
  // model of the expected counters
  int hits [N_IN];
  int exp_l1a = 0;

  logic [N_OUT-1:0] cur_out_mask = '1;
  logic l1a_q = 1'b0;
  int unsigned cur_out_len = 39;

  always #1.5625 clk = ~clk;

  tlu_top dut (.clk, .rst_n, .fast_in, .ipb_w, .ipb_r, .sma_out, .l1a, .trig_vetoed);

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // Output monitor: L1A pulses, their length, SMA fan-out.
  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (l1a && !l1a_q) begin l1a_seen++; l1a_rise_cyc = cyc; l1a_rise_t = $realtime; run_len = 0; end
      if (l1a) run_len++;
      if (!l1a && l1a_q) l1a_len = run_len;
      if (trig_vetoed) vetoed_seen++;
      if (sma_out != ({N_OUT{l1a_q}} & cur_out_mask)) begin
        failures++; checks++;
        if (failures < 20) $display("FAIL: sma_out %b", sma_out);
      end
      if (dut.g_in[2].u_ch.u_shaper.ignore_o || dut.g_in[4].u_ch.u_shaper.ignore_o)
        in_ignored++;
    end
    l1a_q <= l1a;
  end

  // ---------------- IPbus master ----------------
  task automatic xfer(input bit wr, input logic [31:0] addr, input logic [31:0] wdata,
                      output logic [31:0] rdata);
    int waited = 0;
    @(negedge clk);
    ipb_w = '{ipb_addr: addr, ipb_wdata: wdata, ipb_strobe: 1'b1, ipb_write: wr};
    @(negedge clk);
    while (!ipb_r.ipb_ack && !ipb_r.ipb_err && waited < 10) begin @(negedge clk); waited++; end
    check(ipb_r.ipb_ack && !ipb_r.ipb_err, $sformatf("IPbus ack at %h", addr));
    rdata = ipb_r.ipb_rdata;
    ipb_w.ipb_strobe = 1'b0;
    @(negedge clk);
  endtask

  task automatic wr(logic [7:0] addr, logic [31:0] data);
    logic [31:0] d;
    xfer(1'b1, 32'(addr), data, d);
  endtask

  task automatic rd(logic [7:0] addr, output logic [31:0] d);
    xfer(1'b0, 32'(addr), '0, d);
  endtask

  // ---------------- detectors ----------------
  task automatic pulse(int ch, real at_ns);
    #(at_ns);
    fast_in[ch] = 1'b1;
    #2.0;
    fast_in[ch] = 1'b0;
  endtask

  // One particle: hit channel ch at time t[ch] ns (negative = no hit).
  task automatic event_hits(real t [N_IN]);
    fork
      if (t[0] >= 0) pulse(0, t[0]);
      if (t[1] >= 0) pulse(1, t[1]);
      if (t[2] >= 0) pulse(2, t[2]);
      if (t[3] >= 0) pulse(3, t[3]);
      if (t[4] >= 0) pulse(4, t[4]);
      if (t[5] >= 0) pulse(5, t[5]);
      if (t[6] >= 0) pulse(6, t[6]);
    join
    for (int ch = 0; ch < int'(N_IN); ch++) if (t[ch] >= 0) hits[ch]++;
  endtask

  // Inject one event, wait for the L1A path to settle and check the outcome.
  // Returns the L1A rise cycle relative to the scintillator hit.
  task automatic run_event(real t [N_IN], bit expect_l1a, string what, int settle_cycles = 300);
    int n0, c0, lat;
    realtime t_start;
    real dt;
    n0 = l1a_seen;
    @(negedge clk);
    c0 = cyc;
    t_start = $realtime;
    event_hits(t);
    repeat (settle_cycles) @(negedge clk);
    check(l1a_seen == n0 + (expect_l1a ? 1 : 0),
          $sformatf("%s: L1As %0d expected %0d", what, l1a_seen - n0, expect_l1a));
    if (expect_l1a && l1a_seen == n0 + 1) begin
      exp_l1a++;
      m_fire++;
      check(l1a_len == int'(cur_out_len), $sformatf("%s: L1A length %0d exp %0d", what, l1a_len, cur_out_len));
      // latency from the latest hit (at most 7 cycles after it, 19-22 ns)
      lat = l1a_rise_cyc - c0;
      check(real'(lat) * 3.125 >= t[0] + 15.0 && real'(lat) * 3.125 <= t[0] + 29.0,
            $sformatf("%s: L1A at %0d cycles, scintillator at %0.1f ns", what, lat, t[0]));
      dt = real'(l1a_rise_t - t_start) - t[0];
      if (dt < dt_min) dt_min = dt;
      if (dt > dt_max) dt_max = dt;
    end
  endtask

  // Default event: selected planes spread over 0..15 ns, scintillator last.
  function automatic void std_event(output real t [N_IN], input logic [N_IN-1:0] sel);
    for (int ch = 0; ch < int'(N_IN); ch++) t[ch] = -1.0;
    for (int ch = 1; ch < int'(N_IN); ch++)
      if (sel[ch]) t[ch] = real'($urandom_range(0, 15000)) / 1000.0;
    if (sel[0]) t[0] = 18.0 + real'($urandom_range(0, 4000)) / 1000.0;
  endfunction

  task automatic check_counters(string when);
    logic [31:0] d;
    for (int ch = 0; ch < int'(N_IN); ch++) begin
      rd(REG_IN_COUNT + 8'(ch), d);
      check(d == 32'(hits[ch]), $sformatf("%s: channel %0d count %0d exp %0d", when, ch, d, hits[ch]));
    end
    rd(REG_L1A_COUNT, d);
    check(d == 32'(exp_l1a), $sformatf("%s: L1A count %0d exp %0d", when, d, exp_l1a));
  endtask

  localparam logic [N_IN-1:0] SEL_DEF = 7'b0110101;  // Scint, Plane 1, 3, 4

  initial begin
    real t [N_IN];
    logic [31:0] d;
    logic [N_IN-1:0] sel;
    bit full;
    for (int ch = 0; ch < int'(N_IN); ch++) hits[ch] = 0;
    #0.2 rst_n = 1'b0;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    repeat (4) @(posedge clk);

    // Firmware version and run state
    rd(REG_VERSION, d);   check(d == 2, "firmware version");
    rd(REG_CTRL, d);      check(d[0] == 1'b0, "idle after reset");

    // A particle before the run: no trigger, nothing counted
    std_event(t, SEL_DEF);
    run_event(t, 1'b0, "before run");
    for (int ch = 0; ch < int'(N_IN); ch++) hits[ch] = 0;
    m_run_gate++;
    check_counters("before run");

    // Start the run
    wr(REG_CTRL, 32'(1 << CTRL_START));
    rd(REG_CTRL, d);      check(d[0] == 1'b1, "running after start");

    // Good event with the reset configuration
    std_event(t, SEL_DEF);
    run_event(t, 1'b1, "good event");
    repeat (17000) @(negedge clk);   // leave the 50 us max-rate veto

    // Missing plane 4
    std_event(t, SEL_DEF & ~7'b0100000);
    run_event(t, 1'b0, "plane 4 missing");
    m_missing++;
    // Unselected channels only (HGTD, Plane 2, Plane 5)
    std_event(t, 7'b1001010);
    run_event(t, 1'b0, "unselected channels");

    // Spread wider than the 13-cycle (40.6 ns) plane window
    std_event(t, SEL_DEF);
    t[2] = 0.0; t[4] = 55.0; t[5] = 50.0; t[0] = 60.0;
    run_event(t, 1'b0, "spread beyond window");
    m_spread++;

    // Double hit on plane 1 inside its veto window (hit 25 ns after the
    // first pulse ended): ignored by the input, still counted
    begin
      int ig0;
      ig0 = in_ignored;
      std_event(t, 7'b0000100);
      run_event(t, 1'b0, "plane 1 first hit");
      t[2] = 0.0;
      fork
        pulse(2, 0.0);
        pulse(2, 25.0);
      join
      hits[2] += 2;
      repeat (100) @(negedge clk);
      check(in_ignored > ig0, "second plane hit inside veto ignored");
      if (in_ignored > ig0) m_in_veto++;
    end

    // Two good events 10 us apart: the second is inside the max-rate veto
    begin
      int v0;
      v0 = vetoed_seen;
      std_event(t, SEL_DEF);
      run_event(t, 1'b1, "rate: first");
      repeat (3000) @(negedge clk);
      std_event(t, SEL_DEF);
      run_event(t, 1'b0, "rate: second inside veto");
      check(vetoed_seen == v0 + 1, "max-rate veto reported");
      if (vetoed_seen == v0 + 1) m_rate_veto++;
      repeat (17000) @(negedge clk);
    end
    check_counters("after directed events");

    // Random events with the reset configuration, 60 us apart
    for (int i = 0; i < 60; i++) begin
      full = ($urandom_range(0, 3) != 0);
      sel = SEL_DEF;
      if (!full) begin
        int k;
        k = $urandom_range(0, 3);            // drop one selected channel
        sel[(k == 0) ? 0 : (k == 1) ? 2 : (k == 2) ? 4 : 5] = 1'b0;
      end
      sel |= 7'($urandom_range(0, 127)) & ~SEL_DEF;      // extra unselected hits
      std_event(t, sel);
      run_event(t, ((sel & SEL_DEF) == SEL_DEF), $sformatf("random event %0d", i));
      if ((sel & SEL_DEF) != SEL_DEF) m_missing++;
      repeat (19000) @(negedge clk);
    end
    check_counters("after random events");

    // Reconfigure: trigger on Plane 2 with the scintillator only, shorter
    // output, 20 us max-rate veto, outputs SMA 1, 2 and 10
    wr(REG_TRIG_MASK, 32'b0001001);
    wr(REG_OUT_WIDTH, 32'd16);
    wr(REG_OUT_VETO, 32'd6400);
    wr(REG_OUT_MASK, 32'b10_0000_0011);
    cur_out_mask = 10'b10_0000_0011;
    cur_out_len = 16;
    m_reconfig++;
    std_event(t, 7'b0001001);
    run_event(t, 1'b1, "plane 2 and scintillator");
    repeat (7000) @(negedge clk);
    std_event(t, SEL_DEF);
    run_event(t, 1'b0, "old trigger planes without plane 2");
    std_event(t, 7'b0001000);
    run_event(t, 1'b0, "plane 2 without scintillator");
    for (int i = 0; i < 10; i++) begin
      std_event(t, 7'b0001001);
      run_event(t, 1'b1, $sformatf("reconfigured event %0d", i));
      repeat (7000) @(negedge clk);
    end
    // 50 kHz limit: with a 6400-cycle veto, a coincidence 5800 cycles after
    // the last L1A is dropped and one 7100 cycles after it is taken
    begin
      int v0;
      v0 = vetoed_seen;
      std_event(t, 7'b0001001);
      run_event(t, 1'b1, "50 kHz: first");
      repeat (5500) @(negedge clk);
      std_event(t, 7'b0001001);
      run_event(t, 1'b0, "50 kHz: 18 us later");
      check(vetoed_seen == v0 + 1, $sformatf("50 kHz: early trigger vetoed (%0d)", vetoed_seen - v0));
      repeat (1000) @(negedge clk);
      std_event(t, 7'b0001001);
      run_event(t, 1'b1, "50 kHz: 22 us later");
      repeat (7000) @(negedge clk);
    end
    check_counters("after reconfiguration");

    // Stop the run: no more triggers
    wr(REG_CTRL, 32'(1 << CTRL_STOP));
    rd(REG_CTRL, d);      check(d[0] == 1'b0, "idle after stop");
    std_event(t, 7'b0001001);
    run_event(t, 1'b0, "after stop");
    for (int ch = 0; ch < int'(N_IN); ch++) if (t[ch] >= 0) hits[ch]--;
    m_run_gate++;
    check_counters("after stop");

    // Clear the counters
    wr(REG_CTRL, 32'(1 << CTRL_CLEAR));
    for (int ch = 0; ch < int'(N_IN); ch++) hits[ch] = 0;
    exp_l1a = 0;
    check_counters("after clear");
    m_clear++;

    $display("mechanisms: fired %0d run_gate %0d missing %0d spread %0d in_veto %0d rate_veto %0d reconfig %0d clear %0d",
             m_fire, m_run_gate, m_missing, m_spread, m_in_veto, m_rate_veto, m_reconfig, m_clear);
    // The trigger is latched by the 320 MHz clock: its delay from the
    // scintillator edge varies by less than one period (3.125 ns jitter).
    $display("L1A delay after scintillator: %0.3f .. %0.3f ns", dt_min, dt_max);
    check(dt_max - dt_min < 3.125 && dt_max - dt_min > 2.0,
          $sformatf("L1A jitter %0.3f ns, expected just under one clock period", dt_max - dt_min));
    check(m_fire > 0, "L1A fired");
    check(m_run_gate > 0, "run gating exercised");
    check(m_missing > 0, "missing plane exercised");
    check(m_spread > 0, "coincidence window exceeded");
    check(m_in_veto > 0, "input veto exercised");
    check(m_rate_veto > 0, "max-rate veto exercised");
    check(m_reconfig > 0, "reconfiguration exercised");
    check(m_clear > 0, "counter clear exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
