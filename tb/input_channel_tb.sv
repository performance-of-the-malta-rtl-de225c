// input_channel_tb: one TLU input with width 10 and veto 20 cycles.
// Checks the stretched pulse length and its latency from the input edge,
// that a second hit inside the stretched pulse or the veto window makes no
// new pulse but is still counted, that hits far apart make two pulses, and
// the counter enable and clear.
`timescale 1ns/1ps
module input_channel_tb;
  localparam int unsigned W = 10, V = 20;
  logic clk = 1'b0, rst_n = 1'b1, async_in = 1'b0;
  logic cnt_en_i = 1'b1, cnt_clear_i = 1'b0;
  logic shaped_o;
  logic [31:0] count_o;
  int checks = 0, failures = 0;
  int cyc = 0, rises = 0, last_len = 0, run_len = 0, last_rise_cyc = 0;

  always #1.5625 clk = ~clk;

  input_channel dut (.clk, .rst_n, .async_in, .width_i(16'(W)), .veto_i(16'(V)),
                     .cnt_en_i, .cnt_clear_i, .shaped_o, .count_o);

  // Measure the stretched pulses.
  logic shaped_q = 1'b0;
  always @(posedge clk) begin
    cyc++;
    if (shaped_o && !shaped_q) begin rises++; last_rise_cyc = cyc; run_len = 0; end
    if (shaped_o) run_len++;
    if (!shaped_o && shaped_q) last_len = run_len;
    shaped_q <= shaped_o;
  end

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic hit();
    async_in = 1'b1; #1.7; async_in = 1'b0;
  endtask

  task automatic settle();
    repeat (40) @(posedge clk);
    #0.3;
  endtask

  initial begin
    int r0, c0, t0;
    #0.2 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    settle();
    // 1: one hit
    r0 = rises; c0 = int'(count_o); #0.9; t0 = cyc;
    hit();
    settle();
    check(rises == r0 + 1, "single hit: one pulse");
    check(last_len == W, $sformatf("single hit: pulse length %0d exp %0d", last_len, W));
    check(last_rise_cyc - t0 >= 3 && last_rise_cyc - t0 <= 5,
          $sformatf("single hit: latency %0d cycles", last_rise_cyc - t0));
    check(count_o == 32'(c0 + 1), "single hit counted");
    // 2: second hit inside the stretched pulse (15 ns later)
    r0 = rises; c0 = int'(count_o);
    hit(); #13.3; hit();
    settle();
    check(rises == r0 + 1 && last_len == W, "hit inside pulse ignored, no re-trigger");
    check(count_o == 32'(c0 + 2), "both hits counted");
    // 3: second hit after the pulse, inside the veto window (45 ns later)
    r0 = rises; c0 = int'(count_o);
    hit(); #43.3; hit();
    settle();
    check(rises == r0 + 1, "hit inside veto window ignored");
    check(count_o == 32'(c0 + 2), "vetoed hit counted");
    // 4: hits 100 ns apart make two pulses
    r0 = rises;
    hit(); #98.3; hit();
    settle();
    check(rises == r0 + 2 && last_len == W, "hits beyond veto: two pulses");
    // 5: counter disabled, then cleared
    cnt_en_i = 1'b0; c0 = int'(count_o);
    hit(); settle();
    check(count_o == 32'(c0), "counter holds when disabled");
    @(negedge clk) cnt_clear_i = 1'b1;
    @(negedge clk) cnt_clear_i = 1'b0;
    check(count_o == 0, "counter cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
