// output_processor_tb: coincidence levels into the L1A stage, output length 6
// and max-rate veto 40 cycles, SMA mask 0b1010010011.
// Checks L1A length and latency, SMA fan-out through the mask, that a second
// coincidence inside the veto is dropped (vetoed_o) and a later one is not,
// that nothing fires outside a run, and the L1A counter with its clear.
`timescale 1ns/1ps
module output_processor_tb;
  localparam int unsigned NO = 10, LEN = 6, VETO = 40;
  localparam logic [NO-1:0] MASK = 10'b1010010011;
  logic clk = 1'b0, rst_n = 1'b1, coinc_i = 1'b0, run_i = 1'b0, cnt_clear_i = 1'b0;
  logic l1a_o, vetoed_o;
  logic [NO-1:0] sma_o;
  logic [31:0] l1a_count_o;
  int checks = 0, failures = 0;
  int cyc = 0, l1a_rises = 0, l1a_len = 0, run_len = 0, rise_cyc = 0, vetoes = 0;
  logic l1a_q = 1'b0;

  always #1.5625 clk = ~clk;

  output_processor #(.N_OUT(NO)) dut (.clk, .rst_n, .coinc_i, .run_i,
    .out_width_i(16'(LEN)), .out_veto_i(16'(VETO)), .out_mask_i(MASK), .cnt_clear_i,
    .l1a_o, .sma_o, .l1a_count_o, .vetoed_o);

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk) begin
    cyc++;
    if (rst_n && l1a_o && !l1a_q) begin l1a_rises++; rise_cyc = cyc; run_len = 0; end
    if (l1a_o) run_len++;
    if (!l1a_o && l1a_q) l1a_len = run_len;
    l1a_q <= l1a_o;
    if (vetoed_o) vetoes++;
    if (rst_n) begin
      checks++;
      if (sma_o != ({NO{l1a_q}} & MASK)) begin
        failures++; $display("FAIL: sma %b l1a(prev) %b", sma_o, l1a_q);
      end
    end
  end

  // Coincidence pulse of n cycles, applied on the falling edge. The L1A
  // latency checked below counts from the falling edge before the one that
  // raises coinc_i, hence 3 cycles for the 2-cycle path coinc_i -> l1a_o.
  task automatic coinc(int n);
    @(negedge clk) coinc_i = 1'b1;
    repeat (n) @(negedge clk);
    coinc_i = 1'b0;
  endtask

  initial begin
    int r0, t0;
    #0.2 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // outside a run nothing fires
    coinc(5); repeat (60) @(negedge clk);
    check(l1a_rises == 0 && l1a_count_o == 0, "no L1A outside a run");
    run_i = 1'b1;
    // first coincidence
    @(negedge clk); t0 = cyc;
    coinc(3);
    repeat (20) @(negedge clk);
    check(l1a_rises == 1, "one L1A");
    check(l1a_len == LEN, $sformatf("L1A length %0d exp %0d", l1a_len, LEN));
    check(rise_cyc - t0 == 3, $sformatf("L1A latency %0d", rise_cyc - t0));
    // second coincidence inside the veto (about 25 cycles after the first)
    r0 = l1a_rises;
    coinc(2); repeat (5) @(negedge clk);
    check(l1a_rises == r0 && vetoes == 1, "coincidence inside veto dropped");
    repeat (30) @(negedge clk);
    // long coincidence level gives only one L1A
    coinc(100);
    repeat (60) @(negedge clk);
    check(l1a_rises == r0 + 1, "long coincidence: one L1A");
    check(l1a_count_o == 2, $sformatf("L1A count %0d exp 2", l1a_count_o));
    @(negedge clk) cnt_clear_i = 1'b1;
    @(negedge clk) cnt_clear_i = 1'b0;
    check(l1a_count_o == 0, "L1A count cleared");
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
