// rate_counter_tb: random increment, enable and clear against a model count,
// with an 8-bit counter so that wrap-around is exercised.
`timescale 1ns/1ps
module rate_counter_tb;
  localparam int unsigned W = 8;
  logic clk = 1'b0, rst_n = 1'b1, clear_i = 1'b0, en_i = 1'b0, inc_i = 1'b0;
  logic [W-1:0] count_o;
  int checks = 0, failures = 0, wraps = 0;

  always #1.5625 clk = ~clk;

  rate_counter #(.CNT_W(W)) dut (.clk, .rst_n, .clear_i, .en_i, .inc_i, .count_o);

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    int model = 0;
    #0.2 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      check(count_o == W'(model), $sformatf("count %0d exp %0d", count_o, model % 256));
      clear_i = ($urandom_range(0, 999) == 0);
      en_i    = ($urandom_range(0, 9) != 0);
      inc_i   = ($urandom_range(0, 1) == 1);
      if (clear_i) model = 0;
      else if (en_i && inc_i) begin
        model = (model + 1) % 256;
        if (model == 0) wraps++;
      end
    end
    check(wraps > 0, "counter wrapped at least once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
