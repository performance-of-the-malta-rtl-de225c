// pulse_shaper_tb: random edge pulses and settings against a cycle model.
// The model keeps the cycle at which the stretched output and the busy time
// of the last accepted edge end: out_o is high for width cycles after the
// accepted edge, and edges are ignored for max(width, veto) cycles.
`timescale 1ns/1ps
module pulse_shaper_tb;
  localparam int unsigned TW = 8;
  logic clk = 1'b0, rst_n = 1'b1, trig_i = 1'b0;
  logic [TW-1:0] width_i = '0, veto_i = '0;
  logic out_o, accept_o, ignore_o;
  int checks = 0, failures = 0;
  int n_accept = 0, n_ignore = 0;

  always #1.5625 clk = ~clk;

  pulse_shaper #(.TIME_W(TW)) dut (.clk, .rst_n, .trig_i, .width_i, .veto_i,
                                   .out_o, .accept_o, .ignore_o);

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    longint c = 0, out_end = -1, busy_end = -1;
    bit exp_acc, exp_out, exp_busy;
    #0.2 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      c++;
      if (i % 500 == 0) begin
        width_i = TW'($urandom_range(0, 12));
        veto_i  = TW'($urandom_range(0, 20));
      end
      trig_i = ($urandom_range(0, 5) == 0);
      #0.5;
      exp_out  = (c <= out_end);
      exp_busy = (c <= busy_end);
      exp_acc  = trig_i && !exp_busy;
      check(out_o == exp_out, $sformatf("cycle %0d out %0b exp %0b", c, out_o, exp_out));
      check(accept_o == exp_acc, $sformatf("cycle %0d accept %0b exp %0b", c, accept_o, exp_acc));
      check(ignore_o == (trig_i && exp_busy), $sformatf("cycle %0d ignore", c));
      if (exp_acc) begin
        n_accept++;
        out_end  = c + longint'(width_i);
        busy_end = c + longint'((width_i > veto_i) ? width_i : veto_i);
      end
      if (trig_i && exp_busy) n_ignore++;
    end
    check(n_accept > 100 && n_ignore > 100, "both accepted and ignored edges occurred");
    $display("accepted %0d ignored %0d", n_accept, n_ignore);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
