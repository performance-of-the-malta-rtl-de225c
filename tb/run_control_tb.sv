// run_control_tb: start/stop sequencing and the run timer with a 10-cycle
// "second". Checks that a run starts on start, ends on stop, that stop wins
// over a simultaneous start, and that the timer counts one unit per 10 cycles,
// restarts at zero on a new run and holds after stop.
`timescale 1ns/1ps
module run_control_tb;
  localparam int unsigned T = 10;
  logic clk = 1'b0, rst_n = 1'b1, start_i = 1'b0, stop_i = 1'b0;
  logic running_o;
  logic [31:0] run_time_o;
  int checks = 0, failures = 0;

  always #1.5625 clk = ~clk;

  run_control #(.TICKS_PER_S(T)) dut (.clk, .rst_n, .start_i, .stop_i, .running_o, .run_time_o);

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic pulse(bit s, bit p);
    @(negedge clk) begin start_i = s; stop_i = p; end
    @(negedge clk) begin start_i = 1'b0; stop_i = 1'b0; end
  endtask

  initial begin
    #0.2 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(!running_o && run_time_o == 0, "idle after reset");
    pulse(1, 0);
    check(running_o, "running after start");
    repeat (T * 7) @(negedge clk);
    check(run_time_o == 7, $sformatf("run time %0d exp 7", run_time_o));
    repeat (T * 3) @(negedge clk);
    check(run_time_o == 10, $sformatf("run time %0d exp 10", run_time_o));
    pulse(0, 1);
    check(!running_o, "idle after stop");
    repeat (50) @(negedge clk);
    check(run_time_o == 10, "run time holds after stop");
    pulse(1, 1);
    check(!running_o, "stop wins over simultaneous start");
    pulse(1, 0);
    check(running_o && run_time_o == 0, "new run restarts the timer");
    repeat (T * 2) @(negedge clk);
    check(run_time_o == 2, $sformatf("run time %0d exp 2", run_time_o));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
