// input_capture_tb: drives short asynchronous pulses (0.4 to 3 ns, shorter
// than the 3.125 ns clock period) at random phases into input_capture and
// checks that each produces exactly one one-cycle edge_o pulse, 2 to 4 clock
// edges after the input edge.
`timescale 1ns/1ps
module input_capture_tb;
  logic clk = 1'b0, rst_n = 1'b1, async_in = 1'b0;
  logic edge_o;
  int checks = 0, failures = 0;
  int edges_seen = 0;
  int cyc = 0;

  always #1.5625 clk = ~clk;
  always @(posedge clk) cyc++;

  input_capture dut (.clk, .rst_n, .async_in, .edge_o);

  always @(posedge clk) if (rst_n && edge_o) edges_seen++;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    int n0, c0;
    real w, g;
    #0.2 rst_n = 1'b0;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    repeat (4) @(posedge clk);
    check(edges_seen == 0, "no edge after reset");
    for (int i = 0; i < 200; i++) begin
      g = real'($urandom_range(0, 3124)) / 1000.0;
      #(g);
      n0 = edges_seen;
      c0 = cyc;
      w = real'($urandom_range(400, 3000)) / 1000.0;
      async_in = 1'b1; #(w); async_in = 1'b0;
      // wait for the pulse to be reported
      while (edges_seen == n0 && cyc - c0 < 8) @(posedge clk);
      check(edges_seen == n0 + 1, $sformatf("pulse %0d seen once", i));
      check(cyc - c0 >= 2 && cyc - c0 <= 4, $sformatf("pulse %0d latency %0d", i, cyc - c0));
      repeat (6) @(posedge clk);
      check(edges_seen == n0 + 1, $sformatf("pulse %0d not repeated", i));
    end
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
