// coincidence_logic_tb: every combination of 7 input levels and 7 mask bits,
// checked one cycle later against "all selected inputs high, mask not empty".
`timescale 1ns/1ps
module coincidence_logic_tb;
  localparam int unsigned N = 7;
  logic clk = 1'b0, rst_n = 1'b1;
  logic [N-1:0] shaped_i = '0, mask_i = '0;
  logic coinc_o;
  int checks = 0, failures = 0, fired = 0;

  always #1.5625 clk = ~clk;

  coincidence_logic #(.N_IN(N)) dut (.clk, .rst_n, .shaped_i, .mask_i, .coinc_o);

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    bit exp;
    #0.2 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int m = 0; m < (1 << N); m++) begin
      for (int s = 0; s < (1 << N); s++) begin
        @(negedge clk);
        mask_i = N'(m); shaped_i = N'(s);
        exp = 1'b0;
        if (m != 0) begin
          exp = 1'b1;
          for (int b = 0; b < int'(N); b++) if (m[b] && !s[b]) exp = 1'b0;
        end
        @(negedge clk);
        check(coinc_o == exp, $sformatf("mask %b shaped %b out %b", mask_i, shaped_i, coinc_o));
        if (exp) fired++;
      end
    end
    // pairs with a non-empty mask that the inputs cover: 3**7 - 2**7
    check(fired == 2059, $sformatf("coincidences %0d exp 2059", fired));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
