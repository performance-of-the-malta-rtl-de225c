// ipbus_regs_tb: IPbus transactions against the register bank.
// Checks the reset values (run-control panel settings converted to 3.125 ns
// cycles, computed here by hand), write/read-back of every writable register,
// the command pulses of CTRL, status read-back, the one-cycle ack, and
// ipb_err for an unmapped address and for a write to a read-only register.
`timescale 1ns/1ps
module ipbus_regs_tb;
  import tlu_pkg::*;
  logic clk = 1'b0, rst_n = 1'b1;
  ipb_wbus_t ipb_w = '0;
  ipb_rbus_t ipb_r;
  logic [N_IN-1:0]  trig_mask_o;
  logic [N_OUT-1:0] out_mask_o;
  logic [TIME_W-1:0] out_width_o, out_veto_o;
  shaper_cfg_t in_cfg_o [N_IN];
  logic start_o, stop_o, clear_o;
  logic running_i = 1'b0;
  logic [31:0] run_time_i = 32'd1234, l1a_count_i = 32'hCAFE0001;
  logic [31:0] in_count_i [N_IN];
  int checks = 0, failures = 0;
  int n_start = 0, n_stop = 0, n_clear = 0;

  always #1.5625 clk = ~clk;

  ipbus_regs dut (.clk, .rst_n, .ipb_w_i(ipb_w), .ipb_r_o(ipb_r),
    .trig_mask_o, .out_mask_o, .out_width_o, .out_veto_o, .in_cfg_o,
    .start_o, .stop_o, .clear_o, .running_i, .run_time_i, .l1a_count_i, .in_count_i);

  always @(posedge clk) begin
    if (start_o) n_start++;
    if (stop_o)  n_stop++;
    if (clear_o) n_clear++;
  end

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // One IPbus transaction; returns read data and error flag, checks the
  // reply comes exactly one cycle after the strobe.
  task automatic xfer(input bit wr, input logic [31:0] addr, input logic [31:0] wdata,
                      output logic [31:0] rdata, output bit err);
    int waited = 0;
    @(negedge clk);
    ipb_w = '{ipb_addr: addr, ipb_wdata: wdata, ipb_strobe: 1'b1, ipb_write: wr};
    @(negedge clk);
    while (!ipb_r.ipb_ack && !ipb_r.ipb_err && waited < 10) begin @(negedge clk); waited++; end
    checks++;
    if (waited != 0) begin failures++; $display("FAIL: reply after %0d extra cycles", waited); end
    rdata = ipb_r.ipb_rdata;
    err   = ipb_r.ipb_err;
    ipb_w.ipb_strobe = 1'b0;
    @(negedge clk);
  endtask

  task automatic rd(logic [31:0] addr, logic [31:0] exp, string what);
    logic [31:0] d; bit e;
    xfer(1'b0, addr, '0, d, e);
    check(!e && d == exp, $sformatf("read %s: %h exp %h err %0b", what, d, exp, e));
  endtask

  task automatic wr(logic [31:0] addr, logic [31:0] data, bit exp_err = 1'b0);
    logic [31:0] d; bit e;
    xfer(1'b1, addr, data, d, e);
    check(e == exp_err, $sformatf("write %h err %0b exp %0b", addr, e, exp_err));
  endtask

  initial begin
    logic [31:0] d; bit e;
    for (int ch = 0; ch < int'(N_IN); ch++) in_count_i[ch] = 32'h100 + 32'(ch);
    #0.2 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // reset values: 30 ns -> 10, 40 ns -> 13, 44 ns -> 15, 120 ns -> 39,
    // 50000 ns -> 16000 cycles (rounded up); trigger on Scint, Plane 1, 3, 4
    rd(32'h01, 32'b0110101, "trig mask");
    rd(32'h02, 32'h3FF, "out mask");
    rd(32'h03, 32'd39, "out width");
    rd(32'h04, 32'd16000, "out veto");
    rd(32'h05, 32'd2, "version");
    rd(32'h10, 32'd10, "scint width");
    rd(32'h20, 32'd15, "scint veto");
    for (int ch = 1; ch < int'(N_IN); ch++) begin
      rd(32'h10 + 32'(ch), 32'd13, "plane width");
      rd(32'h20 + 32'(ch), 32'd15, "plane veto");
      rd(32'h30 + 32'(ch), 32'h100 + 32'(ch), "input count");
    end
    rd(32'h06, 32'd1234, "run time");
    rd(32'h07, 32'hCAFE0001, "L1A count");
    rd(32'h00, 32'd0, "ctrl idle");
    running_i = 1'b1;
    rd(32'h00, 32'd1, "ctrl running");
    // writes and read-back
    wr(32'h01, 32'h55);   rd(32'h01, 32'h55, "trig mask");
    wr(32'h02, 32'h201);  rd(32'h02, 32'h201, "out mask");
    check(out_mask_o == 10'h201 && trig_mask_o == 7'h55, "config outputs follow registers");
    wr(32'h03, 32'd7);    rd(32'h03, 32'd7, "out width");
    wr(32'h04, 32'd6400); rd(32'h04, 32'd6400, "out veto");
    check(out_width_o == 7 && out_veto_o == 6400, "output settings");
    for (int ch = 0; ch < int'(N_IN); ch++) begin
      wr(32'h10 + 32'(ch), 32'(3 + ch));
      wr(32'h20 + 32'(ch), 32'(20 + ch));
    end
    for (int ch = 0; ch < int'(N_IN); ch++) begin
      check(in_cfg_o[ch].width == TIME_W'(3 + ch) && in_cfg_o[ch].veto == TIME_W'(20 + ch),
            $sformatf("channel %0d settings", ch));
    end
    // commands
    wr(32'h00, 32'b001);
    wr(32'h00, 32'b010);
    wr(32'h00, 32'b100);
    wr(32'h00, 32'b100);
    check(n_start == 1 && n_stop == 1 && n_clear == 2,
          $sformatf("command pulses %0d %0d %0d", n_start, n_stop, n_clear));
    // errors
    xfer(1'b0, 32'h0F, '0, d, e);  check(e, "unmapped read gives err");
    xfer(1'b0, 32'h100, '0, d, e); check(e, "address above map gives err");
    wr(32'h05, 32'd9, 1'b1);
    wr(32'h30, 32'd9, 1'b1);
    rd(32'h05, 32'd2, "version unchanged");
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
