// pulse_shaper: stretches a trigger edge to a programmable width and ignores
// edges that come too close.
//
// An edge pulse on trig_i is accepted when the shaper is idle: out_o then goes
// high on the next cycle and stays high for width_i cycles, and a veto window
// of veto_i cycles starts at the same time. While either the stretched output
// or the veto window is active the shaper is busy and further edges are
// ignored (ignore_o pulses). So after an accepted edge the next one is taken
// no earlier than max(width_i, veto_i) cycles later.
//
// Used twice in the TLU: on every input channel, where the width is the
// coincidence window, and on the trigger output, where the width is the L1A
// length and the veto sets the maximum trigger rate. Stretching, the veto
// window and ignoring hits during the stretched signal follow the published description;
// counting the veto from the accepted edge, the one-cycle latency and
// "width 0 = no output" are this design's choices.
module pulse_shaper #(
  parameter int unsigned TIME_W = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              trig_i,
  input  logic [TIME_W-1:0] width_i,
  input  logic [TIME_W-1:0] veto_i,
  output logic              out_o,
  output logic              accept_o,
  output logic              ignore_o
);

  logic [TIME_W-1:0] width_cnt, veto_cnt;
  logic busy;

  assign busy     = (width_cnt != '0) || (veto_cnt != '0);
  assign accept_o = trig_i && !busy;
  assign ignore_o = trig_i && busy;
  assign out_o    = (width_cnt != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      width_cnt <= '0;
      veto_cnt  <= '0;
    end else if (accept_o) begin
      width_cnt <= width_i;
      veto_cnt  <= veto_i;
    end else begin
      if (width_cnt != '0) width_cnt <= width_cnt - 1'b1;
      if (veto_cnt  != '0) veto_cnt  <= veto_cnt  - 1'b1;
    end
  end

endmodule
