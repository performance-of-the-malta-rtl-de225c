// input_channel: one TLU input (a sensor plane's fast signal, the scintillator
// or another detector).
//
// The asynchronous signal is captured into the TLU clock (input_capture), each
// edge is stretched to the channel's width and subject to its veto window
// (pulse_shaper), and every captured edge is counted (rate_counter) while
// cnt_en_i is high. The stretched level shaped_o goes to the coincidence
// logic; its width is the channel's coincidence window.
//
// Timing: shaped_o rises 3 to 4 cycles after the input edge. The structure
// (capture, stretch, veto, 32-bit counter) follows the published description; counting all
// captured edges rather than only accepted ones is this design's choice.
module input_channel
  import tlu_pkg::*;
#(
  parameter int unsigned TIME_W_P = TIME_W,
  parameter int unsigned CNT_W_P  = CNT_W
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               async_in,
  input  logic [TIME_W_P-1:0] width_i,
  input  logic [TIME_W_P-1:0] veto_i,
  input  logic               cnt_en_i,
  input  logic               cnt_clear_i,
  output logic               shaped_o,
  output logic [CNT_W_P-1:0] count_o
);

  logic edge_s;

  input_capture u_capture (
    .clk, .rst_n, .async_in, .edge_o(edge_s)
  );

  pulse_shaper #(.TIME_W(TIME_W_P)) u_shaper (
    .clk, .rst_n, .trig_i(edge_s), .width_i, .veto_i,
    .out_o(shaped_o), .accept_o(), .ignore_o()
  );

  rate_counter #(.CNT_W(CNT_W_P)) u_counter (
    .clk, .rst_n, .clear_i(cnt_clear_i), .en_i(cnt_en_i), .inc_i(edge_s),
    .count_o
  );

endmodule
