// output_processor: forms the L1A trigger from the coincidence level.
//
// A rising edge of coinc_i during a run is offered to a pulse_shaper whose
// width is the L1A output length and whose veto window enforces the maximum
// trigger rate (a coincidence inside the window is dropped and vetoed_o
// pulses). The resulting L1A level is driven onto every SMA output enabled in
// out_mask_i and each L1A is counted.
//
// Timing: l1a_o rises one cycle after the first cycle of coinc_i and
// stays high out_width_i cycles; sma_o follows one cycle later (registered
// outputs). Output length and rate-limiting veto follow the published description; the run
// gating, the output register, the vetoed pulse and the SMA enable mask
// (one bit per SMA output of the control panel) are this design's choices.
module output_processor #(
  parameter int unsigned N_OUT  = 10,
  parameter int unsigned TIME_W = 16,
  parameter int unsigned CNT_W  = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              coinc_i,
  input  logic              run_i,
  input  logic [TIME_W-1:0] out_width_i,
  input  logic [TIME_W-1:0] out_veto_i,
  input  logic [N_OUT-1:0]  out_mask_i,
  input  logic              cnt_clear_i,
  output logic              l1a_o,
  output logic [N_OUT-1:0]  sma_o,
  output logic [CNT_W-1:0]  l1a_count_o,
  output logic              vetoed_o
);

  logic coinc_q, coinc_rise, accept;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) coinc_q <= 1'b0;
    else        coinc_q <= coinc_i;
  end
  assign coinc_rise = coinc_i && !coinc_q && run_i;

  pulse_shaper #(.TIME_W(TIME_W)) u_shaper (
    .clk, .rst_n, .trig_i(coinc_rise), .width_i(out_width_i), .veto_i(out_veto_i),
    .out_o(l1a_o), .accept_o(accept), .ignore_o(vetoed_o)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sma_o <= '0;
    else        sma_o <= {N_OUT{l1a_o}} & out_mask_i;
  end

  rate_counter #(.CNT_W(CNT_W)) u_l1a_count (
    .clk, .rst_n, .clear_i(cnt_clear_i), .en_i(1'b1), .inc_i(accept),
    .count_o(l1a_count_o)
  );

endmodule
