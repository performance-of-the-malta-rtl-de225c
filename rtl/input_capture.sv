// input_capture: brings one asynchronous fast signal into the 320 MHz TLU clock.
//
// The fast signals of the sensor planes last only a few ns, less than one
// 3.125 ns clock period, so sampling them with the clock could miss them.
// Instead the input itself clocks a toggle flip-flop: every rising edge of
// async_in flips `toggle`, however short the pulse. The toggle level is then
// passed through SYNC_STAGES flip-flops of the TLU clock and an XOR of the last
// two stages gives a one-cycle pulse, edge_o, per input edge.
//
// Timing: edge_o rises SYNC_STAGES to SYNC_STAGES+1 cycles after the input
// edge (the uncertainty is the 3.125 ns latching jitter). Two input edges
// closer than about two clock periods can merge or cancel.
// That the inputs are captured into the internal clock follows the published description; the
// toggle-and-synchronise circuit is this design's choice. The toggle flop is
// clocked by the input, so `toggle` crossing into clk is an intended
// clock-domain crossing handled by the synchronizer.
module input_capture #(
  parameter int unsigned SYNC_STAGES = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic async_in,
  output logic edge_o
);

  logic toggle;
  logic [SYNC_STAGES:0] sync;   // one extra stage to detect the change

  always_ff @(posedge async_in or negedge rst_n) begin
    if (!rst_n) toggle <= 1'b0;
    else        toggle <= ~toggle;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sync <= '0;
    else        sync <= {sync[SYNC_STAGES-1:0], toggle};
  end

  assign edge_o = sync[SYNC_STAGES] ^ sync[SYNC_STAGES-1];

endmodule
