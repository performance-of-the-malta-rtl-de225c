// coincidence_logic: the TLU's AND of the selected input channels.
//
// coinc_o is high while every channel selected in mask_i has its stretched
// level high; unselected channels do not take part. Because each input was
// stretched to its channel width, the width acts as the coincidence window:
// hits that arrive within it overlap and fire the AND. The AND of the
// selected channels follows the published description. An empty mask never fires and the
// output is registered once for 320 MHz timing: both are this design's
// choices, the register adds one cycle of latency.
module coincidence_logic #(
  parameter int unsigned N_IN = 7
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [N_IN-1:0] shaped_i,
  input  logic [N_IN-1:0] mask_i,
  output logic            coinc_o
);

  logic coinc_d;
  assign coinc_d = (mask_i != '0) && (&(shaped_i | ~mask_i));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) coinc_o <= 1'b0;
    else        coinc_o <= coinc_d;
  end

endmodule
