// rate_counter: event counter used to monitor the rate of a TLU channel.
//
// count_o increments by one on every cycle with inc_i and en_i high, wraps at
// 2**CNT_W, and returns to zero on clear_i (clear wins over increment). The
// control software reads it over IPbus and derives rates from differences.
// The 32-bit width follows the published description; wrapping and the enable are this
// design's choices.
module rate_counter #(
  parameter int unsigned CNT_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear_i,
  input  logic             en_i,
  input  logic             inc_i,
  output logic [CNT_W-1:0] count_o
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              count_o <= '0;
    else if (clear_i)        count_o <= '0;
    else if (en_i && inc_i)  count_o <= count_o + 1'b1;
  end

endmodule
