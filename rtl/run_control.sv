// run_control: the TLU's data-taking state machine.
//
// Two states, IDLE and RUNNING. A start_i pulse in IDLE begins a run and
// clears the run timer; stop_i returns to IDLE (stop has priority if both
// arrive together). running_o gates the trigger output and the rate counters.
// While running, a prescaler of TICKS_PER_S cycles advances run_time_o, the
// run duration in whole seconds, which holds its value after the run stops.
// A start/stop FSM driven over the control bus follows the published description; its states
// and the seconds timer are this design's choices.
module run_control #(
  parameter int unsigned TICKS_PER_S = 320_000_000
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start_i,
  input  logic        stop_i,
  output logic        running_o,
  output logic [31:0] run_time_o
);

  typedef enum logic {IDLE = 1'b0, RUNNING = 1'b1} state_e;
  state_e state, state_n;

  localparam int unsigned PW = (TICKS_PER_S > 1) ? $clog2(TICKS_PER_S) : 1;
  logic [PW-1:0] presc;

  always_comb begin
    state_n = state;
    unique case (state)
      IDLE:    if (start_i && !stop_i) state_n = RUNNING;
      RUNNING: if (stop_i)             state_n = IDLE;
      default: state_n = IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= IDLE;
      presc      <= '0;
      run_time_o <= '0;
    end else begin
      state <= state_n;
      if (state == IDLE && state_n == RUNNING) begin
        presc      <= '0;
        run_time_o <= '0;
      end else if (state == RUNNING) begin
        if (presc == PW'(TICKS_PER_S - 1)) begin
          presc      <= '0;
          run_time_o <= run_time_o + 1'b1;
        end else begin
          presc <= presc + 1'b1;
        end
      end
    end
  end

  assign running_o = (state == RUNNING);

endmodule
