// tlu_top: Trigger Logic Unit firmware of the MALTA beam telescope.
//
// Up to N_IN asynchronous fast signals (scintillator, sensor planes, another
// detector) enter one input_channel each, where they are captured into the
// 320 MHz clock, stretched to a per-channel width with a per-channel veto
// window, and counted. coincidence_logic ANDs the channels selected in the
// trigger mask; output_processor turns each new coincidence during a run
// into a Level-1 Accept (L1A) of programmable length, drops coincidences that
// come faster than the max-rate veto allows, and drives it onto the enabled
// SMA outputs towards the plane readout boards. run_control holds the run
// state and run time; ipbus_regs exposes all settings and counters on the
// IPbus slave bus.
//
// Outside this module: the clock generator (clk must be 320 MHz for the time
// settings to mean 3.125 ns per count) and the Ethernet/IPbus core, whose
// slave bus is the ipb_w / ipb_r ports.
//
// The chain input processing -> AND of selected channels -> output processing,
// the 320 MHz clock and IPbus control follow the published description; the
// scintillator is treated as an ordinary selectable input of the single AND
// (the published block diagram draws it in a second AND after the output
// stage, the text and control panel treat it as one of the inputs).
//
// Latency from an input edge to sma_out, all selected inputs already high:
// capture 2-3 cycles, shaper 1, AND register 1, output shaper 1, SMA
// register 1, i.e. 6-7 cycles (19-22 ns).
module tlu_top
  import tlu_pkg::*;
#(
  parameter int unsigned N_IN_P      = N_IN,
  parameter int unsigned N_OUT_P     = N_OUT,
  parameter int unsigned TICKS_PER_S = 320_000_000
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N_IN_P-1:0]   fast_in,
  input  ipb_wbus_t           ipb_w,
  output ipb_rbus_t           ipb_r,
  output logic [N_OUT_P-1:0]  sma_out,
  output logic                l1a,
  output logic                trig_vetoed   // pulse: a coincidence dropped by the max-rate veto
);

  logic [N_IN_P-1:0]  trig_mask, shaped;
  logic [N_OUT_P-1:0] out_mask;
  logic [TIME_W-1:0]  out_width, out_veto;
  shaper_cfg_t        in_cfg [N_IN_P];
  logic [CNT_W-1:0]   in_count [N_IN_P];
  logic [CNT_W-1:0]   l1a_count;
  logic               start, stop, clear, running, coinc;
  logic [31:0]        run_time;

  for (genvar ch = 0; ch < int'(N_IN_P); ch++) begin : g_in
    input_channel u_ch (
      .clk, .rst_n,
      .async_in    (fast_in[ch]),
      .width_i     (in_cfg[ch].width),
      .veto_i      (in_cfg[ch].veto),
      .cnt_en_i    (running),
      .cnt_clear_i (clear),
      .shaped_o    (shaped[ch]),
      .count_o     (in_count[ch])
    );
  end

  coincidence_logic #(.N_IN(N_IN_P)) u_coinc (
    .clk, .rst_n, .shaped_i(shaped), .mask_i(trig_mask), .coinc_o(coinc)
  );

  output_processor #(.N_OUT(N_OUT_P), .TIME_W(TIME_W), .CNT_W(CNT_W)) u_out (
    .clk, .rst_n, .coinc_i(coinc), .run_i(running),
    .out_width_i(out_width), .out_veto_i(out_veto), .out_mask_i(out_mask),
    .cnt_clear_i(clear), .l1a_o(l1a), .sma_o(sma_out),
    .l1a_count_o(l1a_count), .vetoed_o(trig_vetoed)
  );

  run_control #(.TICKS_PER_S(TICKS_PER_S)) u_run (
    .clk, .rst_n, .start_i(start), .stop_i(stop),
    .running_o(running), .run_time_o(run_time)
  );

  ipbus_regs #(.N_IN_P(N_IN_P), .N_OUT_P(N_OUT_P)) u_regs (
    .clk, .rst_n, .ipb_w_i(ipb_w), .ipb_r_o(ipb_r),
    .trig_mask_o(trig_mask), .out_mask_o(out_mask),
    .out_width_o(out_width), .out_veto_o(out_veto), .in_cfg_o(in_cfg),
    .start_o(start), .stop_o(stop), .clear_o(clear),
    .running_i(running), .run_time_i(run_time),
    .l1a_count_i(l1a_count), .in_count_i(in_count)
  );

endmodule
