// tlu_pkg: types and constants shared by the Trigger Logic Unit (TLU).
//
// The TLU runs from one 320 MHz clock, so every time setting (stretch width,
// veto window, output length, max-rate veto) is a count of 3.125 ns cycles.
// The seven inputs and ten SMA outputs follow the control panel of the
// running system; the register map and the IPbus bus records are this
// design's own choices (the bus records mirror the usual IPbus slave bus).
package tlu_pkg;

  localparam int unsigned N_IN   = 7;   // Scintillator, HGTD, Plane 1..5
  localparam int unsigned N_OUT  = 10;  // SMA 1..10 trigger outputs
  localparam int unsigned TIME_W = 16;  // width of every time setting, in cycles
  localparam int unsigned CNT_W  = 32;  // rate counters
  localparam int unsigned CLK_PERIOD_PS = 3125;  // 320 MHz

  // Input channel numbering.
  typedef enum logic [2:0] {
    CH_SCINT  = 3'd0,
    CH_HGTD   = 3'd1,
    CH_PLANE1 = 3'd2,
    CH_PLANE2 = 3'd3,
    CH_PLANE3 = 3'd4,
    CH_PLANE4 = 3'd5,
    CH_PLANE5 = 3'd6
  } channel_e;

  // Convert a time in ns to clock cycles, rounding up.
  function automatic logic [TIME_W-1:0] ns_to_cycles(int unsigned ns);
    return TIME_W'((ns * 1000 + CLK_PERIOD_PS - 1) / CLK_PERIOD_PS);
  endfunction

  // Settings of one pulse shaper (stretch width and ignore window).
  typedef struct packed {
    logic [TIME_W-1:0] width;
    logic [TIME_W-1:0] veto;
  } shaper_cfg_t;

  // Reset defaults (the settings shown on the run-control panel).
  localparam int unsigned DEF_SCINT_WIDTH_NS = 30;
  localparam int unsigned DEF_SCINT_VETO_NS  = 44;
  localparam int unsigned DEF_PLANE_WIDTH_NS = 40;
  localparam int unsigned DEF_PLANE_VETO_NS  = 44;
  localparam int unsigned DEF_OUT_LEN_NS     = 120;
  localparam int unsigned DEF_OUT_VETO_NS    = 50000;
  // Trigger on Scintillator, Plane 1, Plane 3 and Plane 4.
  localparam logic [31:0] DEF_TRIG_MASK  = 32'b0110101;
  localparam logic [31:0] DEF_OUT_MASK   = 32'hFFFF_FFFF;

  // IPbus slave bus records.
  typedef struct packed {
    logic [31:0] ipb_addr;
    logic [31:0] ipb_wdata;
    logic        ipb_strobe;
    logic        ipb_write;
  } ipb_wbus_t;

  typedef struct packed {
    logic [31:0] ipb_rdata;
    logic        ipb_ack;
    logic        ipb_err;
  } ipb_rbus_t;

  // Register map (32-bit word addresses).
  localparam logic [7:0] REG_CTRL      = 8'h00; // W: b0 start, b1 stop, b2 clear counters; R: b0 running
  localparam logic [7:0] REG_TRIG_MASK = 8'h01; // RW
  localparam logic [7:0] REG_OUT_MASK  = 8'h02; // RW
  localparam logic [7:0] REG_OUT_WIDTH = 8'h03; // RW output length, cycles
  localparam logic [7:0] REG_OUT_VETO  = 8'h04; // RW max-rate veto, cycles
  localparam logic [7:0] REG_VERSION   = 8'h05; // R
  localparam logic [7:0] REG_RUN_TIME  = 8'h06; // R seconds
  localparam logic [7:0] REG_L1A_COUNT = 8'h07; // R
  localparam logic [7:0] REG_IN_WIDTH  = 8'h10; // RW, + channel
  localparam logic [7:0] REG_IN_VETO   = 8'h20; // RW, + channel
  localparam logic [7:0] REG_IN_COUNT  = 8'h30; // R,  + channel

  localparam int unsigned CTRL_START = 0;
  localparam int unsigned CTRL_STOP  = 1;
  localparam int unsigned CTRL_CLEAR = 2;

endpackage
