// ipbus_regs: the TLU's control and status registers on an IPbus slave bus.
//
// The control PC reaches the TLU over Gigabit Ethernet with the IPbus
// protocol; the IPbus core (outside this design) turns packets into single
// word transactions on ipb_w_i / ipb_r_o. This block answers them: a
// transaction with ipb_strobe high is acknowledged (ipb_ack, or ipb_err for an
// unmapped address or a write to a read-only one) on the next cycle, with read
// data in ipb_rdata. The master keeps the strobe high until the ack.
//
// Registers (word address, see tlu_pkg): CTRL (write b0 start run, b1 stop
// run, b2 clear counters; read b0 running), TRIG_MASK, OUT_MASK, OUT_WIDTH,
// OUT_VETO, VERSION, RUN_TIME, L1A_COUNT, and per channel IN_WIDTH, IN_VETO,
// IN_COUNT. Time settings are in 3.125 ns cycles. Reset values are the
// settings shown on the run-control panel. The set of settings (trigger
// selection, widths, vetoes, output length, max rate, outputs, run start and
// stop, counters) follows the published description; the address map, the single clock domain
// shared with the datapath and the one-cycle ack are this design's choices.
module ipbus_regs
  import tlu_pkg::*;
#(
  parameter int unsigned N_IN_P     = N_IN,
  parameter int unsigned N_OUT_P    = N_OUT,
  parameter logic [31:0] FW_VERSION = 32'd2
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  ipb_wbus_t             ipb_w_i,
  output ipb_rbus_t             ipb_r_o,
  // configuration
  output logic [N_IN_P-1:0]     trig_mask_o,
  output logic [N_OUT_P-1:0]    out_mask_o,
  output logic [TIME_W-1:0]     out_width_o,
  output logic [TIME_W-1:0]     out_veto_o,
  output shaper_cfg_t           in_cfg_o [N_IN_P],
  // commands (one-cycle pulses)
  output logic                  start_o,
  output logic                  stop_o,
  output logic                  clear_o,
  // status
  input  logic                  running_i,
  input  logic [31:0]           run_time_i,
  input  logic [CNT_W-1:0]      l1a_count_i,
  input  logic [CNT_W-1:0]      in_count_i [N_IN_P]
);

  logic        req;      // a new transaction this cycle
  logic [7:0]  a;
  logic        hi_zero;
  logic [31:0] rdata;
  logic        valid, writable;

  assign req     = ipb_w_i.ipb_strobe && !ipb_r_o.ipb_ack && !ipb_r_o.ipb_err;
  assign a       = ipb_w_i.ipb_addr[7:0];
  assign hi_zero = (ipb_w_i.ipb_addr[31:8] == '0);

  // Address decode and read multiplexer.
  always_comb begin
    rdata    = '0;
    valid    = 1'b0;
    writable = 1'b0;
    if (hi_zero) begin
      unique case (a)
        REG_CTRL:      begin valid = 1'b1; writable = 1'b1; rdata = 32'(running_i); end
        REG_TRIG_MASK: begin valid = 1'b1; writable = 1'b1; rdata = 32'(trig_mask_o); end
        REG_OUT_MASK:  begin valid = 1'b1; writable = 1'b1; rdata = 32'(out_mask_o); end
        REG_OUT_WIDTH: begin valid = 1'b1; writable = 1'b1; rdata = 32'(out_width_o); end
        REG_OUT_VETO:  begin valid = 1'b1; writable = 1'b1; rdata = 32'(out_veto_o); end
        REG_VERSION:   begin valid = 1'b1; rdata = FW_VERSION; end
        REG_RUN_TIME:  begin valid = 1'b1; rdata = run_time_i; end
        REG_L1A_COUNT: begin valid = 1'b1; rdata = 32'(l1a_count_i); end
        default: begin
          for (int ch = 0; ch < int'(N_IN_P); ch++) begin
            if (a == REG_IN_WIDTH + 8'(ch)) begin valid = 1'b1; writable = 1'b1; rdata = 32'(in_cfg_o[ch].width); end
            if (a == REG_IN_VETO  + 8'(ch)) begin valid = 1'b1; writable = 1'b1; rdata = 32'(in_cfg_o[ch].veto);  end
            if (a == REG_IN_COUNT + 8'(ch)) begin valid = 1'b1; rdata = 32'(in_count_i[ch]); end
          end
        end
      endcase
    end
  end

  logic do_write;
  assign do_write = req && ipb_w_i.ipb_write && valid && writable;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trig_mask_o <= DEF_TRIG_MASK[N_IN_P-1:0];
      out_mask_o  <= DEF_OUT_MASK[N_OUT_P-1:0];
      out_width_o <= ns_to_cycles(DEF_OUT_LEN_NS);
      out_veto_o  <= ns_to_cycles(DEF_OUT_VETO_NS);
      for (int ch = 0; ch < int'(N_IN_P); ch++) begin
        in_cfg_o[ch].width <= (ch == int'(CH_SCINT)) ? ns_to_cycles(DEF_SCINT_WIDTH_NS)
                                                     : ns_to_cycles(DEF_PLANE_WIDTH_NS);
        in_cfg_o[ch].veto  <= (ch == int'(CH_SCINT)) ? ns_to_cycles(DEF_SCINT_VETO_NS)
                                                     : ns_to_cycles(DEF_PLANE_VETO_NS);
      end
      start_o <= 1'b0;
      stop_o  <= 1'b0;
      clear_o <= 1'b0;
      ipb_r_o <= '0;
    end else begin
      start_o <= 1'b0;
      stop_o  <= 1'b0;
      clear_o <= 1'b0;
      ipb_r_o.ipb_ack   <= req && valid && (writable || !ipb_w_i.ipb_write);
      ipb_r_o.ipb_err   <= req && !(valid && (writable || !ipb_w_i.ipb_write));
      ipb_r_o.ipb_rdata <= req ? rdata : '0;
      if (do_write) begin
        unique case (a)
          REG_CTRL: begin
            start_o <= ipb_w_i.ipb_wdata[CTRL_START];
            stop_o  <= ipb_w_i.ipb_wdata[CTRL_STOP];
            clear_o <= ipb_w_i.ipb_wdata[CTRL_CLEAR];
          end
          REG_TRIG_MASK: trig_mask_o <= ipb_w_i.ipb_wdata[N_IN_P-1:0];
          REG_OUT_MASK:  out_mask_o  <= ipb_w_i.ipb_wdata[N_OUT_P-1:0];
          REG_OUT_WIDTH: out_width_o <= ipb_w_i.ipb_wdata[TIME_W-1:0];
          REG_OUT_VETO:  out_veto_o  <= ipb_w_i.ipb_wdata[TIME_W-1:0];
          default: begin
            for (int ch = 0; ch < int'(N_IN_P); ch++) begin
              if (a == REG_IN_WIDTH + 8'(ch)) in_cfg_o[ch].width <= ipb_w_i.ipb_wdata[TIME_W-1:0];
              if (a == REG_IN_VETO  + 8'(ch)) in_cfg_o[ch].veto  <= ipb_w_i.ipb_wdata[TIME_W-1:0];
            end
          end
        endcase
      end
    end
  end

  // Bus rules: a reply answers a strobe, and never both ack and err.
  a_reply_has_strobe: assert property (@(posedge clk) disable iff (!rst_n)
    (ipb_r_o.ipb_ack || ipb_r_o.ipb_err) |-> $past(ipb_w_i.ipb_strobe));
  a_ack_xor_err: assert property (@(posedge clk) disable iff (!rst_n)
    !(ipb_r_o.ipb_ack && ipb_r_o.ipb_err));

endmodule
