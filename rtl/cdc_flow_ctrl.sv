// cdc_flow_ctrl - start-up flow control of the CDC trigger network and
// data-clock alignment.
//
// The GRL is the last stage of the CDC trigger chain. Each upstream module
// (2D, 3D and NN trackers, track-segment finders) reports "ready" once its
// own links are stable and all its upstream modules are ready. When every
// upstream link is up and ready, the controller waits for the next
// revolution pulse and then raises the flow-control signal, which the
// upstream modules forward towards the front-end boards; those then restart
// their time stamps together on the following revolution. This sequence is
// the source's. Dropping back to WAIT_READY when any link or ready goes
// away, and flow control being a level, are this design's choices.
//
// The block also produces the 31.8 MHz data-clock enable: dclk_en is high
// on the first system cycle after a revolution pulse and every fourth cycle
// after that, so the four-cycle data frame is aligned to the revolution
// (which phase carries the enable is a choice). timestamp counts data
// clocks 0..TS_MAX since the last revolution pulse and wraps.
//
// Interface: rev is a one-cycle pulse. All outputs are registered except
// dclk_en, which decodes the registered phase counter.
module cdc_flow_ctrl #(
  parameter int N_UP   = grl_pkg::N_UP,
  parameter int TS_MAX = 319
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            rev,
  input  logic [N_UP-1:0] link_ok,
  input  logic [N_UP-1:0] ready_up,
  output logic            fc_out,
  output grl_pkg::fc_state_t state,
  output logic            all_ready,
  output logic            dclk_en,
  output logic [12:0]     timestamp
);

  logic [1:0] phase;

  assign all_ready = &(link_ok & ready_up);

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= grl_pkg::FC_WAIT_READY;
    end else begin
      unique case (state)
        grl_pkg::FC_WAIT_READY: if (all_ready) state <= grl_pkg::FC_WAIT_REV;
        grl_pkg::FC_WAIT_REV:   if (!all_ready) state <= grl_pkg::FC_WAIT_READY;
                       else if (rev) state <= grl_pkg::FC_RUN;
        grl_pkg::FC_RUN:        if (!all_ready) state <= grl_pkg::FC_WAIT_READY;
        default:       state <= grl_pkg::FC_WAIT_READY;
      endcase
    end
  end

  assign fc_out = (state == grl_pkg::FC_RUN);

  // data-clock phase and time stamp, restarted by the revolution pulse
  always_ff @(posedge clk) begin
    if (rst) begin
      phase     <= '0;
      timestamp <= '0;
    end else if (rev) begin
      phase     <= '0;
      timestamp <= '0;
    end else begin
      phase <= phase + 2'd1;
      if (phase == 2'd3)
        timestamp <= (timestamp == 13'(TS_MAX)) ? '0 : timestamp + 13'd1;
    end
  end

  assign dclk_en = (phase == 2'd0);

endmodule
