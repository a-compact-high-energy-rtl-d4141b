// trigger_fpga: logic of the backplane trigger FPGA.
//
// What it does: forms the camera trigger from the 512 first-level trigger
// lines (camera_trigger), time-stamps it with the camera time (cam_timer,
// cleared by the 1 PPS), numbers the event, and sends a readout request to
// all modules over the serial readout line (readout_msg_tx). On every PPS edge
// it also sends a re-sync message carrying the camera time, which the modules
// use to align their own counters. Each camera trigger is also given out to
// the timing board (cam_trig_out) and its pattern to the data-acquisition
// board (trig_pattern / pattern_valid).
//
// How it works: a camera trigger is latched, with its time and event number,
// into a one-entry readout queue; while that entry is waiting for the serial
// transmitter, new triggers are vetoed (dead time, counted by veto pulses on
// trig_vetoed). A PPS edge sets a re-sync request. The transmitter serves the
// readout entry first and the re-sync next; a re-sync carries the camera time
// of the cycle in which the transmitter accepts it.
//
// Timing: trigger line in cycle t -> cam_trig_out in t+2; the readout message
// is accepted in t+2 at the earliest and reaches the modules 52 cycles later.
// The recorded trigger time is the camera time of the cam_trig_out cycle; the
// modules' look-back setting absorbs the fixed offset to the light arrival.
//
// From the camera description: one trigger FPGA takes all 512 trigger lines,
// requires a coincidence of two neighbouring patches, accepts external
// triggers, outputs camera triggers and trigger patterns, re-syncs counters on
// the 1 PPS, and on a camera trigger sends a message to the modules to read
// their ASICs at the right memory position. Queueing, veto and message
// priority are this design's own choices.
module trigger_fpga
  import chec_pkg::*;
#(
  parameter int unsigned MOD_ROWS   = 6,
  parameter int unsigned MOD_COLS   = 6,
  parameter int unsigned PATCH_ROWS = 4,
  parameter int unsigned PATCH_COLS = 4,
  localparam int unsigned N_LINES = (MOD_ROWS * MOD_COLS - 4) * PATCH_ROWS * PATCH_COLS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               pps,
  input  logic [N_LINES-1:0] trig_in,
  input  logic               ext_trig,
  input  logic               ext_en,
  input  logic [3:0]         coinc_cycles,
  output logic               cam_trig_out,
  output logic               cam_trig_ext,
  output logic [N_LINES-1:0] trig_pattern,
  output logic               pattern_valid,
  output logic               trig_vetoed,
  output logic [15:0]        event_count,
  output logic [31:0]        cam_ns,
  output logic [31:0]        cam_sec,
  output logic               ser_out
);

  logic pps_edge;
  logic ro_pend, rs_pend;
  msg_t ro_msg, tx_msg;
  logic tx_send, tx_ready;
  logic cam_trig;
  logic trig_busy;

  cam_timer u_timer (
    .clk, .rst_n, .pps, .load(1'b0), .load_ns(32'd0),
    .ns(cam_ns), .sec(cam_sec), .pps_edge
  );

  camera_trigger #(
    .MOD_ROWS(MOD_ROWS), .MOD_COLS(MOD_COLS),
    .PATCH_ROWS(PATCH_ROWS), .PATCH_COLS(PATCH_COLS), .WIN_BITS(4)
  ) u_trig (
    .clk, .rst_n, .trig_in, .ext_trig, .ext_en, .coinc_cycles,
    .busy(trig_busy), .vetoed(trig_vetoed),
    .cam_trig, .cam_trig_ext, .trig_pattern, .pattern_valid
  );

  assign cam_trig_out = cam_trig;

  // New triggers are refused while a readout message is queued, and in the
  // cycle the queue is being filled.
  assign trig_busy = ro_pend | cam_trig;

  assign tx_send = ro_pend | rs_pend;
  assign tx_msg  = ro_pend ? ro_msg
                           : '{mtype: MSG_RESYNC, event_id: event_count, ns: cam_ns};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ro_pend     <= 1'b0;
      rs_pend     <= 1'b0;
      ro_msg      <= '0;
      event_count <= '0;
    end else begin
      if (cam_trig) begin
        ro_pend     <= 1'b1;
        ro_msg      <= '{mtype: MSG_READOUT, event_id: event_count, ns: cam_ns};
        event_count <= event_count + 1'b1;
      end else if (tx_ready && ro_pend) begin
        ro_pend <= 1'b0;
      end
      if (pps_edge) rs_pend <= 1'b1;
      else if (tx_ready && !ro_pend && rs_pend) rs_pend <= 1'b0;
    end
  end

  readout_msg_tx u_tx (
    .clk, .rst_n, .send(tx_send), .msg(tx_msg), .ready(tx_ready), .sdat(ser_out)
  );

endmodule
