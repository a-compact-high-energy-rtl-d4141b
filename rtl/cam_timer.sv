// cam_timer: camera time counter in nanoseconds.
//
// What it does: counts time in ns on the 125 MHz clock (adds CLK_NS = 8 every
// cycle) and counts seconds. A rising edge of the 1 PPS input clears the ns
// count and advances the seconds; a load pulse sets the ns count directly
// (used by the module FPGAs when a re-sync message arrives).
//
// Timing: the value on load_ns, or zero after a PPS edge, is the ns output of
// the cycle after the one in which load or the edge is seen. load has priority
// over PPS. pps_edge is a combinational one-cycle flag of the detected edge.
//
// From the camera description: a 1 PPS array-synchronous signal re-syncs the
// internal counters, and the backplane clock is 125 MHz. The counter widths
// and the load input are this design's own choices.
module cam_timer
  import chec_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        pps,       // 1 PPS, synchronous to clk
  input  logic        load,
  input  logic [31:0] load_ns,
  output logic [31:0] ns,
  output logic [31:0] sec,
  output logic        pps_edge
);

  logic pps_q;

  assign pps_edge = pps & ~pps_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pps_q <= 1'b0;
      ns    <= '0;
      sec   <= '0;
    end else begin
      pps_q <= pps;
      if (pps_edge) sec <= sec + 1'b1;
      if (load)          ns <= load_ns;
      else if (pps_edge) ns <= '0;
      else               ns <= ns + 32'(CLK_NS);
    end
  end

endmodule
