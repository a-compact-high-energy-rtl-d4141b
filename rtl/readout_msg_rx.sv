// readout_msg_rx: serial receiver of the camera readout / re-sync line.
//
// What it does: recovers the messages sent by readout_msg_tx and presents each
// as a one-cycle msg_valid pulse with the decoded message.
//
// How it works: while idle it waits for a 1 on the line (the start bit), then
// shifts in the next MSG_PAYLOAD_BITS bits, one per cycle, MSB first. The
// transmitter and the receivers share the 125 MHz backplane clock, so no
// oversampling is done. msg_valid rises LINK_LAT_CYCLES (52) cycles after the
// transmitter accepted the message; a module uses that fixed latency to align
// its time counter on a re-sync.
//
// From the camera description: the modules receive readout and re-sync
// commands over a serial connection. Framing and latency are this design's own.
module readout_msg_rx
  import chec_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic sdat,
  output logic msg_valid,
  output msg_t msg
);

  logic [MSG_PAYLOAD_BITS-1:0] sh;
  logic [$clog2(MSG_PAYLOAD_BITS+1)-1:0] cnt;
  logic active;

  assign msg = msg_t'(sh);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sh        <= '0;
      cnt       <= '0;
      active    <= 1'b0;
      msg_valid <= 1'b0;
    end else begin
      msg_valid <= 1'b0;
      if (!active) begin
        if (sdat) begin
          active <= 1'b1;
          cnt    <= MSG_PAYLOAD_BITS[$bits(cnt)-1:0];
        end
      end else begin
        sh  <= {sh[MSG_PAYLOAD_BITS-2:0], sdat};
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin
          active    <= 1'b0;
          msg_valid <= 1'b1;
        end
      end
    end
  end

endmodule
