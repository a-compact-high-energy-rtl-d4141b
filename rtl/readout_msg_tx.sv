// readout_msg_tx: serial transmitter of the camera readout / re-sync line.
//
// What it does: sends one message (type, 16-bit event number, 32-bit time in
// ns) from the backplane trigger FPGA to the module FPGAs over a single wire.
//
// How it works: a frame is a start bit (1) followed by the 50 message bits,
// most significant first, one bit per clock cycle; the line is 0 when idle.
// A message is accepted when send and ready are both high in a cycle; the start
// bit is on sdat in the next cycle and the last bit MSG_FRAME_BITS cycles after
// acceptance. ready returns one cycle after the last bit, so frames are
// separated by at least one idle cycle.
//
// From the camera description: a serial connection carries readout and re-sync
// commands from the backplane to the modules. The frame format, bit rate (one
// bit per 8 ns clock) and idle level are this design's own choices.
module readout_msg_tx
  import chec_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic send,
  input  msg_t msg,
  output logic ready,
  output logic sdat
);

  logic [MSG_FRAME_BITS-1:0] sh;
  logic [$clog2(MSG_FRAME_BITS+1)-1:0] cnt;

  assign ready = (cnt == 0);
  assign sdat  = sh[MSG_FRAME_BITS-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sh  <= '0;
      cnt <= '0;
    end else if (ready) begin
      if (send) begin
        sh  <= {1'b1, msg};
        cnt <= MSG_FRAME_BITS[$bits(cnt)-1:0];
      end
    end else begin
      sh  <= {sh[MSG_FRAME_BITS-2:0], 1'b0};
      cnt <= cnt - 1'b1;
    end
  end

endmodule
