// event_fifo: queue / buffer used inside one front-end module FPGA.
//
// What it does: holds words (requests, captured storage cells or event
// descriptors) between a producer and a consumer that run at different paces,
// so that the readout of the next event can proceed while the previous one is
// still being sent.
//
// How it works: a synchronous first-word-fall-through FIFO of DEPTH words of
// WIDTH bits held in one memory array. The write side has a plain write enable
// and reports the number of free words; the read side is a valid/ready stream
// whose out_data is the oldest word. A write to a full FIFO is ignored and
// flagged by overflow (every user checks free space first, so this does not
// happen in the design).
//
// Timing: a word written in cycle t is visible on the output in cycle t+1.
//
// From the camera description: the module FPGA buffers raw data for output.
// Depths and widths are this design's own choices; fee_fpga uses a 16-entry
// request queue, a 1024-cell (768 bits per cell) cell buffer and a 16-entry
// descriptor queue.
module event_fifo #(
  parameter int unsigned WIDTH = 17,
  parameter int unsigned DEPTH = 32768,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  output logic [AW:0]      free,
  output logic             overflow,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0]   count;
  logic do_wr, do_rd;

  assign do_wr     = wr_en && (count != (AW+1)'(DEPTH));
  assign do_rd     = out_valid && out_ready;
  assign out_valid = (count != 0);
  assign out_data  = mem[rp];
  assign free      = (AW+1)'(DEPTH) - count;

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp       <= '0;
      rp       <= '0;
      count    <= '0;
      overflow <= 1'b0;
    end else begin
      overflow <= wr_en && !do_wr;
      if (do_wr) wp <= wp + 1'b1;
      if (do_rd) rp <= rp + 1'b1;
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end

endmodule
