// targetc_model: behavioural model of the four sampling ASICs of one module,
// as seen by the module FPGA. Not synthesizable logic; testbench use only.
//
// The ASICs sample every channel at 1 GSa/s into a ring of 4096 cells; the
// write position follows camera time (cell = camera ns mod 4096) and restarts
// at cell 0 on a PPS edge, like the camera time counter. The model writes the
// eight cells of each 8 ns clock cycle at the end of that cycle and remembers,
// per cell, the absolute time of the sample; the stored value is
// chec_tb_pkg::sample_val(MOD_ID, channel, absolute time). A read (rd_en,
// rd_cell) returns all 64 channels of that cell one cycle later, reading the
// ring as it was before the current cycle's writes. Digitisation time, the
// 64-cell sampling array and the block structure of the real ASIC are not
// modelled.
module targetc_model
  import chec_tb_pkg::*;
#(
  parameter int unsigned MOD_ID = 0,
  parameter int unsigned NCH    = 64
) (
  input  logic                  clk,
  input  logic                  pps,
  input  longint unsigned       abs_ns,   // absolute time of this cycle
  input  logic                  rd_en,
  input  logic [11:0]           rd_cell,
  output logic [NCH*12-1:0]     rd_data
);
  longint unsigned tstamp [4096];
  logic [31:0] wr_ns = 0;
  logic pps_q = 0;

  initial for (int i = 0; i < 4096; i++) tstamp[i] = 0;

  always @(posedge clk) begin
    if (rd_en)
      for (int c = 0; c < int'(NCH); c++)
        rd_data[c*12 +: 12] <= sample_val(MOD_ID, c, tstamp[rd_cell]);
    for (int i = 0; i < 8; i++) tstamp[12'(wr_ns + 32'(i))] <= abs_ns + 64'(i);
    pps_q <= pps;
    wr_ns <= (pps && !pps_q) ? 32'd0 : wr_ns + 32'd8;
  end
endmodule
