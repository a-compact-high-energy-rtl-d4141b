// fee_packer: event packet builder of one front-end module FPGA.
//
// What it does: turns the event descriptors and captured storage cells left by
// the capture controller (fee_readout) into event packets, a stream of 16-bit
// words towards the module's UDP/Ethernet interface.
//
// How it works: when a descriptor is at the head of the descriptor queue the
// packer sends six header words, then, unless the event is stale, the window
// cell by cell: for each cell (oldest first) the 64 channel samples
// (asic*16 + ch), each {4'h0, adc[11:0]}. It pops a cell from the cell buffer
// after its 64th word and the descriptor after the last word. The output is a
// valid/ready stream; eth_tlast marks the last word of a packet.
//   word 0  {4'hC, 3'b000, stale, module_id}
//   word 1  event number
//   word 2  trigger time [31:16]      word 3  trigger time [15:0]
//   word 4  start cell                word 5  window length W in cells
//   word 6 + k*64 + c  sample of channel c in cell k
//
// Timing: one word per cycle while out_ready is high; the first header word is
// offered in the cycle after the descriptor appears. A nominal 96-cell event is
// 6 + 96*64 = 6150 words.
//
// From the camera description: the module FPGA packages the raw data for
// output. The packet layout is this design's own.
module fee_packer
  import chec_pkg::*;
#(
  parameter int unsigned NCH = ASICS_PER_MODULE * CH_PER_ASIC
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [7:0]              module_id,
  // descriptor queue head
  input  logic                    hdr_valid,
  input  evhdr_t                  hdr,
  output logic                    hdr_pop,
  // cell buffer head
  input  logic                    cell_valid,
  input  logic [NCH*ADC_BITS-1:0] cell_data,
  output logic                    cell_pop,
  // packet stream
  output logic [15:0]             out_data,
  output logic                    out_last,
  output logic                    out_valid,
  input  logic                    out_ready
);

  localparam int unsigned CHB = $clog2(NCH);

  typedef enum logic [1:0] {S_IDLE, S_HDR, S_DATA} state_e;
  state_e state;

  logic [2:0]     hidx;
  logic [CHB-1:0] ch;
  logic [15:0]    k;
  logic           fire, hdr_end, data_end;

  always_comb begin
    out_data = '0;
    unique case (state)
      S_HDR: unique case (hidx)
        3'd0:    out_data = {HDR_MAGIC, 3'b000, hdr.stale, module_id};
        3'd1:    out_data = hdr.event_id;
        3'd2:    out_data = hdr.trig_ns[31:16];
        3'd3:    out_data = hdr.trig_ns[15:0];
        3'd4:    out_data = 16'(hdr.start_cell);
        default: out_data = hdr.win;
      endcase
      S_DATA:  out_data = {4'h0, cell_data[ch*ADC_BITS +: ADC_BITS]};
      default: out_data = '0;
    endcase
  end

  assign out_valid = (state == S_HDR) || (state == S_DATA && cell_valid);
  assign fire      = out_valid && out_ready;
  assign hdr_end   = (state == S_HDR) && (hidx == 3'(HDR_WORDS - 1));
  assign data_end  = (state == S_DATA) && (32'(ch) == NCH - 1) && (k == hdr.win - 1'b1);
  assign out_last  = (hdr_end && hdr.stale) || data_end;
  assign cell_pop  = fire && (state == S_DATA) && (32'(ch) == NCH - 1);
  assign hdr_pop   = fire && out_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      hidx  <= '0;
      ch    <= '0;
      k     <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (hdr_valid) begin
          hidx  <= '0;
          state <= S_HDR;
        end
        S_HDR: if (fire) begin
          hidx <= hidx + 1'b1;
          if (hdr_end) begin
            ch    <= '0;
            k     <= '0;
            state <= hdr.stale ? S_IDLE : S_DATA;
          end
        end
        S_DATA: if (fire) begin
          ch <= ch + 1'b1;
          if (32'(ch) == NCH - 1) begin
            k <= k + 1'b1;
            if (data_end) state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
