// fee_fpga: data path of the FPGA on one front-end (FEE) module.
//
// What it does: listens to the camera readout / re-sync serial line, keeps a
// local copy of the camera time, reads out the module's four sampling ASICs
// when a readout request arrives, and streams the resulting event packets out
// towards the module's Ethernet interface.
//
// How it works: readout_msg_rx decodes messages. A RESYNC message loads the
// local cam_timer with the time it carries plus the fixed link latency, so the
// local time equals the backplane time from then on (both run from the same
// distributed clock). A READOUT message goes into a REQ_DEPTH-entry request
// queue (an event_fifo); only if that queue is full is the request dropped
// (drop_event pulses). The capture controller fee_readout takes requests from
// the queue, copies each window out of the ASICs into the cell buffer (an
// event_fifo of CELL_DEPTH cells, 768 bits each) and writes an event
// descriptor into the descriptor queue. fee_packer builds the packets from
// descriptors and cells and feeds the output stream (16-bit words, eth_tlast on
// the last word of a packet). Capture therefore takes ~100 cycles per event
// while packing runs in parallel at one word per cycle, so trigger bursts are
// absorbed by the buffers instead of being lost.
//
// Timing: msg_valid comes LINK_LAT_CYCLES after the backplane sent the message;
// the request reaches the capture controller one cycle later; a nominal 96 ns
// event needs 99 capture cycles and 6 + 96*64 = 6150 output words.
//
// From the camera description: the module FPGA configures and reads the ASICs,
// packages and buffers the data and sends it out over a 1 Gbps link, and
// counters are re-synced from the array-wide 1 PPS. The Ethernet/UDP stack,
// the ASIC configuration and the slow-signal and bias-trim control are not part
// of this block; the output stream is where a UDP/Ethernet core would attach.
module fee_fpga
  import chec_pkg::*;
#(
  parameter int unsigned ASICS      = ASICS_PER_MODULE,
  parameter int unsigned CH         = CH_PER_ASIC,
  parameter int unsigned MAX_BLOCKS = 8,
  parameter int unsigned CELL_DEPTH = 1024,
  parameter int unsigned REQ_DEPTH  = 16,
  parameter int unsigned HDR_DEPTH  = 16,
  localparam int unsigned NCH = ASICS * CH,
  localparam int unsigned CB  = $clog2(STORAGE_CELLS)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [7:0]              module_id,
  input  logic                    ser_in,           // readout / re-sync line
  input  logic [CB-1:0]           cfg_lookback_ns,
  input  logic [3:0]              cfg_blocks,
  // sampling ASICs
  output logic                    asic_rd_en,
  output logic [CB-1:0]           asic_rd_cell,
  input  logic [NCH*ADC_BITS-1:0] asic_rd_data,
  // event output stream
  output logic [15:0]             eth_tdata,
  output logic                    eth_tlast,
  output logic                    eth_tvalid,
  input  logic                    eth_tready,
  // status
  output logic [31:0]             now_ns,
  output logic                    resync_seen,
  output logic                    drop_event,
  output logic                    stale_event,
  output logic                    stall
);

  localparam int unsigned CAW = $clog2(CELL_DEPTH);
  localparam int unsigned RAW = $clog2(REQ_DEPTH);
  localparam int unsigned HAW = $clog2(HDR_DEPTH);
  localparam int unsigned CW  = NCH * ADC_BITS;

  logic msg_valid;
  msg_t msg;
  logic is_readout, is_resync;
  logic [31:0] sec_unused;
  logic pps_edge_unused;

  // request queue
  rdreq_t       rq_in, rq_head;
  logic [RAW:0] rq_free;
  logic         rq_overflow, rq_valid, rq_ready;
  // cell buffer
  logic          cell_wr, cell_valid, cell_pop, cell_overflow;
  logic [CW-1:0] cell_head;
  logic [CAW:0]  cell_free;
  // descriptor queue
  evhdr_t        hdr_wdata, hdr_head;
  logic          hdr_wr, hdr_valid, hdr_pop, hdr_overflow;
  logic [HAW:0]  hdr_free;

  readout_msg_rx u_rx (
    .clk, .rst_n, .sdat(ser_in), .msg_valid, .msg
  );

  assign is_readout  = msg_valid && msg.mtype == MSG_READOUT;
  assign is_resync   = msg_valid && msg.mtype == MSG_RESYNC;
  assign resync_seen = is_resync;

  cam_timer u_timer (
    .clk, .rst_n, .pps(1'b0),
    .load(is_resync),
    .load_ns(msg.ns + 32'((LINK_LAT_CYCLES + 1) * CLK_NS)),
    .ns(now_ns), .sec(sec_unused), .pps_edge(pps_edge_unused)
  );

  assign rq_in = '{event_id: msg.event_id, trig_ns: msg.ns};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) drop_event <= 1'b0;
    else        drop_event <= is_readout && (rq_free == 0);
  end

  event_fifo #(.WIDTH($bits(rdreq_t)), .DEPTH(REQ_DEPTH)) u_reqq (
    .clk, .rst_n,
    .wr_en(is_readout && (rq_free != 0)), .wr_data(rq_in),
    .free(rq_free), .overflow(rq_overflow),
    .out_valid(rq_valid), .out_ready(rq_ready), .out_data(rq_head)
  );

  fee_readout #(
    .MAX_BLOCKS(MAX_BLOCKS), .FREE_BITS(CAW + 1)
  ) u_readout (
    .clk, .rst_n,
    .req_valid(rq_valid), .req_ready(rq_ready), .req(rq_head), .now_ns,
    .cfg_lookback_ns, .cfg_blocks,
    .asic_rd_en, .asic_rd_cell,
    .cell_free, .cell_wr,
    .hdr_full(hdr_free == 0), .hdr_wr, .hdr_wdata,
    .stall, .stale_event
  );

  event_fifo #(.WIDTH(CW), .DEPTH(CELL_DEPTH)) u_cells (
    .clk, .rst_n,
    .wr_en(cell_wr), .wr_data(asic_rd_data),
    .free(cell_free), .overflow(cell_overflow),
    .out_valid(cell_valid), .out_ready(cell_pop), .out_data(cell_head)
  );

  event_fifo #(.WIDTH($bits(evhdr_t)), .DEPTH(HDR_DEPTH)) u_hdrq (
    .clk, .rst_n,
    .wr_en(hdr_wr), .wr_data(hdr_wdata),
    .free(hdr_free), .overflow(hdr_overflow),
    .out_valid(hdr_valid), .out_ready(hdr_pop), .out_data(hdr_head)
  );

  fee_packer #(.NCH(NCH)) u_packer (
    .clk, .rst_n, .module_id,
    .hdr_valid, .hdr(hdr_head), .hdr_pop,
    .cell_valid, .cell_data(cell_head), .cell_pop,
    .out_data(eth_tdata), .out_last(eth_tlast), .out_valid(eth_tvalid),
    .out_ready(eth_tready)
  );

  // Every queue is checked for space before it is written.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    !(rq_overflow || cell_overflow || hdr_overflow));

endmodule
