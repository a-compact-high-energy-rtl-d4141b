// fee_readout: capture controller of one front-end module FPGA.
//
// What it does: takes readout requests (event number, camera trigger time in
// ns) from the module's request queue, works out where each readout window
// lies in the sampling ASICs' storage ring, copies the window out of the ASICs
// into the module's cell buffer, and hands an event descriptor to the packer.
//
// How it works. The ASICs sample at 1 GSa/s into a ring of STORAGE_CELLS
// (4096) cells, so the sample taken at camera time t (ns) sits in cell
// t mod 4096 until it is overwritten 4096 ns later. The window starts at
// trig_ns - cfg_lookback_ns (1 ns resolution) and is cfg_blocks x 32 cells long
// (nominally 3 blocks = 96 ns; 0 counts as 1, more than MAX_BLOCKS as
// MAX_BLOCKS). For the request at the head of the queue, in every idle cycle:
//   * with age = now - start, the last cell would be read 8*W ns after
//     acceptance, so the window is lost unless age + 7*W + 1 < 4096. A lost
//     (stale) request is accepted at once and produces a descriptor with the
//     stale flag, i.e. a header-only packet, so event numbering stays complete;
//   * otherwise it is accepted only when the cell buffer has room for W cells
//     and the descriptor queue has room; until then stall is high. A request
//     that waits too long turns stale rather than being lost silently.
// An accepted window is read one cell per cycle, all 64 channels in parallel
// (asic_rd_cell / asic_rd_en). The ASICs' data lines, valid one cycle after
// the read, run straight to the cell buffer's write data, so this block only
// gives the write strobe cell_wr in the cycle the data is valid. The descriptor is
// written in the cycle after the last cell.
//
// Timing: request accepted in cycle A; cells read in A+1..A+W, written in
// A+2..A+W+1, descriptor written in A+W+2; the next request can be accepted
// in A+W+3 (no request is taken in a cycle that writes a descriptor). The
// controller is busy W+3 cycles per event, far less than the packet takes to
// send, so the queue and buffer absorb bursts.
//
// From the camera description: 4 ASICs x 16 channels, 12-bit samples, a
// 4096 ns storage ring, a window placed with 1 ns resolution and sized in
// 32 ns blocks (96 ns nominal), and the FPGA reading out and buffering the
// data. This design's own choices: the parallel one-cycle ASIC read interface
// (the real ASIC digitises blocks through its own converters), the cell buffer,
// the stale rule and MAX_BLOCKS.
module fee_readout
  import chec_pkg::*;
#(
  parameter int unsigned MAX_BLOCKS = 8,
  parameter int unsigned FREE_BITS  = 11,
  localparam int unsigned CB  = $clog2(STORAGE_CELLS)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // request queue head
  input  logic                      req_valid,
  output logic                      req_ready,
  input  rdreq_t                    req,
  input  logic [31:0]               now_ns,
  // configuration
  input  logic [CB-1:0]             cfg_lookback_ns,
  input  logic [3:0]                cfg_blocks,       // 1..MAX_BLOCKS
  // sampling ASIC read port (all channels of one cell per cycle)
  output logic                      asic_rd_en,
  output logic [CB-1:0]             asic_rd_cell,
  // cell buffer write strobe (the write data is the ASICs' read data)
  input  logic [FREE_BITS-1:0]      cell_free,
  output logic                      cell_wr,
  // event descriptor queue write port
  input  logic                      hdr_full,
  output logic                      hdr_wr,
  output evhdr_t                    hdr_wdata,
  // status
  output logic                      stall,
  output logic                      stale_event
);

  localparam int unsigned MAXCELLS = MAX_BLOCKS * BLOCK_CELLS;
  localparam int unsigned WB = $clog2(MAXCELLS + 1);

  typedef enum logic {S_IDLE, S_CAPTURE} state_e;
  state_e state;

  evhdr_t        cur;
  logic [WB-1:0] rd_idx;

  // Arithmetic on the request at the head of the queue
  logic [3:0]    blocks_c;
  logic [WB-1:0] win_c;
  logic [31:0]   start_ns_c;
  logic [32:0]   age_c;
  logic          stale_c, room_c;

  always_comb begin
    blocks_c   = (cfg_blocks == 0) ? 4'd1 :
                 (cfg_blocks > 4'(MAX_BLOCKS)) ? 4'(MAX_BLOCKS) : cfg_blocks;
    win_c      = WB'(blocks_c) * WB'(BLOCK_CELLS);
    start_ns_c = req.trig_ns - 32'(cfg_lookback_ns);
    age_c      = {1'b0, now_ns - start_ns_c};
    stale_c    = (age_c + 33'(7) * 33'(win_c) + 33'd1) >= 33'(STORAGE_CELLS);
    room_c     = ({1'b0, cell_free} >= (FREE_BITS+1)'(win_c));
  end

  assign req_ready    = (state == S_IDLE) && !hdr_full && !hdr_wr && (stale_c || room_c);
  assign stall        = (state == S_IDLE) && req_valid && !req_ready;
  assign asic_rd_en   = (state == S_CAPTURE) && (rd_idx < WB'(cur.win));
  assign asic_rd_cell = cur.start_cell + CB'(rd_idx);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      cur         <= '0;
      rd_idx      <= '0;
      cell_wr     <= 1'b0;
      hdr_wr      <= 1'b0;
      hdr_wdata   <= '0;
      stale_event <= 1'b0;
    end else begin
      hdr_wr      <= 1'b0;
      stale_event <= 1'b0;
      cell_wr     <= asic_rd_en;
      unique case (state)
        S_IDLE: if (req_valid && req_ready) begin
          cur <= '{stale: stale_c, event_id: req.event_id, trig_ns: req.trig_ns,
                   start_cell: start_ns_c[CB-1:0], win: 16'(win_c)};
          if (stale_c) begin
            hdr_wr      <= 1'b1;
            hdr_wdata   <= '{stale: 1'b1, event_id: req.event_id, trig_ns: req.trig_ns,
                             start_cell: start_ns_c[CB-1:0], win: 16'(win_c)};
            stale_event <= 1'b1;
          end else begin
            rd_idx  <= '0;
            state   <= S_CAPTURE;
          end
        end
        S_CAPTURE: begin
          if (asic_rd_en) rd_idx <= rd_idx + 1'b1;
          if (!asic_rd_en) begin      // last cell is written this cycle
            hdr_wr    <= 1'b1;
            hdr_wdata <= cur;
            state     <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
