// chec_top: digital trigger and readout chain of the camera.
//
// What it does: ties the backplane trigger FPGA to the 32 front-end module
// FPGAs. The 512 first-level trigger lines (16 patches per module) come in; the
// trigger FPGA forms the camera trigger and broadcasts a readout request over
// the serial readout line; every module then reads its window from its four
// sampling ASICs and streams an event packet out on its own output. A 1 PPS
// edge re-syncs the camera time in all modules.
//
// Interface: the analogue front end, the trigger and sampling ASICs and the
// network links are outside this design. Their places appear as ports:
// trig_lines (from the trigger ASICs), asic_rd_* per module (to and from the
// sampling ASICs), eth_* per module (to the module's 1 Gbps UDP link),
// trig_pattern (to the camera data-acquisition board), cam_trig_out / ext_trig
// / pps (timing board). Everything runs on one 125 MHz clock, the backplane
// clock distributed to all modules; reset is asynchronous, active low.
//
// Timing: trigger line edge in cycle t -> cam_trig_out in t+2 -> readout
// request at the modules 52 cycles after the transmitter takes it -> capture
// of 96 cells starts 2 cycles later -> 6150-word packet (96 ns window) per
// module, built while later events are already being captured.
//
// From the camera description: 32 modules x 16 trigger patches, one trigger
// FPGA, a readout message to all modules on a camera trigger, per-module raw
// data links, 1 PPS re-sync. A single broadcast serial line to all modules,
// and shared configuration inputs, are this design's own choices.
module chec_top
  import chec_pkg::*;
#(
  parameter int unsigned MOD_ROWS   = 6,
  parameter int unsigned MOD_COLS   = 6,
  parameter int unsigned PATCH_ROWS = 4,
  parameter int unsigned PATCH_COLS = 4,
  parameter int unsigned ASICS      = ASICS_PER_MODULE,
  parameter int unsigned CH         = CH_PER_ASIC,
  parameter int unsigned MAX_BLOCKS = 8,
  parameter int unsigned CELL_DEPTH = 1024,
  localparam int unsigned NMOD    = MOD_ROWS * MOD_COLS - 4,
  localparam int unsigned N_LINES = NMOD * PATCH_ROWS * PATCH_COLS,
  localparam int unsigned NCH     = ASICS * CH,
  localparam int unsigned CB      = $clog2(STORAGE_CELLS)
) (
  input  logic                                clk,
  input  logic                                rst_n,
  // timing board
  input  logic                                pps,
  input  logic                                ext_trig,
  output logic                                cam_trig_out,
  // trigger ASICs
  input  logic [N_LINES-1:0]                  trig_lines,
  // configuration
  input  logic                                ext_en,
  input  logic [3:0]                          coinc_cycles,
  input  logic [CB-1:0]                       cfg_lookback_ns,
  input  logic [3:0]                          cfg_blocks,
  // to the camera data-acquisition board
  output logic [N_LINES-1:0]                  trig_pattern,
  output logic                                pattern_valid,
  // sampling ASICs, one port per module
  output logic [NMOD-1:0]                     asic_rd_en,
  output logic [NMOD-1:0][CB-1:0]             asic_rd_cell,
  input  logic [NMOD-1:0][NCH*ADC_BITS-1:0]   asic_rd_data,
  // module event streams
  output logic [NMOD-1:0][15:0]               eth_tdata,
  output logic [NMOD-1:0]                     eth_tlast,
  output logic [NMOD-1:0]                     eth_tvalid,
  input  logic [NMOD-1:0]                     eth_tready,
  // status
  output logic [15:0]                         event_count,
  output logic                                trig_vetoed,
  output logic [31:0]                         cam_ns,
  output logic [NMOD-1:0][31:0]               mod_ns,
  output logic [NMOD-1:0]                     mod_resync,
  output logic [NMOD-1:0]                     mod_drop,
  output logic [NMOD-1:0]                     mod_stale,
  output logic [NMOD-1:0]                     mod_stall
);

  logic ser;
  logic cam_trig_ext_unused;
  logic [31:0] cam_sec_unused;

  trigger_fpga #(
    .MOD_ROWS(MOD_ROWS), .MOD_COLS(MOD_COLS),
    .PATCH_ROWS(PATCH_ROWS), .PATCH_COLS(PATCH_COLS)
  ) u_trigger_fpga (
    .clk, .rst_n, .pps,
    .trig_in(trig_lines), .ext_trig, .ext_en, .coinc_cycles,
    .cam_trig_out, .cam_trig_ext(cam_trig_ext_unused),
    .trig_pattern, .pattern_valid, .trig_vetoed,
    .event_count, .cam_ns, .cam_sec(cam_sec_unused),
    .ser_out(ser)
  );

  for (genvar m = 0; m < NMOD; m++) begin : g_mod
    fee_fpga #(
      .ASICS(ASICS), .CH(CH), .MAX_BLOCKS(MAX_BLOCKS), .CELL_DEPTH(CELL_DEPTH)
    ) u_fee (
      .clk, .rst_n,
      .module_id(8'(m)),
      .ser_in(ser),
      .cfg_lookback_ns, .cfg_blocks,
      .asic_rd_en(asic_rd_en[m]), .asic_rd_cell(asic_rd_cell[m]),
      .asic_rd_data(asic_rd_data[m]),
      .eth_tdata(eth_tdata[m]), .eth_tlast(eth_tlast[m]),
      .eth_tvalid(eth_tvalid[m]), .eth_tready(eth_tready[m]),
      .now_ns(mod_ns[m]), .resync_seen(mod_resync[m]),
      .drop_event(mod_drop[m]), .stale_event(mod_stale[m]), .stall(mod_stall[m])
    );
  end

endmodule
