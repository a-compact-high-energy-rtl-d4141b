// camera_trigger: camera-level trigger decision of the backplane trigger FPGA.
//
// What it does: it receives the first-level trigger lines of all modules (one
// per patch, a patch being the discriminated analogue sum of four pixels) and
// fires the camera trigger when two neighbouring patches are active at the same
// time. A rising edge on the external trigger input also fires it when enabled.
// On every camera trigger it also outputs the pattern of active patches.
//
// How it works: every input line starts a per-line stretch counter, so the line
// counts as active for coinc_cycles+1 cycles (one cycle = 8 ns); two lines whose
// rising edges are at most coinc_cycles cycles apart are thus seen together.
// The patches lie on a square grid: modules in a MOD_ROWS x MOD_COLS grid with
// the four corner modules missing (6x6-4 = 32 modules), each module a
// PATCH_ROWS x PATCH_COLS grid of patches (4x4 = 16). Line index =
// module*16 + patch_row*4 + patch_col, modules numbered row by row skipping the
// corners. Two patches are neighbours when they share an edge, also across a
// module boundary. The trigger fires on the rising edge of "some neighbouring
// pair active", so a long coincidence gives one trigger.
//
// Timing: input in cycle t, stretched line in t+1, cam_trig (one-cycle pulse)
// with trig_pattern/pattern_valid in t+2 (vetoed instead, if busy). While busy is high no trigger is
// issued (dead time while the previous readout message is still waiting).
//
// From the camera description: 512 trigger lines, a coincidence of two
// neighbouring patches, an external trigger input and a trigger pattern output.
// This design's own choices: the patch numbering and grid, edge-sharing
// neighbours, the stretch-counter coincidence window and the busy veto.
module camera_trigger #(
  parameter int unsigned MOD_ROWS   = 6,
  parameter int unsigned MOD_COLS   = 6,
  parameter int unsigned PATCH_ROWS = 4,
  parameter int unsigned PATCH_COLS = 4,
  parameter int unsigned WIN_BITS   = 4,
  localparam int unsigned N_LINES = (MOD_ROWS * MOD_COLS - 4) * PATCH_ROWS * PATCH_COLS
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N_LINES-1:0]  trig_in,       // first-level trigger lines
  input  logic                ext_trig,      // external trigger (level)
  input  logic                ext_en,        // enable the external trigger
  input  logic [WIN_BITS-1:0] coinc_cycles,  // coincidence window, cycles
  input  logic                busy,          // veto new triggers
  output logic                cam_trig,      // one-cycle camera trigger pulse
  output logic                cam_trig_ext,  // that trigger came from ext_trig
  output logic [N_LINES-1:0]  trig_pattern,  // stretched lines at trigger time
  output logic                pattern_valid,
  output logic                vetoed         // a trigger was refused (busy)
);

  localparam int unsigned GR = MOD_ROWS * PATCH_ROWS;
  localparam int unsigned GC = MOD_COLS * PATCH_COLS;
  localparam int unsigned PPM = PATCH_ROWS * PATCH_COLS;

  function automatic bit is_corner(int mr, int mc);
    return (mr == 0 || mr == int'(MOD_ROWS) - 1) && (mc == 0 || mc == int'(MOD_COLS) - 1);
  endfunction

  // Line index of the patch at grid position (r, c); -1 where there is none.
  function automatic int line_of(int r, int c);
    int mr, mc, m;
    if (r < 0 || c < 0 || r >= int'(GR) || c >= int'(GC)) return -1;
    mr = r / int'(PATCH_ROWS);
    mc = c / int'(PATCH_COLS);
    if (is_corner(mr, mc)) return -1;
    m = 0;
    for (int i = 0; i < int'(MOD_ROWS); i++)
      for (int j = 0; j < int'(MOD_COLS); j++)
        if ((i < mr || (i == mr && j < mc)) && !is_corner(i, j)) m++;
    return m * int'(PPM) + (r % int'(PATCH_ROWS)) * int'(PATCH_COLS) + (c % int'(PATCH_COLS));
  endfunction

  // Stretch each line over the coincidence window
  logic [WIN_BITS:0]  cnt [N_LINES];
  logic [N_LINES-1:0] stretched;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(N_LINES); i++) cnt[i] <= '0;
    end else begin
      for (int i = 0; i < int'(N_LINES); i++) begin
        if (trig_in[i])        cnt[i] <= {1'b0, coinc_cycles} + 1'b1;
        else if (cnt[i] != 0)  cnt[i] <= cnt[i] - 1'b1;
      end
    end
  end

  always_comb
    for (int i = 0; i < int'(N_LINES); i++) stretched[i] = (cnt[i] != 0);

  // Neighbouring-pair coincidences: one horizontal and one vertical pair per
  // grid position.
  logic [GR*GC-1:0] pair_h, pair_v;

  for (genvar r = 0; r < GR; r++) begin : g_row
    for (genvar c = 0; c < GC; c++) begin : g_col
      localparam int A = line_of(r, c);
      localparam int B = line_of(r, c + 1);
      localparam int D = line_of(r + 1, c);
      if (A >= 0 && B >= 0) begin : g_h
        assign pair_h[r*GC+c] = stretched[A] & stretched[B];
      end else begin : g_noh
        assign pair_h[r*GC+c] = 1'b0;
      end
      if (A >= 0 && D >= 0) begin : g_v
        assign pair_v[r*GC+c] = stretched[A] & stretched[D];
      end else begin : g_nov
        assign pair_v[r*GC+c] = 1'b0;
      end
    end
  end

  logic any_pair, any_pair_q, ext_q;
  logic fire_coinc, fire_ext;

  assign any_pair   = |pair_h | |pair_v;
  assign fire_coinc = any_pair & ~any_pair_q;
  assign fire_ext   = ext_en & ext_trig & ~ext_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      any_pair_q    <= 1'b0;
      ext_q         <= 1'b0;
      cam_trig      <= 1'b0;
      cam_trig_ext  <= 1'b0;
      pattern_valid <= 1'b0;
      vetoed        <= 1'b0;
      trig_pattern  <= '0;
    end else begin
      any_pair_q    <= any_pair;
      ext_q         <= ext_trig;
      cam_trig      <= (fire_coinc | fire_ext) & ~busy;
      cam_trig_ext  <= fire_ext & ~fire_coinc & ~busy;
      pattern_valid <= (fire_coinc | fire_ext) & ~busy;
      vetoed        <= (fire_coinc | fire_ext) & busy;
      if ((fire_coinc | fire_ext) & ~busy) trig_pattern <= stretched;
    end
  end

endmodule
