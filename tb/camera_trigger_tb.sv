// camera_trigger_tb: self-checking test of the camera-level trigger.
//
// Builds its own map of the 24x24 patch grid (32 modules of 4x4 patches, the
// four corner modules missing) by walking the module positions in order, and
// from it decides independently whether a set of active patches contains a
// neighbouring pair. Checks: single patches never trigger; edge neighbours
// inside a module and across module boundaries trigger; diagonal pairs do not;
// the coincidence window in cycles; the trigger latency of 2 cycles; the
// trigger pattern; the external trigger and its enable; the busy veto; and
// random patterns against the reference.
module camera_trigger_tb;
  localparam int N = 512;
  localparam int G = 24;

  logic clk = 0, rst_n = 0;
  logic [N-1:0] trig_in = '0;
  logic ext_trig = 0, ext_en = 0, busy = 0;
  logic [3:0] coinc_cycles = 4'd1;
  logic cam_trig, cam_trig_ext, pattern_valid, vetoed;
  logic [N-1:0] trig_pattern;

  int checks = 0, failures = 0;
  int grid [G][G];

  always #4 clk = ~clk;

  camera_trigger dut (.*);

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void build_grid();
    int m = 0;
    for (int r = 0; r < G; r++) for (int c = 0; c < G; c++) grid[r][c] = -1;
    for (int mr = 0; mr < 6; mr++)
      for (int mc = 0; mc < 6; mc++) begin
        if ((mr == 0 || mr == 5) && (mc == 0 || mc == 5)) continue;
        for (int pr = 0; pr < 4; pr++)
          for (int pc = 0; pc < 4; pc++)
            grid[mr*4+pr][mc*4+pc] = m*16 + pr*4 + pc;
        m++;
      end
  endfunction

  function automatic bit has_pair(logic [N-1:0] v);
    for (int r = 0; r < G; r++)
      for (int c = 0; c < G; c++) begin
        if (grid[r][c] < 0 || !v[grid[r][c]]) continue;
        if (c + 1 < G && grid[r][c+1] >= 0 && v[grid[r][c+1]]) return 1;
        if (r + 1 < G && grid[r+1][c] >= 0 && v[grid[r+1][c]]) return 1;
      end
    return 0;
  endfunction

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Pulse lines a (cycle 0) and b (cycle d) for one cycle each; return number
  // of triggers and the cycle of the first one relative to cycle 0.
  task automatic pulse_two(input logic [N-1:0] va, input logic [N-1:0] vb, input int d,
                           output int ntrig, output int first, output logic [N-1:0] pat);
    logic [N-1:0] nxt;
    ntrig = 0; first = -1; pat = '0;
    for (int cyc = 0; cyc < d + 24; cyc++) begin
      nxt = '0;
      if (cyc == 0) nxt = nxt | va;
      if (cyc == d) nxt = nxt | vb;
      trig_in = nxt;
      @(posedge clk);
      #1;
      if (cam_trig) begin
        if (ntrig == 0) begin first = cyc; pat = trig_pattern; end
        ntrig++;
      end
    end
    trig_in = '0;
  endtask

  function automatic logic [N-1:0] bitv(int i);
    return (i >= 0) ? ({{(N-1){1'b0}}, 1'b1} << i) : '0;
  endfunction

  int nt, fst;
  logic [N-1:0] pat, v;
  int a;

  initial begin
    build_grid();
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);

    // 1. every single patch alone: no trigger (sample 64 of them)
    for (int k = 0; k < 64; k++) begin
      a = $urandom_range(N-1);
      pulse_two(bitv(a), '0, 0, nt, fst, pat);
      check(nt == 0, $sformatf("single patch %0d triggered", a));
    end

    // 2. horizontal neighbours inside module 0 (patches 0 and 1)
    pulse_two(bitv(0) | bitv(1), '0, 0, nt, fst, pat);
    check(nt == 1, "in-module neighbours did not trigger once");
    check(fst == 1, $sformatf("trigger latency: output after cycle %0d, want 1 (2 cycles after input)", fst));
    check(pat == (bitv(0) | bitv(1)), "trigger pattern wrong");

    // 3. across a module boundary: grid (3,4) and (4,4); and (8,3)-(8,4)
    pulse_two(bitv(grid[3][4]), bitv(grid[4][4]), 0, nt, fst, pat);
    check(nt == 1, "vertical cross-module pair did not trigger");
    pulse_two(bitv(grid[8][3]), bitv(grid[8][4]), 0, nt, fst, pat);
    check(nt == 1, "horizontal cross-module pair did not trigger");

    // 4. diagonal pair: no trigger
    pulse_two(bitv(grid[8][3]), bitv(grid[9][4]), 0, nt, fst, pat);
    check(nt == 0, "diagonal pair triggered");
    // corner gap: (3,3) is missing, (4,3) and (3,4) exist but are diagonal
    pulse_two(bitv(grid[4][3]), bitv(grid[3][4]), 0, nt, fst, pat);
    check(nt == 0, "pair across the missing corner triggered");

    // 5. coincidence window: delay d <= coinc triggers, d > coinc does not
    for (int w = 0; w < 4; w++) begin
      coinc_cycles <= 4'(w);
      for (int d = 0; d <= w + 2; d++) begin
        pulse_two(bitv(grid[10][10]), bitv(grid[10][11]), d, nt, fst, pat);
        check(nt == (d <= w ? 1 : 0),
              $sformatf("window %0d delay %0d: %0d triggers", w, d, nt));
      end
    end
    coinc_cycles <= 4'd2;

    // 6. external trigger
    ext_en <= 1'b0;
    ext_trig <= 1'b1; repeat (4) @(posedge clk); #1;
    check(!cam_trig, "external trigger fired while disabled");
    ext_trig <= 1'b0; repeat (2) @(posedge clk);
    ext_en <= 1'b1; ext_trig <= 1'b1;
    nt = 0;
    for (int k = 0; k < 6; k++) begin
      @(posedge clk); #1;
      if (cam_trig) begin nt++; check(cam_trig_ext, "cam_trig_ext not set"); end
    end
    check(nt == 1, $sformatf("external trigger level gave %0d triggers", nt));
    ext_trig <= 1'b0; ext_en <= 1'b0; repeat (2) @(posedge clk);

    // 7. busy veto
    busy <= 1'b1;
    nt = 0;
    trig_in <= bitv(100) | bitv(101);
    @(posedge clk); trig_in <= '0;
    for (int k = 0; k < 6; k++) begin
      @(posedge clk); #1;
      if (cam_trig) nt++;
      if (vetoed) nt += 100;
    end
    check(nt == 100, $sformatf("busy: expected one veto and no trigger, got code %0d", nt));
    busy <= 1'b0;
    repeat (6) @(posedge clk);

    // 8. random sets of active patches against the reference
    coinc_cycles <= 4'd0;
    for (int k = 0; k < 300; k++) begin
      v = '0;
      for (int j = 0; j < 1 + $urandom_range(24); j++) v[$urandom_range(N-1)] = 1'b1;
      pulse_two(v, '0, 0, nt, fst, pat);
      check(nt == (has_pair(v) ? 1 : 0), $sformatf("random set %0d: %0d triggers", k, nt));
      if (nt == 1) check(pat == v, "random set: pattern mismatch");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
