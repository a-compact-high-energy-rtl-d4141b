// chec_top_tb: the whole camera trigger and readout chain at its default size
// (512 trigger lines, 32 modules of 64 channels, 1024-cell buffers per
// module), with one sampling-ASIC model per module. No parameter of the top is
// changed.
//
// Sequence: PPS edge and RESYNC of all modules; a coincidence across a module
// boundary whose window wraps past storage cell 4095; a trigger followed at
// once by two more (the second is queued and read out in full, the third is
// vetoed in the trigger FPGA); an external trigger; an event with a look-back
// so long that the window has been overwritten (stale); a maximum-size
// (8-block) event; a burst of 34 one-block events with module 0's output held
// off, so that module 0 fills its descriptor queue, stalls, queues further
// requests until they are stale and drops the requests that find the queue
// full, while all other modules read out every event in full. Every packet of
// every module is checked word by word against the prediction, and each
// mechanism (coincidence trigger, external trigger, veto, re-sync, drop,
// stale, stall, wrap) must occur at least once.
module chec_top_tb;
  import chec_pkg::*;
  import chec_tb_pkg::*;
  localparam int NMOD = 32;
  localparam int NCH  = 64;
  localparam int N    = 512;

  typedef enum int {P_NORMAL, P_VETO, P_STALE, P_BURST} plan_e;
  // may_lose: module 0 during the burst may send the event stale or drop it
  typedef struct { int ev; longint unsigned trig; bit stale; int win; int lookback;
                   bit may_lose; } exp_t;

  logic clk = 0, rst_n = 0, pps = 0, ext_trig = 0, ext_en = 0;
  logic cam_trig_out, pattern_valid, trig_vetoed;
  logic [N-1:0] trig_lines = '0, trig_pattern;
  logic [3:0] coinc_cycles = 4'd1;
  logic [11:0] cfg_lookback_ns = 12'd64;
  logic [3:0] cfg_blocks = 4'd3;
  logic [NMOD-1:0] asic_rd_en;
  logic [NMOD-1:0][11:0] asic_rd_cell;
  logic [NMOD-1:0][NCH*12-1:0] asic_rd_data;
  logic [NMOD-1:0][15:0] eth_tdata;
  logic [NMOD-1:0] eth_tlast, eth_tvalid, eth_tready;
  logic [15:0] event_count;
  logic [31:0] cam_ns;
  logic [NMOD-1:0][31:0] mod_ns;
  logic [NMOD-1:0] mod_resync, mod_drop, mod_stale, mod_stall;

  longint unsigned gns = 0, offset = 0;
  logic pps_d = 0;
  bit hold0 = 0;
  int checks = 0, failures = 0;
  int n_coinc = 0, n_ext = 0, n_veto = 0, n_resync = 0, n_drop = 0, n_stale = 0,
      n_stall = 0, n_wrap = 0, n_pkt = 0, n_trig = 0, n_skip0 = 0, n_lost_stale0 = 0;
  plan_e planq [$];
  exp_t expq [NMOD][$];
  bit last_was_ext = 0;

  always #4 clk = ~clk;
  always @(posedge clk) gns <= gns + 8;
  always @(posedge clk) begin
    pps_d <= pps;
    if (pps && !pps_d) offset <= gns + 8;   // absolute time of camera ns 0
  end
  for (genvar m = 0; m < NMOD; m++) begin : g_src
    always @(posedge clk) eth_tready[m] <= !(m == 0 && hold0) && ($urandom_range(99) < 75);
    targetc_model #(.MOD_ID(m), .NCH(NCH)) u_asic (
      .clk, .pps, .abs_ns(gns), .rd_en(asic_rd_en[m]), .rd_cell(asic_rd_cell[m]),
      .rd_data(asic_rd_data[m])
    );
  end

  chec_top dut (.*);

  initial begin
    #10_000_000; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 30) $display("FAIL: %s", what); end
  endtask

  // Trigger monitor: turn each camera trigger into expected packets
  always @(negedge clk) if (rst_n) begin
    n_resync += $countones(mod_resync);
    n_drop   += $countones(mod_drop);
    n_stale  += $countones(mod_stale);
    if (|mod_stall) n_stall++;
    if (trig_vetoed) n_veto++;
    if (cam_trig_out) begin
      plan_e p;
      check(planq.size() > 0, "camera trigger not planned");
      p = (planq.size() > 0) ? planq.pop_front() : P_NORMAL;
      if (last_was_ext) n_ext++; else n_coinc++;
      for (int m = 0; m < NMOD; m++)
        expq[m].push_back('{n_trig, longint'(cam_ns), p == P_STALE,
                            32 * int'(cfg_blocks), int'(cfg_lookback_ns),
                            p == P_BURST && m == 0});
      n_trig++;
    end
  end

  // Packet checkers, one per module
  for (genvar m = 0; m < NMOD; m++) begin : g_chk
    logic [15:0] w [$];
    always @(posedge clk) begin
      if (rst_n && eth_tvalid[m] && eth_tready[m]) begin
        w.push_back(eth_tdata[m]);
        if (eth_tlast[m]) begin
          exp_t e;
          longint unsigned start;
          n_pkt++;
          check(expq[m].size() > 0, $sformatf("module %0d: unexpected packet", m));
          // events module 0 may have dropped during the burst
          while (expq[m].size() > 1 && expq[m][0].may_lose && 16'(expq[m][0].ev) != w[1]) begin
            void'(expq[m].pop_front());
            n_skip0++;
          end
          if (expq[m].size() > 0) begin
            e = expq[m].pop_front();
            if (e.may_lose && w[0][8]) begin e.stale = 1; n_lost_stale0++; end
            start = e.trig - 64'(e.lookback);
            if (m == 0 && !e.stale && (start % 4096) + 64'(e.win) > 4096) n_wrap++;
            check(w[0] == {HDR_MAGIC, 3'b000, e.stale, 8'(m)}, $sformatf("mod %0d hdr0 %h", m, w[0]));
            check(w[1] == 16'(e.ev), $sformatf("mod %0d event id %0d want %0d", m, w[1], e.ev));
            check({w[2], w[3]} == 32'(e.trig), $sformatf("mod %0d trigger time", m));
            check(w[4] == 16'(start % 4096), $sformatf("mod %0d start cell", m));
            check(w[5] == 16'(e.win), $sformatf("mod %0d window", m));
            check(w.size() == (e.stale ? 6 : 6 + NCH * e.win),
                  $sformatf("mod %0d packet length %0d", m, w.size()));
            if (!e.stale && w.size() == 6 + NCH * e.win)
              for (int k = 0; k < e.win; k++)
                for (int ch = 0; ch < NCH; ch++)
                  check(w[6 + k*NCH + ch] ==
                        {4'h0, sample_val(m, ch, offset + start + 64'(k))},
                        $sformatf("mod %0d ev %0d ch %0d sample %0d", m, e.ev, ch, k));
          end
          w.delete();
        end
      end
    end
  end

  task automatic cycles(int n);
    repeat (n) @(posedge clk);
    #1;
  endtask

  task automatic fire_pair(int a, int b, plan_e p);
    planq.push_back(p);
    last_was_ext = 0;
    trig_lines = '0; trig_lines[a] = 1; trig_lines[b] = 1;
    cycles(1);
    trig_lines = '0;
  endtask

  task automatic wait_drained(int limit);
    int c = 0;
    bit busy;
    do begin
      cycles(100); c += 100;
      busy = 0;
      // module 0's queue may still hold events it dropped at the end of the burst
      for (int m = 0; m < NMOD; m++)
        if (expq[m].size() > (m == 0 ? n_drop - n_skip0 : 0) || eth_tvalid[m]) busy = 1;
    end while (busy && c < limit);
    check(!busy, "packets still outstanding");
  endtask

  initial begin
    cycles(3);
    rst_n = 1;
    cycles(20);
    // 1 PPS: camera time restarts, RESYNC reaches all modules
    pps = 1; cycles(4); pps = 0;
    cycles(100);
    check(n_resync == NMOD, $sformatf("resyncs %0d", n_resync));
    for (int m = 0; m < NMOD; m++)
      check(mod_ns[m] == cam_ns, $sformatf("module %0d time %0d camera %0d", m, mod_ns[m], cam_ns));
    // Event 0: coincidence across the module 0 / module 1 boundary (top row),
    // placed so that the 96-cell window wraps past cell 4095.
    while (((cam_ns + 16 - 64) % 4096) < 4040 || ((cam_ns + 16 - 64) % 4096) > 4060) cycles(1);
    fire_pair(0*16 + 3, 1*16 + 0, P_NORMAL);
    wait_drained(20000);
    // Events 1..2 and a vetoed third trigger
    fire_pair(5*16 + 4, 5*16 + 8, P_NORMAL);
    cycles(3);
    fire_pair(20*16 + 0, 20*16 + 1, P_NORMAL);
    cycles(3);
    fire_pair(30*16 + 0, 30*16 + 1, P_VETO);   // trigger FPGA still busy: vetoed
    void'(planq.pop_back());
    cycles(2);
    wait_drained(40000);
    check(planq.size() == 0, "planned trigger missing");
    // Event 3: external trigger
    planq.push_back(P_NORMAL);
    last_was_ext = 1;
    ext_en = 1; ext_trig = 1; cycles(3); ext_trig = 0; ext_en = 0;
    wait_drained(20000);
    // Event 4: look-back beyond the storage depth -> stale
    cfg_lookback_ns = 12'd4000;
    fire_pair(10*16 + 5, 10*16 + 9, P_STALE);
    wait_drained(5000);
    cfg_lookback_ns = 12'd64;
    // Event 5: largest window, 8 blocks
    cfg_blocks = 4'd8;
    fire_pair(12*16 + 0, 12*16 + 4, P_NORMAL);
    wait_drained(40000);
    // Events 6..39: burst of one-block events, module 0's output held off
    cfg_blocks = 4'd1;
    hold0 = 1;
    for (int i = 0; i < 34; i++) begin
      fire_pair(12*16 + 1 + (i % 2), 12*16 + 5 + (i % 2), P_BURST);
      cycles(1800);
    end
    check(planq.size() == 0, "burst trigger missing");
    cycles(3000);
    check(mod_stall[0], "module 0 not stalled");
    check(mod_stall[NMOD-1:1] == '0, "another module stalled");
    hold0 = 0;
    wait_drained(200000);
    while (expq[0].size() > 0 && expq[0][0].may_lose) begin
      void'(expq[0].pop_front());
      n_skip0++;
    end
    cfg_blocks = 4'd3;

    check(n_trig == 40, $sformatf("camera triggers %0d want 40", n_trig));
    check(event_count == 16'(n_trig), "event_count");
    check(n_pkt + n_drop == NMOD * n_trig, $sformatf("packets %0d + drops %0d want %0d",
          n_pkt, n_drop, NMOD * n_trig));
    check(n_skip0 == n_drop, $sformatf("module 0 skipped %0d, drops %0d", n_skip0, n_drop));
    check(n_stale == NMOD + n_lost_stale0, $sformatf("stale %0d", n_stale));
    check(n_coinc >= 1, "no coincidence trigger");
    check(n_ext >= 1, "no external trigger");
    check(n_veto >= 1, "no vetoed trigger");
    check(n_resync >= 1, "no re-sync");
    check(n_drop >= 1, "no dropped readout");
    check(n_stale >= 1, "no stale window");
    check(n_stall >= 1, "no stall");
    check(n_wrap >= 1, "no window wrapping the storage ring");
    $display("mechanisms: coinc=%0d ext=%0d veto=%0d resync=%0d drop=%0d stale=%0d stall_cycles=%0d wrap=%0d packets=%0d",
             n_coinc, n_ext, n_veto, n_resync, n_drop, n_stale, n_stall, n_wrap, n_pkt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
