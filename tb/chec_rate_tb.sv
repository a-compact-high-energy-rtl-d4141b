// chec_rate_tb: event-rate workload. The camera is built with a 3x3 module
// grid minus corners (5 modules, 80 trigger lines) so that millions of cycles
// can be simulated; each module is full size (64 channels, 1024-cell buffer).
// Camera triggers come at random, exponentially distributed intervals
// (Poisson arrivals): first 12 events at a mean rate of 600 events/s, then
// 40 events at 3000 events/s. Every module's output is throttled to half the
// word rate (eth_tready high every other cycle on average), i.e. the 1 Gbps
// module link for 16-bit words at 125 MHz. Every packet is checked word by
// word; the test fails on any stale or dropped event, any missing packet, and
// any trigger that is neither read out nor counted as vetoed by the trigger
// FPGA's dead time (one message, ~53 cycles). It reports the largest backlog
// of packets waiting in one module.
module chec_rate_tb;
  import chec_pkg::*;
  import chec_tb_pkg::*;
  localparam int MR = 3, MC = 3;
  localparam int NMOD = MR * MC - 4;
  localparam int NCH  = 64;
  localparam int N    = NMOD * 16;

  typedef struct { int ev; longint unsigned trig; } exp_t;

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
  int checks = 0, failures = 0;
  int n_fired = 0, n_trig = 0, n_veto = 0, n_drop = 0, n_stale = 0, n_pkt = 0, max_backlog = 0;
  exp_t expq [NMOD][$];

  always #4 clk = ~clk;
  always @(posedge clk) gns <= gns + 8;
  always @(posedge clk) begin
    pps_d <= pps;
    if (pps && !pps_d) offset <= gns + 8;   // absolute time of camera ns 0
  end
  for (genvar m = 0; m < NMOD; m++) begin : g_src
    always @(posedge clk) eth_tready[m] <= $urandom_range(1);
    targetc_model #(.MOD_ID(m), .NCH(NCH)) u_asic (
      .clk, .pps, .abs_ns(gns), .rd_en(asic_rd_en[m]), .rd_cell(asic_rd_cell[m]),
      .rd_data(asic_rd_data[m])
    );
  end

  chec_top #(.MOD_ROWS(MR), .MOD_COLS(MC)) dut (.*);

  initial begin
    #100_000_000; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 30) $display("FAIL: %s", what); end
  endtask

  always @(negedge clk) if (rst_n) begin
    n_drop  += $countones(mod_drop);
    n_stale += $countones(mod_stale);
    if (trig_vetoed) n_veto++;
    if (cam_trig_out) begin
      for (int m = 0; m < NMOD; m++) begin
        expq[m].push_back('{n_trig, longint'(cam_ns)});
        if (expq[m].size() > max_backlog) max_backlog = expq[m].size();
      end
      n_trig++;
    end
  end

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
          if (expq[m].size() > 0) begin
            e = expq[m].pop_front();
            start = e.trig - 64'(cfg_lookback_ns);
            check(w[0] == {HDR_MAGIC, 3'b000, 1'b0, 8'(m)}, $sformatf("mod %0d hdr0 %h", m, w[0]));
            check(w[1] == 16'(e.ev), $sformatf("mod %0d event id %0d want %0d", m, w[1], e.ev));
            check({w[2], w[3]} == 32'(e.trig), $sformatf("mod %0d trigger time", m));
            check(w.size() == 6 + NCH * 96, $sformatf("mod %0d packet length %0d", m, w.size()));
            if (w.size() == 6 + NCH * 96)
              for (int k = 0; k < 96; k++)
                for (int ch = 0; ch < NCH; ch++)
                  check(w[6 + k*NCH + ch] == {4'h0, sample_val(m, ch, offset + start + 64'(k))},
                        $sformatf("mod %0d ev %0d ch %0d sample %0d", m, e.ev, ch, k));
          end
          w.delete();
        end
      end
    end
  end

  // exponential interval in cycles for a mean rate in events/s
  function automatic longint interval(real rate);
    real u;
    u = (real'($urandom_range(1_000_000, 1)) / 1_000_001.0);
    return longint'(-$ln(u) / rate / 8.0e-9) + 1;
  endfunction

  task automatic run_phase(int n, real rate);
    longint gap;
    for (int i = 0; i < n; i++) begin
      gap = interval(rate);
      repeat (gap) @(posedge clk);
      #1;
      trig_lines = '0; trig_lines[0] = 1; trig_lines[1] = 1;
      n_fired++;
      @(posedge clk); #1;
      trig_lines = '0;
    end
  endtask

  initial begin
    int c;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    repeat (20) @(posedge clk);
    #1 pps = 1;
    repeat (4) @(posedge clk);
    #1 pps = 0;
    repeat (200) @(posedge clk);
    #1;
    run_phase(12, 600.0);
    repeat (5) @(posedge clk);
    $display("600/s: %0d triggers, %0d packets, largest backlog %0d", n_trig, n_pkt, max_backlog);
    max_backlog = 0;
    run_phase(40, 3000.0);
    c = 0;
    while (n_pkt < NMOD * n_trig && c < 100000) begin @(posedge clk); c++; end
    repeat (100) @(posedge clk);
    check(n_trig + n_veto == n_fired, $sformatf("fired %0d, triggers %0d, vetoed %0d", n_fired, n_trig, n_veto));
    check(n_pkt == NMOD * n_trig, $sformatf("packets %0d want %0d", n_pkt, NMOD * n_trig));
    check(n_drop == 0, $sformatf("%0d dropped", n_drop));
    check(n_stale == 0, $sformatf("%0d stale", n_stale));
    $display("3000/s: %0d triggers in all, %0d vetoed, %0d packets, largest backlog %0d, %0d us simulated",
             n_trig, n_veto, n_pkt, max_backlog, gns / 1000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
