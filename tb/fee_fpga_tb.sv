// fee_fpga_tb: one front-end module FPGA with its sampling-ASIC model, driven
// over the serial readout line by a testbench serialiser. Checks: the module
// time is wrong before and equal to the backplane time after a RESYNC message
// (the fixed 52-cycle link latency compensated); a READOUT message gives one
// packet on the output stream whose header and all 96x64 samples (cell-major)
// match the prediction, with the output stalled at random by eth_tready; two
// READOUTs in quick succession both give full packets (no loss); an unknown
// message type is ignored; a window already overwritten gives a header-only
// stale packet; a burst of 40 back-to-back READOUTs fills the cell buffer, so
// later requests wait, turn stale (header-only packets) and, once the request
// queue is full, are dropped (drop_event). Every packet is checked against the
// request with its event number; packets come in event order, and every
// request gives exactly one packet or one drop.
module fee_fpga_tb;
  import chec_pkg::*;
  import chec_tb_pkg::*;
  localparam int MOD = 9;
  localparam int NCH = 64;

  logic clk = 0, rst_n = 0, ser_in = 0;
  logic [7:0] module_id = 8'(MOD);
  logic [11:0] cfg_lookback_ns = 12'd64;
  logic [3:0] cfg_blocks = 4'd3;
  logic asic_rd_en;
  logic [11:0] asic_rd_cell;
  logic [NCH*12-1:0] asic_rd_data;
  logic [15:0] eth_tdata;
  logic eth_tlast, eth_tvalid, eth_tready = 0;
  logic [31:0] now_ns;
  logic resync_seen, drop_event, stale_event, stall;
  longint unsigned gns = 0;
  int checks = 0, failures = 0;
  int n_drop = 0, n_stale = 0, n_resync = 0, n_pkt = 0;

  longint unsigned trig_of [int];     // event number -> trigger time
  int n_sent = 0, last_ev = 0, n_stale_pkt = 0, n_full_pkt = 0;

  always #4 clk = ~clk;
  always @(posedge clk) gns <= gns + 8;
  always @(posedge clk) eth_tready <= ($urandom_range(99) < 70);
  always @(posedge clk) begin
    if (drop_event) n_drop++;
    if (stale_event) n_stale++;
    if (resync_seen) n_resync++;
  end

  fee_fpga dut (.*);
  targetc_model #(.MOD_ID(MOD), .NCH(NCH)) u_asic (
    .clk, .pps(1'b0), .abs_ns(gns), .rd_en(asic_rd_en), .rd_cell(asic_rd_cell),
    .rd_data(asic_rd_data)
  );

  initial begin
    #50_000_000; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // Send a frame: the current cycle is the "acceptance" cycle, the start bit
  // follows in the next one. Returns the backplane time of the acceptance cycle.
  task automatic send(logic [1:0] mtype, int ev, logic [31:0] ns_field);
    logic [49:0] bits;
    bits = {mtype, 16'(ev), ns_field};
    @(posedge clk); #1;
    ser_in = 1;
    for (int i = 49; i >= 0; i--) begin @(posedge clk); #1; ser_in = bits[i]; end
    @(posedge clk); #1;
    ser_in = 0;
  endtask

  // Packet checker on the output stream
  initial begin
    logic [15:0] w [$];
    longint unsigned start, trig;
    int win, ev;
    bit st;
    forever begin
      @(posedge clk);
      if (eth_tvalid && eth_tready) begin
        w.push_back(eth_tdata);
        if (eth_tlast) begin
          n_pkt++;
          ev = int'(w[1]);
          st = w[0][8];
          check(trig_of.exists(ev), $sformatf("packet for unknown event %0d", ev));
          check(ev > last_ev, $sformatf("event %0d after %0d", ev, last_ev));
          last_ev = ev;
          if (trig_of.exists(ev)) begin
            trig = trig_of[ev];
            start = trig - 64'(cfg_lookback_ns);
            win = 32 * int'(cfg_blocks);
            if (st) n_stale_pkt++; else n_full_pkt++;
            check(w[0] == {HDR_MAGIC, 3'b000, st, 8'(MOD)}, $sformatf("hdr0 %h", w[0]));
            check({w[2], w[3]} == 32'(trig), "trigger time");
            check(w[4] == 16'(start % 4096), "start cell");
            check(w[5] == 16'(win), "window");
            check(w.size() == (st ? 6 : 6 + NCH * win), $sformatf("packet length %0d", w.size()));
            if (!st && w.size() == 6 + NCH * win)
              for (int k = 0; k < win; k++)
                for (int ch = 0; ch < NCH; ch++)
                  check(w[6 + k*NCH + ch] == {4'h0, sample_val(MOD, ch, start + 64'(k))},
                        $sformatf("ev %0d ch %0d sample %0d", ev, ch, k));
          end
          w.delete();
        end
      end
    end
  end

  task automatic readout(int ev, longint unsigned t);
    trig_of[ev] = t;
    n_sent++;
    send(MSG_READOUT, ev, 32'(t));
  endtask

  initial begin
    longint unsigned t;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    repeat (700) @(posedge clk); #1;
    check(now_ns != 32'(gns), "module time already aligned before RESYNC");
    // RESYNC carries the backplane time of the acceptance cycle (this one)
    send(MSG_RESYNC, 0, 32'(gns));
    @(posedge clk); #1;
    check(now_ns == 32'(gns), $sformatf("after RESYNC module time %0d, backplane %0d", now_ns, gns));
    check(n_resync == 1, "resync_seen");
    // Events 1 and 2 in quick succession: both read out in full
    readout(1, gns - 120);
    repeat (40) @(posedge clk); #1;
    readout(2, gns - 100);
    repeat (20000) @(posedge clk); #1;
    check(n_drop == 0 && n_full_pkt == 2, $sformatf("drops %0d full packets %0d", n_drop, n_full_pkt));
    // Unknown message type: ignored
    send(2'b11, 7, 32'(gns));
    // Event 3: stale (trigger 3900 ns ago, window 64 ns earlier still)
    readout(3, gns - 3900);
    repeat (200) @(posedge clk); #1;
    check(n_stale == 1 && n_stale_pkt == 1, $sformatf("stale events %0d", n_stale));
    // Event 4: two blocks, recent
    cfg_blocks = 4'd2;
    readout(4, gns - 40);
    repeat (12000) @(posedge clk); #1;
    check(n_pkt == 4, $sformatf("packets %0d", n_pkt));
    // Burst: 40 requests back to back with the nominal window
    cfg_blocks = 4'd3;
    for (int i = 0; i < 40; i++) readout(10 + i, gns - 100);
    while (n_pkt + n_drop < n_sent) @(posedge clk);
    repeat (100) @(posedge clk); #1;
    check(n_pkt + n_drop == n_sent, $sformatf("sent %0d, packets %0d, drops %0d", n_sent, n_pkt, n_drop));
    check(n_full_pkt >= 13, $sformatf("full packets %0d", n_full_pkt));
    check(n_stale_pkt > 1 && n_stale == n_stale_pkt, $sformatf("stale packets %0d", n_stale_pkt));
    check(n_drop > 0, "no drop in the burst");
    $display("burst: %0d full, %0d stale, %0d dropped", n_full_pkt - 3, n_stale_pkt - 1, n_drop);
    check(now_ns == 32'(gns), "module time drifted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
