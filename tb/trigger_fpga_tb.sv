// trigger_fpga_tb: the backplane trigger FPGA on its own. A testbench decoder
// watches the serial readout line. Checks: the camera time against a reference
// count (8 ns per cycle, restarting after each PPS edge); a neighbouring pair
// gives cam_trig_out 2 cycles after the lines and a READOUT message carrying
// the next event number and the camera time of the cam_trig_out cycle; the
// trigger pattern; a PPS edge gives a RESYNC message carrying the camera time
// of the cycle before its start bit; triggers while a readout message waits
// are vetoed; the external trigger; a PPS arriving while a readout is queued
// is sent after it. Every message sent is accounted for.
module trigger_fpga_tb;
  import chec_pkg::*;
  localparam int N = 512;

  logic clk = 0, rst_n = 0, pps = 0, ext_trig = 0, ext_en = 0;
  logic [N-1:0] trig_in = '0;
  logic [3:0] coinc_cycles = 4'd1;
  logic cam_trig_out, cam_trig_ext, pattern_valid, trig_vetoed, ser_out;
  logic [N-1:0] trig_pattern;
  logic [15:0] event_count;
  logic [31:0] cam_ns, cam_sec;

  int checks = 0, failures = 0;
  int cyc = 0;
  logic [31:0] ns_hist [int];
  int trig_cycles [$];
  int n_ro = 0, n_rs = 0, n_veto = 0, n_trig = 0;

  always #4 clk = ~clk;
  trigger_fpga dut (.*);

  initial begin
    #5_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask

  // Cycle counter (cycles since reset release)
  always @(posedge clk) if (rst_n) cyc <= cyc + 1;

  // Independent reference for the camera time: count cycles since reset,
  // restart after PPS edges.
  logic pps_d = 0;
  longint rns = 0;
  always @(posedge clk) begin
    if (!rst_n) begin rns <= 0; pps_d <= 0; end
    else begin
      pps_d <= pps;
      rns <= (pps && !pps_d) ? 0 : rns + 8;
    end
  end

  always @(negedge clk) if (rst_n) begin
    check(cam_ns == 32'(rns), $sformatf("cam_ns %0d want %0d", cam_ns, rns));
    ns_hist[cyc] = 32'(rns);
    if (cam_trig_out) begin trig_cycles.push_back(cyc); n_trig++; end
    if (trig_vetoed) n_veto++;
  end

  // Serial decoder
  int ev_expect = 0;
  initial begin
    logic [49:0] bits;
    msg_t m;
    int start_cyc, tc;
    forever begin
      @(negedge clk);
      if (rst_n && ser_out) begin
        start_cyc = cyc;
        for (int i = 49; i >= 0; i--) begin @(negedge clk); bits[i] = ser_out; end
        m = msg_t'(bits);
        if (m.mtype == MSG_READOUT) begin
          n_ro++;
          check(trig_cycles.size() > 0, "READOUT without camera trigger");
          if (trig_cycles.size() > 0) begin
            tc = trig_cycles.pop_front();
            check(m.ns == ns_hist[tc], $sformatf("READOUT time %0d want %0d", m.ns, ns_hist[tc]));
            check(m.event_id == 16'(ev_expect), $sformatf("event id %0d want %0d", m.event_id, ev_expect));
            ev_expect++;
          end
        end else if (m.mtype == MSG_RESYNC) begin
          n_rs++;
          check(m.ns == ns_hist[start_cyc - 1], $sformatf("RESYNC time %0d want %0d", m.ns, ns_hist[start_cyc - 1]));
        end else check(0, "bad message type");
      end
    end
  end

  task automatic pulse_lines(logic [N-1:0] v);
    trig_in = v; @(posedge clk); #1; trig_in = '0;
  endtask

  task automatic wait_cycles(int n);
    repeat (n) @(posedge clk);
    #1;
  endtask

  initial begin
    int c0, ntr0, nveto0;
    wait_cycles(2);
    rst_n = 1;
    wait_cycles(10);
    // PPS -> RESYNC
    pps = 1; wait_cycles(5); pps = 0;
    wait_cycles(80);
    check(n_rs == 1, "no RESYNC after PPS");
    // neighbouring pair inside module 3 -> trigger 2 cycles later
    c0 = cyc;
    trig_in = '0; trig_in[3*16+5] = 1; trig_in[3*16+6] = 1;
    wait_cycles(1); trig_in = '0;
    wait_cycles(1);
    check(cam_trig_out && cyc == c0 + 2, "cam_trig_out latency");
    check(trig_pattern[3*16+5] && trig_pattern[3*16+6] && $countones(trig_pattern) == 2, "pattern");
    wait_cycles(80);
    check(n_ro == 1, "no READOUT message");
    // burst: three pairs 3 cycles apart: first two accepted, third vetoed
    ntr0 = n_trig; nveto0 = n_veto;
    for (int k = 0; k < 3; k++) begin
      trig_in = '0; trig_in[100+2*k] = 1; trig_in[101+2*k] = 1;
      wait_cycles(1); trig_in = '0; wait_cycles(3);
    end
    wait_cycles(150);
    check(n_trig - ntr0 == 2, $sformatf("burst: %0d triggers, want 2", n_trig - ntr0));
    check(n_veto - nveto0 == 1, $sformatf("burst: %0d vetoes, want 1", n_veto - nveto0));
    // external trigger
    ext_en = 1; ext_trig = 1; wait_cycles(3); ext_trig = 0; ext_en = 0;
    wait_cycles(80);
    check(n_ro == 4, $sformatf("READOUT count %0d want 4", n_ro));
    // PPS while a readout is queued: two triggers then a PPS edge
    trig_in[200] = 1; trig_in[201] = 1; wait_cycles(1); trig_in = '0;
    wait_cycles(4);
    trig_in[300] = 1; trig_in[301] = 1; wait_cycles(1); trig_in = '0;
    wait_cycles(2);
    pps = 1; wait_cycles(3); pps = 0;
    wait_cycles(250);
    check(n_ro == 6 && n_rs == 2, $sformatf("messages: %0d readout %0d resync", n_ro, n_rs));
    check(event_count == 16'(6), "event_count");
    check(trig_cycles.size() == 0, "camera triggers without READOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
