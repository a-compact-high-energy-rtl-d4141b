// fee_readout_tb: the module capture controller against the sampling-ASIC
// model. The camera time seen by the controller and the model's write
// position both start at 0 with the simulation, so the sample of camera time t
// is sample_val(MOD, ch, t). For each request the testbench predicts every
// cell written to the cell buffer (the ASIC data present with cell_wr: all
// 64 channels of cells start..start+W-1) and the event descriptor, and checks them with their cycle timing (cells in
// cycles 2..W+1 after acceptance, descriptor in cycle W+2). Cases: nominal
// 96 ns window, windows of 1 and 8 blocks and the clamping of 0 and 15 blocks,
// a window wrapping past cell 4095, a window at the oldest still-valid age and
// one just past it, a stale window (descriptor only, at once, with the flag),
// a stall while the cell buffer lacks room, a hold while the descriptor queue
// is full, a request while busy, and a request that turns stale while stalled.
module fee_readout_tb;
  import chec_pkg::*;
  import chec_tb_pkg::*;
  localparam int MOD = 5;
  localparam int NCH = 64;

  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready;
  rdreq_t req = '0;
  logic [31:0] now_ns;
  logic [11:0] cfg_lookback_ns = 12'd40;
  logic [3:0]  cfg_blocks = 4'd3;
  logic asic_rd_en;
  logic [11:0] asic_rd_cell;
  logic [NCH*12-1:0] asic_rd_data;
  logic [10:0] cell_free = 11'd1024;
  logic cell_wr;
  logic hdr_full = 0, hdr_wr;
  evhdr_t hdr_wdata;
  logic stall, stale_event;
  longint unsigned gns = 0;
  int checks = 0, failures = 0;
  int nstall = 0;

  always #4 clk = ~clk;
  always @(posedge clk) gns <= gns + 8;
  assign now_ns = 32'(gns);
  always @(posedge clk) if (stall) nstall++;

  fee_readout dut (.*);
  targetc_model #(.MOD_ID(MOD), .NCH(NCH)) u_asic (
    .clk, .pps(1'b0), .abs_ns(gns), .rd_en(asic_rd_en), .rd_cell(asic_rd_cell),
    .rd_data(asic_rd_data)
  );

  initial begin
    #20_000_000; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // Issue a request whose window starts `age` ns before now. hold_kind 1 keeps
  // the cell buffer short of room, 2 keeps the descriptor queue full, for
  // hold cycles; the request must wait (and stall) meanwhile.
  task automatic event_case(int blocks_cfg, int age, int lookback, int hold_kind,
                            int hold, int ev, string name);
    int blocks, w, ncell, cyc, acc_age;
    bit exp_stale, done;
    longint unsigned start;
    logic [NCH*12-1:0] row;
    evhdr_t eh;
    blocks = (blocks_cfg == 0) ? 1 : (blocks_cfg > 8 ? 8 : blocks_cfg);
    w = blocks * 32;
    cfg_blocks = 4'(blocks_cfg);
    cfg_lookback_ns = 12'(lookback);
    start = gns - 64'(age);
    req_valid = 1; req.event_id = 16'(ev); req.trig_ns = 32'(start + 64'(lookback));
    if (hold_kind == 1) cell_free = 11'(w - 1);
    if (hold_kind == 2) hdr_full = 1;
    #0;
    for (int i = 0; i < hold; i++) begin
      if (gns - start + 64'(7 * w + 1) >= 4096 && hold_kind == 1) break;  // turned stale
      check(!req_ready && stall, {name, ": accepted without room"});
      @(posedge clk); #1;
    end
    if (!(gns - start + 64'(7 * w + 1) >= 4096 && hold_kind == 1)) cell_free = 11'd1024;
    hdr_full = 0;
    #0;
    acc_age = int'(gns - start);
    exp_stale = (acc_age + 7 * w + 1 >= 4096);
    check(req_ready, {name, ": not ready"});
    check(!stall, {name, ": stall while ready"});
    eh = '{stale: exp_stale, event_id: 16'(ev), trig_ns: 32'(start + 64'(lookback)),
           start_cell: 12'(start), win: 16'(w)};
    @(posedge clk); #1;
    req_valid = 0;
    check(stale_event == exp_stale, {name, ": stale flag pulse"});
    ncell = 0; done = 0; cyc = 1;
    while (!done && cyc < 400) begin
      if (cyc <= 2) check(!req_ready, {name, ": ready while busy"});
      if (cell_wr) begin
        check(!exp_stale, {name, ": cell written for stale window"});
        check(cyc == ncell + 2, $sformatf("%s: cell %0d in cycle %0d", name, ncell, cyc));
        for (int ch = 0; ch < NCH; ch++)
          row[ch*12 +: 12] = sample_val(MOD, ch, start + 64'(ncell));
        check(asic_rd_data == row, $sformatf("%s: cell %0d data", name, ncell));
        ncell++;
      end
      if (hdr_wr) begin
        check(hdr_wdata == eh, $sformatf("%s: descriptor %h want %h", name, hdr_wdata, eh));
        check(cyc == (exp_stale ? 1 : w + 2), $sformatf("%s: descriptor in cycle %0d", name, cyc));
        done = 1;
      end
      @(posedge clk); #1; cyc++;
    end
    check(done, {name, ": no descriptor"});
    check(ncell == (exp_stale ? 0 : w), $sformatf("%s: %0d cells, want %0d", name, ncell, w));
    cell_free = 11'd1024;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    repeat (600) @(posedge clk); #1;   // fill the ring with more than a window
    event_case(3, 200, 40, 0, 0, 1, "nominal");
    event_case(1, 100, 0, 0, 0, 2, "one block");
    event_case(8, 300, 100, 0, 0, 3, "eight blocks");
    event_case(0, 100, 10, 0, 0, 4, "zero blocks -> one");
    event_case(15, 100, 10, 0, 0, 5, "fifteen blocks -> eight");
    // wrap: let the ring pass 4096 and place the window across cell 0
    while ((gns % 4096) != 4096 - 48) @(posedge clk);
    #1;
    event_case(3, 20, 20, 0, 0, 6, "wrap");
    event_case(3, 4096 - 7 * 96 - 2, 0, 0, 0, 7, "oldest valid");
    event_case(3, 4096 - 7 * 96 - 1, 0, 0, 0, 8, "just stale");
    event_case(3, 3900, 0, 0, 0, 9, "stale");
    event_case(3, 150, 30, 1, 30, 10, "stall on cell buffer");
    check(nstall >= 30, $sformatf("stall seen %0d cycles", nstall));
    event_case(3, 150, 30, 2, 25, 11, "hold on descriptor queue");
    event_case(3, 3000, 0, 1, 60, 12, "stale after waiting");
    event_case(8, 100, 0, 1, 10, 13, "eight blocks after stall");
    // back-to-back requests: the second one is taken W+3 cycles after the first
    begin
      int t0, t1, cyc;
      cfg_blocks = 4'd3; cfg_lookback_ns = 12'd0;
      req_valid = 1; req.event_id = 16'd20; req.trig_ns = 32'(gns - 100);
      #0;
      t0 = -1; t1 = -1;
      for (cyc = 0; cyc < 300 && t1 < 0; cyc++) begin
        if (req_valid && req_ready) begin
          if (t0 < 0) begin
            t0 = cyc;
            @(posedge clk); #1;
            req.event_id = 16'd21; req.trig_ns = 32'(gns - 100);
            continue;
          end else t1 = cyc;
        end
        @(posedge clk); #1;
      end
      req_valid = 0;
      check(t1 - t0 == 96 + 3, $sformatf("back-to-back spacing %0d", t1 - t0));
      repeat (120) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
