// fee_packer_tb: the packet builder fed from testbench descriptor and cell
// queues. The testbench generates events with windows of 32..256 cells and
// stale (header-only) events, offers descriptors and cells with random gaps,
// takes words with a random out_ready, and checks every word of every packet:
// the six header words, the cell-major data order 6 + k*64 + c, the last-word
// flag, that a cell is popped exactly after its 64th word and a descriptor
// after the packet's last word, and that no word is offered without its cell.
module fee_packer_tb;
  import chec_pkg::*;
  localparam int NCH = 64;
  localparam int NEV = 40;

  logic clk = 0, rst_n = 0;
  logic [7:0] module_id = 8'd17;
  logic hdr_valid, hdr_pop, cell_valid, cell_pop;
  evhdr_t hdr;
  logic [NCH*12-1:0] cell_data;
  logic [15:0] out_data;
  logic out_last, out_valid, out_ready = 0;
  int checks = 0, failures = 0;

  evhdr_t            hq[$];
  logic [NCH*12-1:0] cq[$];
  logic              hgate = 0, cgate = 0;   // random availability of the heads

  always #4 clk = ~clk;

  assign hdr_valid  = hgate && hq.size() > 0;
  assign hdr        = hq.size() > 0 ? hq[0] : '0;
  assign cell_valid = cgate && cq.size() > 0;
  assign cell_data  = cq.size() > 0 ? cq[0] : '0;

  fee_packer dut (.*);

  initial begin
    #50_000_000; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  function automatic logic [11:0] cval(int ev, int k, int c);
    return 12'((ev * 7919 + k * 131 + c * 17) ^ (k << 4));
  endfunction

  evhdr_t evs[NEV];

  initial begin
    for (int e = 0; e < NEV; e++) begin
      evs[e].stale      = (e % 5 == 3);
      evs[e].event_id   = 16'(1000 + e);
      evs[e].trig_ns    = 32'($urandom);
      evs[e].start_cell = 12'($urandom);
      evs[e].win        = 16'(32 * (1 + (e % 8)));
      hq.push_back(evs[e]);
      if (!evs[e].stale)
        for (int k = 0; k < int'(evs[e].win); k++) begin
          logic [NCH*12-1:0] r;
          for (int c = 0; c < NCH; c++) r[c*12 +: 12] = cval(e, k, c);
          cq.push_back(r);
        end
    end
  end

  // random gaps on both inputs and on the output
  always @(posedge clk) begin
    #1;
    hgate     = ($urandom % 8) != 0;
    cgate     = ($urandom % 4) != 0;
    out_ready = ($urandom % 3) != 0;
  end

  int e = 0, widx = 0;
  int npkts = 0;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready && e < NEV) begin
      int nw, k, c;
      logic [15:0] exp;
      nw = evs[e].stale ? 6 : 6 + NCH * int'(evs[e].win);
      case (widx)
        0: exp = {HDR_MAGIC, 3'b000, evs[e].stale, module_id};
        1: exp = evs[e].event_id;
        2: exp = evs[e].trig_ns[31:16];
        3: exp = evs[e].trig_ns[15:0];
        4: exp = {4'h0, evs[e].start_cell};
        5: exp = evs[e].win;
        default: begin
          k = (widx - 6) / NCH; c = (widx - 6) % NCH;
          exp = {4'h0, cval(e, k, c)};
        end
      endcase
      check(out_data == exp, $sformatf("event %0d word %0d: %h want %h", e, widx, out_data, exp));
      check(out_last == (widx == nw - 1), $sformatf("event %0d word %0d: last flag", e, widx));
      check(cell_pop == (widx >= 6 && (widx - 6) % NCH == NCH - 1),
            $sformatf("event %0d word %0d: cell pop", e, widx));
      check(hdr_pop == (widx == nw - 1), $sformatf("event %0d word %0d: descriptor pop", e, widx));
      if (widx >= 6) check(cell_valid, "data word without a cell");
      if (widx == nw - 1) begin widx = 0; e++; npkts++; end
      else widx++;
    end else begin
      check(!cell_pop && !hdr_pop, "pop without a transfer");
    end
    if (cell_pop) void'(cq.pop_front());
    if (hdr_pop)  void'(hq.pop_front());
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    wait (e == NEV);
    repeat (20) @(posedge clk);
    check(npkts == NEV, $sformatf("%0d packets", npkts));
    check(hq.size() == 0 && cq.size() == 0, "queues not drained");
    check(!out_valid, "output still valid");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
