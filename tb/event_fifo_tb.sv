// event_fifo_tb: random writes and reads against a queue reference. Checks the
// order and value of every word read, the free count in every cycle, that the
// FIFO fills to exactly DEPTH words, that a write when full is refused and
// flagged by overflow, and first-word-fall-through timing (a word written in
// cycle t is on the output in t+1).
module event_fifo_tb;
  localparam int W = 17, D = 32768;
  logic clk = 0, rst_n = 0, wr_en = 0, out_ready = 0, overflow, out_valid;
  logic [W-1:0] wr_data = 0, out_data;
  logic [15:0] free;
  int checks = 0, failures = 0;
  logic [W-1:0] q [$];

  always #4 clk = ~clk;
  event_fifo dut (.*);

  initial begin
    #3_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // One cycle: decide stimulus, check outputs, update reference at the edge.
  task automatic step(bit w, bit r);
    bit do_w, do_r;
    wr_en = w; wr_data = W'($urandom); out_ready = r;
    #0;
    check(free == 16'(D - q.size()), $sformatf("free %0d want %0d", free, D - q.size()));
    check(out_valid == (q.size() != 0), "out_valid");
    if (q.size() != 0) check(out_data == q[0], $sformatf("data %h want %h", out_data, q[0]));
    do_w = w && (q.size() < D);
    do_r = r && (q.size() != 0);
    if (do_r) void'(q.pop_front());
    if (do_w) q.push_back(wr_data);
    @(posedge clk); #1;
    check(overflow == (w && !do_w), "overflow flag");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // write one word, it must be visible next cycle
    step(1, 0);
    check(out_valid && out_data == q[0], "fall-through timing");
    // random traffic
    for (int i = 0; i < 20000; i++) step($urandom_range(99) < 60, $urandom_range(99) < 50);
    // fill completely, then one more write
    while (q.size() < D) step(1, 0);
    check(free == 0, "not full after DEPTH words");
    step(1, 0);
    step(1, 1);
    // drain
    while (q.size() > 0) step(0, 1);
    step(0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
