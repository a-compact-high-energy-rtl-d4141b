// readout_msg_tx_tb: sends random messages, some back to back, and checks the
// serial waveform bit by bit against the frame layout (start bit, then the 50
// message bits MSB first, line low when idle), the ready timing (one frame
// takes 52 cycles from acceptance to the next acceptance) and that nothing is
// sent without a request.
module readout_msg_tx_tb;
  import chec_pkg::*;
  logic clk = 0, rst_n = 0, send = 0, ready, sdat;
  msg_t msg;
  int checks = 0, failures = 0;

  always #4 clk = ~clk;
  readout_msg_tx dut (.*);

  initial begin
    #1_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [49:0] bits;
    int gap, t_acc, t_prev;
    msg = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    repeat (5) begin @(posedge clk); #1 check(sdat == 0, "line not idle after reset"); end
    t_prev = -1;
    for (int n = 0; n < 40; n++) begin
      bits = {$urandom, $urandom};
      msg = msg_t'(bits);
      gap = (n % 3 == 0) ? 0 : $urandom_range(5);
      repeat (gap) begin @(posedge clk); #1 check(sdat == 0, "line not idle between frames"); end
      send = 1;
      t_acc = 0;
      while (!ready) begin @(posedge clk); #1; t_acc++; end
      check(ready, "ready");
      @(posedge clk); #1;
      send = 0;
      // frame: start bit then payload MSB first
      check(sdat == 1, $sformatf("msg %0d start bit", n));
      check(!ready, "ready while sending");
      for (int i = 49; i >= 0; i--) begin
        @(posedge clk); #1;
        check(sdat == bits[i], $sformatf("msg %0d bit %0d", n, i));
      end
      @(posedge clk); #1;
      check(ready, $sformatf("msg %0d: ready not back 52 cycles after acceptance", n));
      check(sdat == 0, "line not idle after frame");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
