// readout_msg_rx_tb: drives serial frames built by the testbench itself (start
// bit, 50 bits MSB first, random idle gaps including none) into the receiver
// and checks every decoded message, the single msg_valid pulse per frame, and
// its latency: msg_valid 52 cycles after the cycle in which the transmitter
// would have accepted the message (start bit one cycle after that).
module readout_msg_rx_tb;
  import chec_pkg::*;
  logic clk = 0, rst_n = 0, sdat = 0, msg_valid;
  msg_t msg;
  int checks = 0, failures = 0;
  int nvalid = 0;

  always #4 clk = ~clk;
  readout_msg_rx dut (.*);

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
    int lat;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 60; n++) begin
      bits = {$urandom, $urandom};
      if (n % 4 == 1) bits[49:48] = 2'b00;   // leading zeros after the start bit
      repeat ((n % 5 == 0) ? 1 : $urandom_range(1, 6)) begin
        sdat = 0; @(posedge clk); #1;
        check(!msg_valid || n == 0 || lat >= 0, "spurious msg_valid");
      end
      // the cycle just passed is the "acceptance" cycle; lat counts from it
      lat = 1;
      sdat = 1; @(posedge clk); #1; lat++;
      check(!msg_valid, "msg_valid during frame");
      for (int i = 49; i >= 0; i--) begin
        sdat = bits[i]; @(posedge clk); #1; lat++;
        if (i > 0) check(!msg_valid, "msg_valid during frame");
      end
      sdat = 0;
      check(msg_valid, $sformatf("msg %0d: msg_valid not at latency %0d", n, lat));
      check(msg == msg_t'(bits), $sformatf("msg %0d: got %h want %h", n, msg, bits));
      check(lat == int'(LINK_LAT_CYCLES), $sformatf("latency %0d", lat));
      @(posedge clk); #1;
      check(!msg_valid, "msg_valid longer than one cycle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
