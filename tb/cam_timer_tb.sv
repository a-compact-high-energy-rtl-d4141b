// cam_timer_tb: checks the camera ns counter: +8 ns per cycle, cleared in the
// cycle after a PPS rising edge (held PPS clears only once), seconds counted
// per edge, and load taking priority over PPS.
module cam_timer_tb;
  logic clk = 0, rst_n = 0, pps = 0, load = 0;
  logic [31:0] load_ns = 0, ns, sec;
  logic pps_edge;
  int checks = 0, failures = 0;
  longint exp_ns;
  int exp_sec;

  always #4 clk = ~clk;
  cam_timer dut (.*);

  initial begin
    #1_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    exp_ns = 0; exp_sec = 0;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      // stimulus for this cycle
      pps  = (cyc % 700 >= 300 && cyc % 700 < 310);
      load = (cyc == 1500) || (cyc == 2400);   // 2400: same cycle as a PPS edge
      load_ns = 32'h1234_5670 + 32'(cyc);
      #0;
      check(ns == 32'(exp_ns), $sformatf("cycle %0d ns %0d want %0d", cyc, ns, exp_ns));
      check(sec == 32'(exp_sec), $sformatf("cycle %0d sec %0d want %0d", cyc, sec, exp_sec));
      check(pps_edge == (cyc % 700 == 300), $sformatf("cycle %0d pps_edge", cyc));
      // reference for the next cycle
      if (cyc % 700 == 300) exp_sec++;
      if (load) exp_ns = load_ns;
      else if (cyc % 700 == 300) exp_ns = 0;
      else exp_ns = (exp_ns + 8) % 64'h1_0000_0000;
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
