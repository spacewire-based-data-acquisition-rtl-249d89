// timecode_gen_tb: checks the 64-step timecode divider.
// With CLK_HZ = 640 and TC_HZ = 64 a tick must come every 10 clocks, the
// timecode must count 0..63 and wrap, and the cycle number must start at
// 1 and advance once per wrap.
module timecode_gen_tb;
  logic clk = 0, rst_n = 0;
  logic tick; logic [5:0] timecode; logic [31:0] cycle;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  timecode_gen #(.CLK_HZ(640), .TC_HZ(64)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    #200000; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int last_tick, n, exp_tc, exp_cyc;
    repeat (3) @(posedge clk);
    rst_n = 1;
    chk(timecode == 0 && cycle == 1, "reset values");
    n = 0; last_tick = -1; exp_tc = 0; exp_cyc = 1;
    for (int c = 0; c < 10 * 140; c++) begin
      @(posedge clk); #1;
      if (tick) begin
        exp_tc = (exp_tc + 1) % 64;
        if (exp_tc == 0) exp_cyc++;
        chk(timecode == exp_tc, $sformatf("timecode %0d exp %0d", timecode, exp_tc));
        chk(cycle == exp_cyc, $sformatf("cycle %0d exp %0d", cycle, exp_cyc));
        if (last_tick >= 0) chk(c - last_tick == 10, $sformatf("tick period %0d", c - last_tick));
        last_tick = c; n++;
      end
    end
    chk(n == 140, $sformatf("tick count %0d", n));
    chk(cycle == 3, "two wraps");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
