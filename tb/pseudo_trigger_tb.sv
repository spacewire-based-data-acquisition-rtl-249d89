// pseudo_trigger_tb: with CLK_HZ = 10000 and RATE_HZ = 100 a pulse is
// expected every 100 clocks on average. Over 200000 clocks the number of
// pulses must be 2000 within 5 sigma (+-224), `count` must equal the
// pulses seen, pulses are single-clock, and none may come while disabled.
module pseudo_trigger_tb;
  logic clk = 0, rst_n = 0, enable = 0;
  logic trig; logic [31:0] count;
  int checks = 0, failures = 0, seen = 0, while_off = 0, min_gap = 1 << 30, last = -1;
  always #5 clk = ~clk;

  pseudo_trigger #(.CLK_HZ(10000), .RATE_HZ(100)) dut (.*);

  initial begin
    #50000000; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (20000) begin @(posedge clk); #1 if (trig) while_off++; end
    checks++; if (while_off != 0 || count != 0) begin failures++; $display("FAIL trig while disabled"); end
    enable = 1;
    for (int c = 0; c < 200000; c++) begin
      @(posedge clk); #1;
      if (trig) begin
        seen++;
        if (last >= 0 && c - last < min_gap) min_gap = c - last;
        last = c;
      end
    end
    enable = 0; @(posedge clk); #1;
    checks++; if (seen < 2000 - 224 || seen > 2000 + 224) begin failures++; $display("FAIL rate %0d", seen); end
    checks++; if (count != 32'(seen)) begin failures++; $display("FAIL count %0d seen %0d", count, seen); end
    checks++; if (min_gap < 1) begin failures++; $display("FAIL gap"); end
    $display("pseudo triggers %0d in 200000 clocks", seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
