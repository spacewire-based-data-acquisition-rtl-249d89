// pps_capture_tb: drives PPS pulses at known clocks and checks that each
// rising edge gives exactly one stamp, three clocks later, holding the
// local time and timecode of that clock; a held-high PPS must not re-fire.
module pps_capture_tb;
  logic clk = 0, rst_n = 0, pps = 0;
  logic [63:0] local_time = 0; logic [5:0] timecode = 0;
  logic stamp_valid; logic [63:0] stamp_time; logic [5:0] stamp_tc; logic [31:0] pps_count;
  int checks = 0, failures = 0, stamps = 0;
  longint edge_t;
  always #5 clk = ~clk;
  always @(posedge clk) begin local_time <= local_time + 1; timecode <= 6'(local_time[9:4]); end

  pps_capture dut (.*);

  initial begin
    #1000000; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n && stamp_valid) begin
    stamps++;
    checks++; if (stamp_time != 64'(edge_t + 2)) begin failures++; $display("FAIL stamp %0d exp %0d", stamp_time, edge_t + 2); end
    checks++; if (local_time != 64'(edge_t + 3)) begin failures++; $display("FAIL latency"); end
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 5; k++) begin
      repeat (50 + 17 * k) @(posedge clk);
      #1 pps = 1; edge_t = local_time;   // sampled at the next edge
      repeat (20 + k) @(posedge clk);
      #1 pps = 0;
    end
    repeat (20) @(posedge clk);
    checks++; if (stamps != 5 || pps_count != 5) begin failures++; $display("FAIL count %0d %0d", stamps, pps_count); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
