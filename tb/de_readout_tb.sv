// de_readout_tb: four testbench frame sources (5 words per frame, tagged
// with detector and frame number) behind the readout engine. A scripted
// schedule opens acquisition windows for single detectors; the test
// checks that frames are requested only from the detector whose window is
// open, only while enabled, arrive whole and in order with the right
// out_det tag, and that the per-detector frame counters agree.
module de_readout_tb;
  localparam int FW = 5;
  logic clk = 0, rst_n = 0, enable = 0, acq_en = 0, out_ready = 1;
  logic [1:0] acq_det = 0;
  logic [3:0] rd_req, in_valid, in_last, in_ready, empty;
  logic [31:0] in_data [4];
  logic out_valid, out_last; logic [31:0] out_data; logic [1:0] out_det;
  logic [31:0] frames_read [4];
  int checks = 0, failures = 0;
  int avail [4], sent [4], got [4], word [4];
  bit active [4];
  bit wrong_req = 0;
  always #5 clk = ~clk;
  always @(posedge clk) out_ready <= ($urandom % 4) != 0;

  de_readout dut (.*);

  // sources
  always_comb for (int d = 0; d < 4; d++) begin
    empty[d]    = (avail[d] == 0);
    in_valid[d] = active[d];
    in_data[d]  = {8'(d), 8'(sent[d]), 16'(word[d])};
    in_last[d]  = active[d] && (word[d] == FW - 1);
  end
  always @(posedge clk) for (int d = 0; d < 4; d++) begin
    if (rd_req[d]) begin
      if (!acq_en || !enable || acq_det != 2'(d) || active[d] || avail[d] == 0) wrong_req = 1;
      active[d] <= 1; word[d] <= 0;
    end
    if (active[d] && in_ready[d]) begin
      if (word[d] == FW - 1) begin active[d] <= 0; sent[d] <= sent[d] + 1; avail[d] <= avail[d] - 1; end
      else word[d] <= word[d] + 1;
    end
  end
  // sink
  int k_sink = 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    if (out_data != {8'(out_det), 8'(got[out_det]), 16'(k_sink)}) begin failures++; $display("FAIL data %h det %0d", out_data, out_det); end
    if (out_last) begin got[out_det]++; k_sink = 0; end else k_sink++;
  end

  initial begin
    #5000000; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int d = 0; d < 4; d++) begin avail[d] = 3 + d; sent[d] = 0; got[d] = 0; word[d] = 0; active[d] = 0; end
    repeat (3) @(posedge clk); rst_n = 1;
    // windows while disabled: nothing moves
    acq_en = 1; acq_det = 0; repeat (100) @(posedge clk);
    checks++; if (got[0] != 0) begin failures++; $display("FAIL read while disabled"); end
    enable = 1;
    for (int r = 0; r < 3; r++)
      for (int d = 0; d < 4; d++) begin
        #1 acq_det = 2'(d); acq_en = 1;
        repeat (60) @(posedge clk);
        #1 acq_en = 0;
        repeat (20) @(posedge clk);
      end
    // a new frame appears outside any window: it must wait for the window
    #1 acq_det = 2'd1; avail[1] = avail[1] + 1;
    repeat (100) @(posedge clk);
    checks++; if (got[1] != 4) begin failures++; $display("FAIL frame read outside a window"); end
    #1 acq_en = 1; repeat (60) @(posedge clk); #1 acq_en = 0;
    repeat (50) @(posedge clk);
    for (int d = 0; d < 4; d++) begin
      checks++; if (got[d] != 3 + d + int'(d == 1) || frames_read[d] != 32'(3 + d + int'(d == 1))) begin
        failures++; $display("FAIL det %0d got %0d counter %0d", d, got[d], frames_read[d]); end
    end
    checks++; if (wrong_req) begin failures++; $display("FAIL request outside window"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
