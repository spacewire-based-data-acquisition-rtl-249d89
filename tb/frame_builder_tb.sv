// frame_builder_tb: feeds the frame builder from a testbench event source
// that starts an event only when `accept` is high (like the event builder)
// and checks the full 8195-word frames: header 0x02EFCDAB at word 0,
// events back to back from word 1, zero fill, UNIXTIME at word 8193,
// trailer 0x2301FFFF at word 8194. With 104-word (All Readout) events a
// frame must hold exactly 77 events; with short sparse-size events the
// count must match the room rule computed here independently. Also checks
// that a flush closes a partly filled frame and that an empty frame is
// not flushed.
module frame_builder_tb;
  import foxsi_pkg::*;
  logic clk = 0, rst_n = 0, flush = 0, fr_ready = 1;
  logic ev_valid = 0, ev_last = 0, ev_busy = 0; logic [31:0] ev_data = 0;
  logic ev_ready, accept, fr_valid, fr_last; logic [31:0] fr_data, frames, flushes;
  logic [31:0] unixtime = 32'h6620_0000;
  int checks = 0, failures = 0;
  logic [31:0] fr [$];
  logic [31:0] frames_got [$][$];
  always #5 clk = ~clk;
  always @(posedge clk) fr_ready <= ($urandom % 8) != 0;
  always @(posedge clk) if (rst_n && fr_valid && fr_ready) begin
    fr.push_back(fr_data);
    if (fr_last) begin frames_got.push_back(fr); fr.delete(); end
  end

  frame_builder dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // send one event of n words; word k = {id[15:0], k[15:0]}
  task automatic send_event(input int id, input int n);
    ev_busy = 1;
    for (int k = 0; k < n; k++) begin
      ev_valid = 1; ev_data = {16'(id), 16'(k)}; ev_last = (k == n - 1);
      do @(posedge clk); while (!ev_ready);
      #1;
    end
    ev_valid = 0; ev_last = 0; ev_busy = 0;
  endtask

  // events of length n until the frame closes; returns events sent
  task automatic fill(input int n, input int first_id, output int sent);
    sent = 0;
    forever begin
      @(posedge clk); #1;
      if (accept) begin send_event(first_id + sent, n); sent++; end
      else if (frames_got.size() > 0) break;
      if (sent > 2000) break;
    end
  endtask

  function automatic int expect_events(input int n);
    int ptr = 1, cnt = 0;
    while (ptr + 2 * 104 <= 8193) begin ptr += n; cnt++; end
    return cnt;
  endfunction

  task automatic check_frame(input int idx, input int n, input int nev, input int first_id);
    int w = 1;
    chk(frames_got[idx].size() == 8195, $sformatf("frame %0d size %0d", idx, frames_got[idx].size()));
    if (frames_got[idx].size() != 8195) return;
    chk(frames_got[idx][0] == 32'h02EF_CDAB, "frame header");
    chk(frames_got[idx][8193] == unixtime, "UNIXTIME word");
    chk(frames_got[idx][8194] == 32'h2301_FFFF, "frame trailer");
    for (int e = 0; e < nev; e++)
      for (int k = 0; k < n; k++) begin
        if (frames_got[idx][w] != {16'(first_id + e), 16'(k)}) begin
          failures++; $display("FAIL frame %0d word %0d", idx, w);
        end
        w++;
      end
    checks++;
    for (; w < 8193; w++) if (frames_got[idx][w] != 0) begin failures++; $display("FAIL fill word %0d", w); break; end
    checks++;
  endtask

  initial begin
    #100000000; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int sent;
    repeat (3) @(posedge clk); rst_n = 1;
    // flush on an empty frame does nothing
    @(posedge clk); #1 flush = 1; @(posedge clk); #1 flush = 0;
    repeat (30) @(posedge clk);
    chk(frames_got.size() == 0 && flushes == 0, "empty frame not flushed");
    // All Readout: 104-word events
    fill(104, 0, sent);
    chk(sent == 77, $sformatf("All Readout events per frame %0d", sent));
    check_frame(0, 104, 77, 0);
    frames_got.delete();
    // sparse-size events of 26 words
    fill(26, 1000, sent);
    chk(sent == expect_events(26), $sformatf("sparse events %0d exp %0d", sent, expect_events(26)));
    check_frame(0, 26, sent, 1000);
    frames_got.delete();
    // partial frame closed by flush
    for (int e = 0; e < 5; e++) begin
      do @(posedge clk); while (!accept); #1 send_event(2000 + e, 30);
    end
    @(posedge clk); #1 flush = 1; @(posedge clk); #1 flush = 0;
    wait (frames_got.size() == 1); @(posedge clk);
    check_frame(0, 30, 5, 2000);
    chk(flushes == 1 && frames == 3, $sformatf("flushes %0d frames %0d", flushes, frames));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
