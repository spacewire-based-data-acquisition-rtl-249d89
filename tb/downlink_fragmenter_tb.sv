// downlink_fragmenter_tb: fragments products of several lengths (100,
// 1492, 1493 and 4000 bytes) and checks every packet: size at most 1500
// bytes, the 8-byte header (system ID, packet total, packet counter,
// data type, reserved zero), the payload bytes in order, and the number
// of packets (ceil(length / 1492)).
module downlink_fragmenter_tb;
  logic clk = 0, rst_n = 0, start = 0, in_valid = 0, out_ready = 1;
  logic [7:0] sys_id = 0, data_type = 0, in_data; logic [31:0] length = 0;
  logic busy, in_ready, out_valid, out_last; logic [7:0] out_data; logic [31:0] packets_sent;
  int checks = 0, failures = 0;
  logic [7:0] pkt [$];
  logic [7:0] pkts [$][$];
  int src_i = 0;
  always #5 clk = ~clk;
  always @(posedge clk) out_ready <= ($urandom % 4) != 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    pkt.push_back(out_data);
    if (out_last) begin pkts.push_back(pkt); pkt.delete(); end
  end
  // source: byte i of the product = i * 7 + 3
  always @(posedge clk) if (rst_n && in_valid && in_ready) src_i <= src_i + 1;
  assign in_data = 8'(src_i * 7 + 3);

  downlink_fragmenter dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    #20000000; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int lens [4] = '{100, 1492, 1493, 4000};
    int n, b;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 4; t++) begin
      pkts.delete(); src_i = 0;
      @(posedge clk); #1 start = 1; sys_id = 8'(t + 1); data_type = 8'(16 + t); length = lens[t]; in_valid = 1;
      @(posedge clk); #1 start = 0;
      wait (!busy); repeat (3) @(posedge clk); #1 in_valid = 0;
      n = (lens[t] + 1491) / 1492;
      chk(pkts.size() == n, $sformatf("len %0d packets %0d exp %0d", lens[t], pkts.size(), n));
      b = 0;
      for (int p = 0; p < pkts.size(); p++) begin
        int pay;
        pay = (lens[t] - b > 1492) ? 1492 : lens[t] - b;
        chk(pkts[p].size() == pay + 8 && pkts[p].size() <= 1500, $sformatf("packet size %0d", pkts[p].size()));
        chk(pkts[p][0] == 8'(t + 1) && {pkts[p][1], pkts[p][2]} == 16'(n) && {pkts[p][3], pkts[p][4]} == 16'(p)
            && pkts[p][5] == 8'(16 + t) && pkts[p][6] == 0 && pkts[p][7] == 0, $sformatf("header of packet %0d", p));
        for (int k = 8; k < pkts[p].size(); k++) begin
          if (pkts[p][k] != 8'(b * 7 + 3)) begin failures++; $display("FAIL payload byte %0d", b); end
          b++;
        end
        checks++;
      end
      chk(b == lens[t], "all payload delivered");
    end
    chk(packets_sent == 1 + 1 + 2 + 3, $sformatf("packets_sent %0d", packets_sent));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
