// uplink_cmd_router_tb: queues two-byte commands for several systems,
// polls round-robin and checks that each poll serves the current system,
// delivers that system's oldest command, and that unknown systems and
// commands beyond a full queue (8 entries) are rejected.
module uplink_cmd_router_tb;
  logic clk = 0, rst_n = 0, cmd_valid = 0, poll = 0; logic [15:0] cmd = 0;
  logic [1:0] cur_sys, out_sys; logic out_valid; logic [7:0] out_cmd; logic [31:0] accepted, rejected;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  uplink_cmd_router dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask
  task automatic put(input logic [7:0] s, input logic [7:0] c);
    @(posedge clk); #1 cmd_valid = 1; cmd = {s, c}; @(posedge clk); #1 cmd_valid = 0;
  endtask
  task automatic do_poll(output bit v, output logic [1:0] s, output logic [7:0] c);
    @(posedge clk); #1 poll = 1; @(posedge clk); #1 poll = 0; v = out_valid; s = out_sys; c = out_cmd;
  endtask

  initial begin
    #1000000; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    bit v; logic [1:0] s; logic [7:0] c;
    repeat (3) @(posedge clk); rst_n = 1;
    put(8'h01, 8'hA0); put(8'h01, 8'hA1); put(8'h03, 8'hC0); put(8'h09, 8'hEE); put(8'h00, 8'hEE);
    chk(accepted == 3 && rejected == 2, "unknown systems rejected");
    do_poll(v, s, c); chk(v && s == 0 && c == 8'hA0, "poll sys 0 first command");
    do_poll(v, s, c); chk(!v, "sys 1 empty");
    do_poll(v, s, c); chk(v && s == 2 && c == 8'hC0, "poll sys 2");
    do_poll(v, s, c); chk(!v && cur_sys == 0, "sys 3 empty, wrap");
    do_poll(v, s, c); chk(v && s == 0 && c == 8'hA1, "second command of sys 0");
    for (int k = 0; k < 9; k++) put(8'h04, 8'(k));
    chk(rejected == 3, "ninth command to a full queue rejected");
    for (int k = 0; k < 8; k++) begin
      while (cur_sys != 3) do_poll(v, s, c);
      do_poll(v, s, c); chk(v && s == 3 && c == 8'(k), $sformatf("sys 3 order %0d", k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
