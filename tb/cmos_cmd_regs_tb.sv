// cmos_cmd_regs_tb: writes command words and checks their effect: start,
// stop, mode, exposure time, the 0x20 reset-and-restart command (settings
// back to default, running, restart pulse), and the double-command rule
// for reboot (refused alone or when another write intervenes, carried out
// right after the arm flag).
module cmos_cmd_regs_tb;
  logic clk = 0, rst_n = 0, wr = 0; logic [11:0] addr = 0; logic [31:0] wdata = 0;
  logic run, flight_mode, restart, reboot; logic [15:0] exp_slots; logic [31:0] status;
  int checks = 0, failures = 0, restarts = 0, reboots = 0;
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) begin if (restart) restarts++; if (reboot) reboots++; end

  cmos_cmd_regs dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask
  task automatic w(input logic [11:0] a, input logic [31:0] d);
    @(posedge clk); #1 wr = 1; addr = a; wdata = d; @(posedge clk); #1 wr = 0; @(posedge clk); #1;
  endtask

  initial begin
    #1000000; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    chk(!run && flight_mode && exp_slots == 50, "defaults");
    w(12'h000, 1); chk(run, "start");
    w(12'h008, 0); chk(!flight_mode, "test mode");
    w(12'h00C, 123); chk(exp_slots == 123, "exposure time");
    w(12'h004, 1); chk(!run, "stop");
    w(12'h020, 1); chk(run && flight_mode && exp_slots == 50 && restarts == 1, "0x20 reset and restart");
    w(12'h024, 1); chk(reboots == 0 && status == 32'hDEAD_0024, "reboot refused without flag");
    w(12'h180, 1); w(12'h00C, 7); w(12'h024, 1); chk(reboots == 0, "flag cleared by other write");
    w(12'h180, 1); w(12'h024, 1); chk(reboots == 1 && status[11:0] == 12'h024, "reboot after flag");
    w(12'h024, 1); chk(reboots == 1, "flag used once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
