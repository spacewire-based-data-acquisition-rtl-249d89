// de_mode_ctrl_tb: drives the controller with timecode steps (0..63
// repeating, one step every 4 clocks) and 12-byte commands, and checks the
// mode sequence: Idle -> Init at timecode 0 -> Standby at timecode 2 ->
// HV on at timecode 3; commands polled only at timecode 1; Obs entered at
// timecode 3; Obs:Start / Stop / Stop Readout / Idle; the flush pulse at
// Obs:Stop; acquisition and readout enables in each state; a threshold
// command applied at timecode 2; an illegal command rejected; End and the
// automatic return to Standby.
module de_mode_ctrl_tb;
  import foxsi_pkg::*;
  logic clk = 0, rst_n = 0, step = 0, cmd_wr = 0; logic [95:0] cmd = 0;
  action_e action;
  gen_mode_e gen_mode; obs_mode_e obs_mode;
  logic acq_enable, readout_enable, flush, hv_on, sparse; logic [15:0] hv_value; adc_t dth;
  logic [31:0] cmd_done, cmd_rejected;
  logic [5:0] tc = 6'd63;
  int checks = 0, failures = 0, flushes = 0;
  always #5 clk = ~clk;

  de_mode_ctrl dut (.*);
  timecode_scheduler sch (.timecode(tc), .cycle_odd(1'b1), .action(action), .acq_en(), .acq_det());

  always @(posedge clk) if (rst_n && flush) flushes++;

  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL %s (tc %0d gen %0d obs %0d)", msg, tc, gen_mode, obs_mode); end
  endtask

  // advance to timecode t (emitting each step)
  task automatic goto_tc(input int t);
    do begin
      @(posedge clk); #1 tc = tc + 6'd1; step = 1;
      @(posedge clk); #1 step = 0;
      repeat (2) @(posedge clk);
    end while (tc != 6'(t));
    #1;
  endtask

  task automatic send(input logic [7:0] opc, input logic [7:0] arg, input logic [15:0] val);
    @(posedge clk); #1 cmd = {opc, arg, val, 64'h0}; cmd_wr = 1; @(posedge clk); #1 cmd_wr = 0;
  endtask

  initial begin
    #2000000; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    chk(gen_mode == GEN_IDLE && !hv_on, "reset Idle");
    goto_tc(0); chk(gen_mode == GEN_INIT, "Init at tc 0");
    goto_tc(2); chk(gen_mode == GEN_STANDBY && dth == 10 && sparse, "Standby with defaults at tc 2");
    goto_tc(3); chk(hv_on, "HV on at tc 3");
    // threshold change
    send(OPC_SET_DTH, 8'h01, 16'd25);
    goto_tc(1); chk(dth == 10, "Dth not yet applied at tc 1");
    goto_tc(2); chk(dth == 25 && sparse, "Dth applied at tc 2");
    // enter Obs
    send(OPC_GEN_MODE, 8'(GEN_OBS), 16'h0);
    goto_tc(20); chk(gen_mode == GEN_STANDBY, "command waits for polling");
    goto_tc(1); goto_tc(2); chk(gen_mode == GEN_STANDBY, "mode change waits for tc 3");
    goto_tc(3); chk(gen_mode == GEN_OBS && obs_mode == OBS_IDLE, "Obs at tc 3");
    chk(!acq_enable && !readout_enable, "Obs:Idle no acquisition");
    // illegal: Stop while Obs:Idle
    send(OPC_OBS_MODE, 8'(OBS_STOP), 16'h0);
    goto_tc(3); chk(obs_mode == OBS_IDLE && cmd_rejected == 1, "illegal command rejected");
    send(OPC_OBS_MODE, 8'(OBS_START), 16'h0);
    goto_tc(3); chk(obs_mode == OBS_START && acq_enable && readout_enable, "Obs:Start");
    send(OPC_OBS_MODE, 8'(OBS_STOP), 16'h0);
    goto_tc(3); chk(obs_mode == OBS_STOP && !acq_enable && readout_enable, "Obs:Stop keeps readout");
    chk(flushes == 1, "flush at Obs:Stop");
    send(OPC_OBS_MODE, 8'(OBS_STOP_READOUT), 16'h0);
    goto_tc(3); chk(obs_mode == OBS_STOP_READOUT && !readout_enable, "Obs:Stop Readout");
    goto_tc(4); chk(obs_mode == OBS_IDLE, "back to Obs:Idle");
    // HV value and End
    send(OPC_SET_HV, 8'h00, 16'd200);
    goto_tc(3); chk(hv_value == 200, "HV value at tc 3");
    send(OPC_GEN_MODE, 8'(GEN_END), 16'h0);
    goto_tc(3); chk(gen_mode == GEN_END && !hv_on, "End removes HV");
    goto_tc(3); chk(gen_mode == GEN_STANDBY, "End returns to Standby");
    goto_tc(3); chk(hv_on, "HV back in Standby");
    chk(cmd_done == 7, $sformatf("commands done %0d", cmd_done));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
