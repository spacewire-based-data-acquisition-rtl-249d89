// timecode_scheduler_tb: exhaustive check of the timecode-action table
// for all 64 timecodes and both cycle parities, against a reference
// written straight from the table (odd cycles read detectors #1/#2).
// Also counts acquisition steps per detector per two-second period (30).
module timecode_scheduler_tb;
  import foxsi_pkg::*;
  logic [5:0] timecode; logic cycle_odd; action_e action; logic acq_en; logic [1:0] acq_det;
  int checks = 0, failures = 0;
  int per_det [4];

  timecode_scheduler dut (.*);

  initial begin
    #1000000; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    action_e ea; int ed;
    for (int i = 0; i < 4; i++) per_det[i] = 0;
    for (int p = 0; p < 2; p++) begin
      for (int t = 0; t < 64; t++) begin
        timecode = 6'(t); cycle_odd = (p == 1); #1;
        ea = (t == 0) ? ACT_HK_UPDATE : (t == 1) ? ACT_CMD_POLL : (t == 2) ? ACT_PARAM_SETUP :
             (t == 3) ? ACT_HV_READOUT : ACT_ACQUIRE;
        if (p == 1) ed = (t < 34) ? 0 : 1; else ed = (t < 34) ? 2 : 3;
        checks++; if (action != ea) begin failures++; $display("FAIL action tc=%0d odd=%0d", t, p); end
        checks++; if (acq_en != (t >= 4)) begin failures++; $display("FAIL acq_en tc=%0d", t); end
        if (t >= 4) begin
          checks++; if (acq_det != 2'(ed)) begin failures++; $display("FAIL det tc=%0d odd=%0d got %0d", t, p, acq_det); end
          per_det[acq_det]++;
        end
      end
    end
    for (int i = 0; i < 4; i++) begin
      checks++; if (per_det[i] != 30) begin failures++; $display("FAIL det %0d steps %0d", i, per_det[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
