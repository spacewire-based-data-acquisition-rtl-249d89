// cmos_exposure_seq_tb: runs the sequencer with 4-clock slots
// (CLK_HZ = 1000, SLOT_MS = 4) and records every operation with its slot
// number. Checks, for Flight mode: QL and PC phases alternate; each phase
// begins with R,S for regions 1,2,4,5,3 in that order, one operation per
// slot; the PC phase then has exactly 50 Region-3 burst slots; every
// region's QL exposure (end of S slot to start of next R slot) equals the
// programmed exp_slots; the Region-3 burst frame counter. For Test mode:
// whole-sensor R,S and an exposure of exp_slots. Also checks that
// `restart` aborts and restarts from a QL phase.
module cmos_exposure_seq_tb;
  import foxsi_pkg::*;
  logic clk = 0, rst_n = 0, run = 0, flight_mode = 1, restart = 0;
  logic [15:0] exp_slots = 16'd20;
  logic op_valid; cmos_op_t op; cmos_phase_e phase; logic [4:0] exposing; logic [31:0] burst_frames, phases_done;
  int checks = 0, failures = 0;
  longint slot_no = 0;
  typedef struct { longint t; cmos_op_t op; cmos_phase_e ph; } rec_t;
  rec_t recs [$];
  always #5 clk = ~clk;

  cmos_exposure_seq #(.CLK_HZ(1000), .SLOT_MS(4)) dut (.*);

  // slot index = clocks / 4 since reset release
  longint clk_no = 0;
  always @(posedge clk) if (rst_n) clk_no <= clk_no + 1;
  always @(posedge clk) if (rst_n && op_valid) recs.push_back('{clk_no / 4, op, phase});

  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    #20000000; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int ord [5] = '{1, 2, 4, 5, 3};
    int i, nb;
    longint s_end [6];
    repeat (3) @(posedge clk); rst_n = 1;
    run = 1;
    wait (phases_done == 4); @(posedge clk); #1;
    // walk the record: QL, PC, QL, PC
    i = 0;
    for (int p = 0; p < 4; p++) begin
      cmos_phase_e ep;
      ep = (p % 2 == 0) ? PH_QL : PH_PC;
      for (int k = 0; k < 10; k++) begin
        chk(recs[i].ph == ep, $sformatf("phase %0d op %0d phase %0d", p, k, recs[i].ph));
        chk(recs[i].op.region == 3'(ord[k / 2]) && recs[i].op.kind == ((k % 2) ? OP_START : OP_READ),
            $sformatf("phase %0d op %0d region %0d kind %0d", p, k, recs[i].op.region, recs[i].op.kind));
        if (k > 0) chk(recs[i].t == recs[i - 1].t + 1, "one operation per slot");
        // QL exposure: from the S of a QL phase to the R of the next phase
        if (k % 2 == 0 && p > 0 && p % 2 == 1)
          chk(recs[i].t - s_end[recs[i].op.region] == longint'(exp_slots),
              $sformatf("QL exposure region %0d = %0d slots", recs[i].op.region, recs[i].t - s_end[recs[i].op.region]));
        if (k % 2 == 1) s_end[recs[i].op.region] = recs[i].t + 1;
        i++;
      end
      if (ep == PH_PC) begin
        nb = 0;
        while (i < recs.size() && recs[i].op.kind == OP_BURST) begin
          chk(recs[i].op.region == 3 && recs[i].t == recs[i - 1].t + 1, "burst on region 3, back to back");
          nb++; i++;
        end
        chk(nb == 50, $sformatf("burst cycles %0d", nb));
      end
    end
    chk(burst_frames == 100, $sformatf("burst frames %0d", burst_frames));
    // restart: abort and begin again with a QL phase
    @(posedge clk); #1 restart = 1; @(posedge clk); #1 restart = 0;
    recs.delete();
    wait (recs.size() == 2);
    chk(recs[0].ph == PH_QL && recs[0].op.region == 1 && recs[0].op.kind == OP_READ, "restart begins a QL phase");
    // Test mode
    flight_mode = 0;
    wait (recs.size() > 0 && recs[$].ph == PH_TEST && recs[$].op.kind == OP_START);
    recs.delete();
    wait (recs.size() == 2);
    chk(recs[0].op.region == 0 && recs[0].op.kind == OP_READ && recs[1].op.kind == OP_START, "Test mode whole sensor");
    wait (recs.size() == 3);
    chk(recs[2].t - (recs[1].t + 1) == longint'(exp_slots), $sformatf("Test exposure %0d", recs[2].t - recs[1].t - 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
