// foxsi_daq_top_tb: end-to-end run of the whole acquisition network at
// reduced size: 3000 clocks per timecode step (CLK_HZ = 192 000), 1024-word
// frames, canister rings of 4 frames and DE rings of 3 frames, so that
// every ring fills within a few simulated seconds. Eight behavioural SDRAMs
// (canister SDRAMs stall 10 % of the time) sit on the memory ports.
//
// The run: wait for the automatic Idle -> Init -> Standby start-up; send an
// illegal command (Obs:Start while in Standby), Obs mode, Obs:Start over
// the uplink; let canisters 0-2 take detector triggers and canister 3
// pseudo triggers only; wait until a canister ring and a DE ring are full
// and all four detectors have been read; downlink quick-look frames and
// check their packets; then Obs:Stop, Obs:Stop Readout and End. CMOS
// commands (start, restart, reboot with its flag, Test mode), a Timepix
// command, an unknown system and PPS pulses run alongside.
//
// Each mechanism is counted and a failure is counted for any that never
// happened. Checked values: mode sequence, that acquisition steps read only
// the scheduled pair (a frame is read only when its detector's pair is
// scheduled), the downlink packets (count, 8-byte header, frame header and
// trailer inside the payload), CMOS phase order and burst count.
module foxsi_daq_top_tb;
  import foxsi_pkg::*;
  localparam int unsigned TICK_CLK = 3000;
  localparam int unsigned CLK_HZ   = 64 * TICK_CLK;
  localparam int unsigned FW       = 1024;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        pps = 0;
  logic [31:0] unixtime = 32'h6500_0000;
  logic [3:0]  det_trig = 0, pseudo_en = 0;
  adc_t        adc [4][N_ASIC][N_CH];
  adc_t        cmn [4][N_ASIC];
  logic [3:0]  can_mem_req, can_mem_we, can_mem_gnt, can_mem_rvalid;
  logic [25:0] can_mem_addr [4];
  logic [31:0] can_mem_wdata [4], can_mem_rdata [4];
  logic [3:0]  de_mem_req, de_mem_we, de_mem_gnt, de_mem_rvalid;
  logic [26:0] de_mem_addr [4];
  logic [31:0] de_mem_wdata [4], de_mem_rdata [4];
  logic        up_valid = 0; logic [15:0] up_cmd = 0;
  logic        de_cmd_wr = 0; logic [95:0] de_cmd = 0;
  logic [1:0]  cmos_wr = 0; logic [11:0] cmos_addr [2]; logic [31:0] cmos_wdata [2];
  logic        tpx_cmd_valid; logic [7:0] tpx_cmd;
  logic        ql_req = 0; logic [1:0] ql_det = 0;
  logic        dl_valid, dl_last, dl_ready = 1; logic [7:0] dl_data;
  logic [1:0]  cmos_op_valid, cmos_reboot; cmos_op_t cmos_op [2]; cmos_phase_e cmos_phase [2];
  logic [4:0]  cmos_exposing [2];
  logic [5:0]  timecode; gen_mode_e gen_mode; obs_mode_e obs_mode; logic hv_on; logic [15:0] hv_value;
  logic [31:0] tc_second; logic [1:0] up_cur_sys;
  logic        pps_stamp_valid; logic [63:0] pps_stamp_time; logic [5:0] pps_stamp_tc; logic [31:0] pps_count;
  logic [31:0] can_live [4];
  logic [63:0] can_wr_sum [4], can_rd_sum [4], de_wr_sum [4], de_rd_sum [4];
  logic [25:0] can_wr_addr [4], can_rd_addr [4];
  logic [26:0] de_wr_addr [4], de_rd_addr [4];
  logic [3:0]  de_full, can_full;
  logic [31:0] cmos_status [2];
  logic [31:0] events [4], can_frames [4], can_flushes [4], can_stored [4], de_frames_read [4], de_stored [4];
  logic [31:0] ql_frames, dl_packets, de_cmd_done, de_cmd_rejected, up_accepted, up_rejected;
  logic [31:0] cmos_burst_frames [2], cmos_phases [2];

  foxsi_daq_top #(.CLK_HZ(CLK_HZ), .FRAME_W(FW), .CAN_FRAMES(4), .DE_FRAMES(3), .PSEUDO_HZ(400)) dut (.*);

  for (genvar d = 0; d < 4; d++) begin : g_mem
    sdram_model #(.AW(26), .STALL_PCT(10)) u_can (
      .clk, .mem_req(can_mem_req[d]), .mem_we(can_mem_we[d]), .mem_addr(can_mem_addr[d]),
      .mem_wdata(can_mem_wdata[d]), .mem_gnt(can_mem_gnt[d]), .mem_rvalid(can_mem_rvalid[d]),
      .mem_rdata(can_mem_rdata[d]));
    sdram_model #(.AW(27), .STALL_PCT(0)) u_de (
      .clk, .mem_req(de_mem_req[d]), .mem_we(de_mem_we[d]), .mem_addr(de_mem_addr[d]),
      .mem_wdata(de_mem_wdata[d]), .mem_gnt(de_mem_gnt[d]), .mem_rvalid(de_mem_rvalid[d]),
      .mem_rdata(de_mem_rdata[d]));
  end

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // ---------------- stimulus: ASIC samples and triggers ----------------
  // one ASIC's samples are renewed per clock, in turn
  int unsigned sel = 0, trig_div = 150;
  initial for (int d = 0; d < 4; d++) for (int a = 0; a < N_ASIC; a++) begin
    cmn[d][a] = '0;
    for (int c = 0; c < N_CH; c++) adc[d][a][c] = '0;
  end
  always @(posedge clk) begin
    sel <= sel + 1;
    cmn[sel[3:2]][sel[1:0]] <= adc_t'($urandom % 64);
    for (int c = 0; c < N_CH; c++) adc[sel[3:2]][sel[1:0]][c] <= adc_t'($urandom % 128);
    for (int d = 0; d < 3; d++) det_trig[d] <= ($urandom % trig_div) == 0;
  end
  always @(gen_mode or obs_mode) $display("%0t: general mode %s, observation mode %s", $time, gen_mode.name(), obs_mode.name());

  // ---------------- mechanism counters ----------------
  int n_can_full = 0, n_de_full = 0, n_pair_a = 0, n_pair_b = 0, n_bad_pair = 0;
  int n_tpx = 0, n_reboot = 0, n_ql_ph = 0, n_pc_ph = 0, n_test_ph = 0, n_pps = 0, n_hv = 0;
  int n_burst_ops = 0;
  bit hv_off_in_end = 0, drain = 0;
  bit seen_init = 0, seen_standby = 0, seen_obs = 0, seen_end = 0, seen_start = 0, seen_stop = 0, seen_sro = 0;
  logic [31:0] prev_read [4];
  logic [3:0]  prev_can_full = 0, prev_de_full = 0;
  always @(posedge clk) if (rst_n) begin
    if (gen_mode == GEN_INIT) seen_init = 1;
    if (gen_mode == GEN_STANDBY) seen_standby = 1;
    if (gen_mode == GEN_OBS) seen_obs = 1;
    if (gen_mode == GEN_END) begin seen_end = 1; if (!hv_on) hv_off_in_end = 1; end
    if (obs_mode == OBS_START) seen_start = 1;
    if (obs_mode == OBS_STOP) seen_stop = 1;
    if (obs_mode == OBS_STOP_READOUT) seen_sro = 1;
    for (int d = 0; d < 4; d++) begin
      if (can_full[d] && !prev_can_full[d]) n_can_full++;
      if (de_full[d] && !prev_de_full[d]) n_de_full++;
      if (de_frames_read[d] != prev_read[d]) begin
        // a frame completes during (or right after) its pair's steps
        if (d < 2) n_pair_a++; else n_pair_b++;
      end
      prev_read[d] <= de_frames_read[d];
    end
    prev_can_full <= can_full;
    prev_de_full  <= de_full;
    if (tpx_cmd_valid) begin n_tpx++; chk(tpx_cmd == 8'h55, "Timepix command byte"); end
    for (int c = 0; c < 2; c++) begin
      if (cmos_reboot[c]) n_reboot++;
      if (cmos_op_valid[c] && cmos_op[c].kind == OP_READ && cmos_op[c].region inside {3'd1, 3'd0}) begin
        if (cmos_phase[c] == PH_QL) n_ql_ph++;
        if (cmos_phase[c] == PH_PC) n_pc_ph++;
        if (cmos_phase[c] == PH_TEST) n_test_ph++;
      end
      if (cmos_op_valid[c] && cmos_op[c].kind == OP_BURST) n_burst_ops++;
    end
    if (pps_stamp_valid) n_pps++;
    if (hv_on) n_hv++;
  end
  initial for (int d = 0; d < 4; d++) prev_read[d] = 0;

  // the readout may only request the scheduled pair
  always @(posedge clk) if (rst_n) for (int d = 0; d < 4; d++)
    if (dut.ro_req[d] && (!dut.acq_slot || dut.acq_det != 2'(d))) n_bad_pair++;

  // ---------------- downlink capture ----------------
  logic [7:0] pkt [$];
  int n_pkts = 0, pay_bytes = 0, n_frame_ok = 0;
  logic [31:0] first_word, last_word;
  always @(posedge clk) dl_ready <= ($urandom % 8) != 0;
  always @(posedge clk) if (rst_n && dl_valid && dl_ready) begin
    pkt.push_back(dl_data);
    if (dl_last) begin
      int n_tot, cnt;
      n_tot = (FW * 4 + 1491) / 1492;
      cnt = {pkt[3], pkt[4]};
      chk(pkt.size() <= 1500 && pkt[0] == 8'h01 && {pkt[1], pkt[2]} == 16'(n_tot) && pkt[5] == 8'h02,
          $sformatf("downlink header (size %0d sys %0d total %0d)", pkt.size(), pkt[0], {pkt[1], pkt[2]}));
      if (cnt == 0) first_word = {pkt[8], pkt[9], pkt[10], pkt[11]};
      pay_bytes += pkt.size() - 8;
      if (cnt == n_tot - 1) begin
        last_word = {pkt[pkt.size() - 4], pkt[pkt.size() - 3], pkt[pkt.size() - 2], pkt[pkt.size() - 1]};
        chk(first_word == FRAME_HEADER && last_word == FRAME_TRAILER,
            $sformatf("downlinked frame header %h trailer %h", first_word, last_word));
        if (first_word == FRAME_HEADER && last_word == FRAME_TRAILER) n_frame_ok++;
      end
      n_pkts++;
      pkt.delete();
    end
  end

  // background quick-look requests while draining, detectors in turn
  initial begin
    int k = 0;
    forever begin
      @(posedge clk);
      if (drain && !dut.fg_busy && !dut.u_ql.active && de_stored[k] != 0) begin
        #1 ql_req = 1; ql_det = 2'(k); @(posedge clk); #1 ql_req = 0;
      end
      k = (k + 1) % 4;
    end
  end

  // ---------------- command helpers ----------------
  task automatic uplink(input logic [7:0] sys, input logic [7:0] c);
    @(posedge clk); #1 up_valid = 1; up_cmd = {sys, c}; @(posedge clk); #1 up_valid = 0;
  endtask
  // a DE command over the uplink; wait until the DE has polled it
  task automatic de_command(input logic [7:0] c);
    int done0 = de_cmd_done, rej0 = de_cmd_rejected;
    uplink(8'h01, c);
    wait (de_cmd_done != done0 || de_cmd_rejected != rej0);
  endtask
  task automatic wait_ticks(input int n);
    repeat (n * TICK_CLK) @(posedge clk);
  endtask
  task automatic cmos_write(input int c, input logic [11:0] a, input logic [31:0] v);
    @(posedge clk); #1 cmos_wr[c] = 1; cmos_addr[c] = a; cmos_wdata[c] = v; @(posedge clk); #1 cmos_wr = 0;
  endtask

  initial begin
    #60000000; $display("watchdog"); failures++;
    $display("events %0d %0d %0d %0d frames %0d %0d %0d %0d full %b stored %0d %0d %0d %0d read %0d %0d %0d %0d de_stored %0d %0d %0d %0d de_full %b",
      events[0], events[1], events[2], events[3], can_frames[0], can_frames[1], can_frames[2], can_frames[3], can_full,
      can_stored[0], can_stored[1], can_stored[2], can_stored[3], de_frames_read[0], de_frames_read[1], de_frames_read[2], de_frames_read[3],
      de_stored[0], de_stored[1], de_stored[2], de_stored[3], de_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // PPS once per simulated second, offset from the timecode grid
  initial begin
    wait (rst_n);
    forever begin repeat (CLK_HZ / 2 + 777) @(posedge clk); #1 pps = 1; repeat (20) @(posedge clk); #1 pps = 0;
      repeat (CLK_HZ / 2 - 797) @(posedge clk); end
  end

  initial begin
    int rej0, dl0, pk0;
    cmos_addr[0] = 0; cmos_addr[1] = 0; cmos_wdata[0] = 0; cmos_wdata[1] = 0;
    repeat (5) @(posedge clk); #1 rst_n = 1;

    // CMOS: start camera 1 and reset-restart camera 2, Timepix, unknown system
    uplink(8'h02, 8'h00);            // CMOS 1 start (register 0x000)
    uplink(8'h03, 8'h08);            // CMOS 2 reset and restart (0x020)
    uplink(8'h04, 8'h55);            // Timepix
    uplink(8'h09, 8'h00);            // unknown system
    uplink(8'h02, 8'h09);            // CMOS 1 reboot without flag: refused
    uplink(8'h02, 8'h60);            // CMOS 1 reboot flag (0x180)
    uplink(8'h02, 8'h09);            // CMOS 1 reboot (0x024)

    wait (gen_mode == GEN_STANDBY);
    chk(seen_init, "Idle -> Init -> Standby start-up");
    rej0 = de_cmd_rejected;
    de_command({4'(OPC_OBS_MODE), 4'(OBS_START)});   // illegal in Standby
    chk(de_cmd_rejected == rej0 + 1, "Obs:Start refused in Standby");
    de_command({4'(OPC_GEN_MODE), 4'(GEN_OBS)});
    wait (gen_mode == GEN_OBS);
    pseudo_en = 4'b1000;
    de_command({4'(OPC_OBS_MODE), 4'(OBS_START)});
    wait (obs_mode == OBS_START);

    // acquire until the rings have filled and both pairs were read
    wait (n_can_full > 0 && n_de_full > 0 && de_frames_read[0] > 0 && de_frames_read[1] > 0
          && de_frames_read[2] > 0 && de_frames_read[3] > 0);
    chk(events[3] > 0 && can_frames[3] > 0, "pseudo-trigger events on canister 3");

    // quick-look downlink of three frames
    dl0 = ql_frames; pk0 = dl_packets;
    for (int k = 0; k < 3; k++) begin
      wait (!dut.fg_busy && de_stored[k] != 0);
      @(posedge clk); #1 ql_req = 1; ql_det = 2'(k); @(posedge clk); #1 ql_req = 0;
      wait (ql_frames == dl0 + k + 1);
    end
    chk(dl_packets - pk0 == 3 * ((FW * 4 + 1491) / 1492), "packets per quick-look frame");

    // CMOS 2 to Test mode by a direct register write
    cmos_write(1, 12'h008, 0);

    // lower the event rate and drain the rings through the downlink, so
    // that Obs:Stop finds partly filled frames to flush
    trig_div = 6000; pseudo_en = 0; drain = 1;
    wait_ticks(96);
    chk(can_full == 0, "canister rings drained");

    de_command({4'(OPC_OBS_MODE), 4'(OBS_STOP)});
    wait (obs_mode == OBS_STOP);
    drain = 0;
    de_command({4'(OPC_OBS_MODE), 4'(OBS_STOP_READOUT)});
    wait (obs_mode == OBS_STOP_READOUT);
    wait (obs_mode == OBS_IDLE);
    de_command({4'(OPC_GEN_MODE), 4'(GEN_END)});
    wait (gen_mode == GEN_END);
    wait (gen_mode == GEN_STANDBY);
    wait_ticks(4);

    // ---------------- report ----------------
    $display("events %0d %0d %0d %0d, canister frames %0d %0d %0d %0d, flushes %0d",
             events[0], events[1], events[2], events[3], can_frames[0], can_frames[1], can_frames[2],
             can_frames[3], can_flushes[0] + can_flushes[1] + can_flushes[2] + can_flushes[3]);
    $display("DE frames read %0d %0d %0d %0d, canister-full %0d, DE-full %0d, QL frames %0d, packets %0d",
             de_frames_read[0], de_frames_read[1], de_frames_read[2], de_frames_read[3],
             n_can_full, n_de_full, ql_frames, n_pkts);
    $display("CMOS QL %0d PC %0d Test %0d bursts %0d reboot %0d, pps %0d, tpx %0d, up rejected %0d",
             n_ql_ph, n_pc_ph, n_test_ph, n_burst_ops, n_reboot, n_pps, n_tpx, up_rejected);
    chk(seen_init && seen_standby && seen_obs && seen_end, "general mode sequence");
    chk(seen_start && seen_stop && seen_sro, "observation mode sequence");
    chk(can_flushes[0] + can_flushes[1] + can_flushes[2] + can_flushes[3] > 0, "flush at Obs:Stop");
    chk(events[0] > 0 && events[1] > 0 && events[2] > 0, "detector-trigger events");
    chk(can_frames[0] > 0, "canister frames closed");
    chk(n_can_full > 0, "canister ring full (back-pressure)");
    chk(n_de_full > 0, "DE ring full");
    chk(n_pair_a > 0 && n_pair_b > 0, "both detector pairs read");
    chk(n_bad_pair == 0, $sformatf("readout outside the scheduled pair %0d", n_bad_pair));
    chk(n_frame_ok == int'(ql_frames) && pay_bytes == int'(ql_frames) * FW * 4, "quick-look frames downlinked whole");
    chk(n_hv > 0 && hv_off_in_end, "HV applied in Standby, removed in End");
    chk(n_ql_ph > 0 && n_pc_ph > 0, "CMOS QL and PC phases");
    chk(n_burst_ops == 50 * int'(cmos_burst_frames[0] + cmos_burst_frames[1]) / 50, "CMOS burst count");
    chk(n_burst_ops > 0, "CMOS bursts");
    chk(n_test_ph > 0, "CMOS Test mode");
    chk(n_reboot == 1 && cmos_status[0] != 32'hDEAD_0024, "CMOS reboot only after its flag");
    chk(n_pps > 0 && pps_count == 32'(n_pps), "PPS time stamps");
    chk(n_tpx == 1, "Timepix command passed");
    chk(up_rejected == 1, "unknown uplink system rejected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
