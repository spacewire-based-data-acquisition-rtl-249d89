// foxsi_daq_full_tb: one complete observation through the whole network
// with every parameter at its default: 100 MHz clock, 64 Hz timecode,
// 8195-word (32 780-byte) frames, 2047-frame canister rings, 980-frame DE
// rings, 1500-byte downlink packets.
//
// Sequence: reset; the DE starts up by itself (Idle -> Init at timecode 0,
// Standby at timecode 2, one second after reset); the Formatter writes
// "general mode Obs" and then "Obs:Start" into the DE command buffer (each
// polled at timecode 1 and applied at timecode 3 of the following
// second); all four canisters then take detector triggers every 1000
// clocks with every strip above threshold, so every event is a 104-word
// All-Readout-sized event; the DE reads frames from the scheduled pair;
// one frame is sent down as quick-look. Checks: the mode sequence, the
// frame layout in the downlinked bytes (header, 77 events at 104-word
// stride, zero fill, UNIX time, trailer), 22 packets for one frame, the
// frame's DE memory address (inside that detector's 31 MB area). About
// 3.1 s of instrument time, so the run is long.
module foxsi_daq_full_tb;
  import foxsi_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        pps = 0;
  logic [31:0] unixtime = 32'h6512_3456;
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

  foxsi_daq_top dut (.*);

  for (genvar d = 0; d < 4; d++) begin : g_mem
    sdram_model #(.AW(26)) u_can (
      .clk, .mem_req(can_mem_req[d]), .mem_we(can_mem_we[d]), .mem_addr(can_mem_addr[d]),
      .mem_wdata(can_mem_wdata[d]), .mem_gnt(can_mem_gnt[d]), .mem_rvalid(can_mem_rvalid[d]),
      .mem_rdata(can_mem_rdata[d]));
    sdram_model #(.AW(27)) u_de (
      .clk, .mem_req(de_mem_req[d]), .mem_we(de_mem_we[d]), .mem_addr(de_mem_addr[d]),
      .mem_wdata(de_mem_wdata[d]), .mem_gnt(de_mem_gnt[d]), .mem_rvalid(de_mem_rvalid[d]),
      .mem_rdata(de_mem_rdata[d]));
  end

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // every strip well above the default threshold: fixed samples
  initial for (int d = 0; d < 4; d++) for (int a = 0; a < N_ASIC; a++) begin
    cmn[d][a] = adc_t'(100 + a);
    for (int c = 0; c < N_CH; c++) adc[d][a][c] = adc_t'(200 + 4 * c + a + 16 * d);
  end
  int unsigned trig_cnt = 0;
  always @(posedge clk) begin
    trig_cnt <= (trig_cnt == 999) ? 0 : trig_cnt + 1;
    det_trig <= {4{trig_cnt == 0}};
  end

  // downlink capture: one frame
  logic [7:0] frame_bytes [$];
  int n_pkts = 0, hdr_bad = 0;
  logic [7:0] pkt [$];
  always @(posedge clk) if (rst_n && dl_valid && dl_ready) begin
    pkt.push_back(dl_data);
    if (dl_last) begin
      if (pkt.size() > 1500 || pkt[0] != 8'h01 || {pkt[1], pkt[2]} != 16'd22 || {pkt[3], pkt[4]} != 16'(n_pkts))
        hdr_bad++;
      for (int k = 8; k < pkt.size(); k++) frame_bytes.push_back(pkt[k]);
      n_pkts++;
      pkt.delete();
    end
  end

  function automatic logic [31:0] fword(int i);
    return {frame_bytes[4 * i], frame_bytes[4 * i + 1], frame_bytes[4 * i + 2], frame_bytes[4 * i + 3]};
  endfunction

  task automatic de_write(input logic [7:0] opc, input logic [7:0] arg);
    @(posedge clk); #1 de_cmd_wr = 1; de_cmd = {opc, arg, 80'h0}; @(posedge clk); #1 de_cmd_wr = 0;
  endtask

  // progress, every 0.25 s of instrument time
  initial forever begin #250000000; $display("%0t: timecode %0d second %0d", $time, timecode, tc_second); $fflush; end

  initial begin
    #3600000000; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int det, n_ev, bad_zero;
    cmos_addr[0] = 0; cmos_addr[1] = 0; cmos_wdata[0] = 0; cmos_wdata[1] = 0;
    repeat (5) @(posedge clk); #1 rst_n = 1;
    wait (gen_mode == GEN_STANDBY);
    $display("%0t: Standby", $time);
    de_write(OPC_GEN_MODE, 8'(GEN_OBS));
    wait (gen_mode == GEN_OBS);
    $display("%0t: Obs", $time);
    de_write(OPC_OBS_MODE, 8'(OBS_START));
    wait (obs_mode == OBS_START);
    $display("%0t: Obs:Start", $time);
    wait (de_stored[0] + de_stored[1] + de_stored[2] + de_stored[3] != 0);
    det = (de_stored[0] != 0) ? 0 : (de_stored[1] != 0) ? 1 : (de_stored[2] != 0) ? 2 : 3;
    $display("%0t: first frame in the DE ring of detector %0d", $time, det);
    chk(de_wr_addr[det] == 27'(DSD_AREA_BASE0 + 32'(det) * DSD_AREA_SIZE + 32'(FRAME_BYTES)),
        $sformatf("DE write pointer %h", de_wr_addr[det]));
    @(posedge clk); #1 ql_req = 1; ql_det = 2'(det); @(posedge clk); #1 ql_req = 0;
    wait (ql_frames == 1);
    repeat (10) @(posedge clk);
    chk(n_pkts == 22 && hdr_bad == 0, $sformatf("packets %0d, bad headers %0d", n_pkts, hdr_bad));
    chk(frame_bytes.size() == FRAME_BYTES, $sformatf("frame bytes %0d", frame_bytes.size()));
    if (frame_bytes.size() == FRAME_BYTES) begin
      chk(fword(0) == FRAME_HEADER, "frame header");
      n_ev = 0;
      while (n_ev < 100 && fword(1 + 104 * n_ev) == EVENT_HEADER) begin
        if (fword(104 * (n_ev + 1)) != EVENT_FOOTER) begin failures++; $display("FAIL footer of event %0d", n_ev); end
        n_ev++;
      end
      checks++;
      chk(n_ev == 77, $sformatf("events per frame %0d", n_ev));
      bad_zero = 0;
      for (int i = 1 + 104 * n_ev; i < 8193; i++) if (fword(i) != 0) bad_zero++;
      chk(bad_zero == 0, "zero fill");
      chk(fword(8193) == unixtime, "UNIX time word");
      chk(fword(8194) == FRAME_TRAILER, "frame trailer");
    end
    chk(gen_mode == GEN_OBS && hv_on, "observing with HV on");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
