// foxsi_daq_top: the FOXSI data acquisition network reduced to one
// synthesizable netlist: four CdTe canisters, the CdTe detector
// electronics (DE), two CMOS camera sequencers and the Formatter's
// command router and telemetry packetiser.
//
// Data path (hard X-ray side). Each canister (index d = 0..3, DSD#1..#4)
// turns triggers into CdTe events (event_builder, one time-shared packer
// for its four ASICs), packs them into fixed 32 780-byte frames
// (frame_builder) and stores the frames in its own SDRAM ring
// (ring_buffer_ctrl, 2047 frames in 64 MB). The DE runs the 64 Hz timecode
// (timecode_gen); the timecode table (timecode_scheduler) names, per step,
// housekeeping, command polling, parameter setup, HV/readout control or
// acquisition from one pair of canisters; during acquisition steps
// de_readout pulls whole frames out of the scheduled canister's ring and
// writes them into that detector's area of the DE SDRAM (a second
// ring_buffer_ctrl per detector, 980 frames at 0x0040_0000 + d*31 MB).
// Frames are taken from the DE rings for quick-look downlink on request
// (ql_req/ql_det) and cut into <= 1500-byte packets (ql_downlink,
// downlink_fragmenter). de_mode_ctrl holds the general / observation mode,
// applies commands at their timecode step, enables acquisition and
// readout, and flushes the canisters' partly filled frames at Obs:Stop.
// A canister whose DE ring is full is treated as empty by the readout, so
// a frame transfer is never started that the DE could not store; the
// frames then wait in the canister ring, which in turn holds back event
// building once it is full.
// A PPS edge is time-stamped against the free-running local clock, which
// also serves as the events' external time (pps_capture).
//
// Control path. Two-byte ground commands enter uplink_cmd_router, which
// queues them per system (1 = CdTe-DE, 2 = CMOS 1, 3 = CMOS 2,
// 4 = Timepix) and serves one system at every timecode tick. A DE command
// byte {op[3:0], arg[3:0]} becomes a 12-byte DE command (opcode op,
// argument arg, value 0); a CMOS command byte b becomes a write of 1 to
// CMOS register b*4 (start, stop, restart 0x20, reboot 0x24, reboot flag
// 0x180). Timepix commands are passed out. Commands with values (DE
// threshold and HV, CMOS mode and exposure) use the direct register ports
// de_cmd_* and cmos_*, which stand for the Formatter's memory writes over
// SpaceWire; a direct write wins when both arrive in the same clock.
//
// Parts outside the logic are ports: the VATA451 ASIC samples and
// triggers, the canister and DE SDRAMs (one simple request/grant port per
// ring, see ring_buffer_ctrl), the CMOS sensor operations, the PPS input,
// UNIX time and the telemetry byte stream. The SpaceWire links and
// routers between the boards are replaced by direct wiring, and each ring
// has its own memory port rather than sharing one SDRAM controller; these
// are this design's simplifications. Everything runs on one clock.
module foxsi_daq_top
  import foxsi_pkg::*;
#(
  parameter int unsigned CLK_HZ     = 100_000_000,
  parameter int unsigned TC_HZ      = 64,
  parameter int unsigned FRAME_W    = FRAME_WORDS,
  parameter int unsigned CAN_FRAMES = CANISTER_FRAMES,
  parameter int unsigned DE_FRAMES  = DE_QL_FRAMES,
  parameter int unsigned PSEUDO_HZ  = 10,
  parameter int unsigned N_BURST    = 50,
  parameter int unsigned MTU        = 1500
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        pps,
  input  logic [31:0] unixtime,
  // canister front ends (VATA451 ASICs)
  input  logic [3:0]  det_trig,
  input  logic [3:0]  pseudo_en,
  input  adc_t        adc [4][N_ASIC][N_CH],
  input  adc_t        cmn [4][N_ASIC],
  // canister SDRAMs (64 MB each)
  output logic [3:0]  can_mem_req,
  output logic [3:0]  can_mem_we,
  output logic [25:0] can_mem_addr [4],
  output logic [31:0] can_mem_wdata [4],
  input  logic [3:0]  can_mem_gnt,
  input  logic [3:0]  can_mem_rvalid,
  input  logic [31:0] can_mem_rdata [4],
  // DE SDRAM (128 MB), one port per detector area
  output logic [3:0]  de_mem_req,
  output logic [3:0]  de_mem_we,
  output logic [26:0] de_mem_addr [4],
  output logic [31:0] de_mem_wdata [4],
  input  logic [3:0]  de_mem_gnt,
  input  logic [3:0]  de_mem_rvalid,
  input  logic [31:0] de_mem_rdata [4],
  // uplink and direct register writes
  input  logic        up_valid,
  input  logic [15:0] up_cmd,
  input  logic        de_cmd_wr,
  input  logic [95:0] de_cmd,
  input  logic [1:0]  cmos_wr,
  input  logic [11:0] cmos_addr [2],
  input  logic [31:0] cmos_wdata [2],
  output logic        tpx_cmd_valid,
  output logic [7:0]  tpx_cmd,
  // quick-look downlink
  input  logic        ql_req,
  input  logic [1:0]  ql_det,
  output logic        dl_valid,
  output logic [7:0]  dl_data,
  output logic        dl_last,
  input  logic        dl_ready,
  // CMOS sensor operations
  output logic [1:0]  cmos_op_valid,
  output cmos_op_t    cmos_op [2],
  output cmos_phase_e cmos_phase [2],
  output logic [4:0]  cmos_exposing [2],
  output logic [1:0]  cmos_reboot,
  // status
  output logic [5:0]  timecode,
  output gen_mode_e   gen_mode,
  output obs_mode_e   obs_mode,
  output logic        hv_on,
  output logic [15:0] hv_value,
  output logic [31:0] tc_second,
  output logic [1:0]  up_cur_sys,
  output logic        pps_stamp_valid,
  output logic [63:0] pps_stamp_time,
  output logic [5:0]  pps_stamp_tc,
  output logic [31:0] pps_count,
  output logic [31:0] can_live [4],
  output logic [63:0] can_wr_sum [4],
  output logic [63:0] can_rd_sum [4],
  output logic [25:0] can_wr_addr [4],
  output logic [25:0] can_rd_addr [4],
  output logic [63:0] de_wr_sum [4],
  output logic [63:0] de_rd_sum [4],
  output logic [26:0] de_wr_addr [4],
  output logic [26:0] de_rd_addr [4],
  output logic [3:0]  de_full,
  output logic [31:0] cmos_status [2],
  output logic [31:0] events [4],
  output logic [31:0] can_frames [4],
  output logic [31:0] can_flushes [4],
  output logic [3:0]  can_full,
  output logic [31:0] can_stored [4],
  output logic [31:0] de_frames_read [4],
  output logic [31:0] de_stored [4],
  output logic [31:0] ql_frames,
  output logic [31:0] dl_packets,
  output logic [31:0] de_cmd_done,
  output logic [31:0] de_cmd_rejected,
  output logic [31:0] up_accepted,
  output logic [31:0] up_rejected,
  output logic [31:0] cmos_burst_frames [2],
  output logic [31:0] cmos_phases [2]
);
  // ---------------- DE timing ----------------
  logic        tick;
  action_e     action;
  logic        acq_slot;
  logic [1:0]  acq_det;
  logic [63:0] local_time;

  timecode_gen #(.CLK_HZ(CLK_HZ), .TC_HZ(TC_HZ)) u_tc (
    .clk, .rst_n, .tick, .timecode, .cycle(tc_second));

  timecode_scheduler u_sched (
    .timecode, .cycle_odd(tc_second[0]), .action, .acq_en(acq_slot), .acq_det);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) local_time <= '0;
    else        local_time <= local_time + 64'd1;

  pps_capture u_pps (
    .clk, .rst_n, .pps, .local_time, .timecode,
    .stamp_valid(pps_stamp_valid), .stamp_time(pps_stamp_time), .stamp_tc(pps_stamp_tc), .pps_count);

  // ---------------- uplink commands ----------------
  logic        rt_valid;
  logic [7:0]  rt_cmd;
  logic [1:0]  rt_sys;

  uplink_cmd_router u_up (
    .clk, .rst_n, .cmd_valid(up_valid), .cmd(up_cmd), .poll(tick), .cur_sys(up_cur_sys),
    .out_valid(rt_valid), .out_cmd(rt_cmd), .out_sys(rt_sys),
    .accepted(up_accepted), .rejected(up_rejected));

  logic        dm_wr;
  logic [95:0] dm_cmd;
  assign dm_wr  = de_cmd_wr || (rt_valid && rt_sys == 2'd0);
  assign dm_cmd = de_cmd_wr ? de_cmd : {4'h0, rt_cmd[7:4], 4'h0, rt_cmd[3:0], 80'h0};

  assign tpx_cmd_valid = rt_valid && rt_sys == 2'd3;
  assign tpx_cmd       = rt_cmd;

  // ---------------- DE mode control ----------------
  logic acq_enable, readout_enable, flush, sparse;
  adc_t dth;

  de_mode_ctrl u_mode (
    .clk, .rst_n, .step(tick), .action, .cmd_wr(dm_wr), .cmd(dm_cmd),
    .gen_mode, .obs_mode, .acq_enable, .readout_enable, .flush, .hv_on, .hv_value,
    .dth, .sparse, .cmd_done(de_cmd_done), .cmd_rejected(de_cmd_rejected));

  // ---------------- canisters ----------------
  logic [3:0]  ro_req, can_out_valid, can_out_last, can_out_ready, can_empty;
  logic [31:0] can_out_data [4];

  for (genvar d = 0; d < 4; d++) begin : g_can
    logic        ptrig, ev_valid, ev_ready, ev_last, ev_busy, accept;
    logic [31:0] pcount, ev_data;
    logic        fr_valid, fr_last, fr_ready;
    logic [31:0] fr_data;
    logic [31:0] wr_frames, rd_frames;

    pseudo_trigger #(.CLK_HZ(CLK_HZ), .RATE_HZ(PSEUDO_HZ), .SEED(32'hACE1_2468 + 32'(d) * 32'h1357_9BDF)) u_ptrig (
      .clk, .rst_n, .enable(pseudo_en[d] && acq_enable), .trig(ptrig), .count(pcount));

    event_builder u_ev (
      .clk, .rst_n, .trig((det_trig[d] && acq_enable) || ptrig), .pseudo(ptrig),
      .adc(adc[d]), .cmn(cmn[d]), .dth, .sparse, .ext_ti(local_time), .pseudo_count(pcount),
      .accept, .out_valid(ev_valid), .out_ready(ev_ready), .out_data(ev_data), .out_last(ev_last),
      .busy(ev_busy), .live_cycles(can_live[d]), .events(events[d]));

    frame_builder #(.FRAME_W(FRAME_W)) u_fr (
      .clk, .rst_n, .ev_valid, .ev_data, .ev_last, .ev_ready, .ev_busy, .accept,
      .flush, .unixtime, .fr_valid, .fr_data, .fr_last, .fr_ready,
      .frames(can_frames[d]), .flushes(can_flushes[d]));

    ring_buffer_ctrl #(.N_FRAMES(CAN_FRAMES), .FRAME_W(FRAME_W), .AW(26), .BASE_ADDR(26'h0)) u_ring (
      .clk, .rst_n, .in_valid(fr_valid), .in_data(fr_data), .in_last(fr_last), .in_ready(fr_ready),
      .rd_req(ro_req[d]), .out_valid(can_out_valid[d]), .out_data(can_out_data[d]),
      .out_last(can_out_last[d]), .out_ready(can_out_ready[d]),
      .mem_req(can_mem_req[d]), .mem_we(can_mem_we[d]), .mem_addr(can_mem_addr[d]),
      .mem_wdata(can_mem_wdata[d]), .mem_gnt(can_mem_gnt[d]), .mem_rvalid(can_mem_rvalid[d]),
      .mem_rdata(can_mem_rdata[d]), .wr_sum(can_wr_sum[d]), .wr_addr(can_wr_addr[d]), .wr_frames,
      .rd_sum(can_rd_sum[d]), .rd_addr(can_rd_addr[d]), .rd_frames,
      .full(can_full[d]), .empty(can_empty[d]));

    assign can_stored[d] = wr_frames - rd_frames;
  end

  // ---------------- DE readout into the DE SDRAM ----------------
  logic        ro_valid, ro_last, ro_ready;
  logic [31:0] ro_data;
  logic [1:0]  ro_det;
  logic [3:0]  de_in_ready, de_empty, de_out_valid, de_out_last, de_out_ready, ql_rd_req;
  logic [31:0] de_out_data [4];

  de_readout #(.N_DET(4)) u_ro (
    .clk, .rst_n, .enable(readout_enable), .acq_en(acq_slot), .acq_det,
    .rd_req(ro_req), .in_valid(can_out_valid), .in_data(can_out_data), .in_last(can_out_last),
    .in_ready(can_out_ready), .empty(can_empty | de_full),
    .out_valid(ro_valid), .out_data(ro_data), .out_last(ro_last), .out_det(ro_det),
    .out_ready(ro_ready), .frames_read(de_frames_read));

  assign ro_ready = de_in_ready[ro_det];

  for (genvar d = 0; d < 4; d++) begin : g_de
    logic [31:0] wr_frames, rd_frames;

    ring_buffer_ctrl #(.N_FRAMES(DE_FRAMES), .FRAME_W(FRAME_W), .AW(27),
                       .BASE_ADDR(27'(DSD_AREA_BASE0 + 32'(d) * DSD_AREA_SIZE))) u_ring (
      .clk, .rst_n, .in_valid(ro_valid && ro_det == 2'(d)), .in_data(ro_data), .in_last(ro_last),
      .in_ready(de_in_ready[d]),
      .rd_req(ql_rd_req[d]), .out_valid(de_out_valid[d]), .out_data(de_out_data[d]),
      .out_last(de_out_last[d]), .out_ready(de_out_ready[d]),
      .mem_req(de_mem_req[d]), .mem_we(de_mem_we[d]), .mem_addr(de_mem_addr[d]),
      .mem_wdata(de_mem_wdata[d]), .mem_gnt(de_mem_gnt[d]), .mem_rvalid(de_mem_rvalid[d]),
      .mem_rdata(de_mem_rdata[d]), .wr_sum(de_wr_sum[d]), .wr_addr(de_wr_addr[d]), .wr_frames,
      .rd_sum(de_rd_sum[d]), .rd_addr(de_rd_addr[d]), .rd_frames,
      .full(de_full[d]), .empty(de_empty[d]));

    assign de_stored[d] = wr_frames - rd_frames;
  end

  // ---------------- quick-look downlink ----------------
  logic        fg_start, fg_busy, fg_valid, fg_ready;
  logic [7:0]  fg_sys, fg_type, fg_data;
  logic [31:0] fg_len;

  ql_downlink #(.N_DET(4), .FRAME_W(FRAME_W)) u_ql (
    .clk, .rst_n, .req(ql_req), .req_det(ql_det), .empty(de_empty), .rd_req(ql_rd_req),
    .in_valid(de_out_valid), .in_data(de_out_data), .in_last(de_out_last), .in_ready(de_out_ready),
    .frag_start(fg_start), .frag_sys(fg_sys), .frag_type(fg_type), .frag_len(fg_len),
    .frag_busy(fg_busy), .frag_valid(fg_valid), .frag_data(fg_data), .frag_ready(fg_ready),
    .frames_sent(ql_frames));

  downlink_fragmenter #(.MTU(MTU)) u_dl (
    .clk, .rst_n, .start(fg_start), .sys_id(fg_sys), .data_type(fg_type), .length(fg_len),
    .busy(fg_busy), .in_valid(fg_valid), .in_data(fg_data), .in_ready(fg_ready),
    .out_valid(dl_valid), .out_data(dl_data), .out_last(dl_last), .out_ready(dl_ready),
    .packets_sent(dl_packets));

  // ---------------- CMOS cameras ----------------
  for (genvar c = 0; c < 2; c++) begin : g_cmos
    logic        wr, run, flight_mode, restart;
    logic [11:0] addr;
    logic [31:0] wdata;
    logic [15:0] exp_slots;

    assign wr    = cmos_wr[c] || (rt_valid && rt_sys == 2'(c + 1));
    assign addr  = cmos_wr[c] ? cmos_addr[c] : {2'b00, rt_cmd, 2'b00};
    assign wdata = cmos_wr[c] ? cmos_wdata[c] : 32'd1;

    cmos_cmd_regs u_regs (
      .clk, .rst_n, .wr, .addr, .wdata, .run, .flight_mode, .exp_slots, .restart,
      .reboot(cmos_reboot[c]), .status(cmos_status[c]));

    cmos_exposure_seq #(.CLK_HZ(CLK_HZ), .N_BURST(N_BURST)) u_seq (
      .clk, .rst_n, .run, .flight_mode, .exp_slots, .restart,
      .op_valid(cmos_op_valid[c]), .op(cmos_op[c]), .phase(cmos_phase[c]),
      .exposing(cmos_exposing[c]), .burst_frames(cmos_burst_frames[c]), .phases_done(cmos_phases[c]));
  end
endmodule
