// de_mode_ctrl: CdTe-DE operation modes and command execution.
//
// Two layers of modes:
//   General mode      Idle -> Init -> Standby <-> Obs, Obs/Standby -> End -> Standby
//   Observation mode  (only in Obs) Obs:Idle -> Obs:Start -> Obs:Stop
//                     -> Obs:Stop Readout -> Obs:Idle
// After reset the controller is in Idle; the housekeeping step (timecode
// 0) moves it to Init, the next parameter-setup step (timecode 2) applies
// the default parameters and moves it to Standby, and the HV step
// (timecode 3) then applies the bias voltage. In Obs:Start the canisters
// acquire and the DE reads their ring buffers; in Obs:Stop acquisition
// ends (a flush pulse closes the partly filled frames) but readout goes
// on; Obs:Stop Readout ends readout and falls back to Obs:Idle on the next
// timecode step. End stops everything, removes HV and returns to Standby.
//
// The Formatter writes a 12-byte command buffer (cmd_wr pulse). It is
// polled once per second at timecode 1; mode changes and HV changes take
// effect at timecode 3, threshold changes at timecode 2, as in the
// instrument's timecode table. The mode names and the step roles follow
// the instrument. The command encoding is this design's (byte 0 opcode,
// byte 1 argument, bytes 2-3 value, see foxsi_pkg), as are the exact
// automatic transitions and the rejection of illegal requests.
module de_mode_ctrl
  import foxsi_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        step,       // timecode tick
  input  action_e     action,     // action of the new step
  input  logic        cmd_wr,
  input  logic [95:0] cmd,
  output gen_mode_e   gen_mode,
  output obs_mode_e   obs_mode,
  output logic        acq_enable,
  output logic        readout_enable,
  output logic        flush,
  output logic        hv_on,
  output logic [15:0] hv_value,
  output adc_t        dth,
  output logic        sparse,
  output logic [31:0] cmd_done,
  output logic [31:0] cmd_rejected
);
  localparam adc_t DTH_DEFAULT = adc_t'(10);

  logic [95:0] cmd_buf;
  logic        cmd_pend;
  // staged requests
  logic        gen_req_v;
  gen_mode_e   gen_req;
  logic        obs_req_v;
  obs_mode_e   obs_req;
  logic        par_req_v;
  adc_t        dth_req;
  logic        sparse_req;
  logic        hv_req_v;
  logic [15:0] hv_req;

  logic [7:0] opc, arg;
  logic [15:0] val;
  assign opc = cmd_buf[95:88];
  assign arg = cmd_buf[87:80];
  assign val = cmd_buf[79:64];
  // bytes 4..11 of the buffer are reserved in this encoding

  assign acq_enable     = (gen_mode == GEN_OBS) && (obs_mode == OBS_START);
  assign readout_enable = (gen_mode == GEN_OBS) && (obs_mode == OBS_START || obs_mode == OBS_STOP);

  function automatic logic gen_legal(gen_mode_e from, logic [7:0] to);
    unique case (from)
      GEN_STANDBY: return (to == 8'(GEN_OBS)) || (to == 8'(GEN_END));
      GEN_OBS:     return (to == 8'(GEN_END));
      default:     return 1'b0;
    endcase
  endfunction

  function automatic logic obs_legal(obs_mode_e from, logic [7:0] to);
    unique case (from)
      OBS_IDLE:  return to == 8'(OBS_START);
      OBS_START: return to == 8'(OBS_STOP);
      OBS_STOP:  return to == 8'(OBS_STOP_READOUT);
      default:   return 1'b0;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmd_buf <= '0; cmd_pend <= 1'b0;
      gen_mode <= GEN_IDLE; obs_mode <= OBS_IDLE;
      gen_req_v <= 1'b0; gen_req <= GEN_IDLE;
      obs_req_v <= 1'b0; obs_req <= OBS_IDLE;
      par_req_v <= 1'b0; dth_req <= DTH_DEFAULT; sparse_req <= 1'b1;
      hv_req_v <= 1'b0; hv_req <= '0;
      flush <= 1'b0; hv_on <= 1'b0; hv_value <= '0;
      dth <= DTH_DEFAULT; sparse <= 1'b1;
      cmd_done <= '0; cmd_rejected <= '0;
    end else begin
      flush <= 1'b0;
      if (cmd_wr) begin
        cmd_buf  <= cmd;
        cmd_pend <= 1'b1;
      end
      if (step) begin
        // leave Obs:Stop Readout one step after entering it
        if (obs_mode == OBS_STOP_READOUT) obs_mode <= OBS_IDLE;
        unique case (action)
          ACT_HK_UPDATE: if (gen_mode == GEN_IDLE) gen_mode <= GEN_INIT;
          ACT_CMD_POLL: if (cmd_pend && !cmd_wr) begin
            cmd_pend <= 1'b0;
            if (opc == OPC_GEN_MODE && gen_legal(gen_mode, arg)) begin
              gen_req_v <= 1'b1; gen_req <= gen_mode_e'(arg[2:0]); cmd_done <= cmd_done + 32'd1;
            end else if (opc == OPC_OBS_MODE && gen_mode == GEN_OBS && obs_legal(obs_mode, arg)) begin
              obs_req_v <= 1'b1; obs_req <= obs_mode_e'(arg[1:0]); cmd_done <= cmd_done + 32'd1;
            end else if (opc == OPC_SET_DTH && gen_mode inside {GEN_STANDBY, GEN_OBS}) begin
              par_req_v <= 1'b1; dth_req <= adc_t'(val); sparse_req <= arg[0]; cmd_done <= cmd_done + 32'd1;
            end else if (opc == OPC_SET_HV && gen_mode inside {GEN_STANDBY, GEN_OBS}) begin
              hv_req_v <= 1'b1; hv_req <= val; cmd_done <= cmd_done + 32'd1;
            end else begin
              cmd_rejected <= cmd_rejected + 32'd1;
            end
          end
          ACT_PARAM_SETUP: begin
            if (gen_mode == GEN_INIT) begin
              dth <= DTH_DEFAULT; sparse <= 1'b1;   // lab defaults
              gen_mode <= GEN_STANDBY;
            end else if (par_req_v) begin
              dth <= dth_req; sparse <= sparse_req;
            end
            par_req_v <= 1'b0;
          end
          ACT_HV_READOUT: begin
            if (hv_req_v) hv_value <= hv_req;
            hv_req_v <= 1'b0;
            if (gen_mode == GEN_STANDBY) hv_on <= 1'b1;
            if (gen_mode == GEN_END) begin
              gen_mode <= GEN_STANDBY;
            end else if (gen_req_v) begin
              gen_mode <= gen_req;
              if (gen_req == GEN_END) begin
                hv_on <= 1'b0;
                if (obs_mode == OBS_START) flush <= 1'b1;
                obs_mode <= OBS_IDLE;
              end else begin
                obs_mode <= OBS_IDLE;
              end
            end else if (obs_req_v && gen_mode == GEN_OBS) begin
              obs_mode <= obs_req;
              if (obs_req == OBS_STOP) flush <= 1'b1;
            end
            gen_req_v <= 1'b0;
            obs_req_v <= 1'b0;
          end
          default: ;
        endcase
      end
    end
  end
endmodule
