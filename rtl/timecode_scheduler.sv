// timecode_scheduler: decodes the CdTe-DE timecode-action table.
//
// Purely combinational. Every one-second cycle has 64 timecode steps:
//   0      initialisation, housekeeping update
//   1      command polling from the Formatter
//   2      DAQ / FPGA parameter setup
//   3      HV apply, readout start/end
//   4..33  data acquisition from the first detector of the cycle
//   34..63 data acquisition from the second detector of the cycle
// Odd cycles (1, 3, 5, ...) read detectors #1 and #2, even cycles #3 and
// #4, so each detector is read for 30 of every 128 steps (0.468 s every
// 2 s). This table is the instrument's. Its prose states the opposite
// parity (#1/#2 on even cycles); the printed table is followed, and
// ODD_FIRST = 0 selects the other reading. Detector indices are 0-based
// here (acq_det = 0 is detector #1).
module timecode_scheduler
  import foxsi_pkg::*;
#(
  parameter bit ODD_FIRST = 1'b1
) (
  input  logic [5:0] timecode,
  input  logic       cycle_odd,
  output action_e    action,
  output logic       acq_en,
  output logic [1:0] acq_det
);
  logic pair_a;   // cycle reads detectors #1/#2
  logic second;   // second half of the cycle

  always_comb begin
    pair_a = (cycle_odd == ODD_FIRST);
    second = (timecode >= 6'd34);
    acq_en = (timecode >= 6'd4);
    unique case (timecode)
      6'd0:    action = ACT_HK_UPDATE;
      6'd1:    action = ACT_CMD_POLL;
      6'd2:    action = ACT_PARAM_SETUP;
      6'd3:    action = ACT_HV_READOUT;
      default: action = ACT_ACQUIRE;
    endcase
    acq_det = {~pair_a, second};
  end
endmodule
