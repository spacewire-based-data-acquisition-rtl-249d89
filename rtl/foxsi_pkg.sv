// foxsi_pkg: types and constants shared by the FOXSI SpaceWire DAQ RTL.
//
// Holds the CdTe-DSD binary data format words (Frame data and Event data
// marker words, sizes), the CdTe-DE timecode actions and operation modes,
// the CdTe-DE SDRAM memory map, and the CMOS exposure operation types.
// Marker words and sizes are the ones printed in the data-format and
// memory-map drawings of the instrument; "byte 1" of those drawings is
// taken as the most significant byte of a 32-bit word (a choice of this
// design). Enumeration encodings are this design's own.
package foxsi_pkg;

  // ---------------- CdTe-DSD data format ----------------
  localparam int unsigned FRAME_WORDS      = 8195;          // 32780 bytes, fixed
  localparam int unsigned FRAME_BYTES      = FRAME_WORDS * 4;
  localparam int unsigned FRAME_UNIX_WORD  = 8193;          // UNIXTIME
  localparam int unsigned FRAME_TRAIL_WORD = 8194;          // trailer
  localparam logic [31:0] FRAME_HEADER     = 32'h02EF_CDAB; // bytes 2 EF CD AB
  localparam logic [31:0] FRAME_TRAILER    = 32'h2301_FFFF; // bytes 23 01 FF FF
  localparam logic [31:0] EVENT_HEADER     = 32'h0000_3C3C; // bytes 00 00 3C 3C
  localparam logic [31:0] EVENT_FOOTER     = 32'h7777_0000; // bytes 77 77 00 00
  localparam int unsigned MAX_EVENT_WORDS  = 104;           // 416 bytes, All Readout
  localparam int unsigned N_ASIC           = 4;
  localparam int unsigned N_CH             = 64;
  localparam int unsigned ADC_W            = 10;

  typedef logic [ADC_W-1:0] adc_t;

  // ---------------- CdTe-DE timecode schedule ----------------
  typedef enum logic [2:0] {
    ACT_HK_UPDATE   = 3'd0,  // timecode 0: initialisation, HK update
    ACT_CMD_POLL    = 3'd1,  // timecode 1: command polling from Formatter
    ACT_PARAM_SETUP = 3'd2,  // timecode 2: DAQ / FPGA parameter setup
    ACT_HV_READOUT  = 3'd3,  // timecode 3: HV apply, readout start/end
    ACT_ACQUIRE     = 3'd4   // timecode 4..63: data acquisition
  } action_e;

  typedef enum logic [2:0] {
    GEN_IDLE    = 3'd0,
    GEN_INIT    = 3'd1,
    GEN_STANDBY = 3'd2,
    GEN_OBS     = 3'd3,
    GEN_END     = 3'd4
  } gen_mode_e;

  typedef enum logic [1:0] {
    OBS_IDLE         = 2'd0,
    OBS_START        = 2'd1,
    OBS_STOP         = 2'd2,
    OBS_STOP_READOUT = 2'd3
  } obs_mode_e;

  // 12-byte command buffer, byte 0 = opcode (this design's encoding)
  localparam logic [7:0] OPC_GEN_MODE = 8'h01;  // byte 1 = gen_mode_e
  localparam logic [7:0] OPC_OBS_MODE = 8'h02;  // byte 1 = obs_mode_e
  localparam logic [7:0] OPC_SET_DTH  = 8'h03;  // bytes 2..3 = Dth, byte 1 bit0 = sparse
  localparam logic [7:0] OPC_SET_HV   = 8'h04;  // bytes 2..3 = HV setting

  // ---------------- CdTe-DE SDRAM memory map (bytes) ----------------
  localparam logic [31:0] DE_GENERAL_BASE = 32'h0000_0000;   // 4 MB
  localparam logic [31:0] DSD_AREA_BASE0  = 32'h0040_0000;   // 31 MB each
  localparam logic [31:0] DSD_AREA_SIZE   = 32'h01F0_0000;
  localparam logic [31:0] SDRAM_END       = 32'h0800_0000;   // 128 MB
  localparam int unsigned DE_QL_FRAMES    = 980;             // 30.6 MB ring
  localparam int unsigned CANISTER_FRAMES = 2047;            // 64 MB / 32780 B

  // ---------------- CMOS exposure sequencer ----------------
  typedef enum logic [1:0] {
    OP_READ  = 2'd0,   // R: readout, ends exposure
    OP_START = 2'd1,   // S: start exposure
    OP_BURST = 2'd2    // one 4 ms short exposure of region 3 (read + restart)
  } cmos_kind_e;

  typedef struct packed {
    logic [2:0] region;   // 1..5, 0 = whole sensor (Test mode)
    cmos_kind_e kind;
  } cmos_op_t;

  typedef enum logic [1:0] {
    PH_QL   = 2'd0,
    PH_PC   = 2'd1,
    PH_TEST = 2'd2
  } cmos_phase_e;

endpackage
