// cmos_exposure_seq: exposure sequencer of the soft X-ray CMOS camera.
//
// The 2048 x 2048 sensor uses 1920 lines split into five regions of 384
// lines (Region 1..5, Region 3 in the centre). Sensor operations are
// issued one at a time, one per 4 ms slot: R (read out a region, which
// ends its exposure), S (start its exposure) and, for Region 3 only, a
// burst cycle B (read out and restart in the same slot, i.e. one 4 ms
// short exposure, 250 frames/s).
//
// Flight mode alternates two phases:
//   QL phase: R,S for regions 1,2,4,5,3; wait; (next phase)
//   PC phase: R,S for regions 1,2,4,5,3; 50 x B on Region 3; wait
// The R of each phase ends the exposure begun by the S of the phase
// before, in the same region order, so all regions of a phase get the same
// exposure. The QL phase pauses so that every region's QL exposure, from
// the end of its S slot to the start of its next R slot, lasts exp_slots
// slots (at least 9); after the PC burst the sequencer pauses
// PC_WAIT_SLOTS more slots (plus one slot of turnaround). During
// the PC phase the outer regions integrate across the 50-slot (200 ms)
// burst while Region 3 takes 50 short exposures and then integrates again.
// Test mode instead reads and starts the whole sensor (region 0) and
// exposes it for exp_slots slots: a conventional full-frame exposure.
//
// Follows the instrument: region geometry, start/stop order, 4 ms per
// operation, 50-cycle burst, QL/PC alternation. This design's choices:
// operations never overlap, a burst cycle fits in one 4 ms slot (the
// description gives both "each R or S takes 4 ms" and "50 short exposures
// of 4 ms each / 250 fps"; the latter is followed), the default QL
// exposure, mode changes at phase boundaries, and stopping when `run`
// falls at a phase boundary. `restart` aborts at once and starts again
// from a QL (or Test) phase.
//
// Interface: op_valid pulses for one clock at the start of each slot that
// carries an operation, with `op` and `phase`. `exposing` has one bit per
// region (bit 0 = Region 1). `burst_frames` counts Region 3 short frames.
module cmos_exposure_seq
  import foxsi_pkg::*;
#(
  parameter int unsigned CLK_HZ        = 100_000_000,
  parameter int unsigned SLOT_MS       = 4,
  parameter int unsigned N_BURST       = 50,
  parameter int unsigned PC_WAIT_SLOTS = 0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        run,
  input  logic        flight_mode,
  input  logic [15:0] exp_slots,
  input  logic        restart,
  output logic        op_valid,
  output cmos_op_t    op,
  output cmos_phase_e phase,
  output logic [4:0]  exposing,
  output logic [31:0] burst_frames,
  output logic [31:0] phases_done
);
  localparam int unsigned SLOT_CLK = CLK_HZ / 1000 * SLOT_MS;
  localparam int unsigned TW       = (SLOT_CLK > 1) ? $clog2(SLOT_CLK) : 1;
  localparam int unsigned SEQ_LEN  = 10;

  typedef enum logic [1:0] {Q_IDLE, Q_OPS, Q_WAIT} state_e;

  state_e      state;
  logic [TW-1:0] tmr;
  logic        slot;          // a new 4 ms slot begins
  logic [7:0]  idx;
  logic [15:0] wait_cnt;
  cmos_op_t    cur_op;
  logic [7:0]  n_ops;

  // region order 1,2,4,5,3
  function automatic logic [2:0] order(logic [2:0] k);
    unique case (k)
      3'd0: return 3'd1;
      3'd1: return 3'd2;
      3'd2: return 3'd4;
      3'd3: return 3'd5;
      default: return 3'd3;
    endcase
  endfunction

  always_comb begin
    cur_op.region = 3'd3;
    cur_op.kind   = OP_BURST;
    if (phase == PH_TEST) begin
      cur_op.region = 3'd0;
      cur_op.kind   = (idx == 8'd0) ? OP_READ : OP_START;
    end else if (idx < 8'(SEQ_LEN)) begin
      cur_op.region = order(idx[3:1]);
      cur_op.kind   = idx[0] ? OP_START : OP_READ;
    end
    unique case (phase)
      PH_TEST: n_ops = 8'd2;
      PH_PC:   n_ops = 8'(SEQ_LEN + N_BURST);
      default: n_ops = 8'(SEQ_LEN);
    endcase
  end

  assign slot = (tmr == TW'(SLOT_CLK - 1));

  function automatic logic [15:0] wait_len(cmos_phase_e ph, logic [15:0] e);
    unique case (ph)
      PH_QL:   return (e > 16'd9) ? e - 16'd9 : 16'd0;
      PH_PC:   return 16'(PC_WAIT_SLOTS);
      default: return (e > 16'd1) ? e - 16'd1 : 16'd0;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= Q_IDLE; tmr <= '0; idx <= '0; wait_cnt <= '0;
      phase <= PH_QL; op_valid <= 1'b0; op <= '0;
      exposing <= '0; burst_frames <= '0; phases_done <= '0;
    end else begin
      op_valid <= 1'b0;
      tmr <= slot ? '0 : tmr + TW'(1);
      if (restart) begin
        state <= Q_IDLE; idx <= '0; exposing <= '0; tmr <= '0;
      end else if (slot) begin
        unique case (state)
          Q_IDLE: if (run) begin
            phase <= flight_mode ? PH_QL : PH_TEST;
            idx   <= '0;
            state <= Q_OPS;
          end
          Q_OPS: begin
            op_valid <= 1'b1;
            op       <= cur_op;
            if (cur_op.region == 3'd0) exposing <= (cur_op.kind == OP_START) ? 5'h1F : 5'h00;
            else exposing[cur_op.region - 3'd1] <= (cur_op.kind != OP_READ);
            if (cur_op.kind == OP_BURST) burst_frames <= burst_frames + 32'd1;
            if (idx == n_ops - 8'd1) begin
              wait_cnt <= wait_len(phase, exp_slots);
              state    <= Q_WAIT;
            end
            idx <= idx + 8'd1;
          end
          Q_WAIT: if (wait_cnt != 16'd0) wait_cnt <= wait_cnt - 16'd1;
          else begin
            phases_done <= phases_done + 32'd1;
            idx <= '0;
            if (!run) state <= Q_IDLE;
            else begin
              state <= Q_OPS;
              if (!flight_mode)        phase <= PH_TEST;
              else if (phase == PH_QL) phase <= PH_PC;
              else                     phase <= PH_QL;
            end
          end
          default: state <= Q_IDLE;
        endcase
      end
    end
  end
endmodule
