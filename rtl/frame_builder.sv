// frame_builder: packs Event data records into fixed-size CdTe-DSD
// "Frame data" blocks of 8195 words (32780 bytes).
//
// Frame layout (word index):
//   0          0x02EFCDAB                 frame header
//   1 ...      whole Event data records, back to back
//   ... 8192   zero fill
//   8193       UNIXTIME (sampled when the fill starts)
//   8194       0x2301FFFF                 frame trailer
// An event is never split across frames. A new event may start only while
// at least GUARD_EVENTS maximum-size events (104 words each) of room are
// left before word 8193; otherwise the frame is closed. With GUARD_EVENTS
// = 2 an All Readout frame holds exactly 77 events (words 1..8008), the
// count printed in the instrument's format drawing; the rule itself is
// this design's reconstruction. `flush` closes a partly filled frame once
// the event source is idle (used when an observation stops); a frame with
// no event is not flushed.
//
// Interface: `accept` tells the event builder that it may start an event;
// event words come in on ev_* (valid/ready) and frame words go out on fr_*
// (valid/ready, fr_last on the trailer). Header, fill and trailer words
// move at one per clock when fr_ready is high.
module frame_builder
  import foxsi_pkg::*;
#(
  parameter int unsigned FRAME_W      = FRAME_WORDS,
  parameter int unsigned MAX_EV_W     = MAX_EVENT_WORDS,
  parameter int unsigned GUARD_EVENTS = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ev_valid,
  input  logic [31:0] ev_data,
  input  logic        ev_last,
  output logic        ev_ready,
  input  logic        ev_busy,
  output logic        accept,
  input  logic        flush,
  input  logic [31:0] unixtime,
  output logic        fr_valid,
  output logic [31:0] fr_data,
  output logic        fr_last,
  input  logic        fr_ready,
  output logic [31:0] frames,
  output logic [31:0] flushes
);
  typedef enum logic [2:0] {F_HDR, F_EVT, F_FILL, F_UNIX, F_TRAIL} state_e;
  localparam int unsigned PW        = $clog2(FRAME_W + 1);
  localparam int unsigned UNIX_IDX  = FRAME_W - 2;
  localparam int unsigned LAST_EVT  = UNIX_IDX - GUARD_EVENTS * MAX_EV_W; // start limit

  state_e        state;
  logic [PW-1:0] ptr;        // index of the next word to emit
  logic          in_event;
  logic          flush_req;
  logic [31:0]   unix_q;
  logic          room;

  assign room   = (ptr <= PW'(LAST_EVT));
  assign accept = (state == F_EVT) && room && !flush_req;
  assign ev_ready = (state == F_EVT) && fr_ready;

  always_comb begin
    fr_valid = 1'b0;
    fr_data  = '0;
    fr_last  = 1'b0;
    unique case (state)
      F_HDR:   begin fr_valid = 1'b1; fr_data = FRAME_HEADER; end
      F_EVT:   begin fr_valid = ev_valid; fr_data = ev_data; end
      F_FILL:  begin fr_valid = 1'b1; fr_data = 32'h0; end
      F_UNIX:  begin fr_valid = 1'b1; fr_data = unix_q; end
      F_TRAIL: begin fr_valid = 1'b1; fr_data = FRAME_TRAILER; fr_last = 1'b1; end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= F_HDR;
      ptr       <= '0;
      in_event  <= 1'b0;
      flush_req <= 1'b0;
      unix_q    <= '0;
      frames    <= '0;
      flushes   <= '0;
    end else begin
      if (flush) flush_req <= 1'b1;
      unique case (state)
        F_HDR: if (fr_ready) begin
          ptr   <= PW'(1);
          state <= F_EVT;
        end
        F_EVT: begin
          if (ev_valid && fr_ready) begin
            ptr      <= ptr + PW'(1);
            in_event <= !ev_last;
          end else if (!in_event && !ev_busy && !ev_valid) begin
            if (!room || (flush_req && ptr != PW'(1))) begin
              if (room) flushes <= flushes + 32'd1;
              unix_q <= unixtime;
              state  <= (ptr == PW'(UNIX_IDX)) ? F_UNIX : F_FILL;
            end
            if (flush_req && ptr == PW'(1)) flush_req <= 1'b0;  // nothing to flush
          end
        end
        F_FILL: if (fr_ready) begin
          ptr <= ptr + PW'(1);
          if (ptr == PW'(UNIX_IDX - 1)) state <= F_UNIX;
        end
        F_UNIX: if (fr_ready) begin
          ptr   <= ptr + PW'(1);
          state <= F_TRAIL;
        end
        F_TRAIL: if (fr_ready) begin
          ptr       <= '0;
          frames    <= frames + 32'd1;
          flush_req <= 1'b0;
          state     <= F_HDR;
        end
        default: state <= F_HDR;
      endcase
    end
  end
endmodule
