// ql_downlink: moves one stored CdTe frame from a CdTe-DE ring buffer into
// the telemetry packetiser as a byte stream.
//
// On a `req` pulse naming a detector whose DE-side ring holds a frame (and
// while the packetiser is idle) it asks that ring for its oldest frame
// (rd_req, one clock), starts the packetiser with the frame length
// (FRAME_W * 4 bytes), system ID SYS_ID and data type DTYPE, and then
// splits each 32-bit word into four bytes, most significant byte first, so
// the bytes appear in the same order as in the frame layout (header bytes
// 02 EF CD AB first). One byte moves per clock; ring words are taken only
// when the previous word has been fully sent. `frames_sent` counts frames
// handed over completely.
//
// This is glue of this design: the instrument reads the DE memory over
// SpaceWire/RMAP from the Formatter, which then cuts the data into
// downlink packets; here that path is a direct stream. A request for an
// empty ring, or while a frame is moving, is ignored. frag_sys, frag_type
// and frag_len are constants set by the parameters.
module ql_downlink #(
  parameter int unsigned N_DET   = 4,
  parameter int unsigned FRAME_W = 8195,
  parameter logic [7:0]  SYS_ID  = 8'h01,
  parameter logic [7:0]  DTYPE   = 8'h02
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req,
  input  logic [1:0]        req_det,
  input  logic [N_DET-1:0]  empty,
  output logic [N_DET-1:0]  rd_req,
  input  logic [N_DET-1:0]  in_valid,
  input  logic [31:0]       in_data [N_DET],
  input  logic [N_DET-1:0]  in_last,
  output logic [N_DET-1:0]  in_ready,
  // packetiser side
  output logic              frag_start,
  output logic [7:0]        frag_sys,
  output logic [7:0]        frag_type,
  output logic [31:0]       frag_len,
  input  logic              frag_busy,
  output logic              frag_valid,
  output logic [7:0]        frag_data,
  input  logic              frag_ready,
  output logic [31:0]       frames_sent
);
  logic        active;
  logic [1:0]  det;
  logic        have;      // a word is held
  logic [31:0] word;
  logic        word_last;
  logic [1:0]  bidx;
  logic        go;

  assign go         = req && !active && !frag_busy && !empty[req_det];
  assign frag_start = go;
  assign frag_sys   = SYS_ID;
  assign frag_type  = DTYPE;
  assign frag_len   = 32'(FRAME_W) * 32'd4;
  assign frag_valid = have;
  assign frag_data  = word[31:24];

  always_comb begin
    rd_req   = '0;
    in_ready = '0;
    if (go) rd_req[req_det] = 1'b1;
    if (active && !have) in_ready[det] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; det <= '0; have <= 1'b0; word <= '0; word_last <= 1'b0;
      bidx <= '0; frames_sent <= '0;
    end else begin
      if (go) begin
        active <= 1'b1;
        det    <= req_det;
      end
      if (active && !have && in_valid[det]) begin
        have      <= 1'b1;
        word      <= in_data[det];
        word_last <= in_last[det];
        bidx      <= '0;
      end
      if (have && frag_ready) begin
        word <= {word[23:0], 8'h00};
        bidx <= bidx + 2'd1;
        if (bidx == 2'd3) begin
          have <= 1'b0;
          if (word_last) begin
            active      <= 1'b0;
            frames_sent <= frames_sent + 32'd1;
          end
        end
      end
    end
  end
endmodule
