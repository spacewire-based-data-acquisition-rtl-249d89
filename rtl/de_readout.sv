// de_readout: CdTe-DE readout engine.
//
// In every data-acquisition timecode step (4..63) the timecode schedule
// names one detector. While `enable` is high (observation started or
// stopping with data left) and that detector's ring buffer is not empty,
// the engine requests one frame from it and forwards the frame, word by
// word, to its output stream (toward the storage on the CdTe-DE CPU),
// tagging it with the detector number. When the frame ends it asks again
// if the window is still open. A frame already in transfer when the
// window closes is completed. The readout windows follow the instrument;
// replacing the SpaceWire/RMAP transfer by a direct stream is this
// design's simplification, and the transport rate (10 or 50 Mbit/s links)
// shows up only through out_ready.
module de_readout #(
  parameter int unsigned N_DET = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              enable,
  input  logic              acq_en,
  input  logic [1:0]        acq_det,
  output logic [N_DET-1:0]  rd_req,
  input  logic [N_DET-1:0]  in_valid,
  input  logic [31:0]       in_data [N_DET],
  input  logic [N_DET-1:0]  in_last,
  output logic [N_DET-1:0]  in_ready,
  input  logic [N_DET-1:0]  empty,
  output logic              out_valid,
  output logic [31:0]       out_data,
  output logic              out_last,
  output logic [1:0]        out_det,
  input  logic              out_ready,
  output logic [31:0]       frames_read [N_DET]
);
  logic       xfer;
  logic [1:0] cur;

  assign out_det   = cur;
  assign out_valid = xfer && in_valid[cur];
  assign out_data  = in_data[cur];
  assign out_last  = xfer && in_last[cur];

  always_comb begin
    rd_req   = '0;
    in_ready = '0;
    if (!xfer && enable && acq_en && !empty[acq_det]) rd_req[acq_det] = 1'b1;
    if (xfer) in_ready[cur] = out_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xfer <= 1'b0;
      cur  <= '0;
      for (int i = 0; i < N_DET; i++) frames_read[i] <= '0;
    end else begin
      if (!xfer && enable && acq_en && !empty[acq_det]) begin
        xfer <= 1'b1;
        cur  <= acq_det;
      end else if (xfer && in_valid[cur] && out_ready && in_last[cur]) begin
        xfer <= 1'b0;
        frames_read[cur] <= frames_read[cur] + 32'd1;
      end
    end
  end
endmodule
