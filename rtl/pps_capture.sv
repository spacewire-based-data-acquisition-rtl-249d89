// pps_capture: time-stamps the GPS pulse-per-second.
//
// The 1 Hz PPS from the rocket GPS is passed through a two-flop
// synchroniser; at each rising edge the block latches the local 64-bit
// clock counter and the current SpaceWire timecode, raises stamp_valid for
// one clock and increments pps_count. Software can log the stamps to
// align the local clock with UTC, which is how the instrument uses the
// PPS. The synchroniser and the output format are this design's choices.
//
// Timing: stamp_valid rises three clocks after the PPS edge; the stamp
// holds the local_time seen on that clock.
module pps_capture (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        pps,
  input  logic [63:0] local_time,
  input  logic [5:0]  timecode,
  output logic        stamp_valid,
  output logic [63:0] stamp_time,
  output logic [5:0]  stamp_tc,
  output logic [31:0] pps_count
);
  logic [2:0] sync;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync        <= '0;
      stamp_valid <= 1'b0;
      stamp_time  <= '0;
      stamp_tc    <= '0;
      pps_count   <= '0;
    end else begin
      sync        <= {sync[1:0], pps};
      stamp_valid <= 1'b0;
      if (sync[1] && !sync[2]) begin
        stamp_valid <= 1'b1;
        stamp_time  <= local_time;
        stamp_tc    <= timecode;
        pps_count   <= pps_count + 32'd1;
      end
    end
  end
endmodule
