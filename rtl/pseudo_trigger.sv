// pseudo_trigger: pseudo-random pseudo-trigger source for livetime measurement.
//
// The dead-time of a canister is measured by injecting triggers at random
// times with a known mean rate (10 Hz) and counting how many reach the
// recorded data. Each clock a 32-bit Galois LFSR (taps 32,22,2,1) is
// stepped; when its value is below THRESH = 2^32 * RATE_HZ / CLK_HZ, a
// one-clock pulse is emitted, so arrivals are independent per clock
// (geometric gaps, mean CLK_HZ/RATE_HZ clocks). `count` is the number of
// pseudo triggers generated, written into each event's Pseudo Counter
// word. The 10 Hz rate is the instrument's; the LFSR law is this design's.
module pseudo_trigger #(
  parameter int unsigned CLK_HZ  = 100_000_000,
  parameter int unsigned RATE_HZ = 10,
  parameter logic [31:0] SEED    = 32'hACE1_2468
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        enable,
  output logic        trig,
  output logic [31:0] count
);
  localparam longint unsigned THRESH_L = (64'd1 << 32) * 64'(RATE_HZ) / 64'(CLK_HZ);
  localparam logic [31:0] THRESH = (THRESH_L > 64'hFFFF_FFFF) ? 32'hFFFF_FFFF : THRESH_L[31:0];

  logic [31:0] lfsr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lfsr  <= SEED;
      trig  <= 1'b0;
      count <= '0;
    end else begin
      lfsr <= {1'b0, lfsr[31:1]} ^ (lfsr[0] ? 32'h8020_0003 : 32'h0);
      trig <= 1'b0;
      if (enable && lfsr < THRESH) begin
        trig  <= 1'b1;
        count <= count + 32'd1;
      end
    end
  end
endmodule
