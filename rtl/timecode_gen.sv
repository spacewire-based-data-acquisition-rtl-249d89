// timecode_gen: 64 Hz SpaceWire Timecode source for the CdTe-DE.
//
// Divides the system clock down to TC_HZ (64) steps per second. Each step
// raises `tick` for one clock and advances `timecode` 0,1,...,63,0,...
// When the timecode wraps to 0 a new one-second cycle begins; `cycle`
// counts cycles from 1, so cycle 1 is odd, as in the instrument's
// timecode-action table. The timecode values and their 64 Hz rate follow
// the instrument description, which generates them in CPU software; doing
// it with a clock divider, and the 100 MHz clock, are this design's choices.
//
// Timing: after reset timecode = 0, cycle = 1; the first tick comes
// CLK_HZ/TC_HZ clocks later. timecode and cycle change on the clock edge
// that raises tick.
module timecode_gen #(
  parameter int unsigned CLK_HZ = 100_000_000,
  parameter int unsigned TC_HZ  = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  output logic        tick,
  output logic [5:0]  timecode,
  output logic [31:0] cycle
);
  localparam int unsigned DIV = CLK_HZ / TC_HZ;
  localparam int unsigned CW  = (DIV > 1) ? $clog2(DIV) : 1;

  logic [CW-1:0] div_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div_cnt  <= '0;
      tick     <= 1'b0;
      timecode <= '0;
      cycle    <= 32'd1;
    end else begin
      tick <= 1'b0;
      if (div_cnt == CW'(DIV - 1)) begin
        div_cnt  <= '0;
        tick     <= 1'b1;
        timecode <= timecode + 6'd1;       // wraps 63 -> 0
        if (timecode == 6'd63) cycle <= cycle + 32'd1;
      end else begin
        div_cnt <= div_cnt + CW'(1);
      end
    end
  end
endmodule
