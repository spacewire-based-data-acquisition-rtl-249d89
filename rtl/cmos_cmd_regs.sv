// cmos_cmd_regs: command window of the CMOS camera electronics.
//
// The Formatter controls the camera by writing fixed 4-byte command words
// into a small memory window (over SpaceWire/RMAP in the instrument).
// Each command has its own address and is executed by the write itself:
//   0x00 start exposure          0x04 stop exposure
//   0x08 mode (bit 0: 1 Flight, 0 Test)
//   0x0C exposure time in 4 ms slots (bits 15:0)
//   0x20 stop, reset all settings to their defaults, restart exposure
//   0x24 reboot (emergency, double command)
//   0x180 emergency arm flag (outside the command block)
// An emergency command is carried out only when the arm flag was set by
// the write just before it; any other write clears the flag. A refused
// emergency command sets status to 0xDEAD_0024. `status` also reports the
// address of the last executed command in its low byte.
// Only the 0x20 command and the double-command rule come from the
// instrument description; the other addresses, the defaults (Flight mode,
// 50 slots = 200 ms) and the status format are this design's.
module cmos_cmd_regs #(
  parameter logic [15:0] EXP_DEFAULT = 16'd50
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr,
  input  logic [11:0] addr,
  input  logic [31:0] wdata,
  output logic        run,
  output logic        flight_mode,
  output logic [15:0] exp_slots,
  output logic        restart,
  output logic        reboot,
  output logic [31:0] status
);
  localparam logic [11:0] A_START   = 12'h000;
  localparam logic [11:0] A_STOP    = 12'h004;
  localparam logic [11:0] A_MODE    = 12'h008;
  localparam logic [11:0] A_EXP     = 12'h00C;
  localparam logic [11:0] A_RESTART = 12'h020;
  localparam logic [11:0] A_REBOOT  = 12'h024;
  localparam logic [11:0] A_ARM     = 12'h180;

  logic armed;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; flight_mode <= 1'b1; exp_slots <= EXP_DEFAULT;
      restart <= 1'b0; reboot <= 1'b0; status <= '0; armed <= 1'b0;
    end else begin
      restart <= 1'b0;
      reboot  <= 1'b0;
      if (wr) begin
        armed  <= 1'b0;
        status <= {20'h0, addr};
        unique case (addr)
          A_START:   run <= 1'b1;
          A_STOP:    run <= 1'b0;
          A_MODE:    flight_mode <= wdata[0];
          A_EXP:     exp_slots <= wdata[15:0];
          A_RESTART: begin
            flight_mode <= 1'b1;
            exp_slots   <= EXP_DEFAULT;
            run         <= 1'b1;
            restart     <= 1'b1;
          end
          A_ARM:     armed <= (wdata != 32'h0);
          A_REBOOT:  if (armed) reboot <= 1'b1;
                     else status <= 32'hDEAD_0024;
          default:   status <= 32'hBAD0_0000 | 32'(addr);
        endcase
      end
    end
  end
endmodule
