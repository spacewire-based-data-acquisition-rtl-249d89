// ring_buffer_ctrl: frame-granular ring buffer held in external SDRAM.
//
// Frames (FRAME_W 32-bit words each, 32780 bytes by default) are written
// to consecutive slots starting at BASE_ADDR; after N_FRAMES slots the
// write position wraps to the first slot. A frame becomes readable when
// its last word has been written. Each `rd_req` pulse, while no read is
// running and a frame is stored, streams the oldest stored frame out on
// out_*. The bookkeeping registers are the pointer set kept in the
// instrument's memory map: for the write side and the read side each,
// the cumulative byte count ("sum address"), the byte address of the
// current slot ("address") and the cumulative frame count ("# of frames").
// 2047 slots fill a canister's 64 MB; the CdTe-DE quick-look ring uses
// 980 slots (30.6 MB).
//
// This design's choices: when all slots are in use a new frame is not
// accepted (in_ready stays low) instead of overwriting old data, so a full
// buffer becomes dead time upstream; SDRAM writes take priority over reads;
// one read is in flight at a time.
//
// SDRAM port: mem_req/mem_we/mem_addr (byte address)/mem_wdata, accepted
// in the clock where mem_gnt is high; read data returns later with
// mem_rvalid. in_ready is combinational in mem_gnt. Addresses and byte
// counts step in whole words and whole frames, so their two low bits are
// always zero (constant outputs after synthesis, kept for the byte-address
// convention of the memory map).
module ring_buffer_ctrl
  import foxsi_pkg::*;
#(
  parameter int unsigned N_FRAMES  = CANISTER_FRAMES,
  parameter int unsigned FRAME_W   = FRAME_WORDS,
  parameter int unsigned AW        = 26,
  parameter logic [AW-1:0] BASE_ADDR = '0
) (
  input  logic          clk,
  input  logic          rst_n,
  // frame input
  input  logic          in_valid,
  input  logic [31:0]   in_data,
  input  logic          in_last,
  output logic          in_ready,
  // frame output
  input  logic          rd_req,
  output logic          out_valid,
  output logic [31:0]   out_data,
  output logic          out_last,
  input  logic          out_ready,
  // SDRAM
  output logic          mem_req,
  output logic          mem_we,
  output logic [AW-1:0] mem_addr,
  output logic [31:0]   mem_wdata,
  input  logic          mem_gnt,
  input  logic          mem_rvalid,
  input  logic [31:0]   mem_rdata,
  // pointers
  output logic [63:0]   wr_sum,
  output logic [AW-1:0] wr_addr,
  output logic [31:0]   wr_frames,
  output logic [63:0]   rd_sum,
  output logic [AW-1:0] rd_addr,
  output logic [31:0]   rd_frames,
  output logic          full,
  output logic          empty
);
  localparam int unsigned FB = FRAME_W * 4;
  localparam int unsigned OW = $clog2(FRAME_W + 1);
  localparam int unsigned SW = (N_FRAMES > 1) ? $clog2(N_FRAMES) : 1;

  logic [OW-1:0] woff, roff;
  logic [SW-1:0] wslot, rslot;
  logic          reading, rd_pend, rd_hold;
  logic [31:0]   stored;     // complete frames not yet fully read
  logic          can_write, wr_go, rd_issue;

  assign stored    = wr_frames - rd_frames;
  assign full      = (stored == 32'(N_FRAMES));
  assign empty     = (stored == 32'd0) || (reading && stored == 32'd1);
  // a new frame may begin only when a free slot exists
  assign can_write = (woff != '0) || !full;
  assign wr_go     = in_valid && can_write;
  assign rd_issue  = reading && !rd_pend && !rd_hold && !wr_go;

  assign mem_req   = wr_go || rd_issue;
  assign mem_we    = wr_go;
  assign mem_addr  = wr_go ? wr_addr + AW'(woff) * AW'(4) : rd_addr + AW'(roff) * AW'(4);
  assign mem_wdata = in_data;
  assign in_ready  = wr_go && mem_gnt;

  assign out_valid = rd_hold;
  assign out_last  = rd_hold && (roff == OW'(FRAME_W - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      woff <= '0; roff <= '0; wslot <= '0; rslot <= '0;
      reading <= 1'b0; rd_pend <= 1'b0; rd_hold <= 1'b0; out_data <= '0;
      wr_sum <= '0; wr_addr <= BASE_ADDR; wr_frames <= '0;
      rd_sum <= '0; rd_addr <= BASE_ADDR; rd_frames <= '0;
    end else begin
      // ---- write side
      if (wr_go && mem_gnt) begin
        wr_sum <= wr_sum + 64'd4;
        if (in_last || woff == OW'(FRAME_W - 1)) begin
          woff      <= '0;
          wr_frames <= wr_frames + 32'd1;
          if (wslot == SW'(N_FRAMES - 1)) begin
            wslot <= '0; wr_addr <= BASE_ADDR;
          end else begin
            wslot <= wslot + SW'(1); wr_addr <= wr_addr + AW'(FB);
          end
        end else begin
          woff <= woff + OW'(1);
        end
      end
      // ---- read side
      if (!reading && rd_req && stored != 32'd0) begin
        reading <= 1'b1;
        roff    <= '0;
      end
      if (rd_issue && mem_gnt) rd_pend <= 1'b1;
      if (rd_pend && mem_rvalid) begin
        rd_pend  <= 1'b0;
        rd_hold  <= 1'b1;
        out_data <= mem_rdata;
      end
      if (rd_hold && out_ready) begin
        rd_hold <= 1'b0;
        rd_sum  <= rd_sum + 64'd4;
        if (roff == OW'(FRAME_W - 1)) begin
          reading   <= 1'b0;
          roff      <= '0;
          rd_frames <= rd_frames + 32'd1;
          if (rslot == SW'(N_FRAMES - 1)) begin
            rslot <= '0; rd_addr <= BASE_ADDR;
          end else begin
            rslot <= rslot + SW'(1); rd_addr <= rd_addr + AW'(FB);
          end
        end else begin
          roff <= roff + OW'(1);
        end
      end
    end
  end
endmodule
