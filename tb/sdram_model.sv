// sdram_model: behavioural stand-in for the external SDRAM used by the
// ring buffers (testbench only, not synthesizable logic).
//
// Word-addressed by byte address (low two bits ignored), sparse storage in
// an associative array, so a 64 MB address space costs only what is
// written. A request is granted in the same clock unless the random stall
// (STALL_PCT percent of clocks) refuses it; read data come back one clock
// after the granted request with mem_rvalid. Unwritten words read as
// 0xDEADBEEF.
module sdram_model #(
  parameter int unsigned AW        = 26,
  parameter int unsigned STALL_PCT = 0
) (
  input  logic          clk,
  input  logic          mem_req,
  input  logic          mem_we,
  input  logic [AW-1:0] mem_addr,
  input  logic [31:0]   mem_wdata,
  output logic          mem_gnt,
  output logic          mem_rvalid,
  output logic [31:0]   mem_rdata
);
  logic [31:0] mem [int unsigned];
  logic        stall;
  int unsigned writes = 0;

  initial begin
    stall      = 1'b0;
    mem_rvalid = 1'b0;
    mem_rdata  = '0;
  end

  assign mem_gnt = mem_req && !stall;

  always @(posedge clk) begin
    stall      <= (STALL_PCT != 0) && (($urandom % 100) < STALL_PCT);
    mem_rvalid <= 1'b0;
    if (mem_gnt) begin
      if (mem_we) begin
        mem[32'(mem_addr >> 2)] = mem_wdata;
        writes++;
      end else begin
        mem_rvalid <= 1'b1;
        mem_rdata  <= mem.exists(32'(mem_addr >> 2)) ? mem[32'(mem_addr >> 2)] : 32'hDEAD_BEEF;
      end
    end
  end
endmodule
