// ring_buffer_ctrl_tb: ring of 3 frames of 16 words over the SDRAM model
// with random stalls. Writes frames until the buffer is full and checks
// that the next frame is held back (in_ready low), reads frames and
// compares their contents and order, checks the pointer registers (byte
// sums, slot addresses with wrap-around, frame counts) and full/empty.
module ring_buffer_ctrl_tb;
  localparam int FW = 16, NF = 3, AW = 26;
  localparam logic [AW-1:0] BASE = AW'('h40_0000);
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_last = 0; logic [31:0] in_data = 0; logic in_ready;
  logic rd_req = 0, out_valid, out_last, out_ready = 1; logic [31:0] out_data;
  logic mem_req, mem_we, mem_gnt, mem_rvalid; logic [AW-1:0] mem_addr; logic [31:0] mem_wdata, mem_rdata;
  logic [63:0] wr_sum, rd_sum; logic [AW-1:0] wr_addr, rd_addr; logic [31:0] wr_frames, rd_frames;
  logic full, empty;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  ring_buffer_ctrl #(.N_FRAMES(NF), .FRAME_W(FW), .AW(AW), .BASE_ADDR(BASE)) dut (.*);
  sdram_model #(.AW(AW), .STALL_PCT(20)) mem (.*);

  always @(posedge clk) out_ready <= ($urandom % 3) != 0;

  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic write_frame(input int id);
    for (int k = 0; k < FW; k++) begin
      in_valid = 1; in_data = {16'(id), 16'(k)}; in_last = (k == FW - 1);
      do @(posedge clk); while (!in_ready);
      #1;
    end
    in_valid = 0; in_last = 0;
  endtask

  task automatic read_frame(input int id);
    int k = 0;
    @(posedge clk); #1 rd_req = 1; @(posedge clk); #1 rd_req = 0;
    while (k < FW) begin
      @(posedge clk);
      if (out_valid && out_ready) begin
        if (out_data != {16'(id), 16'(k)}) begin failures++; $display("FAIL read id %0d word %0d %h", id, k, out_data); end
        if (out_last != (k == FW - 1)) begin failures++; $display("FAIL last flag"); end
        k++;
      end
    end
    checks++;
    #1;
  endtask

  initial begin
    #10000000; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    bit blocked;
    repeat (3) @(posedge clk); rst_n = 1;
    @(posedge clk); #1;
    chk(empty && !full, "empty after reset");
    for (int f = 0; f < NF; f++) write_frame(f);
    @(posedge clk); #1;
    chk(full && wr_frames == NF, "full after 3 frames");
    chk(wr_sum == 64'(NF * FW * 4), $sformatf("wr_sum %0d", wr_sum));
    chk(wr_addr == BASE, "write address wrapped to base");
    // fourth frame must be held back
    in_valid = 1; in_data = 32'hFFFF_0000; blocked = 1;
    repeat (40) begin @(posedge clk); if (in_ready) blocked = 0; end
    #1 in_valid = 0;
    chk(blocked, "write blocked while full");
    read_frame(0);
    @(posedge clk); #1;
    chk(!full && rd_frames == 1 && rd_addr == BASE + AW'(FW * 4), "read pointer advanced");
    write_frame(3);
    read_frame(1); read_frame(2); read_frame(3);
    @(posedge clk); #1;
    chk(empty && rd_frames == 4 && wr_frames == 4, "empty after all read");
    chk(rd_sum == wr_sum && rd_sum == 64'(4 * FW * 4), "byte sums agree");
    chk(rd_addr == BASE + AW'(FW * 4) && wr_addr == rd_addr, "slot addresses after wrap");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
