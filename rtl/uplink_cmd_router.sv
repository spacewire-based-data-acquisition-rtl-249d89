// uplink_cmd_router: Formatter uplink command queues.
//
// Ground commands arrive as fixed two-byte words: the first byte names the
// target onboard system, the second the system-specific command. The
// router checks that the system byte is known and pushes the command byte
// into that system's FIFO (DEPTH entries); unknown systems and commands
// for a full queue are counted in `rejected`. The Formatter visits the
// systems in a round-robin loop: each `poll` pulse serves the system named
// by `cur_sys`, delivering the oldest queued command for it (out_valid,
// one clock) if there is one, and moves to the next system.
// The two-byte format, per-system queues and round-robin service follow
// the instrument, where this is Formatter software. The system codes
// SYS_ID[i] (0x01 CdTe-DE, 0x02 CMOS 1, 0x03 CMOS 2, 0x04 Timepix), the
// queue depth and the drop-on-full rule are this design's.
module uplink_cmd_router #(
  parameter int unsigned N_SYS = 4,
  parameter int unsigned DEPTH = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  input  logic [15:0] cmd,
  input  logic        poll,
  output logic [1:0]  cur_sys,
  output logic        out_valid,
  output logic [7:0]  out_cmd,
  output logic [1:0]  out_sys,
  output logic [31:0] accepted,
  output logic [31:0] rejected
);
  localparam int unsigned PW = $clog2(DEPTH);

  logic [7:0]  q     [N_SYS][DEPTH];
  logic [PW:0] wp    [N_SYS];
  logic [PW:0] rp    [N_SYS];
  logic [7:0]  sys_b;
  logic [1:0]  tgt;
  logic        known;

  assign sys_b = cmd[15:8];
  assign known = (sys_b >= 8'd1) && (sys_b <= 8'(N_SYS));
  assign tgt   = 2'(sys_b - 8'd1);

  function automatic logic q_full(logic [PW:0] w, logic [PW:0] r);
    return (w[PW] != r[PW]) && (w[PW-1:0] == r[PW-1:0]);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_sys <= '0; out_valid <= 1'b0; out_cmd <= '0; out_sys <= '0;
      accepted <= '0; rejected <= '0;
      for (int s = 0; s < N_SYS; s++) begin
        wp[s] <= '0; rp[s] <= '0;
        for (int d = 0; d < DEPTH; d++) q[s][d] <= '0;
      end
    end else begin
      out_valid <= 1'b0;
      if (cmd_valid) begin
        if (known && !q_full(wp[tgt], rp[tgt])) begin
          q[tgt][wp[tgt][PW-1:0]] <= cmd[7:0];
          wp[tgt]  <= wp[tgt] + 1'b1;
          accepted <= accepted + 32'd1;
        end else begin
          rejected <= rejected + 32'd1;
        end
      end
      if (poll) begin
        if (wp[cur_sys] != rp[cur_sys]) begin
          out_valid <= 1'b1;
          out_cmd   <= q[cur_sys][rp[cur_sys][PW-1:0]];
          out_sys   <= cur_sys;
          rp[cur_sys] <= rp[cur_sys] + 1'b1;
        end
        cur_sys <= (cur_sys == 2'(N_SYS - 1)) ? 2'd0 : cur_sys + 2'd1;
      end
    end
  end
endmodule
