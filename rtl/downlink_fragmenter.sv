// downlink_fragmenter: Formatter telemetry packetiser.
//
// Detector telemetry products (housekeeping, photon lists, quick-look
// frames) are often larger than the downlink MTU of 1500 bytes. The
// product is cut into packets of at most MTU bytes; each packet starts
// with an 8-byte header
//   byte 0     system ID          (onboard system that produced the data)
//   bytes 1-2  packet total       (packets in this product)
//   bytes 3-4  packet counter     (index of this packet, from 0)
//   byte 5     data type          (housekeeping / photon list / QL ...)
//   bytes 6-7  reserved (0)
// followed by up to MTU - 8 = 1492 payload bytes. With total and counter
// the ground can rebuild whole products even if packets arrive out of
// order. The header fields and the MTU follow the instrument, where this
// is Formatter software; big-endian 2-byte fields, the counter starting at
// 0 and the byte-stream hardware form are this design's choices.
//
// Interface: pulse `start` (while idle) with sys_id, data_type and the
// product length in bytes (> 0); payload bytes then flow in on in_*
// (valid/ready) and packets flow out on out_* (valid/ready, out_last on
// the final byte of each packet). One byte moves per clock.
module downlink_fragmenter #(
  parameter int unsigned MTU       = 1500,
  parameter int unsigned HDR_BYTES = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [7:0]  sys_id,
  input  logic [7:0]  data_type,
  input  logic [31:0] length,
  output logic        busy,
  input  logic        in_valid,
  input  logic [7:0]  in_data,
  output logic        in_ready,
  output logic        out_valid,
  output logic [7:0]  out_data,
  output logic        out_last,
  input  logic        out_ready,
  output logic [31:0] packets_sent
);
  localparam int unsigned PAY = MTU - HDR_BYTES;

  typedef enum logic [1:0] {D_IDLE, D_HDR, D_PAY} state_e;
  state_e      state;
  logic [7:0]  sys_q, type_q;
  logic [15:0] total, count;
  logic [31:0] remain;       // payload bytes not yet sent
  logic [15:0] pay_left;     // payload bytes left in this packet
  logic [2:0]  hidx;
  logic [7:0]  hbyte;

  always_comb begin
    unique case (hidx)
      3'd0: hbyte = sys_q;
      3'd1: hbyte = total[15:8];
      3'd2: hbyte = total[7:0];
      3'd3: hbyte = count[15:8];
      3'd4: hbyte = count[7:0];
      3'd5: hbyte = type_q;
      default: hbyte = 8'h00;
    endcase
  end

  assign busy      = (state != D_IDLE);
  assign in_ready  = (state == D_PAY) && out_ready;
  assign out_valid = (state == D_HDR) || (state == D_PAY && in_valid);
  assign out_data  = (state == D_HDR) ? hbyte : in_data;
  assign out_last  = (state == D_PAY) && (pay_left == 16'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= D_IDLE; sys_q <= '0; type_q <= '0; total <= '0; count <= '0;
      remain <= '0; pay_left <= '0; hidx <= '0; packets_sent <= '0;
    end else begin
      unique case (state)
        D_IDLE: if (start && length != 32'd0) begin
          sys_q  <= sys_id;
          type_q <= data_type;
          total  <= 16'((length + 32'(PAY) - 32'd1) / 32'(PAY));
          count  <= '0;
          remain <= length;
          hidx   <= '0;
          state  <= D_HDR;
        end
        D_HDR: if (out_ready) begin
          hidx <= hidx + 3'd1;
          if (hidx == 3'(HDR_BYTES - 1)) begin
            pay_left <= (remain > 32'(PAY)) ? 16'(PAY) : remain[15:0];
            state    <= D_PAY;
          end
        end
        D_PAY: if (in_valid && out_ready) begin
          pay_left <= pay_left - 16'd1;
          remain   <= remain - 32'd1;
          if (pay_left == 16'd1) begin
            packets_sent <= packets_sent + 32'd1;
            count <= count + 16'd1;
            hidx  <= '0;
            state <= (remain == 32'd1) ? D_IDLE : D_HDR;
          end
        end
        default: state <= D_IDLE;
      endcase
    end
  end
endmodule
