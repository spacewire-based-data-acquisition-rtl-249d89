// asic_packer: packs one VATA451.2 ASIC readout into the CdTe-DSD
// "Detector data for ASIC#" bit stream.
//
// The stream is, MSB first: a 64-bit chflag (bit i = 1 when channel i is
// recorded), the 10-bit ADC value of every recorded channel in ascending
// channel order, the 10-bit common-mode noise (CMN), and zero bits up to
// the next 32-bit boundary (the "bit adjust" field, which brings the
// stream to whole bytes, and then to a whole word). In All Readout mode
// every channel is recorded: 64 + 640 + 10 = 714 bits, i.e. 91 bytes
// padded to 23 words, as in the instrument's data format. In Sparse
// Readout mode a channel is recorded only when its ADC value exceeds the
// digital threshold Dth.
//
// The field list and sizes follow the instrument's format; the bit order,
// the strict ">" comparison and the one-channel-per-clock schedule are
// this design's choices. The instrument applies Dth inside the ASIC; here
// the comparison is made on the captured ADC values.
//
// Interface: pulse `start` while idle with adc/cmn/dth/sparse valid; they
// must stay stable until `busy` falls. Words leave on a valid/ready
// stream, `out_last` marking the final one. Packing takes about one clock
// per channel plus one per output word when out_ready is held high.
module asic_packer #(
  parameter int unsigned N_CH  = 64,
  parameter int unsigned ADC_W = 10
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [ADC_W-1:0] adc [N_CH],
  input  logic [ADC_W-1:0] cmn,
  input  logic [ADC_W-1:0] dth,
  input  logic             sparse,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [31:0]      out_data,
  output logic             out_last,
  output logic             busy
);
  typedef enum logic [2:0] {S_IDLE, S_FLAG_HI, S_FLAG_LO, S_CH, S_CMN, S_PAD, S_DRAIN} state_e;
  localparam int unsigned CHW = $clog2(N_CH);

  state_e          state;
  logic [63:0]     acc;      // valid bits are acc[63 -: nbits]
  logic [6:0]      nbits;
  logic [CHW-1:0]  ch;
  logic [N_CH-1:0] chflag;

  // pop / push for this clock
  logic        pop;
  logic [63:0] acc_a;
  logic [6:0]  na;
  logic        push;
  logic [5:0]  push_n;
  logic [31:0] push_v;

  always_comb begin
    for (int i = 0; i < N_CH; i++) chflag[i] = !sparse || (adc[i] > dth);
  end

  // the final word is held back until the padding step has marked it
  assign out_valid = (nbits > 7'd32) || (nbits == 7'd32 && state != S_PAD);
  assign out_data  = acc[63:32];
  assign out_last  = (state == S_DRAIN) && (nbits == 7'd32);
  assign busy      = (state != S_IDLE);

  always_comb begin
    pop   = out_valid && out_ready;
    acc_a = pop ? {acc[31:0], 32'h0} : acc;
    na    = pop ? nbits - 7'd32 : nbits;
    push   = 1'b0;
    push_n = '0;
    push_v = '0;
    unique case (state)
      S_FLAG_HI: begin push = (na < 7'd32); push_n = 6'd32; push_v = chflag[63:32]; end
      S_FLAG_LO: begin push = (na < 7'd32); push_n = 6'd32; push_v = chflag[31:0];  end
      S_CH:      begin push = (na < 7'd32) && chflag[ch]; push_n = 6'(ADC_W); push_v = 32'(adc[ch]); end
      S_CMN:     begin push = (na < 7'd32); push_n = 6'(ADC_W); push_v = 32'(cmn); end
      default:   ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      acc   <= '0;
      nbits <= '0;
      ch    <= '0;
    end else begin
      acc   <= acc_a;
      nbits <= na;
      if (push) begin
        acc   <= acc_a | (({32'h0, push_v} << (7'd64 - 7'(push_n))) >> na);
        nbits <= na + 7'(push_n);
      end
      unique case (state)
        S_IDLE:    if (start) begin state <= S_FLAG_HI; ch <= '0; end
        S_FLAG_HI: if (push) state <= S_FLAG_LO;
        S_FLAG_LO: if (push) state <= S_CH;
        S_CH:      if (na < 7'd32) begin
                     if (ch == CHW'(N_CH - 1)) state <= S_CMN;
                     ch <= ch + CHW'(1);
                   end
        S_CMN:     if (push) state <= S_PAD;
        S_PAD:     begin
                     // bit adjust: round the remaining bits up to a word
                     if (na < 7'd32) begin nbits <= 7'd32; state <= S_DRAIN; end
                     else if (na == 7'd32) state <= S_DRAIN;
                   end
        S_DRAIN:   if (pop && nbits == 7'd32) state <= S_IDLE;
        default:   state <= S_IDLE;
      endcase
    end
  end
endmodule
