// event_builder: builds one CdTe-DSD "Event data" record per trigger.
//
// On an accepted trigger the four ASICs' 64 ADC values and CMN are
// captured at once (the ASICs are read in parallel, not daisy-chained),
// together with the FPGA clock counter TI, the livetime counters, the
// external time and the pseudo-trigger counter. The record is then sent
// as 32-bit words:
//   word 0      0x00003C3C                    event header
//   word 1      TI                            free-running clock counter
//   word 2      Livetime
//   word 3      {Integral Livetime[15:0], Flag[15:0]}
//   word 4, 5   Ext TI upper, Ext TI lower
//   word 6      Pseudo Counter
//   then for each ASIC 1..4: its packed detector data (asic_packer)
//               followed by one 0x00000000 word
//   last word   0x77770000                    event footer
// In All Readout mode that is 104 words (416 bytes); sparse records are
// shorter. Word order and marker values follow the instrument's format.
// This design's choices: Livetime = live clocks since the previous
// accepted trigger; Integral Livetime = bits [31:16] of the running live
// clock total; Flag bit 0 = pseudo event; a trigger is accepted only when
// idle and `accept` (room in the frame) is high, otherwise it is lost as
// dead time; "live" means exactly that acceptance condition.
//
// Interface: level-sampled single-clock trigger `trig`, words on a
// valid/ready stream with out_last on the footer.
module event_builder
  import foxsi_pkg::*;
#(
  parameter int unsigned N_ASICS = N_ASIC
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        trig,
  input  logic        pseudo,
  input  adc_t        adc [N_ASICS][N_CH],
  input  adc_t        cmn [N_ASICS],
  input  adc_t        dth,
  input  logic        sparse,
  input  logic [63:0] ext_ti,
  input  logic [31:0] pseudo_count,
  input  logic        accept,
  output logic        out_valid,
  input  logic        out_ready,
  output logic [31:0] out_data,
  output logic        out_last,
  output logic        busy,
  output logic [31:0] live_cycles,
  output logic [31:0] events
);
  typedef enum logic [2:0] {E_IDLE, E_HK, E_ASIC_START, E_ASIC, E_ZERO, E_FOOT} state_e;
  localparam int unsigned AW = (N_ASICS > 1) ? $clog2(N_ASICS) : 1;

  state_e       state;
  logic [2:0]   hk_idx;
  logic [AW-1:0] asic;
  adc_t         adc_q [N_ASICS][N_CH];
  adc_t         cmn_q [N_ASICS];
  logic [31:0]  hk_q [7];
  logic [31:0]  ti;
  logic [31:0]  live_since;
  logic         live;

  // packer, time-shared over the captured ASICs
  logic        pk_start, pk_valid, pk_ready, pk_last, pk_busy;
  logic [31:0] pk_data;
  adc_t        pk_adc [N_CH];

  always_comb for (int c = 0; c < N_CH; c++) pk_adc[c] = adc_q[asic][c];

  asic_packer #(.N_CH(N_CH), .ADC_W(ADC_W)) u_pack (
    .clk, .rst_n, .start(pk_start), .adc(pk_adc), .cmn(cmn_q[asic]), .dth, .sparse,
    .out_valid(pk_valid), .out_ready(pk_ready), .out_data(pk_data), .out_last(pk_last), .busy(pk_busy)
  );

  assign live = (state == E_IDLE) && accept;
  assign busy = (state != E_IDLE);
  assign pk_start = (state == E_ASIC_START) && !pk_busy;  // start only an idle packer
  assign pk_ready = (state == E_ASIC) && out_ready;

  always_comb begin
    out_valid = 1'b0;
    out_data  = '0;
    out_last  = 1'b0;
    unique case (state)
      E_HK:   begin out_valid = 1'b1; out_data = hk_q[hk_idx]; end
      E_ASIC: begin out_valid = pk_valid; out_data = pk_data; end
      E_ZERO: begin out_valid = 1'b1; out_data = 32'h0; end
      E_FOOT: begin out_valid = 1'b1; out_data = EVENT_FOOTER; out_last = 1'b1; end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= E_IDLE;
      hk_idx      <= '0;
      asic        <= '0;
      ti          <= '0;
      live_since  <= '0;
      live_cycles <= '0;
      events      <= '0;
      for (int i = 0; i < 7; i++) hk_q[i] <= '0;
      for (int a = 0; a < N_ASICS; a++) begin
        cmn_q[a] <= '0;
        for (int c = 0; c < N_CH; c++) adc_q[a][c] <= '0;
      end
    end else begin
      ti <= ti + 32'd1;
      if (live) begin
        live_cycles <= live_cycles + 32'd1;
        live_since  <= live_since + 32'd1;
      end
      unique case (state)
        E_IDLE: if (trig && accept) begin
          adc_q   <= adc;
          cmn_q   <= cmn;
          hk_q[0] <= EVENT_HEADER;
          hk_q[1] <= ti;
          hk_q[2] <= live_since;
          hk_q[3] <= {live_cycles[31:16], 15'h0, pseudo};
          hk_q[4] <= ext_ti[63:32];
          hk_q[5] <= ext_ti[31:0];
          hk_q[6] <= pseudo_count;
          live_since <= '0;
          hk_idx  <= '0;
          asic    <= '0;
          events  <= events + 32'd1;
          state   <= E_HK;
        end
        E_HK: if (out_ready) begin
          if (hk_idx == 3'd6) state <= E_ASIC_START;
          hk_idx <= hk_idx + 3'd1;
        end
        E_ASIC_START: if (!pk_busy) state <= E_ASIC;
        E_ASIC: if (pk_valid && out_ready && pk_last) state <= E_ZERO;
        E_ZERO: if (out_ready) begin
          if (asic == AW'(N_ASICS - 1)) state <= E_FOOT;
          else begin
            asic  <= asic + AW'(1);
            state <= E_ASIC_START;
          end
        end
        E_FOOT: if (out_ready) state <= E_IDLE;
        default: state <= E_IDLE;
      endcase
    end
  end
endmodule
