// canister_rate_tb: one canister's data path (event builder, frame
// builder, 2047-frame ring buffer, all at their default sizes and a
// 100 MHz clock) under the flight workload: random triggers at a mean of
// 5000 events/s, sparse readout with the flight threshold Dth = 10, for
// 0.2 s of instrument time.
//
// Samples come from a linear congruential generator: each channel is a
// hit (ADC 11..1023) with probability 4 % and noise (ADC 0..10, below
// threshold) otherwise, renewed after every trigger. That gives about 2.6 recorded channels per ASIC, events of
// about 26 words and therefore about 300-310 events per frame.
//
// Checks: at least 98 % of triggers become events (event building takes
// a few hundred clocks against 20 000 between triggers on average); every
// closed frame holds between 286 and 333 events (the range spanned by
// 28- and 24-word average events); every frame reaches the ring and the
// ring's write pointer agrees. Prints the measured events per frame.
module canister_rate_tb;
  import foxsi_pkg::*;
  localparam int unsigned CLK_HZ = 100_000_000;
  localparam int unsigned RATE   = 5000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        trig = 0;
  adc_t        adc [N_ASIC][N_CH];
  adc_t        cmn [N_ASIC];
  logic [63:0] ext_ti = 0;
  logic        accept, ev_valid, ev_ready, ev_last, ev_busy;
  logic [31:0] ev_data, live, events;
  logic        fr_valid, fr_ready, fr_last;
  logic [31:0] fr_data, frames, flushes;
  logic        out_valid, out_last;
  logic [31:0] out_data;
  logic        mem_req, mem_we, mem_gnt, mem_rvalid;
  logic [25:0] mem_addr, wr_addr, rd_addr;
  logic [31:0] mem_wdata, mem_rdata, wr_frames, rd_frames;
  logic [63:0] wr_sum, rd_sum;
  logic        full, empty;

  event_builder u_ev (
    .clk, .rst_n, .trig, .pseudo(1'b0), .adc, .cmn, .dth(adc_t'(10)), .sparse(1'b1),
    .ext_ti, .pseudo_count(32'd0), .accept, .out_valid(ev_valid), .out_ready(ev_ready),
    .out_data(ev_data), .out_last(ev_last), .busy(ev_busy), .live_cycles(live), .events);

  frame_builder u_fr (
    .clk, .rst_n, .ev_valid, .ev_data, .ev_last, .ev_ready, .ev_busy, .accept,
    .flush(1'b0), .unixtime(32'h6500_0000), .fr_valid, .fr_data, .fr_last, .fr_ready,
    .frames, .flushes);

  ring_buffer_ctrl u_ring (
    .clk, .rst_n, .in_valid(fr_valid), .in_data(fr_data), .in_last(fr_last), .in_ready(fr_ready),
    .rd_req(1'b0), .out_valid, .out_data, .out_last, .out_ready(1'b1),
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_gnt, .mem_rvalid, .mem_rdata,
    .wr_sum, .wr_addr, .wr_frames, .rd_sum, .rd_addr, .rd_frames, .full, .empty);

  sdram_model #(.AW(26)) u_mem (
    .clk, .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_gnt, .mem_rvalid, .mem_rdata);

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // sample generator: 32-bit linear congruential sequence, upper bits used
  int unsigned lcg = 32'h1234_5678;
  function automatic int unsigned rnd(int unsigned n);
    lcg = lcg * 32'd1664525 + 32'd1013904223;
    return (lcg >> 8) % n;
  endfunction
  task automatic new_samples();
    for (int a = 0; a < N_ASIC; a++) begin
      cmn[a] = adc_t'(rnd(32));
      for (int c = 0; c < N_CH; c++)
        adc[a][c] = (rnd(100) < 4) ? adc_t'(11 + rnd(1013)) : adc_t'(rnd(11));
    end
  endtask

  // triggers: Bernoulli draw per clock, mean RATE per second
  int n_trig = 0;
  bit fire;
  always @(posedge clk) if (rst_n) begin
    ext_ti <= ext_ti + 1;
    fire = ($urandom % (CLK_HZ / RATE)) == 0;
    trig <= fire;
    if (trig) begin n_trig++; new_samples(); end
  end

  // events per frame, from the stream entering the ring
  int ev_words = 0;
  always @(posedge clk) if (rst_n && ev_valid && ev_ready) ev_words++;
  int ev_in_frame = 0, n_frames_seen = 0, min_ev = 1 << 30, max_ev = 0;
  always @(posedge clk) if (rst_n) begin
    if (ev_valid && ev_ready && ev_last) ev_in_frame++;
    if (fr_valid && fr_ready && fr_last) begin
      n_frames_seen++;
      if (ev_in_frame < min_ev) min_ev = ev_in_frame;
      if (ev_in_frame > max_ev) max_ev = ev_in_frame;
      $display("frame %0d: %0d events, %0d event words so far", n_frames_seen, ev_in_frame, ev_words);
      chk(ev_in_frame >= 286 && ev_in_frame <= 333, $sformatf("frame %0d holds %0d events", n_frames_seen, ev_in_frame));
      ev_in_frame = 0;
    end
  end

  initial begin
    #400000000; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    new_samples();
    repeat (5) @(posedge clk); #1 rst_n = 1;
    #200000000;   // 0.2 s
    $display("triggers %0d, events %0d, frames %0d, events per frame %0d..%0d, mean event %0.2f words",
             n_trig, events, frames, min_ev, max_ev, real'(ev_words) / real'(events));
    chk(n_trig > 800 && n_trig < 1200, $sformatf("trigger count %0d for 5000/s x 0.2 s", n_trig));
    chk(events * 100 >= 32'(n_trig) * 98, "at least 98 % of triggers recorded");
    chk(n_frames_seen >= 2 && frames == 32'(n_frames_seen), "frames closed");
    chk(wr_frames == frames && wr_addr == 26'(frames * FRAME_BYTES), "every frame stored in the ring");
    chk(!full, "ring not full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
