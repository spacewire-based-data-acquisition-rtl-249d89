// event_builder_tb: triggers the event builder with random ASIC data and
// checks every word of each record against a reference assembled in the
// testbench: header 0x00003C3C, TI, livetime, flag, ext TI, pseudo counter,
// four packed ASIC blocks each followed by a zero word, footer 0x77770000.
// All Readout records must be exactly 104 words (416 bytes). Also checks
// that TI advances by the clocks between triggers, that the pseudo flag is
// carried, that a trigger while busy or with accept low is lost, and
// that the event counter matches.
module event_builder_tb;
  import foxsi_pkg::*;
  logic clk = 0, rst_n = 0, trig = 0, pseudo = 0, sparse = 0, accept = 1, out_ready = 1;
  adc_t adc [4][64]; adc_t cmn [4]; adc_t dth = 10'd10;
  logic [63:0] ext_ti = 64'h1122_3344_5566_7788; logic [31:0] pseudo_count = 32'd7;
  logic out_valid, out_last, busy; logic [31:0] out_data, live_cycles, events;
  int checks = 0, failures = 0;
  logic [31:0] got [$];
  always #5 clk = ~clk;
  always @(posedge clk) out_ready <= ($urandom % 5) != 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) got.push_back(out_data);

  event_builder dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  function automatic void pack_ref(input int a, input bit sp, ref logic [31:0] q [$]);
    bit bits [$]; logic [31:0] w;
    for (int i = 63; i >= 0; i--) bits.push_back(!sp || (adc[a][i] > dth));
    for (int i = 0; i < 64; i++) if (!sp || adc[a][i] > dth) for (int b = 9; b >= 0; b--) bits.push_back(adc[a][i][b]);
    for (int b = 9; b >= 0; b--) bits.push_back(cmn[a][b]);
    while (bits.size() % 32 != 0) bits.push_back(1'b0);
    for (int k = 0; k < bits.size() / 32; k++) begin
      for (int b = 0; b < 32; b++) w[31 - b] = bits[32 * k + b];
      q.push_back(w);
    end
  endfunction

  initial begin
    #50000000; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] exp [$];
    logic [31:0] prev_ti;
    longint t_trig, prev_t;
    int lost_before;
    repeat (3) @(posedge clk); rst_n = 1;
    prev_t = -1;
    for (int e = 0; e < 8; e++) begin
      sparse = (e >= 2);
      pseudo = (e % 3 == 1);
      for (int a = 0; a < 4; a++) begin
        cmn[a] = 10'($urandom);
        for (int c = 0; c < 64; c++) adc[a][c] = sparse ? 10'($urandom % 30) : 10'($urandom);
      end
      repeat (5 + e) @(posedge clk);
      got.delete();
      #1 trig = 1; t_trig = $time; @(posedge clk); #1 trig = 0;
      // a second trigger while busy must be ignored
      @(posedge clk); #1 trig = 1; @(posedge clk); #1 trig = 0;
      wait (!busy); @(posedge clk);
      exp.delete();
      exp.push_back(EVENT_HEADER);
      exp.push_back(32'h0); exp.push_back(32'h0); exp.push_back(32'h0); // TI, live, flag: checked below
      exp.push_back(ext_ti[63:32]); exp.push_back(ext_ti[31:0]); exp.push_back(pseudo_count);
      for (int a = 0; a < 4; a++) begin pack_ref(a, sparse, exp); exp.push_back(32'h0); end
      exp.push_back(EVENT_FOOTER);
      chk(got.size() == exp.size(), $sformatf("event %0d size %0d exp %0d", e, got.size(), exp.size()));
      if (!sparse) chk(got.size() == 104, "All Readout event is 104 words");
      for (int k = 0; k < exp.size() && k < got.size(); k++)
        if (k < 1 || k > 3) chk(got[k] == exp[k], $sformatf("event %0d word %0d %h exp %h", e, k, got[k], exp[k]));
      if (got.size() > 3) begin
        chk(got[3][0] == pseudo, "pseudo flag");
        if (prev_t >= 0) begin
          chk(got[1] - prev_ti == 32'((t_trig - prev_t) / 10), $sformatf("TI step %0d exp %0d", got[1] - prev_ti, (t_trig - prev_t) / 10));
          chk(got[2] <= got[1] - prev_ti && got[2] > 0, "livetime within TI step");
        end
        prev_ti = got[1];
      end
      prev_t = t_trig;
    end
    chk(events == 8, $sformatf("events %0d", events));
    // trigger with accept low is lost
    accept = 0; got.delete();
    @(posedge clk); #1 trig = 1; @(posedge clk); #1 trig = 0;
    repeat (50) @(posedge clk);
    chk(got.size() == 0 && events == 8, "no event while accept low");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
