// asic_packer_tb: compares the packed ASIC stream with a reference built
// bit by bit in the testbench (64-bit chflag, ADC of recorded channels,
// CMN, zero padding to 32 bits). Covers All Readout (must be 23 words,
// 728 significant bits), sparse readout at several thresholds including
// no channel recorded and a record that ends exactly on a word boundary
// (15 channels), with random back-pressure on the output.
module asic_packer_tb;
  logic clk = 0, rst_n = 0, start = 0, sparse = 0, out_ready = 1;
  logic [9:0] adc [64]; logic [9:0] cmn, dth;
  logic out_valid, out_last, busy; logic [31:0] out_data;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  asic_packer dut (.*);

  initial begin
    #20000000; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) out_ready <= ($urandom % 4) != 0;

  task automatic run_case(input bit sp, input int th, input int exp_words);
    bit bits [$];
    logic [31:0] exp [$];
    logic [31:0] got [$];
    logic [31:0] w;
    bit got_last;
    int cyc;
    sparse = sp; dth = 10'(th);
    for (int i = 63; i >= 0; i--) bits.push_back(!sp || (adc[i] > dth));
    for (int i = 0; i < 64; i++) if (!sp || adc[i] > dth) for (int b = 9; b >= 0; b--) bits.push_back(adc[i][b]);
    for (int b = 9; b >= 0; b--) bits.push_back(cmn[b]);
    while (bits.size() % 32 != 0) bits.push_back(1'b0);
    for (int k = 0; k < bits.size() / 32; k++) begin
      for (int b = 0; b < 32; b++) w[31 - b] = bits[32 * k + b];
      exp.push_back(w);
    end
    @(posedge clk); #1 start = 1; @(posedge clk); #1 start = 0;
    got_last = 0; cyc = 0;
    while (!got_last && cyc < 5000) begin
      @(posedge clk); cyc++;
      if (out_valid && out_ready) begin got.push_back(out_data); got_last = out_last; end
    end
    @(posedge clk);
    checks++; if (got.size() != exp.size()) begin failures++; $display("FAIL words %0d exp %0d", got.size(), exp.size()); end
    if (exp_words >= 0) begin
      checks++; if (exp.size() != exp_words) begin failures++; $display("FAIL reference size %0d", exp.size()); end
    end
    for (int k = 0; k < exp.size() && k < got.size(); k++) begin
      checks++; if (got[k] != exp[k]) begin failures++; $display("FAIL word %0d %h exp %h", k, got[k], exp[k]); end
    end
    checks++; if (busy) begin failures++; $display("FAIL still busy"); end
  endtask

  initial begin
    int rec;
    cmn = 10'h2A5;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 64; i++) adc[i] = 10'($urandom);
    run_case(0, 0, 23);                           // All Readout: 91 bytes -> 23 words
    for (int t = 0; t < 4; t++) begin
      for (int i = 0; i < 64; i++) adc[i] = 10'($urandom % 40);
      cmn = 10'($urandom);
      run_case(1, 10 + 5 * t, -1);
    end
    for (int i = 0; i < 64; i++) adc[i] = 10'd3;
    run_case(1, 10, 3);                           // nothing recorded: 64+10 bits -> 3 words
    for (int i = 0; i < 64; i++) adc[i] = (i < 15) ? 10'd500 + 10'(i) : 10'd0;
    run_case(1, 10, 7);                           // 64+150+10 = 224 bits, exact
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
