// tb_qrng_top -- end-to-end test of the three-channel QRNG post-processing at
// its default size: Toeplitz matrices 581x768, 548x768 and 519x768, 16-bit
// samples, 64-bit output words.
//
// The three seeds are loaded through the shared seed port. The three ADC
// inputs then carry independent random samples, all valid on the same
// cycles, and the testbench hashes every 768-bit block with the Toeplitz
// definition. The output words must be the concatenation of the channel 1,
// 2, 3 results of each block period, LSB first.
//   Phase A: random consumer stalls and idle ADC cycles.
//   Phase B: steady streaming; the words delivered over 10 block periods
//            (480 cycles) must match 1648 bits per 48 cycles, i.e. the
//            2.905 + 2.740 + 2.595 = 8.24 Gbit/s aggregate at 240 MHz.
//   Phase C: the consumer stalls for four block periods; blocks must be
//            dropped and counted and the overflow flag set.
//   Phase D: reset, new seeds, and exact checking again.
// Each mechanism (stall, idle ADC cycle, overflow drop, seed reload after
// reset) is counted and one that never happened counts as a failure.
module tb_qrng_top;
  import qrng_pkg::*;
  import qrng_tb_pkg::*;
  localparam int unsigned MS [NUM_CH] = '{M_CH1, M_CH2, M_CH3};
  localparam int COLS = N_RAW / ADC_W;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [ADC_W-1:0] adc_data [NUM_CH];
  logic adc_valid [NUM_CH];
  logic seed_we = 1'b0;
  logic [1:0] seed_sel = '0;
  logic [SEED_WORD_W-1:0] seed_wdata = '0;
  logic [OUT_W-1:0] pcie_tdata;
  logic pcie_tvalid, pcie_tready = 1'b0, overflow;
  logic [15:0] drop_cnt [NUM_CH];

  int checks = 0, failures = 0;
  int words = 0, stalls = 0, gaps = 0, seed_loads = 0, blocks = 0, drops = 0;
  bit check_en = 1'b1;
  bit exp_bits[$];
  bitvec_t seed [NUM_CH];
  bitvec_t raw [NUM_CH];
  int nsamp = 0;

  qrng_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (6000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference: collect accepted samples, hash each completed block.
  always @(posedge clk) begin
    if (rst_n && adc_valid[0]) begin
      for (int c = 0; c < NUM_CH; c++)
        for (int b = 0; b < ADC_W; b++) raw[c][nsamp * ADC_W + b] = adc_data[c][b];
      nsamp++;
      if (nsamp == COLS) begin
        nsamp = 0;
        blocks++;
        for (int c = 0; c < NUM_CH; c++) begin
          automatic bitvec_t y = toeplitz_ref(seed[c], raw[c], MS[c], N_RAW);
          if (check_en) foreach (y[i]) exp_bits.push_back(y[i]);
        end
      end
    end
  end

  // Output checker.
  always @(posedge clk) begin
    if (rst_n && pcie_tvalid && !pcie_tready) stalls++;
    if (rst_n && pcie_tvalid && pcie_tready) begin
      words++;
      if (check_en) begin
        automatic bit ok = 1'b1;
        checks++;
        if (exp_bits.size() < OUT_W) begin
          failures++;
          $display("word beyond expected data");
        end else begin
          for (int b = 0; b < OUT_W; b++) if (pcie_tdata[b] !== exp_bits.pop_front()) ok = 1'b0;
          if (!ok) begin failures++; $display("word mismatch at %0t", $time); end
        end
      end
    end
  end

  task automatic load_seeds();
    for (int c = 0; c < NUM_CH; c++) begin
      int nw = int'(seed_words(MS[c] + N_RAW - 1));
      seed[c] = random_bits(int'(MS[c]) + N_RAW - 1);
      for (int j = 0; j < nw; j++) begin
        seed_we = 1'b1;
        seed_sel = 2'(c);
        seed_wdata = seed_word(seed[c], j, nw);
        @(negedge clk);
      end
      seed_loads++;
    end
    seed_we = 1'b0;
  endtask

  // Drive nsamples valid samples; idle cycles with probability gap_pct %.
  task automatic stream(int nsamples, int gap_pct, int ready_pct);
    int sent = 0;
    while (sent < nsamples) begin
      automatic bit v = ($urandom_range(99, 0) >= gap_pct);
      pcie_tready = ($urandom_range(99, 0) < ready_pct);
      for (int c = 0; c < NUM_CH; c++) begin
        adc_valid[c] = v;
        adc_data[c] = ADC_W'($urandom);
      end
      if (v) sent++; else gaps++;
      @(negedge clk);
    end
    for (int c = 0; c < NUM_CH; c++) adc_valid[c] = 1'b0;
  endtask

  initial begin
    int w0;
    for (int c = 0; c < NUM_CH; c++) begin
      adc_valid[c] = 1'b0;
      adc_data[c] = '0;
      raw[c] = new[N_RAW];
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    load_seeds();
    // ---- phase A: stalls and ADC gaps
    stream(4 * COLS, 20, 80);
    pcie_tready = 1'b1;
    // ---- phase B: steady rate over 10 block periods
    fork
      stream(14 * COLS, 0, 100);
      begin
        repeat (2 * COLS) @(negedge clk);
        w0 = words;
        repeat (10 * COLS) @(negedge clk);
        checks++;
        $display("words in 480 cycles: %0d (%0d bits)", words - w0, (words - w0) * OUT_W);
        if (words - w0 < 257 || words - w0 > 258) begin failures++; $display("rate wrong"); end
      end
    join
    repeat (40) @(negedge clk);
    checks += 2;
    if (exp_bits.size() >= OUT_W) begin failures++; $display("%0d bits not delivered", exp_bits.size()); end
    if (overflow || drop_cnt[0] != 0) begin failures++; $display("drop before overflow phase"); end
    // ---- phase C: consumer stalled, blocks must be dropped
    check_en = 1'b0;
    stream(4 * COLS, 0, 0);
    checks += 2;
    if (!overflow) begin failures++; $display("overflow not flagged"); end
    if (drop_cnt[0] == 0 || drop_cnt[1] == 0 || drop_cnt[2] == 0) begin
      failures++; $display("drops %0d %0d %0d", drop_cnt[0], drop_cnt[1], drop_cnt[2]);
    end
    drops = int'(drop_cnt[0]) + int'(drop_cnt[1]) + int'(drop_cnt[2]);
    // ---- phase D: reset, new seeds, exact checking again
    rst_n = 1'b0;
    @(negedge clk);
    rst_n = 1'b1;
    exp_bits.delete();
    nsamp = 0;
    check_en = 1'b1;
    checks++;
    if (overflow || drop_cnt[0] != 0) begin failures++; $display("status not cleared by reset"); end
    load_seeds();
    stream(3 * COLS, 10, 90);
    pcie_tready = 1'b1;
    repeat (40) @(negedge clk);
    checks++;
    if (exp_bits.size() >= OUT_W) begin failures++; $display("%0d bits not delivered after reset", exp_bits.size()); end
    // ---- mechanism coverage
    $display("blocks=%0d words=%0d stalls=%0d adc_gaps=%0d drops=%0d seed_loads=%0d",
             blocks, words, stalls, gaps, drops, seed_loads);
    checks += 5;
    if (stalls == 0) begin failures++; $display("no stall"); end
    if (gaps == 0) begin failures++; $display("no ADC gap"); end
    if (blocks < 20) begin failures++; $display("too few blocks"); end
    if (seed_loads != 2 * NUM_CH) begin failures++; $display("seed loads"); end
    if (drops == 0) begin failures++; $display("no overflow drop"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
