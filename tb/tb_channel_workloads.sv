// tb_channel_workloads -- runs the three per-channel extraction workloads
// side by side: Toeplitz extractors of 581x768, 548x768 and 519x768 (the
// 200 MHz, 600 MHz and 1 GHz sideband modes), each fed its own stream of
// random 16-bit samples, one per 240 MHz clock.
//
// For each channel every output vector is compared with the Toeplitz hash
// computed from its definition, and the steady-state spacing between
// vectors must be 48 cycles, i.e. M bits per 48 cycles:
// 2.905, 2.740 and 2.595 Gbit/s at 240 MHz. The rates are printed.
module tb_channel_workloads;
  import qrng_pkg::*;
  import qrng_tb_pkg::*;
  localparam int unsigned MS [NUM_CH] = '{M_CH1, M_CH2, M_CH3};
  localparam int COLS = N_RAW / ADC_W, BLOCKS = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  logic seed_we [NUM_CH];
  logic [SEED_WORD_W-1:0] seed_wdata = '0;
  logic in_valid = 1'b0;
  logic [ADC_W-1:0] in_sample [NUM_CH];
  logic out_valid [NUM_CH];
  logic [M_MAX-1:0] out_data [NUM_CH];

  int checks = 0, failures = 0, cyc = 0, nsamp = 0;
  bitvec_t seed [NUM_CH];
  bitvec_t raw [NUM_CH];
  bitvec_t exp_q [NUM_CH][$];
  int n_out [NUM_CH];
  int prev [NUM_CH];

  always #5 clk = ~clk;

  for (genvar c = 0; c < NUM_CH; c++) begin : g_ch
    logic [MS[c]-1:0] d;
    toeplitz_extractor #(.M(MS[c])) dut (
      .clk, .rst_n, .seed_we(seed_we[c]), .seed_wdata,
      .in_valid, .in_sample(in_sample[c]),
      .out_valid(out_valid[c]), .out_data(d)
    );
    assign out_data[c] = M_MAX'(d);
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    #1;
    cyc++;
    if (rst_n && in_valid) begin
      for (int c = 0; c < NUM_CH; c++)
        for (int b = 0; b < ADC_W; b++) raw[c][nsamp * ADC_W + b] = in_sample[c][b];
      nsamp++;
      if (nsamp == COLS) begin
        nsamp = 0;
        for (int c = 0; c < NUM_CH; c++)
          exp_q[c].push_back(toeplitz_ref(seed[c], raw[c], MS[c], N_RAW));
      end
    end
    for (int c = 0; c < NUM_CH; c++) begin
      if (rst_n && out_valid[c]) begin
        checks++;
        if (exp_q[c].size() == 0) begin
          failures++; $display("ch%0d: unexpected output", c + 1);
        end else begin
          automatic bitvec_t y = exp_q[c].pop_front();
          automatic bit ok = 1'b1;
          for (int i = 0; i < int'(MS[c]); i++) if (out_data[c][i] !== y[i]) ok = 1'b0;
          for (int i = int'(MS[c]); i < M_MAX; i++) if (out_data[c][i] !== 1'b0) ok = 1'b0;
          if (!ok) begin failures++; $display("ch%0d: hash mismatch block %0d", c + 1, n_out[c]); end
        end
        if (n_out[c] > 0) begin
          checks++;
          if (cyc - prev[c] != COLS) begin failures++; $display("ch%0d: spacing %0d", c + 1, cyc - prev[c]); end
        end
        prev[c] = cyc;
        n_out[c]++;
      end
    end
  end

  initial begin
    for (int c = 0; c < NUM_CH; c++) begin
      seed_we[c] = 1'b0;
      in_sample[c] = '0;
      raw[c] = new[N_RAW];
      n_out[c] = 0;
      seed[c] = random_bits(int'(MS[c]) + N_RAW - 1);
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < NUM_CH; c++) begin
      int nw = int'(seed_words(MS[c] + N_RAW - 1));
      for (int j = 0; j < nw; j++) begin
        seed_we[c] = 1'b1;
        seed_wdata = seed_word(seed[c], j, nw);
        @(negedge clk);
      end
      seed_we[c] = 1'b0;
    end
    for (int s = 0; s < BLOCKS * COLS; s++) begin
      in_valid = 1'b1;
      for (int c = 0; c < NUM_CH; c++) in_sample[c] = ADC_W'($urandom);
      @(negedge clk);
    end
    in_valid = 1'b0;
    repeat (5) @(negedge clk);
    for (int c = 0; c < NUM_CH; c++) begin
      checks++;
      if (n_out[c] != BLOCKS) begin failures++; $display("ch%0d: %0d blocks", c + 1, n_out[c]); end
      $display("ch%0d: %0d bits per %0d cycles = %0d Mbit/s at 240 MHz",
               c + 1, MS[c], COLS, MS[c] * 240 / COLS);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
