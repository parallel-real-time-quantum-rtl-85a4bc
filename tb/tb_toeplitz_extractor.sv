// tb_toeplitz_extractor -- end-to-end check of one Toeplitz extractor at the
// paper's first-channel size (581 x 768, 16-bit samples).
//
// A random seed is loaded word by word, then six blocks of random samples
// are hashed: blocks with a sample every cycle and blocks with random idle
// cycles. Each output vector is compared with the Toeplitz hash computed
// from its definition. The latency (output two clock edges after the edge
// accepting the last sample) and, for back-to-back blocks, the rate of one
// vector per 48 cycles (581 bits / 48 cycles = 2.905 Gbit/s at 240 MHz) are
// checked as well.
module tb_toeplitz_extractor;
  import qrng_tb_pkg::*;
  localparam int M = 581, N = 768, W = 16, SW = 32;
  localparam int L = M + N - 1, NW = (L + SW - 1) / SW, COLS = N / W;
  localparam int BLOCKS = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  logic seed_we = 1'b0;
  logic [SW-1:0] seed_wdata = '0;
  logic in_valid = 1'b0;
  logic [W-1:0] in_sample = '0;
  logic out_valid;
  logic [M-1:0] out_data;

  int checks = 0, failures = 0;
  bitvec_t seed, raw;
  bit [M-1:0] exp_q[$];
  int last_edge_q[$];
  int cyc = 0, nsamp = 0, n_out = 0, prev_out = -1;

  toeplitz_extractor dut (.*);  // default size: 581 x 768

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    #1;
    cyc++;
    if (rst_n && in_valid) begin
      for (int c = 0; c < W; c++) raw[nsamp * W + c] = in_sample[c];
      nsamp++;
      if (nsamp == COLS) begin
        automatic bitvec_t y = toeplitz_ref(seed, raw, M, N);
        automatic bit [M-1:0] v;
        for (int i = 0; i < M; i++) v[i] = y[i];
        exp_q.push_back(v);
        last_edge_q.push_back(cyc);
        nsamp = 0;
      end
    end
    if (rst_n && out_valid) begin
      checks += 2;
      if (exp_q.size() == 0) begin
        failures++;
        $display("unexpected output");
      end else begin
        automatic int le = last_edge_q.pop_front();
        if (out_data !== exp_q.pop_front()) begin failures++; $display("hash mismatch block %0d", n_out); end
        if (cyc != le + 2) begin failures++; $display("latency %0d edges", cyc - le); end
      end
      // blocks 1..2 run back to back: one vector per COLS cycles
      if (n_out == 1 || n_out == 2) begin
        checks++;
        if (cyc - prev_out != COLS) begin failures++; $display("spacing %0d", cyc - prev_out); end
      end
      prev_out = cyc;
      n_out++;
    end
  end

  initial begin
    raw  = new[N];
    seed = random_bits(L);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int j = 0; j < NW; j++) begin
      seed_we = 1'b1;
      seed_wdata = seed_word(seed, j, NW);
      @(negedge clk);
    end
    seed_we = 1'b0;
    @(negedge clk);
    for (int b = 0; b < BLOCKS; b++) begin
      for (int k = 0; k < COLS; k++) begin
        if (b >= 3 && b < 5)
          while ($urandom_range(2, 0) == 0) begin
            in_valid = 1'b0;
            in_sample = W'($urandom);
            @(negedge clk);
          end
        in_valid = 1'b1;
        in_sample = (b == 0 && k < 3) ? W'(16'h8001 >> k) : W'($urandom);
        @(negedge clk);
      end
    end
    in_valid = 1'b0;
    repeat (5) @(negedge clk);
    checks++;
    if (n_out != BLOCKS) begin failures++; $display("block count %0d", n_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
