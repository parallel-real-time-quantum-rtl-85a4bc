// tb_toeplitz_matrix_builder -- checks the seed register loading and the
// per-sample submatrix window of toeplitz_matrix_builder at the default size
// (581 x 768, 16-bit samples). A random seed is loaded word by word; random
// samples are then fed with random idle cycles over three blocks. For every
// output the window must equal seed[N-W-W*k +: M+W-1] for the sample's
// position k in its block, the sample must pass through, out_last must mark
// k = N/W-1 and the output must appear exactly one cycle after its input.
// A wrong seed loading order shows up as window mismatches.
module tb_toeplitz_matrix_builder;
  import qrng_tb_pkg::*;
  localparam int M = 581, N = 768, W = 16, SW = 32;
  localparam int L = M + N - 1, NW = (L + SW - 1) / SW, COLS = N / W;

  logic clk = 1'b0, rst_n = 1'b0;
  logic seed_we = 1'b0;
  logic [SW-1:0] seed_wdata = '0;
  logic in_valid = 1'b0;
  logic [W-1:0] in_sample = '0;
  logic out_valid, out_last;
  logic [W-1:0] out_sample;
  logic [M+W-2:0] out_window;

  int checks = 0, failures = 0;
  bitvec_t seed;
  int k_in = 0, n_out = 0, n_in = 0;

  toeplitz_matrix_builder dut (.*);  // default size: 581 x 768, W = 16

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Output checker: just after each clock edge the registered outputs must
  // reflect the inputs that edge sampled (inputs change on the falling edge).
  always @(posedge clk) begin
    #1;
    if (rst_n) begin
      checks++;
      if (out_valid !== in_valid) begin
        failures++;
        $display("valid mismatch at %0t: %b vs %b", $time, out_valid, in_valid);
      end
      if (in_valid) begin
        automatic int base = N - W - W * k_in;
        automatic bit ok = 1'b1;
        for (int b = 0; b < M + W - 1; b++)
          if (out_window[b] !== seed[base + b]) ok = 1'b0;
        checks += 3;
        if (!ok) begin failures++; $display("window mismatch k=%0d", k_in); end
        if (out_sample !== in_sample) begin failures++; $display("sample mismatch"); end
        if (out_last !== (k_in == COLS - 1)) begin failures++; $display("last mismatch k=%0d", k_in); end
        n_out++;
        k_in = (k_in == COLS - 1) ? 0 : k_in + 1;
      end
    end
  end

  initial begin
    seed = random_bits(L);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int j = 0; j < NW; j++) begin
      seed_we = 1'b1;
      seed_wdata = seed_word(seed, j, NW);
      @(negedge clk);
    end
    seed_we = 1'b0;
    while (n_in < 3 * COLS) begin
      in_valid  = ($urandom_range(3, 0) != 0);
      in_sample = W'($urandom);
      if (in_valid) n_in++;
      @(negedge clk);
    end
    in_valid = 1'b0;
    repeat (3) @(negedge clk);
    checks++;
    if (n_out != 3 * COLS) begin failures++; $display("output count %0d", n_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
