// tb_toeplitz_submatrix_mult -- checks the GF(2) submatrix product at the
// default size (M = 581, W = 16). For random seeds, column blocks k and
// samples, the window is cut from the seed and the expected product is
// taken from the Toeplitz definition, y[i] = XOR_c s[i-(W*k+c)+N-1] & x[c].
// The registered result must appear one cycle after the input, with
// out_last following in_last; idle cycles must not produce output.
module tb_toeplitz_submatrix_mult;
  import qrng_tb_pkg::*;
  localparam int M = 581, N = 768, W = 16;
  localparam int L = M + N - 1;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, in_last = 1'b0;
  logic [W-1:0] in_sample = '0;
  logic [M+W-2:0] in_window = '0;
  logic out_valid, out_last;
  logic [M-1:0] out_partial;

  int checks = 0, failures = 0;

  toeplitz_submatrix_mult dut (.*);  // default size: M = 581, W = 16

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bitvec_t seed;
    bit [M-1:0] expv;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 200; t++) begin
      automatic int k = $urandom_range(N / W - 1, 0);
      automatic bit lst = bit'($urandom_range(1, 0));
      automatic bit vld = ($urandom_range(4, 0) != 0);
      seed = random_bits(L);
      for (int b = 0; b < M + W - 1; b++) in_window[b] = seed[N - W - W * k + b];
      in_sample = W'($urandom);
      if (t < 4) in_sample = W'(1) << t;  // single columns first
      in_valid = vld;
      in_last  = lst;
      for (int i = 0; i < M; i++) begin
        automatic bit a = 1'b0;
        for (int c = 0; c < W; c++) a ^= seed[i - (W * k + c) + N - 1] & in_sample[c];
        expv[i] = a;
      end
      @(negedge clk);
      checks++;
      if (out_valid !== vld) begin failures++; $display("valid mismatch t=%0d", t); end
      if (vld) begin
        checks += 2;
        if (out_partial !== expv) begin failures++; $display("product mismatch t=%0d k=%0d", t, k); end
        if (out_last !== lst) begin failures++; $display("last mismatch t=%0d", t); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
