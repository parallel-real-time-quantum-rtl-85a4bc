// tb_toeplitz_vector_accum -- checks the XOR accumulation of partial
// products at M = 581. Five blocks of 48 random partial products are fed
// with random idle cycles; each block's sum is computed in the testbench.
// out_valid must pulse exactly once per block, one cycle after the partial
// product marked last, carrying the XOR of that block's products only.
module tb_toeplitz_vector_accum;
  localparam int M = 581, COLS = 48, BLOCKS = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, in_last = 1'b0;
  logic [M-1:0] in_partial = '0;
  logic out_valid;
  logic [M-1:0] out_data;

  int checks = 0, failures = 0, n_out = 0;

  toeplitz_vector_accum dut (.*);  // default size: M = 581

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) n_out++;

  initial begin
    logic [M-1:0] sum, p;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int blk = 0; blk < BLOCKS; blk++) begin
      sum = '0;
      for (int k = 0; k < COLS; k++) begin
        while ($urandom_range(3, 0) == 0) begin
          in_valid = 1'b0;
          in_partial = {19{$urandom}};
          @(negedge clk);
          checks++;
          if (out_valid) begin failures++; $display("spurious output"); end
        end
        for (int b = 0; b < M; b++) p[b] = bit'($urandom_range(1, 0));
        in_valid = 1'b1;
        in_last = (k == COLS - 1);
        in_partial = p;
        sum ^= p;
        @(negedge clk);
        checks++;
        if (out_valid !== (k == COLS - 1)) begin failures++; $display("out_valid wrong blk=%0d k=%0d", blk, k); end
        if (out_valid && out_data !== sum) begin failures++; $display("sum mismatch blk=%0d", blk); end
      end
      in_valid = 1'b0;
      in_last = 1'b0;
    end
    repeat (2) @(negedge clk);
    checks++;
    if (n_out != BLOCKS) begin failures++; $display("block count %0d", n_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
