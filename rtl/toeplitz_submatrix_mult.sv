// toeplitz_submatrix_mult -- second pipeline stage of a Toeplitz extractor:
// multiplies one W-bit raw sample by its M x W Toeplitz submatrix over GF(2).
//
// The submatrix arrives as its window of M+W-1 seed bits (see
// toeplitz_matrix_builder): element (i, c) is window[i+W-1-c]. Output bit i
// is the parity of the AND of that row with the sample,
//   partial[i] = XOR_c window[i+W-1-c] & sample[c],
// so all M rows are computed in parallel, each by a W-input AND/XOR tree.
// The result is registered: out_valid/out_partial/out_last follow
// in_valid/in_window/in_last by one clock cycle. One sample per cycle.
//
// The paper names this stage ("submatrix multiplication") and its parallel,
// column-independent evaluation; the registered single-cycle form is this
// design's choice.
module toeplitz_submatrix_mult #(
  parameter int unsigned M = 581,
  parameter int unsigned W = 16
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic           in_last,
  input  logic [W-1:0]   in_sample,
  input  logic [M+W-2:0] in_window,
  output logic           out_valid,
  output logic           out_last,
  output logic [M-1:0]   out_partial
);
  logic [W-1:0] sample_rev;
  logic [M-1:0] partial;

  always_comb begin
    for (int c = 0; c < W; c++) sample_rev[W-1-c] = in_sample[c];
    for (int i = 0; i < M; i++) partial[i] = ^(in_window[i +: W] & sample_rev);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid   <= 1'b0;
      out_last    <= 1'b0;
      out_partial <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_last    <= in_last;
        out_partial <= partial;
      end
    end
  end

endmodule
