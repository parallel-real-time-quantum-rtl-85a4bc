// toeplitz_vector_accum -- third pipeline stage of a Toeplitz extractor:
// accumulates the partial products of one raw block into the output vector.
//
// Every valid partial product is XORed (GF(2) addition) into an M-bit
// accumulator register. When the partial product marked in_last arrives,
// the sum including it is registered on out_data with a one-cycle out_valid
// pulse and the accumulator restarts from zero, so the next block follows
// without a gap. Latency from the last partial product to out_valid is one
// clock cycle; one output vector per N/W input samples.
//
// The paper names this stage ("vector accumulation in a register"); the
// clear-on-last handshake is this design's choice.
module toeplitz_vector_accum #(
  parameter int unsigned M = 581
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic         in_last,
  input  logic [M-1:0] in_partial,
  output logic         out_valid,
  output logic [M-1:0] out_data
);
  logic [M-1:0] acc_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q     <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid && in_last;
      if (in_valid) begin
        if (in_last) begin
          out_data <= acc_q ^ in_partial;
          acc_q    <= '0;
        end else begin
          acc_q    <= acc_q ^ in_partial;
        end
      end
    end
  end

endmodule
