// toeplitz_extractor -- real-time Toeplitz-hashing randomness extractor for
// one sideband channel.
//
// Raw ADC samples (W bits, one per clock at the 240 MHz sampling rate) are
// grouped into blocks of N bits = N/W samples. Each block x is hashed to
// M = ell output bits y = T x over GF(2), T being the M x N Toeplitz matrix
// defined by an (M+N-1)-bit seed. The three stages of the paper's pipeline
// run concurrently on consecutive samples:
//   1. toeplitz_matrix_builder  selects the submatrix of the current sample,
//   2. toeplitz_submatrix_mult  multiplies it with the sample,
//   3. toeplitz_vector_accum    XOR-accumulates the products of the block.
// Throughput is one sample per clock, i.e. M output bits every N/W cycles:
// at 240 MHz with N = 768, W = 16 that is M * 5 Mbit/s (2905, 2740 and
// 2595 Mbit/s for M = 581, 548 and 519). There are three register stages:
// out_valid pulses for one cycle, three cycles after the cycle in which the
// last sample of a block is presented (two clock edges after the edge that
// accepts it), and the blocks follow one another without gaps.
//
// The matrix sizes, sample width and three-stage structure follow the paper;
// the seed loading port and the valid handshake are this design's choices.
module toeplitz_extractor #(
  parameter int unsigned M           = 581,
  parameter int unsigned N           = 768,
  parameter int unsigned W           = 16,
  parameter int unsigned SEED_WORD_W = 32
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   seed_we,
  input  logic [SEED_WORD_W-1:0] seed_wdata,
  input  logic                   in_valid,
  input  logic [W-1:0]           in_sample,
  output logic                   out_valid,
  output logic [M-1:0]           out_data
);
  logic           mb_valid, mb_last;
  logic [W-1:0]   mb_sample;
  logic [M+W-2:0] mb_window;
  logic           mul_valid, mul_last;
  logic [M-1:0]   mul_partial;

  toeplitz_matrix_builder #(.M(M), .N(N), .W(W), .SEED_WORD_W(SEED_WORD_W)) u_builder (
    .clk, .rst_n, .seed_we, .seed_wdata, .in_valid, .in_sample,
    .out_valid (mb_valid), .out_last (mb_last),
    .out_sample(mb_sample), .out_window(mb_window)
  );

  toeplitz_submatrix_mult #(.M(M), .W(W)) u_mult (
    .clk, .rst_n,
    .in_valid (mb_valid), .in_last(mb_last),
    .in_sample(mb_sample), .in_window(mb_window),
    .out_valid(mul_valid), .out_last(mul_last), .out_partial(mul_partial)
  );

  toeplitz_vector_accum #(.M(M)) u_accum (
    .clk, .rst_n,
    .in_valid(mul_valid), .in_last(mul_last), .in_partial(mul_partial),
    .out_valid, .out_data
  );

  // A block needs N/W samples, so two output vectors are never adjacent.
  a_block_spacing: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid |=> !out_valid);

endmodule
