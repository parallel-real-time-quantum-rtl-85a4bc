// toeplitz_matrix_builder -- first pipeline stage of a Toeplitz extractor:
// builds the M x W submatrix that multiplies the current raw sample.
//
// An M x N Toeplitz matrix T is fixed by a seed s of L = M+N-1 bits:
// T[i][j] = s[i - j + N - 1]. A raw block of N bits arrives as N/W samples
// of W bits, sample k filling columns W*k .. W*k+W-1 (sample bit c is column
// W*k+c). The submatrix for sample k is therefore fixed by the M+W-1 seed
// bits s[N-W-W*k +: M+W-1], called the window: T[i][W*k+c] = window[i+W-1-c].
// The stage counts samples modulo N/W and selects that window from the seed
// register each time a sample is accepted.
//
// Interface: seed_we/seed_wdata shift one seed word into the low end of the
// seed register (seed_q <= {seed_q, seed_wdata}); after ceil(L/SEED_WORD_W)
// writes the register holds the last L bits shifted in. in_valid/in_sample
// carry one ADC word per cycle. Outputs are registered: one cycle after a
// sample is accepted, out_valid presents it with its window and out_last
// marks the final (N/W-th) sample of a block.
//
// The three-stage split (matrix building, submatrix multiplication, vector
// accumulation) follows the paper; the window formulation, the word-serial
// seed loading and the block alignment to the first sample after reset are
// this design's choices. The seed is meant to be loaded while no samples
// flow; a write during extraction takes effect on the next sample.
module toeplitz_matrix_builder #(
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
  output logic                   out_last,
  output logic [W-1:0]           out_sample,
  output logic [M+W-2:0]         out_window
);
  localparam int unsigned L    = M + N - 1;
  localparam int unsigned COLS = N / W;
  localparam int unsigned KW   = (COLS > 1) ? $clog2(COLS) : 1;
  localparam int unsigned BW   = $clog2(L);

  if (N % W != 0) begin : g_bad_n
    $error("N must be a multiple of W");
  end
  if (L <= SEED_WORD_W) begin : g_bad_l
    $error("seed must be longer than one seed word");
  end

  logic [L-1:0]   seed_q;
  logic [KW-1:0]  col_q;
  logic [M+W-2:0] window;
  logic           last;
  logic [BW-1:0]  base;

  always_comb begin
    base   = BW'((N - W) - W * int'(col_q));
    window = seed_q[base +: M+W-1];
    last   = (int'(col_q) == COLS - 1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seed_q <= '0;
    end else if (seed_we) begin
      seed_q <= {seed_q[L-SEED_WORD_W-1:0], seed_wdata};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col_q      <= '0;
      out_valid  <= 1'b0;
      out_last   <= 1'b0;
      out_sample <= '0;
      out_window <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        col_q      <= last ? '0 : col_q + 1'b1;
        out_last   <= last;
        out_sample <= in_sample;
        out_window <= window;
      end
    end
  end

endmodule
