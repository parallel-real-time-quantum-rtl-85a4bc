// qrng_pkg -- shared sizes of the parallel real-time QRNG post-processing.
//
// Three sideband channels are sampled by 16-bit ADCs at 240 MS/s. Each
// channel is hashed by its own Toeplitz extractor that maps a raw block of
// 768 bits (48 samples) to 581, 548 or 519 output bits; the three matrix
// heights follow from the per-channel min-entropies 14.2, 13.5 and 12.9
// bits/sample and a hash security parameter of 2^-50. The output word width
// towards the PCI-E core and the seed word width are this design's choice.
package qrng_pkg;

  localparam int unsigned NUM_CH      = 3;    // parallel sub-entropy sources
  localparam int unsigned ADC_W       = 16;   // ADC resolution (bits/sample)
  localparam int unsigned N_RAW       = 768;  // Toeplitz matrix columns
  localparam int unsigned M_CH1       = 581;  // matrix rows, 200 MHz mode
  localparam int unsigned M_CH2       = 548;  // matrix rows, 600 MHz mode
  localparam int unsigned M_CH3       = 519;  // matrix rows, 1 GHz mode
  localparam int unsigned M_MAX       = 581;  // widest channel output
  localparam int unsigned SEED_WORD_W = 32;   // seed load word (own choice)
  localparam int unsigned OUT_W       = 64;   // output stream word (own choice)

  // Number of seed words needed to fill a seed register of len bits.
  function automatic int unsigned seed_words(int unsigned len);
    return (len + SEED_WORD_W - 1) / SEED_WORD_W;
  endfunction

endpackage
