// qrng_top -- FPGA post-processing of the parallel real-time QRNG.
//
// Three sideband modes of the vacuum noise (200 MHz, 600 MHz and 1 GHz,
// 120 MHz wide each) are digitised by three 16-bit ADCs at 240 MS/s, all on
// the common 240 MHz clock. Every channel has its own Toeplitz extractor
// (matrices 581x768, 548x768 and 519x768, sized for min-entropies of 14.2,
// 13.5 and 12.9 bits per sample), so the three hashes run side by side and
// produce 2905 + 2740 + 2595 Mbit/s of random bits. accum_pcie_packer merges
// the three block streams into one OUT_W-bit valid/ready word stream for the
// PCI-E core, which is outside this module.
//
// Interface: adc_data/adc_valid carry one sample per channel and cycle;
// seed_we/seed_sel/seed_wdata load the seed of the selected extractor one
// word at a time (ceil((M+N-1)/SEED_WORD_W) words; the last word written
// becomes seed bits [SEED_WORD_W-1:0]); pcie_tdata/tvalid/tready is the
// output stream; overflow and drop_cnt report blocks lost to back-pressure.
// Latency from the last sample of a block to its first appearance in the
// packer's gearbox is 4 cycles when nothing is queued ahead of it.
//
// Channel count, matrix sizes, sample width and clocking follow the paper;
// the seed port, the output word width and the merging policy are this
// design's choices.
module qrng_top
  import qrng_pkg::*;
#(
  parameter int unsigned N      = N_RAW,
  parameter int unsigned W      = ADC_W,
  parameter int unsigned M_LEN [NUM_CH] = '{M_CH1, M_CH2, M_CH3},
  parameter int unsigned M_TOP  = M_MAX,
  parameter int unsigned SWW    = SEED_WORD_W,
  parameter int unsigned OW     = OUT_W
) (
  input  logic              clk,
  input  logic              rst_n,
  // three ADCs
  input  logic [W-1:0]      adc_data  [NUM_CH],
  input  logic              adc_valid [NUM_CH],
  // seed loading
  input  logic              seed_we,
  input  logic [1:0]        seed_sel,
  input  logic [SWW-1:0]    seed_wdata,
  // stream to the PCI-E core
  output logic [OW-1:0]     pcie_tdata,
  output logic              pcie_tvalid,
  input  logic              pcie_tready,
  // status
  output logic              overflow,
  output logic [15:0]       drop_cnt  [NUM_CH]
);
  logic             blk_valid [NUM_CH];
  logic [M_TOP-1:0] blk_data  [NUM_CH];

  for (genvar c = 0; c < NUM_CH; c++) begin : g_chan
    localparam int unsigned MC = M_LEN[c];
    logic [MC-1:0] ext_data;

    toeplitz_extractor #(.M(MC), .N(N), .W(W), .SEED_WORD_W(SWW)) u_ext (
      .clk, .rst_n,
      .seed_we   (seed_we && (int'(seed_sel) == c)),
      .seed_wdata,
      .in_valid  (adc_valid[c]),
      .in_sample (adc_data[c]),
      .out_valid (blk_valid[c]),
      .out_data  (ext_data)
    );

    assign blk_data[c] = M_TOP'(ext_data);
  end

  accum_pcie_packer #(
    .NUM_CH(NUM_CH), .M_MAX(M_TOP), .M_LEN(M_LEN), .OUT_W(OW), .CNT_W(16)
  ) u_packer (
    .clk, .rst_n,
    .blk_valid, .blk_data,
    .out_valid(pcie_tvalid), .out_data(pcie_tdata), .out_ready(pcie_tready),
    .overflow, .drop_cnt
  );

endmodule
