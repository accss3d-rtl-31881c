// sspnna_core: one SSpNNA core (Spatially SParse Neural Network Accelerator,
// paper Sec. IV-D, Fig. 11) with its 64 KB L1.
//
// The core processes one tile of a 3D sparse convolution layer that the
// L1-DMA has placed in L1: a tile descriptor (words 0..7, see accss3d_pkg),
// COIR metadata headers and neighbour indices, the IFM rows of the tile's
// input voxels (C FP32 channels each), the weights of all 27 planes for the
// tile's C input and N output channels, and the OFM rows to accumulate into.
// On `start` the control block reads the descriptor; WAVES turns the metadata
// into per-plane tuples of four (input, output) pairs; SyMAC computes, for each
// pair, the N-channel matrix-vector product W[plane] x IFM[input] with its
// DeNNs and accumulates it into OFM[output] through the ACC OFM cache; the
// cache is flushed to L1 and `done` pulses. `active` marks the compute phase;
// outside it the L1 belongs to the DMA port (l1_arbiter).
//
// L1 read port map: 0 descriptor, 1 headers, 2 neighbour indices, 3 mem_ctrl
// read, 4..4+NUM_DENN/2-1 weights (one per group slot), then one IFM port per
// DeNN. The DMA port moves 32 words (128 B, the paper's L1-L2 bandwidth per
// clock) per beat.
module sspnna_core
  import accss3d_pkg::*;
#(
  parameter int unsigned NUM_DENN  = 8,
  parameter int unsigned SLOTS     = 512,
  parameter int unsigned ACC_LINES = 16,
  parameter int unsigned L1_WORDS  = 16384
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  output logic                 active,
  output logic                 done,
  // DMA port (exchange phase)
  input  logic                 dma_valid,
  output logic                 dma_ready,
  input  logic                 dma_we,
  input  logic [L1_AW-1:0]     dma_addr,
  input  logic [31:0][31:0]    dma_wdata,
  input  logic [31:0]          dma_mask,
  output logic                 dma_rvalid,
  output logic [31:0][31:0]    dma_rdata,
  // statistics of the last tile
  output logic [31:0]          cycles,
  output logic [31:0]          mac_beats,
  output logic [31:0]          acc_hits,
  output logic [31:0]          acc_evictions,
  output logic [31:0]          batches
);
  localparam int unsigned NG  = NUM_DENN / 2;
  localparam int unsigned NRP = 4 + NG + NUM_DENN;

  logic [NRP-1:0][L1_AW-1:0]      rd_addr;
  logic [NRP-1:0][15:0][31:0]     rd_data;
  logic                           w_en, w_we;
  logic [L1_AW-1:0]               w_addr;
  logic [31:0][31:0]              w_wdata, w_rdata;
  logic [31:0]                    w_mask;

  l1_mem #(.DEPTH(L1_WORDS), .NRP(NRP), .RPW(16), .WPW(32)) u_l1 (
    .clk, .rd_addr, .rd_data, .w_en, .w_we, .w_addr, .w_wdata, .w_mask, .w_rdata
  );

  tile_cfg_t cfg;
  logic      waves_start, waves_done, symac_idle, symac_flush, symac_flush_done;
  logic      tup_valid, tup_ready;
  tuple_t    tup;
  logic      mc_wr_en;
  logic [L1_AW-1:0] mc_wr_addr;
  fp32_t [3:0]      mc_wr_data;
  logic [31:0]      dma_blocked, pairs_formed, jobs_issued, acc_misses;

  l1_arbiter #(.AW(L1_AW), .WPW(32)) u_arb (
    .clk, .rst_n, .core_active (active),
    .dma_valid, .dma_ready, .dma_we, .dma_addr, .dma_wdata, .dma_mask, .dma_rvalid, .dma_rdata,
    .core_wr_en (mc_wr_en), .core_wr_addr (mc_wr_addr), .core_wr_data (mc_wr_data),
    .w_en, .w_we, .w_addr, .w_wdata, .w_mask, .w_rdata, .dma_blocked
  );

  sspnna_ctrl u_ctrl (
    .clk, .rst_n, .start, .active, .done,
    .cfg_rd_addr (rd_addr[0]), .cfg_rd_data (rd_data[0][7:0]), .cfg,
    .waves_start, .waves_done, .symac_idle, .symac_flush, .symac_flush_done, .cycles
  );

  logic [$clog2(SLOTS):0] max_used;
  logic hdr_rd_en, idx_rd_en;
  waves #(.SLOTS(SLOTS)) u_waves (
    .clk, .rst_n, .cfg, .start (waves_start), .done (waves_done),
    .hdr_rd_en, .hdr_rd_addr (rd_addr[1]), .hdr_rd_data (rd_data[1][3:0]),
    .idx_rd_en, .idx_rd_addr (rd_addr[2]), .idx_rd_data (rd_data[2][3:0]),
    .tup_valid, .tup_ready, .tup, .batches, .pairs_formed, .max_used
  );

  logic [NG-1:0]                 wt_rd_en;
  logic [NG-1:0][L1_AW-1:0]      wt_rd_addr;
  fp32_t [NG-1:0][WT_WORDS-1:0]  wt_rd_data;
  logic [NUM_DENN-1:0]           ifm_rd_en;
  logic [NUM_DENN-1:0][L1_AW-1:0] ifm_rd_addr;
  fp32_t [NUM_DENN-1:0][3:0]     ifm_rd_data;
  logic                          mc_rd_en;

  for (genvar g = 0; g < NG; g++) begin : g_wt
    assign rd_addr[4+g]    = wt_rd_addr[g];
    assign wt_rd_data[g]   = rd_data[4+g];
  end
  for (genvar d = 0; d < NUM_DENN; d++) begin : g_ifm
    assign rd_addr[4+NG+d] = ifm_rd_addr[d];
    assign ifm_rd_data[d]  = rd_data[4+NG+d][3:0];
  end

  symac #(.NUM_DENN(NUM_DENN), .ACC_LINES(ACC_LINES)) u_symac (
    .clk, .rst_n, .cfg, .tup_valid, .tup_ready, .tup,
    .flush (symac_flush), .flush_done (symac_flush_done), .idle (symac_idle),
    .wt_rd_en, .wt_rd_addr, .wt_rd_data,
    .ifm_rd_en, .ifm_rd_addr, .ifm_rd_data,
    .mc_rd_en, .mc_rd_addr (rd_addr[3]), .mc_rd_data (rd_data[3][3:0]),
    .mc_wr_en, .mc_wr_addr, .mc_wr_data,
    .mac_beats, .jobs_issued, .acc_hits, .acc_misses, .acc_evictions
  );
endmodule
