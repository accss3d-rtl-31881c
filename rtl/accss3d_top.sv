// accss3d_top: the AccSS3D chip (paper Sec. V-A-3, Fig. 13, Fig. 20).
//
// Eight SSpNNA cores, each with its own 64 KB L1, share a 2 x 1 MB L2 through
// an L1-DMA on a 128 B/clk shared bus. An L2-DMA moves 48 B/clk between DRAM
// and the L2. A Global Event Controller (GEC) sequences both DMAs from DMA
// tables in DRAM and starts the cores; AdMAC builds the convolution metadata
// (adjacency lists) from a voxel list in DRAM. The host CPU and DRAM are not
// part of the chip: their signals are ports here.
//
// Interconnect:
//   * L1-DMA (32 words/beat): port 0 is the L2 (port A of both halves, the
//     half chosen by word-address bit 18), port 1 is the shared bus to the L1
//     of the core named in the current DMA entry's flags [11:8].
//   * L2-DMA (12 words/beat): port 0 is DRAM (the l2d_* ports), port 1 is
//     port B of the L2 halves.
//   * Both DMAs fetch their tables through their own one-word DRAM read ports
//     (t1_* and t2_*); AdMAC has a one-word read/write DRAM port (am_*).
// A DMA entry must not cross the boundary between the two L2 halves.
// The host issues commands on cmd_* (a layer, with its L2 and L1 DMA table
// addresses and L2-tile count, or an AdMAC run with the adm_* configuration)
// and gets evt_done at the end. Statistics per core and per engine are
// brought out for observation.
//
// Follows the paper: the block set, core count, memory sizes and the two bus
// bandwidths (Fig. 20), the two DMA engines, the GEC and AdMAC placement
// (Fig. 13). This design's choices: separate DRAM ports per requester (the
// paper does not describe the DRAM controller), the DMA table format and
// the bus select by entry flags.
//
// Lint note: rst_n is the asynchronous reset of all control flops; the memory
// arrays and data registers have no reset, and a tool may report rst_n as used
// both synchronously and asynchronously through the instances. That stands:
// every flop that is reset is reset asynchronously.
module accss3d_top
  import accss3d_pkg::*;
#(
  parameter int unsigned NUM_CORES = 8,
  parameter int unsigned NUM_DENN  = 8,
  parameter int unsigned SLOTS     = 512,
  parameter int unsigned ACC_LINES = 16,
  parameter int unsigned L2_WORDS  = 262144,   // per half: 1 MB
  parameter int unsigned BUS_BEAT  = 32,       // 128 B/clk
  parameter int unsigned DRAM_BEAT = 12,       // 48 B/clk
  parameter int unsigned AD_CW     = 7,
  parameter int unsigned AD_ROWS   = 512
) (
  input  logic        clk,
  input  logic        rst_n,
  // host command
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  logic        cmd_admac,
  input  logic [31:0] cmd_l2_tbl,
  input  logic [31:0] cmd_l1_tbl,
  input  logic [15:0] cmd_n_l2_tiles,
  input  logic [31:0] adm_nvox,
  input  logic [31:0] adm_vox_base,
  input  logic [31:0] adm_hdr_base,
  input  logic [31:0] adm_idx_base,
  output logic        evt_done,
  // DRAM: L2-DMA data port
  output logic        l2d_req_valid,
  input  logic        l2d_req_ready,
  output logic        l2d_req_we,
  output logic [31:0] l2d_req_addr,
  output logic [DRAM_BEAT-1:0][31:0] l2d_req_wdata,
  output logic [DRAM_BEAT-1:0]       l2d_req_mask,
  input  logic        l2d_rsp_valid,
  input  logic [DRAM_BEAT-1:0][31:0] l2d_rsp_data,
  // DRAM: L1-DMA table port
  output logic        t1_req_valid,
  input  logic        t1_req_ready,
  output logic [31:0] t1_req_addr,
  input  logic        t1_rsp_valid,
  input  logic [31:0] t1_rsp_data,
  // DRAM: L2-DMA table port
  output logic        t2_req_valid,
  input  logic        t2_req_ready,
  output logic [31:0] t2_req_addr,
  input  logic        t2_rsp_valid,
  input  logic [31:0] t2_rsp_data,
  // DRAM: AdMAC port
  output logic        am_valid,
  input  logic        am_ready,
  output logic        am_we,
  output logic [31:0] am_addr,
  output logic [31:0] am_wdata,
  input  logic        am_rsp_valid,
  input  logic [31:0] am_rsp_data,
  // observation
  output logic [NUM_CORES-1:0]       core_active,
  output logic [NUM_CORES-1:0][31:0] core_mac_beats,
  output logic [NUM_CORES-1:0][31:0] core_acc_hits,
  output logic [NUM_CORES-1:0][31:0] core_acc_evictions,
  output logic [NUM_CORES-1:0][31:0] core_batches,
  output logic [NUM_CORES-1:0][31:0] core_cycles,
  output logic [31:0] l1d_words,
  output logic [31:0] l2d_words,
  output logic [31:0] tiles_overlapped,
  output logic [31:0] adm_lookup_cycles,
  output logic [31:0] adm_multi_cycle_voxels,
  output logic [31:0] adm_neighbours_found,
  output logic        adm_overflow
);
  localparam int unsigned L2AW = $clog2(L2_WORDS);
  localparam int unsigned CW_  = (NUM_CORES > 1) ? $clog2(NUM_CORES) : 1;

  // ---------------- GEC <-> DMAs ----------------
  logic        l2_init, l2_run, l2_busy, l2_seg_done;
  logic [31:0] l2_base, l2_seg_flags, l2_cur_flags;
  logic        l2_cur_valid;
  logic        l1_init, l1_run, l1_busy, l1_seg_done, l1_xfer_ok, l1_cur_valid;
  logic [31:0] l1_base, l1_seg_flags, l1_cur_flags;
  logic [NUM_CORES-1:0] core_start, core_done;
  logic        admac_start, admac_done, adm_busy;

  gec #(.NUM_CORES(NUM_CORES)) u_gec (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd_admac, .cmd_l2_tbl, .cmd_l1_tbl, .cmd_n_l2_tiles,
    .evt_done,
    .l2d_init (l2_init), .l2d_base (l2_base), .l2d_run (l2_run),
    .l2d_busy (l2_busy), .l2d_seg_done (l2_seg_done),
    .l1d_init (l1_init), .l1d_base (l1_base), .l1d_run (l1_run),
    .l1d_busy (l1_busy), .l1d_seg_done (l1_seg_done), .l1d_seg_flags (l1_seg_flags),
    .l1d_cur_flags (l1_cur_flags), .l1d_xfer_ok (l1_xfer_ok),
    .core_active, .core_start,
    .admac_start, .admac_done, .tiles_overlapped
  );

  // ---------------- L1-DMA ----------------
  logic [1:0]                       d1_req_valid, d1_req_ready, d1_req_we, d1_rsp_valid;
  logic [1:0][31:0]                 d1_req_addr;
  logic [1:0][BUS_BEAT-1:0][31:0]   d1_req_wdata, d1_rsp_data;
  logic [1:0][BUS_BEAT-1:0]         d1_req_mask;

  dma_engine #(.BEAT(BUS_BEAT)) u_l1dma (
    .clk, .rst_n, .init (l1_init), .tbl_base (l1_base), .run (l1_run),
    .busy (l1_busy), .seg_done (l1_seg_done), .seg_flags (l1_seg_flags),
    .cur_flags (l1_cur_flags), .cur_valid (l1_cur_valid), .xfer_ok (l1_xfer_ok),
    .t_req_valid (t1_req_valid), .t_req_ready (t1_req_ready), .t_req_addr (t1_req_addr),
    .t_rsp_valid (t1_rsp_valid), .t_rsp_data (t1_rsp_data),
    .p_req_valid (d1_req_valid), .p_req_ready (d1_req_ready), .p_req_we (d1_req_we),
    .p_req_addr (d1_req_addr), .p_req_wdata (d1_req_wdata), .p_req_mask (d1_req_mask),
    .p_rsp_valid (d1_rsp_valid), .p_rsp_data (d1_rsp_data),
    .words_moved (l1d_words)
  );

  // ---------------- L2-DMA ----------------
  logic [1:0]                       d2_req_valid, d2_req_ready, d2_req_we, d2_rsp_valid;
  logic [1:0][31:0]                 d2_req_addr;
  logic [1:0][DRAM_BEAT-1:0][31:0]  d2_req_wdata, d2_rsp_data;
  logic [1:0][DRAM_BEAT-1:0]        d2_req_mask;

  dma_engine #(.BEAT(DRAM_BEAT)) u_l2dma (
    .clk, .rst_n, .init (l2_init), .tbl_base (l2_base), .run (l2_run),
    .busy (l2_busy), .seg_done (l2_seg_done), .seg_flags (l2_seg_flags),
    .cur_flags (l2_cur_flags), .cur_valid (l2_cur_valid), .xfer_ok (1'b1),
    .t_req_valid (t2_req_valid), .t_req_ready (t2_req_ready), .t_req_addr (t2_req_addr),
    .t_rsp_valid (t2_rsp_valid), .t_rsp_data (t2_rsp_data),
    .p_req_valid (d2_req_valid), .p_req_ready (d2_req_ready), .p_req_we (d2_req_we),
    .p_req_addr (d2_req_addr), .p_req_wdata (d2_req_wdata), .p_req_mask (d2_req_mask),
    .p_rsp_valid (d2_rsp_valid), .p_rsp_data (d2_rsp_data),
    .words_moved (l2d_words)
  );

  // L2-DMA port 0: DRAM
  assign l2d_req_valid   = d2_req_valid[0];
  assign l2d_req_we      = d2_req_we[0];
  assign l2d_req_addr    = d2_req_addr[0];
  assign l2d_req_wdata   = d2_req_wdata[0];
  assign l2d_req_mask    = d2_req_mask[0];
  assign d2_req_ready[0] = l2d_req_ready;
  assign d2_rsp_valid[0] = l2d_rsp_valid;
  assign d2_rsp_data[0]  = l2d_rsp_data;

  // ---------------- L2: two 1 MB halves ----------------
  logic [1:0]                      la_valid, la_rvalid, lb_valid, lb_rvalid;
  logic [1:0][BUS_BEAT-1:0][31:0]  la_rdata;
  logic [1:0][DRAM_BEAT-1:0][31:0] lb_rdata;
  logic                            la_sel_q, lb_sel_q;

  for (genvar h = 0; h < 2; h++) begin : g_l2
    assign la_valid[h] = d1_req_valid[0] && (d1_req_addr[0][L2AW] == 1'(h));
    assign lb_valid[h] = d2_req_valid[1] && (d2_req_addr[1][L2AW] == 1'(h));
    l2_mem #(.DEPTH(L2_WORDS), .AW_WORDS(BUS_BEAT), .BW_WORDS(DRAM_BEAT)) u_l2 (
      .clk,
      .a_valid (la_valid[h]), .a_we (d1_req_we[0]), .a_addr (d1_req_addr[0][L2AW-1:0]),
      .a_wdata (d1_req_wdata[0]), .a_mask (d1_req_mask[0]),
      .a_rvalid (la_rvalid[h]), .a_rdata (la_rdata[h]),
      .b_valid (lb_valid[h]), .b_we (d2_req_we[1]), .b_addr (d2_req_addr[1][L2AW-1:0]),
      .b_wdata (d2_req_wdata[1]), .b_mask (d2_req_mask[1]),
      .b_rvalid (lb_rvalid[h]), .b_rdata (lb_rdata[h])
    );
  end

  always_ff @(posedge clk) begin
    if (d1_req_valid[0]) la_sel_q <= d1_req_addr[0][L2AW];
    if (d2_req_valid[1]) lb_sel_q <= d2_req_addr[1][L2AW];
  end

  assign d1_req_ready[0] = 1'b1;
  assign d1_rsp_valid[0] = |la_rvalid;
  assign d1_rsp_data[0]  = la_rdata[la_sel_q];
  assign d2_req_ready[1] = 1'b1;
  assign d2_rsp_valid[1] = |lb_rvalid;
  assign d2_rsp_data[1]  = lb_rdata[lb_sel_q];

  // ---------------- shared bus to the cores ----------------
  logic [CW_-1:0]                       bus_core, rsp_core_q;
  logic [NUM_CORES-1:0]                 c_dma_valid, c_dma_ready, c_dma_rvalid;
  logic [NUM_CORES-1:0][31:0][31:0]     c_dma_rdata;
  logic [31:0][31:0]                    bus_wdata;
  logic [31:0]                          bus_mask;

  assign bus_core = l1_cur_flags[8 +: CW_];

  always_comb begin
    bus_wdata = '0;
    bus_mask  = '0;
    for (int i = 0; i < BUS_BEAT && i < 32; i++) begin
      bus_wdata[i] = d1_req_wdata[1][i];
      bus_mask[i]  = d1_req_mask[1][i];
    end
  end

  always_ff @(posedge clk) if (d1_req_valid[1]) rsp_core_q <= bus_core;

  assign d1_req_ready[1] = c_dma_ready[bus_core];
  assign d1_rsp_valid[1] = c_dma_rvalid[rsp_core_q];
  always_comb begin
    d1_rsp_data[1] = '0;
    for (int i = 0; i < BUS_BEAT && i < 32; i++) d1_rsp_data[1][i] = c_dma_rdata[rsp_core_q][i];
  end

  for (genvar c = 0; c < NUM_CORES; c++) begin : g_core
    assign c_dma_valid[c] = d1_req_valid[1] && (bus_core == CW_'(c));
    sspnna_core #(.NUM_DENN(NUM_DENN), .SLOTS(SLOTS), .ACC_LINES(ACC_LINES)) u_core (
      .clk, .rst_n,
      .start (core_start[c]), .active (core_active[c]), .done (core_done[c]),
      .dma_valid (c_dma_valid[c]), .dma_ready (c_dma_ready[c]), .dma_we (d1_req_we[1]),
      .dma_addr (d1_req_addr[1][L1_AW-1:0]), .dma_wdata (bus_wdata), .dma_mask (bus_mask),
      .dma_rvalid (c_dma_rvalid[c]), .dma_rdata (c_dma_rdata[c]),
      .cycles (core_cycles[c]), .mac_beats (core_mac_beats[c]),
      .acc_hits (core_acc_hits[c]), .acc_evictions (core_acc_evictions[c]),
      .batches (core_batches[c])
    );
  end

  // ---------------- AdMAC ----------------
  admac #(.CW(AD_CW), .ROWS(AD_ROWS)) u_admac (
    .clk, .rst_n, .start (admac_start),
    .nvox (adm_nvox), .vox_base (adm_vox_base), .hdr_base (adm_hdr_base), .idx_base (adm_idx_base),
    .done (admac_done), .busy (adm_busy),
    .m_valid (am_valid), .m_ready (am_ready), .m_we (am_we), .m_addr (am_addr),
    .m_wdata (am_wdata), .m_rsp_valid (am_rsp_valid), .m_rsp_data (am_rsp_data),
    .lookup_cycles (adm_lookup_cycles), .multi_cycle_voxels (adm_multi_cycle_voxels),
    .neighbours_found (adm_neighbours_found), .overflow (adm_overflow)
  );

  // ---------------- rules ----------------
  // A transfer to a core's L1 happens only while that core is idle.
  assert property (@(posedge clk) disable iff (!rst_n)
    d1_req_valid[1] |-> !core_active[bus_core]);

  // Unobserved handshake detail
  logic unused;
  assign unused = ^{core_done, l2_seg_flags, l2_cur_flags, l2_cur_valid, l1_cur_valid,
                    adm_busy, d1_req_addr[1][31:L1_AW]};
endmodule
