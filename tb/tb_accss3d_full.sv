// tb_accss3d_full: the end-to-end test of tb_accss3d_top with the chip at its
// full default size: eight SSpNNA cores of 8 DeNNs (1024 multipliers), 64 KB
// L1 per core, 2 x 1 MB L2, 128 B/clk shared bus and 48 B/clk DRAM port.
// Three L2 tiles, each with one random convolution tile per core, are moved
// DRAM -> L2 -> L1, computed and returned; AdMAC first builds the metadata of
// one of them. Every metadata and OFM word is compared with a reference
// computed in the bench, DMA beat counts are checked against the bus widths,
// and each mechanism (AdMAC multi-cycle lookup, mode switch, WAVES batch
// switch, ACC OFMs hit and eviction, DMA held for a busy core, L2 overlap)
// must occur. DRAM and the host are behavioural, as in tb_accss3d_top.
`timescale 1ns/1ps
module tb_accss3d_full;
  localparam int NC = 8;
  localparam int NT = 3;
  localparam int L2W = 262144;           // words per L2 half (1 MB)
  localparam int L2TBL = 32'h100000, L1TBL = 32'h110000;
  localparam int TILE_BASE = 32'h200000, OUT_BASE = 32'h400000, VOX_BASE = 32'h300000;
  localparam int IMG = 32'h2000;          // words per core image
  localparam int TSZ = NC * IMG;          // words per L2 tile

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic        cmd_valid, cmd_ready, cmd_admac, evt_done;
  logic [31:0] cmd_l2_tbl, cmd_l1_tbl, adm_nvox, adm_vox_base, adm_hdr_base, adm_idx_base;
  logic [15:0] cmd_n_l2_tiles;
  logic        l2d_req_valid, l2d_req_ready, l2d_req_we, l2d_rsp_valid;
  logic [31:0] l2d_req_addr;
  logic [11:0][31:0] l2d_req_wdata, l2d_rsp_data;
  logic [11:0] l2d_req_mask;
  logic        t1_req_valid, t1_req_ready, t1_rsp_valid, t2_req_valid, t2_req_ready, t2_rsp_valid;
  logic [31:0] t1_req_addr, t1_rsp_data, t2_req_addr, t2_rsp_data;
  logic        am_valid, am_ready, am_we, am_rsp_valid;
  logic [31:0] am_addr, am_wdata, am_rsp_data;
  logic [NC-1:0] core_active;
  logic [NC-1:0][31:0] core_mac_beats, core_acc_hits, core_acc_evictions, core_batches, core_cycles;
  logic [31:0] l1d_words, l2d_words, tiles_overlapped;
  logic [31:0] adm_lookup_cycles, adm_multi_cycle_voxels, adm_neighbours_found;
  logic        adm_overflow;

  accss3d_top dut (.*);

  int checks = 0, failures = 0;

  // ---------------- DRAM model ----------------
  int unsigned dram [int];
  function automatic int unsigned rd(input int a);
    return dram.exists(a) ? dram[a] : 0;
  endfunction

  assign l2d_req_ready = 1'b1;
  assign t1_req_ready  = 1'b1;
  assign t2_req_ready  = 1'b1;
  assign am_ready      = 1'b1;
  always_ff @(posedge clk) begin
    l2d_rsp_valid <= l2d_req_valid && !l2d_req_we;
    for (int i = 0; i < 12; i++) begin
      l2d_rsp_data[i] <= rd(l2d_req_addr + i);
      if (l2d_req_valid && l2d_req_we && l2d_req_mask[i]) dram[l2d_req_addr + i] = l2d_req_wdata[i];
    end
    t1_rsp_valid <= t1_req_valid; t1_rsp_data <= rd(t1_req_addr);
    t2_rsp_valid <= t2_req_valid; t2_rsp_data <= rd(t2_req_addr);
    am_rsp_valid <= am_valid && !am_we; am_rsp_data <= rd(am_addr);
    if (am_valid && am_we) dram[am_addr] = am_wdata;
  end

  // ---------------- reference data ----------------
  int ref_ofm [NT][NC][$];
  int ofm_off [NT][NC], mode_of [NT][NC];
  int exp_bus_beats = 0, exp_dram_rd_beats = 0, exp_dram_wr_beats = 0;
  int meta_ref [int];                 // expected AdMAC words
  int ad_x[$], ad_y[$], ad_z[$];       // AdMAC voxel list (tile 0, core 0)

  function automatic int unsigned f2b(input int v);
    // exact FP32 encoding of a small integer (|v| < 2**24)
    int unsigned m, e;
    if (v == 0) return 0;
    m = (v < 0) ? -v : v;
    e = 0;
    while ((m >> (e + 1)) != 0) e++;
    return ((v < 0) ? 32'h8000_0000 : 0) | ((127 + e) << 23) | ((m << (23 - e)) & 32'h007F_FFFF);
  endfunction

  // Builds one convolution tile image at DRAM address `base`; voxels are given
  // in vx/vy/vz (any coordinates, positions compared exactly).
  task automatic build_image(input int t, input int c, input int base, input int mode, input int corf,
                             input int c4, input int n4, input int vx[$], input int vy[$],
                             input int vz[$], input bit meta_by_admac);
    int C, N, nvox, hdr, idxb, ifm, wt, ofm, ip;
    int ifmv[][], wv[][][], ro[][];
    C = 4*c4; N = 4*n4; nvox = vx.size();
    hdr = 16; idxb = hdr + 2*nvox; ifm = idxb + 27*nvox;
    wt = ifm + nvox*C; ofm = wt + 27*N*C;
    if (ofm + nvox*N > IMG) $fatal(1, "image too large");
    ifmv = new[nvox]; foreach (ifmv[i]) begin ifmv[i] = new[C]; foreach (ifmv[i][k]) ifmv[i][k] = $urandom_range(6) - 3; end
    wv = new[27]; foreach (wv[k]) begin wv[k] = new[N]; foreach (wv[k][n]) begin wv[k][n] = new[C]; foreach (wv[k][n][j]) wv[k][n][j] = $urandom_range(4) - 2; end end
    ro = new[nvox]; foreach (ro[i]) begin ro[i] = new[N]; foreach (ro[i][n]) ro[i][n] = 0; end
    ip = idxb;
    for (int e = 0; e < nvox; e++) begin
      int unsigned mask = 0;
      for (int k = 0; k < 27; k++) begin
        int nb = -1;
        for (int j = 0; j < nvox; j++)
          if (vx[j] == vx[e] + (k % 3) - 1 && vy[j] == vy[e] + (k / 3) % 3 - 1 && vz[j] == vz[e] + k / 9 - 1) nb = j;
        if (nb >= 0) begin
          int in_i, out_i;
          mask |= 1 << k;
          if (meta_by_admac) meta_ref[base + ip] = nb; else dram[base + ip] = nb;
          ip++;
          if (corf) begin in_i = e; out_i = nb; end else begin in_i = nb; out_i = e; end
          for (int n = 0; n < N; n++) for (int j = 0; j < C; j++) ro[out_i][n] += wv[k][n][j] * ifmv[in_i][j];
        end
      end
      if (meta_by_admac) begin meta_ref[base + hdr + 2*e] = mask; meta_ref[base + hdr + 2*e + 1] = e; end
      else begin dram[base + hdr + 2*e] = mask; dram[base + hdr + 2*e + 1] = e; end
    end
    foreach (ifmv[i, j]) dram[base + ifm + i*C + j] = f2b(ifmv[i][j]);
    for (int k = 0; k < 27; k++) for (int ng = 0; ng < n4; ng++) for (int cg = 0; cg < c4; cg++)
      for (int p = 0; p < 4; p++) for (int j = 0; j < 4; j++)
        dram[base + wt + ((k*n4 + ng)*c4 + cg)*16 + p*4 + j] = f2b(wv[k][ng*4+p][cg*4+j]);
    for (int i = 0; i < nvox*N; i++) dram[base + ofm + i] = 0;
    dram[base+0] = nvox; dram[base+1] = hdr; dram[base+2] = idxb; dram[base+3] = ifm;
    dram[base+4] = wt; dram[base+5] = ofm; dram[base+6] = (corf << 4) | mode; dram[base+7] = (n4 << 8) | c4;
    ref_ofm[t][c].delete();
    for (int i = 0; i < nvox; i++) for (int n = 0; n < N; n++) ref_ofm[t][c].push_back(ro[i][n]);
    ofm_off[t][c] = ofm;
    mode_of[t][c] = mode;
  endtask

  // DMA table entry
  task automatic entry(inout int p, input int src, input int dst, input int len, input int flags, input int beat,
                       input int kind);
    dram[p] = src; dram[p+1] = dst; dram[p+2] = len; dram[p+3] = flags; p += 4;
    if (kind == 1) exp_bus_beats     += (len + beat - 1) / beat;
    if (kind == 2) exp_dram_rd_beats += (len + beat - 1) / beat;
    if (kind == 3) exp_dram_wr_beats += (len + beat - 1) / beat;
  endtask

  // ---------------- mechanism counters ----------------
  int multi_batch = 0, acc_hit_seen = 0, acc_evict_seen = 0;
  int mode_switches = 0, dma_holds = 0, overlap_cycles = 0, bus_beats = 0, dram_rd_beats = 0, dram_wr_beats = 0;
  int last_mode [NC];
  initial foreach (last_mode[c]) last_mode[c] = -1;
  always @(posedge clk) if (rst_n) begin
    if (dut.l1_cur_valid && !dut.l1_xfer_ok) dma_holds++;
    for (int c = 0; c < NC; c++) if (core_batches[c] > 1) multi_batch++;
    for (int c = 0; c < NC; c++) if (core_acc_hits[c] != 0) acc_hit_seen++;
    for (int c = 0; c < NC; c++) if (core_acc_evictions[c] != 0) acc_evict_seen++;
    if (dut.l2_busy && |core_active) overlap_cycles++;
    if (dut.d1_req_valid[1] && dut.d1_req_we[1]) bus_beats++;
    if (l2d_req_valid && !l2d_req_we) dram_rd_beats++;
    if (l2d_req_valid && l2d_req_we) dram_wr_beats++;
  end
  for (genvar c = 0; c < NC; c++) begin : g_mon
    always @(posedge clk) if (rst_n && dut.core_start[c]) begin
      @(posedge clk); @(posedge clk);
      if (last_mode[c] >= 0 && last_mode[c] != int'(dut.g_core[c].u_core.cfg.mode)) mode_switches++;
      last_mode[c] = int'(dut.g_core[c].u_core.cfg.mode);
    end
  end

  task automatic mech(input string name, input int n);
    checks++;
    $display("mechanism %-28s %0d", name, n);
    if (n == 0) begin failures++; $display("FAIL mechanism %s never happened", name); end
  endtask

  task automatic command(input bit adm, input int n_tiles);
    @(negedge clk);
    cmd_valid = 1; cmd_admac = adm; cmd_n_l2_tiles = 16'(n_tiles);
    @(posedge clk); while (!cmd_ready) @(posedge clk);
    @(negedge clk); cmd_valid = 0;
    while (!evt_done) @(posedge clk);
  endtask

  initial begin : main
    automatic int p1, p2, t0;
    int ox, oy, oz;
    int vx[$], vy[$], vz[$];
    cmd_valid = 0; cmd_admac = 0; cmd_l2_tbl = L2TBL; cmd_l1_tbl = L1TBL; cmd_n_l2_tiles = 0;
    adm_nvox = 0; adm_vox_base = VOX_BASE; adm_hdr_base = 0; adm_idx_base = 0;

    // ---- tile images ----
    for (int t = 0; t < NT; t++) for (int c = 0; c < NC; c++) begin
      int g, dens, c4, n4, mode, corf;
      g = 4; dens = 45; c4 = 1 + $urandom_range(1); n4 = 1 + $urandom_range(1);
      mode = (t + c) % 3; corf = (c + t) % 2;
      if (t == 1 && c == 3) begin g = 5; dens = 100; c4 = 1; n4 = 1; end   // dense: several WAVES batches
      vx.delete(); vy.delete(); vz.delete();
      // tile (0,0) straddles level-one group boundaries (groups of 4x8x4)
      if (t == 0 && c == 0) begin ox = 2; oy = 5; oz = 2; g = 5; dens = 60; end else begin ox = 0; oy = 0; oz = 0; end
      for (int x = 0; x < g; x++) for (int y = 0; y < g; y++) for (int z = 0; z < g; z++)
        if ($urandom_range(99) < dens) begin vx.push_back(x + ox); vy.push_back(y + oy); vz.push_back(z + oz); end
      build_image(t, c, TILE_BASE + t*TSZ + c*IMG, mode, corf, c4, n4, vx, vy, vz, t == 0 && c == 0);
      if (t == 0 && c == 0) begin ad_x = vx; ad_y = vy; ad_z = vz; end
    end
    // ---- AdMAC voxel list ----
    foreach (ad_x[i]) dram[VOX_BASE + i] = (ad_z[i] << 20) | (ad_y[i] << 10) | ad_x[i];
    adm_nvox = ad_x.size();
    adm_hdr_base = TILE_BASE + 16;
    adm_idx_base = TILE_BASE + 16 + 2*ad_x.size();
    // ---- DMA tables ----
    // L2: L0, L1, S0, L2, S1, S2 (the event controller's order)
    p2 = L2TBL;
    entry(p2, TILE_BASE + 0*TSZ, 0 * L2W, TSZ, 1, 12, 2);
    entry(p2, TILE_BASE + 1*TSZ, 1 * L2W, TSZ, 1, 12, 2);
    entry(p2, 0 * L2W, OUT_BASE + 0*TSZ, TSZ, 1 | 8, 12, 3);
    entry(p2, TILE_BASE + 2*TSZ, 0 * L2W, TSZ, 1, 12, 2);
    entry(p2, 1 * L2W, OUT_BASE + 1*TSZ, TSZ, 1 | 8, 12, 3);
    entry(p2, 0 * L2W, OUT_BASE + 2*TSZ, TSZ, 1 | 8, 12, 3);
    // L1: per tile, one segment per core (load, then start), then one
    // segment storing all OFMs (each store held until its core is idle)
    p1 = L1TBL;
    for (int t = 0; t < NT; t++) begin
      int l2b;
      l2b = (t % 2) * L2W;
      for (int c = 0; c < NC; c++) begin
        int len;
        len = ofm_off[t][c] + ref_ofm[t][c].size();
        entry(p1, l2b + c*IMG, 0, len, 1 | 2 | (c << 8), 32, 1);
      end
      for (int c = 0; c < NC; c++)
        entry(p1, ofm_off[t][c], l2b + c*IMG + ofm_off[t][c], ref_ofm[t][c].size(),
              (c << 8) | 8 | ((c == NC-1) ? (1 | 4) : 0), 32, 0);
    end

    repeat (3) @(posedge clk); rst_n = 1;
    repeat (2) @(posedge clk);

    // ---- 1. AdMAC ----
    t0 = $time;
    $display("start AdMAC at %0t", $time);
    command(1, 0);
    $display("AdMAC: %0d voxels, %0d lookup cycles, %0d multi-cycle voxels, %0d neighbours, %0d cycles",
             adm_nvox, adm_lookup_cycles, adm_multi_cycle_voxels, adm_neighbours_found, ($time - t0) / 2);
    foreach (meta_ref[a]) begin
      checks++;
      if (rd(a) != meta_ref[a]) begin
        failures++;
        if (failures < 10) $display("FAIL metadata @%h got %h exp %h", a, rd(a), meta_ref[a]);
      end
    end
    checks++;
    if (adm_lookup_cycles < adm_nvox || adm_overflow) begin failures++; $display("FAIL AdMAC lookup cycles / overflow"); end

    // ---- 2. layer ----
    t0 = $time;
    $display("start layer");
    command(0, NT);
    $display("layer: %0d cycles, L1-DMA %0d words, L2-DMA %0d words", ($time - t0) / 2, l1d_words, l2d_words);
    for (int t = 0; t < NT; t++) for (int c = 0; c < NC; c++) begin
      int base;
      base = OUT_BASE + t*TSZ + c*IMG + ofm_off[t][c];
      foreach (ref_ofm[t][c][i]) begin
        checks++;
        if (rd(base + i) != f2b(ref_ofm[t][c][i])) begin
          failures++;
          if (failures < 10) $display("FAIL ofm t%0d c%0d [%0d] got %h exp %h", t, c, i, rd(base + i), f2b(ref_ofm[t][c][i]));
        end
      end
    end
    // DMA beat counts: 128 B per shared-bus beat, 48 B per DRAM beat
    checks++; if (bus_beats != exp_bus_beats) begin failures++; $display("FAIL bus beats %0d exp %0d", bus_beats, exp_bus_beats); end
    checks++; if (dram_rd_beats != exp_dram_rd_beats) begin failures++; $display("FAIL dram rd beats %0d exp %0d", dram_rd_beats, exp_dram_rd_beats); end
    checks++; if (dram_wr_beats != exp_dram_wr_beats) begin failures++; $display("FAIL dram wr beats %0d exp %0d", dram_wr_beats, exp_dram_wr_beats); end
    mech("AdMAC multi-cycle lookup", adm_multi_cycle_voxels);
    mech("systolic mode switch", mode_switches);
    mech("WAVES batch switch", multi_batch);
    mech("ACC OFMs hit", acc_hit_seen);
    mech("ACC OFMs eviction", acc_evict_seen);
    mech("L1-DMA held for busy core", dma_holds);
    mech("L2 load overlapped", tiles_overlapped);
    mech("L2-DMA busy while computing", overlap_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog: GEC loads %0d/%0d stores %0d tiles done %0d L1 tile %0d, cores active %b",
             dut.u_gec.li, dut.u_gec.ld, dut.u_gec.si, dut.u_gec.td, dut.u_gec.l1_tile, core_active);
    $display("  L1-DMA state %0d flags %h xfer_ok %b, L2-DMA state %0d, words %0d/%0d",
             dut.u_l1dma.st, dut.l1_cur_flags, dut.l1_xfer_ok, dut.u_l2dma.st, l1d_words, l2d_words);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
