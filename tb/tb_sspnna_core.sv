// tb_sspnna_core: self-checking test of one SSpNNA core on a random
// submanifold 3x3x3 sparse convolution tile.
//
// The bench places active voxels at random in a small grid, builds COIR
// metadata for them (CIRF or CORF), random IFM and weights with small integer
// values (so every FP32 sum is exact and the result does not depend on the
// accumulation order), loads everything through the core's DMA port, starts
// the core and compares every OFM word with a reference computed here. It runs
// one tile per systolic mode (A, B, C) and flavour and checks that the MAC
// beats equal pairs x N/4 x C/4 and that the cycle count stays within a bound
// derived from the 128-multiplies-per-cycle peak.
`timescale 1ns/1ps
module tb_sspnna_core;
  import accss3d_pkg::*;
  localparam int G = 5;            // grid edge
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic start, active, done;
  logic dma_valid, dma_ready, dma_we, dma_rvalid;
  logic [L1_AW-1:0] dma_addr;
  logic [31:0][31:0] dma_wdata, dma_rdata;
  logic [31:0] dma_mask;
  logic [31:0] cycles, mac_beats, acc_hits, acc_evictions, batches;

  sspnna_core dut (.*);

  int checks = 0, failures = 0;
  int vid [G][G][G];
  int nvox;
  int vx[$], vy[$], vz[$];
  int unsigned l1img [int];

  task automatic wr(input int a, input int unsigned d);
    l1img[a] = d;
  endtask

  task automatic dma_write_all();
    foreach (l1img[a]) begin
      @(negedge clk);
      dma_valid = 1; dma_we = 1; dma_addr = L1_AW'(a);
      dma_wdata = '0; dma_wdata[0] = l1img[a]; dma_mask = 32'h1;
      @(posedge clk); #0.1;
      while (!dma_ready) @(posedge clk);
    end
    @(negedge clk); dma_valid = 0;
  endtask

  task automatic dma_read(input int a, output int unsigned d);
    @(negedge clk);
    dma_valid = 1; dma_we = 0; dma_addr = L1_AW'(a); dma_mask = '1;
    @(negedge clk); dma_valid = 0;
    d = dma_rdata[0];
  endtask

  function automatic int unsigned f2b(input int v);
    // exact FP32 encoding of a small integer (|v| < 2**24)
    int unsigned m, e;
    if (v == 0) return 0;
    m = (v < 0) ? -v : v;
    e = 0;
    while ((m >> (e + 1)) != 0) e++;
    return ((v < 0) ? 32'h8000_0000 : 0) | ((127 + e) << 23) | ((m << (23 - e)) & 32'h007F_FFFF);
  endfunction

  task automatic run_tile(input int mode, input int corf, input int c4, input int n4, input int dens);
    int C, N, hdr, idxb, ifm, wt, ofm, ip, npairs;
    int ifmv[][], wv[][][], ref_o[][];
    int unsigned got;
    int t0, lim;
    int unsigned beats0;
    C = 4*c4; N = 4*n4;
    l1img.delete(); vx.delete(); vy.delete(); vz.delete();
    nvox = 0;
    for (int x = 0; x < G; x++) for (int y = 0; y < G; y++) for (int z = 0; z < G; z++) begin
      vid[x][y][z] = -1;
      if ($urandom_range(99) < dens) begin
        vid[x][y][z] = nvox++; vx.push_back(x); vy.push_back(y); vz.push_back(z);
      end
    end
    hdr = 16; idxb = hdr + 2*nvox; ifm = idxb + 27*nvox;
    wt = ifm + nvox*C; ofm = wt + 27*N*C;
    ifmv = new[nvox]; foreach (ifmv[i]) begin ifmv[i] = new[C]; foreach (ifmv[i][c]) ifmv[i][c] = $urandom_range(6) - 3; end
    wv = new[27]; foreach (wv[k]) begin wv[k] = new[N]; foreach (wv[k][n]) begin wv[k][n] = new[C]; foreach (wv[k][n][c]) wv[k][n][c] = $urandom_range(4) - 2; end end
    ref_o = new[nvox]; foreach (ref_o[i]) begin ref_o[i] = new[N]; foreach (ref_o[i][n]) ref_o[i][n] = 0; end
    // metadata: one entry per voxel (centre), neighbours in bit order
    ip = idxb; npairs = 0;
    for (int e = 0; e < nvox; e++) begin
      int unsigned mask = 0;
      for (int k = 0; k < 27; k++) begin
        int x, y, z;
        x = vx[e] + (k % 3) - 1; y = vy[e] + (k / 3) % 3 - 1; z = vz[e] + k / 9 - 1;
        if (x >= 0 && x < G && y >= 0 && y < G && z >= 0 && z < G && vid[x][y][z] >= 0) begin
          int nb, in_i, out_i;
          nb = vid[x][y][z];
          mask |= 1 << k;
          wr(ip++, nb);
          npairs++;
          if (corf) begin in_i = e; out_i = nb; end else begin in_i = nb; out_i = e; end
          for (int n = 0; n < N; n++) for (int c = 0; c < C; c++)
            ref_o[out_i][n] += wv[k][n][c] * ifmv[in_i][c];
        end
      end
      wr(hdr + 2*e, mask); wr(hdr + 2*e + 1, e);
    end
    foreach (ifmv[i, c]) wr(ifm + i*C + c, f2b(ifmv[i][c]));
    for (int k = 0; k < 27; k++) for (int ng = 0; ng < n4; ng++) for (int cg = 0; cg < c4; cg++)
      for (int p = 0; p < 4; p++) for (int j = 0; j < 4; j++)
        wr(wt + ((k*n4 + ng)*c4 + cg)*16 + p*4 + j, f2b(wv[k][ng*4+p][cg*4+j]));
    for (int i = 0; i < nvox*N; i++) wr(ofm + i, 0);
    wr(0, nvox); wr(1, hdr); wr(2, idxb); wr(3, ifm); wr(4, wt); wr(5, ofm);
    wr(6, (corf << 4) | mode); wr(7, (n4 << 8) | c4);
    dma_write_all();
    beats0 = mac_beats;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    t0 = 0;
    while (!done) begin @(posedge clk); t0++; end
    // MAC beats: every pair is one beat per (ng, cg)
    checks++;
    if (mac_beats - beats0 != npairs * n4 * c4) begin
      failures++; $display("FAIL mac_beats %0d expected %0d", mac_beats - beats0, npairs*n4*c4);
    end
    // cycle bound: 16 multiplies per DeNN beat, 128 per cycle at peak; allow
    // load, skew and flush overheads
    lim = (npairs * n4 * c4) / 2 + npairs * (c4 + 8) + 4*nvox + 200;
    checks++;
    if (cycles > lim) begin failures++; $display("FAIL cycles %0d > bound %0d", cycles, lim); end
    for (int i = 0; i < nvox; i++) for (int n = 0; n < N; n++) begin
      dma_read(ofm + i*N + n, got);
      checks++;
      if (got != f2b(ref_o[i][n])) begin
        failures++;
        if (failures < 10) $display("FAIL ofm[%0d][%0d] got %h exp %h", i, n, got, f2b(ref_o[i][n]));
      end
    end
    $display("tile mode=%0d corf=%0d C=%0d N=%0d voxels=%0d pairs=%0d cycles=%0d beats=%0d hits=%0d evict=%0d batches=%0d",
             mode, corf, C, N, nvox, npairs, cycles, mac_beats - beats0, acc_hits, acc_evictions, batches);
  endtask

  initial begin
    start = 0; dma_valid = 0; dma_we = 0; dma_addr = '0; dma_wdata = '0; dma_mask = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    run_tile(1, 0, 4, 2, 40);   // mode B, CIRF
    run_tile(0, 1, 2, 1, 50);   // mode A, CORF
    run_tile(2, 0, 3, 3, 30);   // mode C, CIRF
    run_tile(1, 0, 1, 1, 100);  // dense grid: several WAVES batches
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
