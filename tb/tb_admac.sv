// tb_admac: self-checking test of AdMAC on its own.
//
// A behavioural memory (a sparse word array, always ready, read data one
// cycle after the request) holds a random voxel list. AdMAC builds its lookup
// table and writes the COIR metadata; the bench compares every header, centre
// index and neighbour index with a brute-force neighbour search. Voxels are
// placed across level-one group boundaries (groups of 4x8x4) so that some
// neighbourhoods need more than one lookup cycle, and the bench checks that
// this happens, that voxels inside a group need one cycle, and that the number
// of lookup cycles is at least the number of voxels (one per cycle at best).
// Two runs with different voxel sets also exercise the table clear.
`timescale 1ns/1ps
module tb_admac;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic        start, done, busy, m_valid, m_ready, m_we, m_rsp_valid, overflow;
  logic [31:0] nvox, vox_base, hdr_base, idx_base, m_addr, m_wdata, m_rsp_data;
  logic [31:0] lookup_cycles, multi_cycle_voxels, neighbours_found;

  admac dut (.*);

  int checks = 0, failures = 0;
  int unsigned mem [int];
  assign m_ready = 1'b1;
  always_ff @(posedge clk) begin
    m_rsp_valid <= m_valid && !m_we;
    m_rsp_data  <= mem.exists(m_addr) ? mem[m_addr] : 0;
    if (m_valid && m_we) mem[m_addr] = m_wdata;
  end

  task automatic run(input int g, input int ox, input int oy, input int oz, input int dens);
    int vx[$], vy[$], vz[$];
    int ref_w [int];
    int ip, nf, t0, cyc;
    for (int x = 0; x < g; x++) for (int y = 0; y < g; y++) for (int z = 0; z < g; z++)
      if ($urandom_range(99) < dens) begin vx.push_back(x + ox); vy.push_back(y + oy); vz.push_back(z + oz); end
    mem.delete();
    foreach (vx[i]) mem[32'h1000 + i] = (vz[i] << 20) | (vy[i] << 10) | vx[i];
    nvox = vx.size(); vox_base = 32'h1000; hdr_base = 32'h8000; idx_base = 32'h8000 + 2*vx.size();
    ip = idx_base; nf = 0;
    foreach (vx[e]) begin
      int unsigned mask = 0;
      for (int k = 0; k < 27; k++)
        foreach (vx[j])
          if (vx[j] == vx[e] + (k % 3) - 1 && vy[j] == vy[e] + (k / 3) % 3 - 1 && vz[j] == vz[e] + k / 9 - 1) begin
            mask |= 1 << k; ref_w[ip++] = j; nf++;
          end
      ref_w[hdr_base + 2*e] = mask; ref_w[hdr_base + 2*e + 1] = e;
    end
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    t0 = 0;
    while (!done) begin @(posedge clk); t0++; end
    cyc = t0;
    foreach (ref_w[a]) begin
      checks++;
      if (!mem.exists(a) || mem[a] != ref_w[a]) begin
        failures++;
        if (failures < 10) $display("FAIL word @%h got %h exp %h", a, mem.exists(a) ? mem[a] : 0, ref_w[a]);
      end
    end
    checks++;
    if (neighbours_found != nf) begin failures++; $display("FAIL neighbours %0d exp %0d", neighbours_found, nf); end
    checks++;
    if (lookup_cycles < nvox || overflow) begin failures++; $display("FAIL lookup cycles %0d < voxels %0d", lookup_cycles, nvox); end
    $display("run: %0d voxels, %0d neighbours, %0d lookup cycles, %0d multi-cycle voxels, %0d cycles",
             nvox, nf, lookup_cycles, multi_cycle_voxels, cyc);
  endtask

  initial begin
    start = 0; nvox = 0; vox_base = 0; hdr_base = 0; idx_base = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    // inside one group (x 1..2, y 1..6, z 1..2): every lookup takes one cycle
    run(2, 1, 1, 1, 100);
    checks++;
    if (multi_cycle_voxels != 0 || lookup_cycles != nvox) begin
      failures++; $display("FAIL interior voxels took %0d lookup cycles for %0d voxels", lookup_cycles, nvox);
    end
    // straddling group boundaries: some voxels need several cycles
    run(6, 2, 5, 2, 50);
    checks++;
    if (multi_cycle_voxels == 0) begin failures++; $display("FAIL no multi-cycle lookup"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
