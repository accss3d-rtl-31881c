// acc_ofm: ACC OFMs block of the SyMAC back-end (paper Fig. 11(b), block 6):
// a small local accumulation buffer with cache lookup.
//
// Each DeNN result carries four partial sums for output voxel `out_idx`,
// channels 4*ng..4*ng+3; its OFM word address in L1 is
// ofm_base + out_idx*N + 4*ng (N = 4*n4). The buffer is a fully associative
// cache of NLINES lines of four FP32 words tagged by that address:
//  * hit:  the sums are added into the line (four FP32 adders), no L1 access;
//  * miss: a free line is allocated with the sums; if none is free, the line
//    at the round-robin victim pointer is evicted to mem_ctrl, which adds it
//    into L1, and the new sums take its place.
// `flush` evicts every valid line (one per accepted mem_ctrl request) and
// raises `flush_done` once the buffer is empty and mem_ctrl idle.
// The paper says only that the block "has local buffering with cache lookup
// capability"; size (16 lines), associativity and replacement are this
// design's choices.
module acc_ofm
  import accss3d_pkg::*;
#(
  parameter int unsigned NLINES = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  tile_cfg_t        cfg,
  input  logic             in_valid,
  output logic             in_ready,
  input  denn_res_t        in_res,
  input  logic             flush,
  output logic             flush_done,
  // eviction requests to mem_ctrl
  output logic             ev_valid,
  input  logic             ev_ready,
  output logic [L1_AW-1:0] ev_addr,
  output fp32_t [3:0]      ev_val,
  input  logic             mc_busy,
  output logic [31:0]      hits,
  output logic [31:0]      misses,
  output logic [31:0]      evictions
);
  localparam int unsigned LW = $clog2(NLINES);
  logic [NLINES-1:0]             lv;
  logic [NLINES-1:0][L1_AW-1:0]  ltag;
  fp32_t [NLINES-1:0][3:0]       ldat;
  logic [LW-1:0]                 victim;

  logic [L1_AW-1:0] a;
  assign a = L1_AW'(cfg.ofm_base + in_res.out_idx * {cfg.n4, 2'b00} + {in_res.ng, 2'b00});

  logic          hit, freev;
  logic [LW-1:0] hit_i, free_i, fl_i;
  logic          fl_v;
  always_comb begin
    hit = 1'b0; hit_i = '0; freev = 1'b0; free_i = '0; fl_v = 1'b0; fl_i = '0;
    for (int i = NLINES-1; i >= 0; i--) begin
      if (lv[i] && ltag[i] == a) begin hit = 1'b1; hit_i = LW'(i); end
      if (!lv[i]) begin freev = 1'b1; free_i = LW'(i); end
      else begin fl_v = 1'b1; fl_i = LW'(i); end
    end
  end

  logic need_ev;
  assign need_ev   = in_valid && !flush && !hit && !freev;
  assign in_ready  = !flush && (hit || freev || ev_ready);
  assign ev_valid  = flush ? fl_v : need_ev;
  assign ev_addr   = flush ? ltag[fl_i] : ltag[victim];
  assign ev_val    = flush ? ldat[fl_i] : ldat[victim];
  assign flush_done = flush && !fl_v && !mc_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lv <= '0; ltag <= '0; ldat <= '0; victim <= '0;
      hits <= '0; misses <= '0; evictions <= '0;
    end else begin
      if (flush) begin
        if (fl_v && ev_ready) begin lv[fl_i] <= 1'b0; evictions <= evictions + 32'd1; end
      end else if (in_valid && in_ready) begin
        if (hit) begin
          for (int j = 0; j < 4; j++) ldat[hit_i][j] <= fp_add(ldat[hit_i][j], in_res.val[j]);
          hits <= hits + 32'd1;
        end else if (freev) begin
          lv[free_i] <= 1'b1; ltag[free_i] <= a; ldat[free_i] <= in_res.val;
          misses <= misses + 32'd1;
        end else begin
          ltag[victim] <= a; ldat[victim] <= in_res.val;
          victim <= victim + LW'(1);
          misses <= misses + 32'd1; evictions <= evictions + 32'd1;
        end
      end
    end
  end
endmodule
