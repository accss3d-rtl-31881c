// symac: SyMAC back-end (Systolic and Multicast based MAC computation, paper
// Sec. IV-D and Fig. 11(b)).
//
// NUM_DENN DeNNs (8 in the paper's main configuration, Fig. 20) are chained
// for systolic weight passing: DeNN d takes its weight beat either from the
// weight port of its group (when it leads a group, see denn_sched for the A/B/C
// groupings) or from DeNN d-1. With 8 DeNNs in mode B there are two systolic
// groups of four, i.e. 8 x 4 PEs x 4 multipliers = 128 FP32 multiplies per
// cycle at full occupancy, as the paper states.
// Results leave the DeNN queues through a round-robin collector (one per
// cycle, this design's choice) into acc_ofm, whose evictions go through
// mem_ctrl into L1.
//
// L1 access is through dedicated read ports: one 16-word weight port per
// group slot, one 4-word IFM port per DeNN, and one 4-word read plus one 4-word
// write port for mem_ctrl. All reads return data one cycle after the address.
// `idle` is high when no tuple is pending and no DeNN holds work or results;
// `flush` (from the core controller) then drains the ACC OFM buffer.
//
// Lint note: the round-robin result selector, the ACC OFMs hit check and its
// ready form a combinational path that a tool can report as a loop (the
// selected result's address feeds the hit check, whose ready feeds back into
// the selection). It is not a real loop: the selection depends only on the
// DeNN result valids and the round-robin pointer, never on the ready.
module symac
  import accss3d_pkg::*;
#(
  parameter int unsigned NUM_DENN = 8,
  parameter int unsigned ACC_LINES = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  tile_cfg_t        cfg,
  input  logic             tup_valid,
  output logic             tup_ready,
  input  tuple_t           tup,
  input  logic             flush,
  output logic             flush_done,
  output logic             idle,
  // L1 ports
  output logic [NUM_DENN/2-1:0]              wt_rd_en,
  output logic [NUM_DENN/2-1:0][L1_AW-1:0]   wt_rd_addr,
  input  fp32_t [NUM_DENN/2-1:0][WT_WORDS-1:0] wt_rd_data,
  output logic [NUM_DENN-1:0]                ifm_rd_en,
  output logic [NUM_DENN-1:0][L1_AW-1:0]     ifm_rd_addr,
  input  fp32_t [NUM_DENN-1:0][3:0]          ifm_rd_data,
  output logic             mc_rd_en,
  output logic [L1_AW-1:0] mc_rd_addr,
  input  fp32_t [3:0]      mc_rd_data,
  output logic             mc_wr_en,
  output logic [L1_AW-1:0] mc_wr_addr,
  output fp32_t [3:0]      mc_wr_data,
  // statistics
  output logic [31:0]      mac_beats,     // DeNN-cycles doing 16 multiplies
  output logic [31:0]      jobs_issued,
  output logic [31:0]      acc_hits,
  output logic [31:0]      acc_misses,
  output logic [31:0]      acc_evictions
);
  localparam int unsigned NG = NUM_DENN / 2;

  logic [NUM_DENN-1:0]             load_start, load_active, load_busy;
  logic [NUM_DENN-1:0][IDX_W-1:0]  load_in_idx, load_out_idx;
  logic [NUM_DENN-1:0][2:0]        res_count;
  logic [NUM_DENN-1:0]             res_valid, res_ready;
  denn_res_t [NUM_DENN-1:0]        res;
  sys_beat_t [NG-1:0]              grp_beat;
  sys_beat_t [NUM_DENN-1:0]        sys_in, sys_out;
  logic [NUM_DENN-1:0]             is_leader;
  logic [NUM_DENN-1:0][$clog2(NG+1)-1:0] leader_grp;
  logic                            sched_busy;
  logic [NUM_DENN-1:0]             denn_active;

  denn_sched #(.NUM_DENN(NUM_DENN)) u_sched (
    .clk, .rst_n, .cfg,
    .tup_valid, .tup_ready, .tup,
    .load_start, .load_active, .load_in_idx, .load_out_idx, .load_busy, .res_count,
    .wt_rd_en, .wt_rd_addr, .wt_rd_data,
    .grp_beat, .is_leader, .leader_grp,
    .busy (sched_busy), .jobs_issued
  );

  for (genvar d = 0; d < NUM_DENN; d++) begin : g_denn
    if (d == 0) begin : g_head
      assign sys_in[d] = grp_beat[leader_grp[d]];
    end else begin : g_chain
      assign sys_in[d] = is_leader[d] ? grp_beat[leader_grp[d]] : sys_out[d-1];
    end
    denn u_denn (
      .clk, .rst_n,
      .c4          (cfg.c4),
      .ifm_base    (cfg.ifm_base),
      .load_start  (load_start[d]),
      .load_active (load_active[d]),
      .load_in_idx (load_in_idx[d]),
      .load_out_idx(load_out_idx[d]),
      .load_busy   (load_busy[d]),
      .ifm_rd_addr (ifm_rd_addr[d]),
      .ifm_rd_en   (ifm_rd_en[d]),
      .ifm_rd_data (ifm_rd_data[d]),
      .sys_in      (sys_in[d]),
      .sys_out     (sys_out[d]),
      .res_valid   (res_valid[d]),
      .res_ready   (res_ready[d]),
      .res         (res[d]),
      .res_count   (res_count[d]),
      .is_active   (denn_active[d])
    );
  end

  // ---------------- round-robin result collector
  logic [$clog2(NUM_DENN)-1:0] rr, sel;
  logic                        sel_v;
  logic                        acc_ready;
  always_comb begin
    sel_v = 1'b0; sel = '0;
    for (int k = NUM_DENN-1; k >= 0; k--) begin
      automatic int unsigned d = (int'(rr) + k) % NUM_DENN;
      if (res_valid[d]) begin sel_v = 1'b1; sel = ($clog2(NUM_DENN))'(d); end
    end
    res_ready = '0;
    res_ready[sel] = sel_v & acc_ready;
  end
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) rr <= '0;
    else if (sel_v && acc_ready) rr <= sel + 1'b1;

  // ---------------- ACC OFMs and Mem Ctrl
  logic             ev_valid, ev_ready, mc_busy;
  logic [L1_AW-1:0] ev_addr;
  fp32_t [3:0]      ev_val;

  acc_ofm #(.NLINES(ACC_LINES)) u_acc (
    .clk, .rst_n, .cfg,
    .in_valid (sel_v), .in_ready (acc_ready), .in_res (res[sel]),
    .flush, .flush_done,
    .ev_valid, .ev_ready, .ev_addr, .ev_val, .mc_busy,
    .hits (acc_hits), .misses (acc_misses), .evictions (acc_evictions)
  );

  mem_ctrl u_mc (
    .clk, .rst_n,
    .req_valid (ev_valid), .req_ready (ev_ready), .req_addr (ev_addr), .req_val (ev_val),
    .rd_en (mc_rd_en), .rd_addr (mc_rd_addr), .rd_data (mc_rd_data),
    .wr_en (mc_wr_en), .wr_addr (mc_wr_addr), .wr_data (mc_wr_data),
    .busy (mc_busy)
  );

  assign idle = !sched_busy && (res_valid == '0) && !tup_valid;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) mac_beats <= '0;
    else begin
      automatic logic [31:0] n = '0;
      for (int d = 0; d < NUM_DENN; d++)
        if (sys_in[d].valid && denn_active[d]) n = n + 32'd1;
      mac_beats <= mac_beats + n;
    end
endmodule
