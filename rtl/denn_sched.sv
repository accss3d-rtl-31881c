// denn_sched: DeNN scheduler of the SyMAC back-end (paper Fig. 11(b), block 1).
//
// The scheduler takes tuples from WAVES (one weight plane, up to four
// input/output index pairs) and turns each into jobs for the systolic groups.
// The DeNNs are arranged in clusters of four; the run-time `mode` selects the
// grouping shown in the paper as options A, B and C:
//   A: two groups of two DeNNs, B: one group of four, C: a group of three and
//   a single DeNN.
// Group slot g (two per cluster) owns a weight read port into L1. A group of
// size S takes up to S pairs of the tuple, one pair per DeNN, so a tuple is
// split into ceil(cnt/S) jobs; one job is handed out per cycle to the first
// idle group.
//
// Per job the group controller
//  1. starts the IFM load of its member DeNNs and waits until all are loaded;
//  2. streams the plane's weights: for every output-channel group ng
//     (0..n4-1) and input-channel group cg (0..c4-1) it reads the 16 weights
//     w[plane][ng][cg] (L1 address wt_base + ((plane*n4+ng)*c4+cg)*16) and
//     sends them, one cycle later, as a systolic beat into the group leader.
//     The beat then travels one DeNN per cycle down the group, so all members
//     share one weight port (paper: "Systolic weight connection").
//  3. waits for the beat to pass the last member and goes idle.
// A beat that closes an output-channel group (`last`) makes every active
// member push a result; it is only issued when every member's result queue
// has room for it and for all `last` beats still in flight (credit check).
// The scheduling policy, the credit check and the weight layout are this
// design's; the paper gives the grouping options and the systolic weight
// sharing.
module denn_sched
  import accss3d_pkg::*;
#(
  parameter int unsigned NUM_DENN = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  tile_cfg_t        cfg,
  // tuples from WAVES
  input  logic             tup_valid,
  output logic             tup_ready,
  input  tuple_t           tup,
  // DeNN job control
  output logic [NUM_DENN-1:0]             load_start,
  output logic [NUM_DENN-1:0]             load_active,
  output logic [NUM_DENN-1:0][IDX_W-1:0]  load_in_idx,
  output logic [NUM_DENN-1:0][IDX_W-1:0]  load_out_idx,
  input  logic [NUM_DENN-1:0]             load_busy,
  input  logic [NUM_DENN-1:0][2:0]        res_count,
  // weight read ports (one per group slot)
  output logic [NUM_DENN/2-1:0]             wt_rd_en,
  output logic [NUM_DENN/2-1:0][L1_AW-1:0]  wt_rd_addr,
  input  fp32_t [NUM_DENN/2-1:0][WT_WORDS-1:0] wt_rd_data,
  // systolic beat into the leader DeNN of each group slot
  output sys_beat_t [NUM_DENN/2-1:0]        grp_beat,
  output logic [NUM_DENN-1:0]               is_leader,
  output logic [NUM_DENN-1:0][$clog2(NUM_DENN/2+1)-1:0] leader_grp,
  output logic             busy,
  output logic [31:0]      jobs_issued
);
  localparam int unsigned NG = NUM_DENN / 2;
  localparam int unsigned RQ_DEPTH = 4;

  typedef enum logic [1:0] {G_IDLE, G_LOAD, G_RUN, G_DRAIN} gstate_e;

  // group geometry for a slot under the current mode
  function automatic logic [2:0] grp_size(input sys_mode_e m, input int unsigned s);
    case (m)
      SYS_A:   return 3'd2;
      SYS_B:   return (s == 0) ? 3'd4 : 3'd0;
      default: return (s == 0) ? 3'd3 : 3'd1;
    endcase
  endfunction
  function automatic int unsigned grp_first(input sys_mode_e m, input int unsigned g);
    int unsigned c, s;
    c = g / 2; s = g % 2;
    case (m)
      SYS_A:   return 4*c + 2*s;
      SYS_B:   return 4*c;
      default: return 4*c + 3*s;
    endcase
  endfunction

  gstate_e [NG-1:0]      gst;
  logic [NG-1:0][2:0]    gsize;
  logic [NG-1:0][2:0]    gcnt;          // active members in current job
  logic [NG-1:0][4:0]    gplane;
  logic [NG-1:0][4:0]    gcg;
  logic [NG-1:0][7:0]    gng;
  logic [NG-1:0]         gload_wait;
  logic [NG-1:0][3:0]    gdrain;
  logic [NG-1:0][5:0]    glast_sr;      // last beats in flight
  logic [NG-1:0]         iss_v, iss_first, iss_last;
  logic [NG-1:0][4:0]    iss_cg;
  logic [NG-1:0][7:0]    iss_ng;

  // tuple being split
  tuple_t     cur;
  logic       cur_v;
  logic [2:0] cur_ptr;

  assign tup_ready = !cur_v;

  always_comb begin
    for (int g = 0; g < NG; g++) gsize[g] = grp_size(cfg.mode, g % 2);
    is_leader  = '0;
    leader_grp = '0;
    for (int g = 0; g < NG; g++)
      if (gsize[g] != 3'd0) begin
        is_leader[grp_first(cfg.mode, g)]  = 1'b1;
        leader_grp[grp_first(cfg.mode, g)] = ($clog2(NG+1))'(g);
      end
  end

  // pick the first idle group for the pending tuple
  logic              pick_v;
  logic [$clog2(NG)-1:0] pick_g;
  always_comb begin
    pick_v = 1'b0; pick_g = '0;
    for (int g = NG-1; g >= 0; g--)
      if (cur_v && gst[g] == G_IDLE && gsize[g] != 3'd0) begin
        pick_v = 1'b1; pick_g = ($clog2(NG))'(g);
      end
  end

  // credit check for `last` beats
  logic [NG-1:0] credit_ok;
  always_comb begin
    for (int g = 0; g < NG; g++) begin
      credit_ok[g] = 1'b1;
      for (int j = 0; j < 4; j++)
        if (j < int'(gsize[g]) &&
            (int'(res_count[grp_first(cfg.mode, g) + j]) + $countones(glast_sr[g]) >= RQ_DEPTH))
          credit_ok[g] = 1'b0;
    end
  end

  // issue of the current beat of each running group
  logic [NG-1:0] do_issue;
  always_comb
    for (int g = 0; g < NG; g++)
      do_issue[g] = (gst[g] == G_RUN) && ((gcg[g] != cfg.c4 - 5'd1) || credit_ok[g]);

  always_comb
    for (int g = 0; g < NG; g++) begin
      wt_rd_en[g]   = do_issue[g];
      wt_rd_addr[g] = L1_AW'(cfg.wt_base +
                      (((gplane[g] * cfg.n4 + gng[g]) * cfg.c4 + gcg[g]) << 4));
      grp_beat[g].valid = iss_v[g];
      grp_beat[g].first = iss_first[g];
      grp_beat[g].last  = iss_last[g];
      grp_beat[g].cg    = iss_cg[g];
      grp_beat[g].ng    = iss_ng[g];
      grp_beat[g].w     = wt_rd_data[g];
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur <= '0; cur_v <= 1'b0; cur_ptr <= '0;
      gst <= '0; gcnt <= '0; gplane <= '0; gcg <= '0; gng <= '0;
      gload_wait <= '0; gdrain <= '0; glast_sr <= '0;
      iss_v <= '0; iss_first <= '0; iss_last <= '0; iss_cg <= '0; iss_ng <= '0;
      load_start <= '0; load_active <= '0; load_in_idx <= '0; load_out_idx <= '0;
      jobs_issued <= '0;
    end else begin
      load_start <= '0;
      if (tup_valid && tup_ready) begin
        cur <= tup; cur_v <= 1'b1; cur_ptr <= '0;
      end
      // hand one job to an idle group
      if (pick_v) begin
        automatic int unsigned f = grp_first(cfg.mode, pick_g);
        automatic logic [2:0]  n = 3'd0;
        for (int j = 0; j < 4; j++)
          if (j < int'(gsize[pick_g])) begin
            automatic int unsigned k = int'(cur_ptr) + j;
            load_start[f+j]   <= 1'b1;
            load_active[f+j]  <= k < int'(cur.cnt);
            load_in_idx[f+j]  <= cur.pairs[k[1:0]].in_idx;
            load_out_idx[f+j] <= cur.pairs[k[1:0]].out_idx;
            if (k < int'(cur.cnt)) n = n + 3'd1;
          end
        gst[pick_g]        <= G_LOAD;
        gcnt[pick_g]       <= n;
        gplane[pick_g]     <= cur.plane;
        gload_wait[pick_g] <= 1'b1;
        jobs_issued        <= jobs_issued + 32'd1;
        if (cur_ptr + gsize[pick_g] >= cur.cnt) cur_v <= 1'b0;
        else cur_ptr <= cur_ptr + gsize[pick_g];
      end
      for (int g = 0; g < NG; g++) begin
        iss_v[g]     <= do_issue[g];
        iss_first[g] <= gcg[g] == 5'd0;
        iss_last[g]  <= gcg[g] == cfg.c4 - 5'd1;
        iss_cg[g]    <= gcg[g];
        iss_ng[g]    <= gng[g];
        glast_sr[g]  <= {glast_sr[g][4:0], do_issue[g] && (gcg[g] == cfg.c4 - 5'd1)};
        case (gst[g])
          G_LOAD: begin
            // load_busy rises the cycle after load_start; skip that cycle
            gload_wait[g] <= 1'b0;
            if (!gload_wait[g]) begin
              automatic logic any = 1'b0;
              for (int j = 0; j < 4; j++)
                if (j < int'(gsize[g]) && load_busy[grp_first(cfg.mode, g) + j]) any = 1'b1;
              if (!any) begin gst[g] <= G_RUN; gcg[g] <= '0; gng[g] <= '0; end
            end
          end
          G_RUN: if (do_issue[g]) begin
            if (gcg[g] == cfg.c4 - 5'd1) begin
              gcg[g] <= '0;
              if (gng[g] == cfg.n4 - 8'd1) begin
                gst[g]    <= G_DRAIN;
                gdrain[g] <= 4'(gsize[g]) + 4'd2;
              end else gng[g] <= gng[g] + 8'd1;
            end else gcg[g] <= gcg[g] + 5'd1;
          end
          G_DRAIN: begin
            gdrain[g] <= gdrain[g] - 4'd1;
            if (gdrain[g] == 4'd1) gst[g] <= G_IDLE;
          end
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    busy = cur_v;
    for (int g = 0; g < NG; g++) if (gst[g] != G_IDLE) busy = 1'b1;
  end
endmodule
