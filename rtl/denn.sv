// denn: one DeNN compute block of the SyMAC back-end (paper Fig. 11(c)).
//
// A DeNN holds the input-channel (IC) feature vector of one input voxel in its
// IC data buffer and multicasts four channels at a time to its four PEs; each
// PE is fed by its own weight block (one output channel), so the buffered
// features are reused for every output channel (paper Sec. IV-D). Weights
// arrive as systolic beats (`sys_in`); the DeNN uses them and passes each beat
// on, registered, to the next DeNN of its systolic group (`sys_out`).
//
// Operation:
//  * `load_start` with `load_active` loads C = 4*c4 words of IFM row `in_idx`
//    from L1 (ifm_base + in_idx*C), four words per cycle through the IFM read
//    port (1-cycle read latency); `load_busy` is high meanwhile.
//  * For every valid beat while active, PE p accumulates
//    ic[cg*4 +: 4] . w[p*4 +: 4]. On a beat marked `last` the four sums of
//    output channels 4*ng..4*ng+3 are pushed into a 4-entry result queue
//    together with the output index.
//  * An inactive DeNN (the group had fewer features than DeNNs) only forwards
//    beats.
// The IC buffer holds 64 channels (256 B). The paper gives 268 B of DeNN
// buffering in total but not its split; the 64-channel limit and the result
// queue depth are this design's. The scheduler guarantees queue space (credit
// check) before it issues a `last` beat, so the queue never overflows.
module denn
  import accss3d_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic [4:0]       c4,
  input  logic [L1_AW-1:0] ifm_base,
  // job load
  input  logic             load_start,
  input  logic             load_active,
  input  logic [IDX_W-1:0] load_in_idx,
  input  logic [IDX_W-1:0] load_out_idx,
  output logic             load_busy,
  // IFM read port into L1
  output logic [L1_AW-1:0] ifm_rd_addr,
  output logic             ifm_rd_en,
  input  fp32_t [3:0]      ifm_rd_data,
  // systolic weight chain
  input  sys_beat_t        sys_in,
  output sys_beat_t        sys_out,
  // results
  output logic             res_valid,
  input  logic             res_ready,
  output denn_res_t        res,
  output logic [2:0]       res_count,
  output logic             is_active
);
  localparam int unsigned RQ_DEPTH = 4;
  fp32_t [MAX_C4-1:0][3:0] icbuf;
  logic             active;
  logic [IDX_W-1:0] out_idx, in_idx;
  logic [4:0]       ld_cnt;
  logic             ld_issue, ld_ret;
  logic [4:0]       ld_ret_idx;

  // ---------------- IFM load
  assign ifm_rd_en   = ld_issue;
  assign ifm_rd_addr = L1_AW'(ifm_base + in_idx * {c4, 2'b00} + {ld_cnt, 2'b00});
  assign load_busy   = ld_issue | ld_ret;
  assign is_active   = active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; out_idx <= '0; in_idx <= '0;
      ld_cnt <= '0; ld_issue <= 1'b0; ld_ret <= 1'b0; ld_ret_idx <= '0;
    end else begin
      ld_ret <= 1'b0;
      if (load_start) begin
        active   <= load_active;
        out_idx  <= load_out_idx;
        in_idx   <= load_in_idx;
        ld_cnt   <= '0;
        ld_issue <= load_active;
      end else if (ld_issue) begin
        ld_ret     <= 1'b1;
        ld_ret_idx <= ld_cnt;
        if (ld_cnt == c4 - 5'd1) ld_issue <= 1'b0;
        ld_cnt <= ld_cnt + 5'd1;
      end
    end
  end

  always_ff @(posedge clk)
    if (ld_ret) icbuf[ld_ret_idx[3:0]] <= ifm_rd_data;

  // ---------------- PEs (IC data multicast to all four)
  fp32_t [3:0] pe_sum;
  logic        pe_en;
  assign pe_en = sys_in.valid & active;

  for (genvar p = 0; p < PES_PER_DENN; p++) begin : g_pe
    pe u_pe (
      .clk, .rst_n,
      .en    (pe_en),
      .first (sys_in.first),
      .x     (icbuf[sys_in.cg[3:0]]),
      .w     (sys_in.w[p*4 +: 4]),
      .sum   (pe_sum[p]),
      .acc   ()
    );
  end

  // ---------------- systolic forwarding
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) sys_out <= '0;
    else        sys_out <= sys_in;

  // ---------------- result queue
  denn_res_t rq [RQ_DEPTH];
  logic [1:0] rq_wp, rq_rp;
  logic [2:0] rq_cnt;
  logic       push, pop;
  assign push      = pe_en & sys_in.last;
  assign pop       = res_valid & res_ready;
  assign res_valid = rq_cnt != 3'd0;
  assign res       = rq[rq_rp];
  assign res_count = rq_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rq_wp <= '0; rq_rp <= '0; rq_cnt <= '0;
    end else begin
      if (push) begin
        rq[rq_wp] <= '{out_idx: out_idx, ng: sys_in.ng, val: pe_sum};
        rq_wp     <= rq_wp + 2'd1;
      end
      if (pop) rq_rp <= rq_rp + 2'd1;
      rq_cnt <= rq_cnt + 3'(push) - 3'(pop);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) push |-> (rq_cnt < 3'(RQ_DEPTH) || pop))
    else $error("denn: result queue overflow");
endmodule
