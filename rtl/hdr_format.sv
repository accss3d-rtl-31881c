// hdr_format: HDR Format block of the WAVES front-end (paper Fig. 11(a),
// blocks 4-6): tuple formation per weight plane.
//
// There is one tuple builder for each of the 27 weight planes ("using 27
// blocks to manage all weight planes together"). A builder collects the
// (input, output) index pairs of its plane; when it holds four ("grouping 4
// features per weight plane") it emits a full tuple. Up to four pairs arrive
// per cycle, always for distinct planes, so up to four tuples can complete in
// one cycle; they leave on four tuple write ports towards the link-list buffer,
// in the order of the input lanes.
// `flush` empties the builders: partial tuples (1-3 pairs) are emitted, up to
// four per cycle in plane order, and `flush_done` is high once all builders
// are empty. Pairs must not arrive while flushing.
// In the paper the O-Idx pipeline FIFO and OFM index FIFO (blocks 4, 5) align
// the centre and neighbour indices; here that alignment is done inside
// mt_hdr_proc, which presents complete pairs.
module hdr_format
  import accss3d_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic [3:0]      pv,
  input  logic [3:0][4:0] pplane,
  input  pair_t [3:0]     ppair,
  input  logic            flush,
  output logic            flush_done,
  output logic [3:0]      tv,
  output tuple_t [3:0]    tout,
  output logic [31:0]     pairs_in
);
  logic  [NPLANES-1:0][2:0]             cnt;
  pair_t [NPLANES-1:0][TUPLE_PAIRS-1:0] buf_q;

  // flush selection: the four lowest non-empty planes
  logic [3:0]      fv;
  logic [3:0][4:0] fk;
  always_comb begin
    automatic logic [NPLANES-1:0] ne;
    for (int k = 0; k < NPLANES; k++) ne[k] = cnt[k] != 3'd0;
    fv = '0; fk = '0;
    for (int j = 0; j < 4; j++) begin
      for (int k = NPLANES-1; k >= 0; k--) if (ne[k]) fk[j] = 5'(k);
      if (ne != '0) begin fv[j] = 1'b1; ne[fk[j]] = 1'b0; end
    end
  end

  always_comb begin
    tv = '0; tout = '0;
    if (flush) begin
      for (int j = 0; j < 4; j++) begin
        tv[j]         = fv[j];
        tout[j].plane = fk[j];
        tout[j].cnt   = cnt[fk[j]];
        tout[j].pairs = buf_q[fk[j]];
      end
    end else begin
      for (int j = 0; j < 4; j++)
        if (pv[j] && cnt[pplane[j]] == 3'd3) begin
          tv[j]         = 1'b1;
          tout[j].plane = pplane[j];
          tout[j].cnt   = 3'd4;
          tout[j].pairs = buf_q[pplane[j]];
          tout[j].pairs[3] = ppair[j];
        end
    end
  end
  assign flush_done = flush && (fv == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; buf_q <= '0; pairs_in <= '0;
    end else if (flush) begin
      for (int j = 0; j < 4; j++) if (fv[j]) cnt[fk[j]] <= 3'd0;
    end else begin
      for (int j = 0; j < 4; j++)
        if (pv[j]) begin
          buf_q[pplane[j]][cnt[pplane[j]][1:0]] <= ppair[j];
          cnt[pplane[j]] <= (cnt[pplane[j]] == 3'd3) ? 3'd0 : cnt[pplane[j]] + 3'd1;
        end
      pairs_in <= pairs_in + 32'($countones(pv));
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(flush && (pv != '0)))
    else $error("hdr_format: pairs during flush");
endmodule
