// mt_hdr_proc: MT HDR Processor of the WAVES front-end (paper Fig. 11(a),
// blocks 1-3).
//
// For every COIR metadata entry e (0..md_count-1) it
//  (1) fetches the header: weight mask at L1 hdr_base+2e, bits [26:0], and the
//      centre voxel index at hdr_base+2e+1 ("mask and O-Idx fetch");
//  (2) finds the active weight indices, i.e. the set bits of the mask, up to
//      four per cycle, lowest bit first ("smart-lookup ... finds weight index
//      for 4 active neighbor voxels per cycle");
//  (3) fetches the matching neighbour indices, four per cycle, from the packed
//      index region starting at idx_base ("OFM Index Fetch").
// Each found neighbour becomes a pair for weight plane k = bit position:
// with CIRF metadata the centre is the output and the neighbour the input,
// with CORF the other way round (paper Sec. IV-A). Up to four pairs leave per
// cycle, one cycle after their index read; the four planes of one cycle are
// always distinct because they come from the same mask.
// An entry is only started when `room` is high (the link-list buffer can take
// a whole entry plus a flush); otherwise the processor waits in `need_room`.
// Two cycles per entry are spent on the header read; header prefetching is not
// modelled. `done` is high after the last entry.
module mt_hdr_proc
  import accss3d_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  tile_cfg_t        cfg,
  input  logic             start,
  input  logic             room,
  output logic             need_room,
  output logic             done,
  // header read port (uses words 0 and 1)
  output logic             hdr_rd_en,
  output logic [L1_AW-1:0] hdr_rd_addr,
  input  logic [3:0][31:0] hdr_rd_data,
  // neighbour index read port
  output logic             idx_rd_en,
  output logic [L1_AW-1:0] idx_rd_addr,
  input  logic [3:0][31:0] idx_rd_data,
  // pairs to HDR Format
  output logic [3:0]       pv,
  output logic [3:0][4:0]  pplane,
  output pair_t [3:0]      ppair,
  output logic [31:0]      entries_done
);
  typedef enum logic [2:0] {S_IDLE, S_HDR, S_HWAIT, S_NB, S_DONE} st_e;
  st_e              st;
  logic [IDX_W-1:0] e;
  logic [L1_AW-1:0] iptr;
  logic [26:0]      rem;
  logic [IDX_W-1:0] centre;

  // lowest four set bits of the remaining mask
  logic [3:0]       sv;
  logic [3:0][4:0]  sk;
  logic [26:0]      rem_next;
  logic [2:0]       nsel;
  always_comb begin
    automatic logic [26:0] m = rem;
    sv = '0; sk = '0; nsel = '0;
    for (int j = 0; j < 4; j++) begin
      for (int b = 26; b >= 0; b--)
        if (m[b]) sk[j] = 5'(b);
      if (m != 27'd0) begin
        sv[j] = 1'b1;
        m[sk[j]] = 1'b0;
        nsel = nsel + 3'd1;
      end
    end
    rem_next = m;
  end

  assign need_room   = (st == S_HDR) && (e != cfg.md_count) && !room;
  assign done        = (st == S_DONE);
  assign hdr_rd_en   = (st == S_HDR) && (e != cfg.md_count) && room;
  assign hdr_rd_addr = L1_AW'(cfg.hdr_base + {e, 1'b0});
  assign idx_rd_en   = (st == S_NB);
  assign idx_rd_addr = iptr;

  // second stage: pairs leave with the index data
  logic [3:0]      q_v;
  logic [3:0][4:0] q_k;
  always_comb
    for (int j = 0; j < 4; j++) begin
      pv[j]     = q_v[j];
      pplane[j] = q_k[j];
      if (cfg.corf) ppair[j] = '{in_idx: centre, out_idx: idx_rd_data[j][IDX_W-1:0]};
      else          ppair[j] = '{in_idx: idx_rd_data[j][IDX_W-1:0], out_idx: centre};
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; e <= '0; iptr <= '0; rem <= '0; centre <= '0;
      q_v <= '0; q_k <= '0; entries_done <= '0;
    end else begin
      q_v <= '0;
      case (st)
        S_IDLE: if (start) begin
          st <= S_HDR; e <= '0; iptr <= cfg.idx_base; entries_done <= '0;
        end
        S_HDR: if (e == cfg.md_count) st <= S_DONE;
               else if (room) st <= S_HWAIT;
        S_HWAIT: begin
          rem    <= hdr_rd_data[0][26:0];
          centre <= hdr_rd_data[1][IDX_W-1:0];
          e      <= e + 1'b1;
          entries_done <= entries_done + 32'd1;
          st     <= (hdr_rd_data[0][26:0] == 27'd0) ? S_HDR : S_NB;
        end
        S_NB: begin
          q_v  <= sv;
          q_k  <= sk;
          iptr <= iptr + L1_AW'(nsel);
          rem  <= rem_next;
          if (rem_next == 27'd0) st <= S_HDR;
        end
        S_DONE: if (start) begin
          st <= S_HDR; e <= '0; iptr <= cfg.idx_base; entries_done <= '0;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
