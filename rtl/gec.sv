// gec: Global Event Controller of AccSS3D (paper Sec. V-A-3, Fig. 13,
// Fig. 14(a)).
//
// The host issues one command per layer ("limiting CPU/software intervention
// to only once per layer") or one AdMAC run; the controller then signals all
// start/end events at L2-tile and L1-tile level by itself:
//  * L2 level: the L2-DMA executes one table segment per L2 tile load and one
//    per L2 tile store. Because the L2 is dual buffered, the load of tile t+1
//    runs while the cores work on tile t; a load is issued only while fewer
//    than two loaded tiles are waiting to be stored. The resulting segment
//    order is L0, L1, S0, L2, S1, L3, ... , S(n-1), which the L2-DMA table must
//    follow.
//  * L1 level: once L2 tile t is loaded, the L1-DMA executes its segments for
//    that tile over the shared bus, one at a time (serialized transfers).
//    Each entry names its target core; the controller holds the entry
//    (xfer_ok low) while that core is computing, so data exchange and compute
//    of one core never overlap while other cores keep computing (Fig. 14(a)).
//    A segment whose last entry has the start flag starts its core; a segment
//    with the L2-tile-end flag closes tile t.
//  * The layer ends, with a `evt_done` pulse, after the last store.
// The AdMAC command starts the adjacency map accelerator and ends when it is
// done. Sorting tiles by work and assigning them to cores round robin (the
// paper's load balancing) is done by the software that writes the tables.
module gec #(
  parameter int unsigned NUM_CORES = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  // host command
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  logic        cmd_admac,         // 1: AdMAC run, 0: layer
  input  logic [31:0] cmd_l2_tbl,
  input  logic [31:0] cmd_l1_tbl,
  input  logic [15:0] cmd_n_l2_tiles,
  output logic        evt_done,
  // L2-DMA
  output logic        l2d_init,
  output logic [31:0] l2d_base,
  output logic        l2d_run,
  input  logic        l2d_busy,
  input  logic        l2d_seg_done,
  // L1-DMA
  output logic        l1d_init,
  output logic [31:0] l1d_base,
  output logic        l1d_run,
  input  logic        l1d_busy,
  input  logic        l1d_seg_done,
  input  logic [31:0] l1d_seg_flags,
  input  logic [31:0] l1d_cur_flags,
  output logic        l1d_xfer_ok,
  // cores
  input  logic [NUM_CORES-1:0] core_active,
  output logic [NUM_CORES-1:0] core_start,
  // AdMAC
  output logic        admac_start,
  input  logic        admac_done,
  output logic [31:0] tiles_overlapped   // L2 loads issued while a tile computes
);
  typedef enum logic [1:0] {G_IDLE, G_LAYER, G_ADMAC} gst_e;
  gst_e st;
  logic [15:0] n_tiles, li, si, ld, td;   // loads issued, stores issued, loads done, tiles done
  logic        l2_is_load, l2_wait, l1_run_pend, l1_seg_pend;
  logic [15:0] l1_tile;

  assign cmd_ready = (st == G_IDLE);
  assign l2d_base  = cmd_l2_tbl;
  assign l1d_base  = cmd_l1_tbl;
  assign l1d_xfer_ok = !core_active[l1d_cur_flags[8 +: $clog2(NUM_CORES)]] &&
                       !core_start[l1d_cur_flags[8 +: $clog2(NUM_CORES)]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= G_IDLE; n_tiles <= '0; li <= '0; si <= '0; ld <= '0; td <= '0;
      l2_is_load <= 1'b0; l2_wait <= 1'b0; l1_seg_pend <= 1'b0; l1_run_pend <= 1'b0; l1_tile <= '0;
      l2d_init <= 1'b0; l2d_run <= 1'b0; l1d_init <= 1'b0; l1d_run <= 1'b0;
      core_start <= '0; admac_start <= 1'b0; evt_done <= 1'b0; tiles_overlapped <= '0;
    end else begin
      l2d_init <= 1'b0; l2d_run <= 1'b0; l1d_init <= 1'b0; l1d_run <= 1'b0;
      core_start <= '0; admac_start <= 1'b0; evt_done <= 1'b0;
      l1_run_pend <= 1'b0;
      case (st)
        G_IDLE: if (cmd_valid) begin
          if (cmd_admac) begin st <= G_ADMAC; admac_start <= 1'b1; end
          else begin
            st <= G_LAYER; n_tiles <= cmd_n_l2_tiles;
            li <= '0; si <= '0; ld <= '0; td <= '0; l1_tile <= '0;
            l2d_init <= 1'b1; l1d_init <= 1'b1; l2_wait <= 1'b0; l1_seg_pend <= 1'b0;
          end
        end
        G_ADMAC: if (admac_done && !admac_start) begin st <= G_IDLE; evt_done <= 1'b1; end
        G_LAYER: begin
          // ---- L2 sequencer
          if (!l2_wait && !l2d_init) begin
            if (li < n_tiles && li < si + 16'd2) begin
              l2d_run <= 1'b1; l2_wait <= 1'b1; l2_is_load <= 1'b1; li <= li + 16'd1;
              if (li > ld || (l1_seg_pend && li != 16'd0)) tiles_overlapped <= tiles_overlapped + 32'd1;
            end else if (si < li && td > si) begin
              l2d_run <= 1'b1; l2_wait <= 1'b1; l2_is_load <= 1'b0; si <= si + 16'd1;
            end else if (si == n_tiles && !l2d_busy) begin
              st <= G_IDLE; evt_done <= 1'b1;
            end
          end
          if (l2_wait && l2d_seg_done) begin
            l2_wait <= 1'b0;
            if (l2_is_load) ld <= ld + 16'd1;
          end
          // ---- L1 sequencer
          if (!l1_seg_pend && !l1d_init && l1_tile < n_tiles && ld > l1_tile) begin
            l1d_run <= 1'b1; l1_seg_pend <= 1'b1; l1_run_pend <= 1'b1;
          end
          if (l1_seg_pend && !l1_run_pend && l1d_seg_done) begin
            l1_seg_pend <= 1'b0;
            if (l1d_seg_flags[1]) core_start[l1d_seg_flags[8 +: $clog2(NUM_CORES)]] <= 1'b1;
            if (l1d_seg_flags[2]) begin l1_tile <= l1_tile + 16'd1; td <= td + 16'd1; end
          end
        end
        default: st <= G_IDLE;
      endcase
    end
  end

  logic unused;
  assign unused = l1d_busy;
endmodule
