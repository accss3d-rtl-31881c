// waves: WAVES front-end (Weight plane based Active Voxel Execution
// Scheduler, paper Sec. IV-D and Fig. 11(a)).
//
// WAVES rearranges the spatially scattered work of a tile along weight planes:
// mt_hdr_proc walks the COIR metadata and produces (plane, input, output)
// pairs, hdr_format groups them into tuples of four per plane, and ll_buf
// stores the tuples in per-plane linked lists in one of its two halves
// (Index Q-A / Index Q-B). The tuples of a half are then streamed to SyMAC
// plane by plane, so consecutive SyMAC jobs share a weight plane, while WAVES
// already formats the next batch into the other half (paper: "during which,
// WAVES starts working on formatting the next set of data").
//
// Batch control (this design's): a new metadata entry is only started when the
// half being filled has at least 2*27 free slots (an entry can complete at most
// one tuple per plane, and a flush adds at most one per plane). When it has
// fewer, or when the metadata is exhausted, the builders are flushed into the
// half, the half is sealed, and filling moves to the other half as soon as
// that one has been drained. `done` rises after the last half is sealed and
// fully drained.
module waves
  import accss3d_pkg::*;
#(
  parameter int unsigned SLOTS = 512
) (
  input  logic             clk,
  input  logic             rst_n,
  input  tile_cfg_t        cfg,
  input  logic             start,
  output logic             done,
  output logic             hdr_rd_en,
  output logic [L1_AW-1:0] hdr_rd_addr,
  input  logic [3:0][31:0] hdr_rd_data,
  output logic             idx_rd_en,
  output logic [L1_AW-1:0] idx_rd_addr,
  input  logic [3:0][31:0] idx_rd_data,
  output logic             tup_valid,
  input  logic             tup_ready,
  output tuple_t           tup,
  output logic [31:0]      batches,
  output logic [31:0]      pairs_formed,
  output logic [$clog2(SLOTS):0] max_used
);
  typedef enum logic [2:0] {W_IDLE, W_RUN, W_FLUSH, W_SWITCH, W_WAIT_DRAIN, W_DONE} wst_e;
  wst_e st;

  logic            wr_half, seal, room, need_room, hp_done, flush, flush_done;
  logic [3:0]      pv, tv;
  logic [3:0][4:0] pplane;
  pair_t [3:0]     ppair;
  tuple_t [3:0]    tin;
  logic [$clog2(SLOTS):0] free_slots;
  logic [1:0]      half_busy;
  logic [31:0]     entries_done;

  assign room  = (st == W_RUN) && (free_slots >= ($clog2(SLOTS)+1)'(2*NPLANES));
  assign flush = (st == W_FLUSH);
  assign seal  = (st == W_FLUSH) && flush_done;

  mt_hdr_proc u_hp (
    .clk, .rst_n, .cfg, .start, .room, .need_room, .done (hp_done),
    .hdr_rd_en, .hdr_rd_addr, .hdr_rd_data,
    .idx_rd_en, .idx_rd_addr, .idx_rd_data,
    .pv, .pplane, .ppair, .entries_done
  );

  hdr_format u_fmt (
    .clk, .rst_n, .pv, .pplane, .ppair, .flush, .flush_done,
    .tv, .tout (tin), .pairs_in (pairs_formed)
  );

  ll_buf #(.SLOTS(SLOTS)) u_ll (
    .clk, .rst_n, .wr_half, .tv, .tin, .seal, .free_slots, .half_busy,
    .out_valid (tup_valid), .out_ready (tup_ready), .out_tuple (tup), .max_used
  );

  // the last pair of an entry leaves mt_hdr_proc one cycle after it is found,
  // so wait a cycle in W_RUN before flushing
  logic settle;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= W_IDLE; wr_half <= 1'b0; batches <= '0; settle <= 1'b0;
    end else begin
      case (st)
        W_IDLE, W_DONE: if (start) begin st <= W_RUN; batches <= '0; settle <= 1'b0; end
        W_RUN: begin
          settle <= need_room | hp_done;
          if ((need_room || hp_done) && settle && pv == '0) st <= W_FLUSH;
        end
        W_FLUSH: if (flush_done) begin
          batches <= batches + 32'd1;
          st <= hp_done ? W_WAIT_DRAIN : W_SWITCH;
        end
        W_SWITCH: if (!half_busy[!wr_half]) begin
          wr_half <= !wr_half; st <= W_RUN; settle <= 1'b0;
        end
        W_WAIT_DRAIN: if (half_busy == 2'b00) begin
          wr_half <= !wr_half; st <= W_DONE;
        end
        default: st <= W_IDLE;
      endcase
    end
  end
  assign done = (st == W_DONE);
endmodule
