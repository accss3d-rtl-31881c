// dma_engine: table-driven DMA engine, used twice in AccSS3D: as the L2-DMA
// between DRAM and the L2 (48 B = 12 words per clock) and as the L1-DMA between
// the L2 and the cores' L1s over the shared bus (128 B = 32 words per clock)
// (paper Sec. V-A-3, Fig. 13, Fig. 20).
//
// Software writes DMA tables to DRAM; the engine fetches them itself through a
// one-word table port. An entry is four words:
//   w0 source word address, w1 destination word address, w2 length in words,
//   w3 flags: [0] segment end, [1] start the target core after this segment,
//             [2] L2-tile end, [3] direction (0: port 0 -> port 1,
//             1: port 1 -> port 0), [11:8] target core (L1-DMA only).
// `init` loads the table base; each `run` executes entries in order up to and
// including one with the segment-end flag ("DMA transfers for all tiles of a
// layer are chained"), then pulses `seg_done` with that entry's flags in
// `seg_flags`. Before it moves the data of an entry it waits for `xfer_ok`
// (the event controller uses this to hold a transfer until its core is idle).
//
// Data moves in beats of BEAT words: reads are issued to the source port while
// the 4-beat buffer has room for their responses, responses are buffered, and
// buffered beats are written to the destination port when it is ready. The last
// beat of an entry carries a partial word mask. Both ports are request/ready
// with read data returned later on rsp_valid, in order. The entry format and
// the fetch-from-DRAM scheme are this design's; the paper gives the two-engine
// structure, table-driven chaining and per-layer software intervention.
module dma_engine #(
  parameter int unsigned BEAT  = 32,
  parameter int unsigned DEPTH = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  init,
  input  logic [31:0]           tbl_base,
  input  logic                  run,
  output logic                  busy,
  output logic                  seg_done,
  output logic [31:0]           seg_flags,
  output logic [31:0]           cur_flags,     // flags of the entry being moved
  output logic                  cur_valid,     // an entry is fetched and waiting or moving
  input  logic                  xfer_ok,
  // table fetch port (one word)
  output logic                  t_req_valid,
  input  logic                  t_req_ready,
  output logic [31:0]           t_req_addr,
  input  logic                  t_rsp_valid,
  input  logic [31:0]           t_rsp_data,
  // data ports 0 and 1
  output logic [1:0]            p_req_valid,
  input  logic [1:0]            p_req_ready,
  output logic [1:0]            p_req_we,
  output logic [1:0][31:0]      p_req_addr,
  output logic [1:0][BEAT-1:0][31:0] p_req_wdata,
  output logic [1:0][BEAT-1:0]  p_req_mask,
  input  logic [1:0]            p_rsp_valid,
  input  logic [1:0][BEAT-1:0][31:0] p_rsp_data,
  output logic [31:0]           words_moved
);
  typedef enum logic [2:0] {D_IDLE, D_FETCH, D_FWAIT, D_GATE, D_XFER} dst_e;
  dst_e st;

  logic [31:0] tptr;
  logic [1:0]  fidx;
  logic [3:0][31:0] ent;
  logic [31:0] rd_cnt, wr_cnt;     // words requested / written of this entry
  logic [2:0]  outst, fcnt;
  logic [BEAT-1:0][31:0] fifo [DEPTH];
  logic [1:0]  fwp, frp;

  logic        dir, s, d;
  logic [31:0] len;
  assign dir = ent[3][3];
  assign s   = dir;          // source port
  assign d   = !dir;         // destination port
  assign len = ent[2];

  assign busy      = (st != D_IDLE);
  assign cur_flags = ent[3];
  assign cur_valid = (st == D_GATE) || (st == D_XFER);

  assign t_req_valid = (st == D_FETCH);
  assign t_req_addr  = tptr;

  logic rd_go, wr_go;
  logic [31:0] rd_left, wr_left;
  assign rd_left = len - rd_cnt;
  assign wr_left = len - wr_cnt;
  assign rd_go = (st == D_XFER) && (rd_cnt < len) && (32'(outst) + 32'(fcnt) < DEPTH) && p_req_ready[s];
  assign wr_go = (st == D_XFER) && (fcnt != 3'd0) && p_req_ready[d];

  function automatic logic [BEAT-1:0] mask_of(input logic [31:0] left);
    logic [BEAT-1:0] m;
    for (int i = 0; i < BEAT; i++) m[i] = 32'(i) < left;
    return m;
  endfunction

  always_comb begin
    p_req_valid = '0; p_req_we = '0; p_req_addr = '0; p_req_wdata = '0; p_req_mask = '0;
    if (rd_go) begin
      p_req_valid[s] = 1'b1;
      p_req_addr[s]  = ent[0] + rd_cnt;
      p_req_mask[s]  = mask_of(rd_left);
    end
    if (wr_go) begin
      p_req_valid[d] = 1'b1;
      p_req_we[d]    = 1'b1;
      p_req_addr[d]  = ent[1] + wr_cnt;
      p_req_wdata[d] = fifo[frp];
      p_req_mask[d]  = mask_of(wr_left);
    end
  end

  logic rsp;
  assign rsp = (st == D_XFER) && p_rsp_valid[s];

  always_ff @(posedge clk) if (rsp) fifo[fwp] <= p_rsp_data[s];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= D_IDLE; tptr <= '0; fidx <= '0; ent <= '0; rd_cnt <= '0; wr_cnt <= '0;
      outst <= '0; fcnt <= '0; fwp <= '0; frp <= '0;
      seg_done <= 1'b0; seg_flags <= '0; words_moved <= '0;
    end else begin
      seg_done <= 1'b0;
      if (init) tptr <= tbl_base;
      case (st)
        D_IDLE: if (run) begin st <= D_FETCH; fidx <= '0; end
        D_FETCH: if (t_req_ready) st <= D_FWAIT;
        D_FWAIT: if (t_rsp_valid) begin
          ent[fidx] <= t_rsp_data;
          tptr <= tptr + 32'd1;
          fidx <= fidx + 2'd1;
          st <= (fidx == 2'd3) ? D_GATE : D_FETCH;
        end
        D_GATE: if (xfer_ok) begin
          st <= D_XFER; rd_cnt <= '0; wr_cnt <= '0; outst <= '0; fcnt <= '0; fwp <= '0; frp <= '0;
        end
        D_XFER: begin
          if (rd_go) rd_cnt <= rd_cnt + ((rd_left < BEAT) ? rd_left : 32'(BEAT));
          outst <= outst + 3'(rd_go) - 3'(rsp);
          if (rsp) fwp <= fwp + 2'd1;
          if (wr_go) begin
            frp <= frp + 2'd1;
            wr_cnt <= wr_cnt + ((wr_left < BEAT) ? wr_left : 32'(BEAT));
            words_moved <= words_moved + ((wr_left < BEAT) ? wr_left : 32'(BEAT));
          end
          fcnt <= fcnt + 3'(rsp) - 3'(wr_go);
          if (wr_cnt >= len || (wr_go && wr_left <= BEAT)) begin
            if (ent[3][0]) begin
              st <= D_IDLE; seg_done <= 1'b1; seg_flags <= ent[3];
            end else begin
              st <= D_FETCH; fidx <= '0;
            end
          end
        end
        default: st <= D_IDLE;
      endcase
    end
  end
endmodule
