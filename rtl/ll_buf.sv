// ll_buf: Link-List buffer of the WAVES front-end (paper Fig. 11(a), block 7,
// with Index Q-A and Index Q-B).
//
// Tuples are kept in per-weight-plane linked lists that share one pool of
// slots, so planes with many active voxels get more space than planes with few
// (paper: fixed per-plane FIFOs waste space; the linked list holds "1.5X-2X
// more metadata lines" in the same memory). The buffer has two halves, A and B
// ("dual 8KB of local buffer", Sec. VI-C), each SLOTS tuples of four 32-bit
// index pairs (8 KB). WAVES fills one half while SyMAC drains the other:
//  * write side: up to four tuples per cycle (distinct planes) are appended to
//    the half `wr_half`. Slots are handed out in order from a bump counter;
//    for each plane a head/tail pointer and a next-pointer per slot form the
//    list. `free_slots` tells WAVES how much room is left.
//  * `seal` marks the half `wr_half` complete. A sealed half is drained plane
//    by plane, 0..26, each list from head to tail, one tuple per cycle on a
//    valid/ready port. When the last tuple of a half has left, the half is
//    cleared and `half_busy` for it drops.
// Halves are drained in the order they were sealed. The bump allocation
// (slots are freed only half-at-a-time), the pointer widths and the
// combinational read of the tuple store are this design's choices.
module ll_buf
  import accss3d_pkg::*;
#(
  parameter int unsigned SLOTS = 512
) (
  input  logic            clk,
  input  logic            rst_n,
  // write side
  input  logic            wr_half,
  input  logic [3:0]      tv,
  input  tuple_t [3:0]    tin,
  input  logic            seal,
  output logic [$clog2(SLOTS):0] free_slots,
  output logic [1:0]      half_busy,       // sealed or being drained
  // read side
  output logic            out_valid,
  input  logic            out_ready,
  output tuple_t          out_tuple,
  output logic [$clog2(SLOTS):0] max_used
);
  localparam int unsigned SW = $clog2(SLOTS);

  tuple_t                     store [2][SLOTS];
  logic [SW-1:0]              nxt   [2][SLOTS];
  logic [1:0][NPLANES-1:0][SW-1:0] head, tail;
  logic [1:0][NPLANES-1:0]         nonempty;
  logic [1:0][SW:0]                alloc;
  logic [1:0]                      sealed;

  assign free_slots = (SW+1)'(SLOTS) - alloc[wr_half];
  assign half_busy  = sealed;

  // ---------------- write side
  logic [3:0][SW:0] slot;
  always_comb begin
    automatic logic [SW:0] s = alloc[wr_half];
    for (int j = 0; j < 4; j++) begin
      slot[j] = s;
      if (tv[j]) s = s + 1'b1;
    end
  end

  // ---------------- read side
  logic          rd_half, draining;
  logic [4:0]    rd_plane;
  logic [SW-1:0] rd_ptr;

  // next non-empty plane above the current one
  logic       np_v;
  logic [4:0] np;
  always_comb begin
    np_v = 1'b0; np = '0;
    for (int k = NPLANES-1; k >= 0; k--)
      if (5'(k) > rd_plane && nonempty[rd_half][k]) begin np_v = 1'b1; np = 5'(k); end
  end
  logic       fp_v;
  logic [4:0] fp;
  always_comb begin
    fp_v = 1'b0; fp = '0;
    for (int k = NPLANES-1; k >= 0; k--)
      if (nonempty[rd_half][k]) begin fp_v = 1'b1; fp = 5'(k); end
  end

  assign out_valid = draining;
  assign out_tuple = store[rd_half][rd_ptr];

  always_ff @(posedge clk) begin
    for (int j = 0; j < 4; j++)
      if (tv[j]) begin
        store[wr_half][slot[j][SW-1:0]] <= tin[j];
        if (nonempty[wr_half][tin[j].plane])
          nxt[wr_half][tail[wr_half][tin[j].plane]] <= slot[j][SW-1:0];
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head <= '0; tail <= '0; nonempty <= '0; alloc <= '0; sealed <= '0;
      rd_half <= 1'b0; draining <= 1'b0; rd_plane <= '0; rd_ptr <= '0; max_used <= '0;
    end else begin
      for (int j = 0; j < 4; j++)
        if (tv[j]) begin
          if (!nonempty[wr_half][tin[j].plane]) head[wr_half][tin[j].plane] <= slot[j][SW-1:0];
          tail[wr_half][tin[j].plane]     <= slot[j][SW-1:0];
          nonempty[wr_half][tin[j].plane] <= 1'b1;
        end
      alloc[wr_half] <= slot[3] + (SW+1)'(tv[3]);
      if (slot[3] + (SW+1)'(tv[3]) > max_used) max_used <= slot[3] + (SW+1)'(tv[3]);
      if (seal) sealed[wr_half] <= 1'b1;

      if (!draining) begin
        if (sealed[rd_half]) begin
          if (fp_v) begin
            draining <= 1'b1; rd_plane <= fp; rd_ptr <= head[rd_half][fp];
          end else begin
            sealed[rd_half] <= 1'b0; alloc[rd_half] <= '0; rd_half <= !rd_half;
          end
        end
      end else if (out_ready) begin
        if (rd_ptr != tail[rd_half][rd_plane]) rd_ptr <= nxt[rd_half][rd_ptr];
        else if (np_v) begin
          rd_plane <= np; rd_ptr <= head[rd_half][np];
        end else begin
          draining <= 1'b0;
          sealed[rd_half]   <= 1'b0;
          nonempty[rd_half] <= '0;
          alloc[rd_half]    <= '0;
          rd_half           <= !rd_half;
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   (tv != '0) |-> !sealed[wr_half] && (slot[3] + (SW+1)'(tv[3]) <= (SW+1)'(SLOTS)))
    else $error("ll_buf: write into a sealed or full half");
endmodule
