// admac_adj: AdMAC block C, adjacency list / COIR metadata creation (paper
// Sec. IV-E, Fig. 12 block C: neighbour address generation, neighbour point
// requests, adjacency map creation, neighbour list gather and memory write).
//
// For each voxel from block A it computes the 27 positions of its 3x3x3
// neighbourhood (itself included, weight index k = 9*(dz+1) + 3*(dy+1) +
// (dx+1)), looks up their voxel groups in level one of the lookup table, and
// reads the needed level-two rows: each cycle every bank serves the row of its
// first pending neighbour, and all pending neighbours in that row are served
// together, so a voxel away from group boundaries needs a single lookup
// cycle. Returned rows give, per neighbour, its active bit and index.
// The voxel's entry is then written to memory, one word per cycle: header
// {5'b0, mask[26:0]} at hdr_base + 2*i and the voxel index i at
// hdr_base + 2*i + 1, followed by the indices of the active neighbours in mask
// bit order at the running index pointer (starting at idx_base). This is the
// metadata layout the SSpNNA core reads. The one-voxel-at-a-time flow (no
// overlap between lookup and write of consecutive voxels) is this design's
// simplification of the paper's queues and latency FIFOs.
module admac_adj #(
  parameter int unsigned CW   = 7,
  parameter int unsigned ROWS = 512,
  localparam int unsigned RW  = $clog2(ROWS),
  localparam int unsigned GW  = 3*CW - 7
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [31:0]          hdr_base,
  input  logic [31:0]          idx_base,
  input  logic                 v_valid,
  output logic                 v_ready,
  input  logic [29:0]          v_xyz,
  input  logic [31:0]          v_idx,
  output logic [26:0][GW-1:0]  q_grp,
  input  logic [26:0]          q_present,
  input  logic [26:0][RW-1:0]  q_row,
  output logic [7:0]           b_rd_en,
  output logic [7:0][RW-1:0]   b_rd_row,
  input  logic [7:0][15:0]     b_rd_act,
  input  logic [7:0][15:0][31:0] b_rd_data,
  output logic                 w_valid,
  input  logic                 w_ready,
  output logic [31:0]          w_addr,
  output logic [31:0]          w_data,
  output logic [31:0]          lookup_cycles,
  output logic [31:0]          multi_cycle_voxels,
  output logic [31:0]          neighbours_found
);
  typedef enum logic [1:0] {A_IDLE, A_LOOK, A_SETTLE, A_WRITE} ast_e;
  ast_e st;

  logic [CW-1:0] cx, cy, cz;
  logic [31:0]   cidx, iptr;
  logic [26:0]   pend, srv, found;
  logic [26:0][31:0] nidx;
  logic [26:0][2:0]  nbank;
  logic [26:0][3:0]  nlane;
  logic [26:0]       inr;
  logic [4:0]    wk;            // write pointer: 0 mask, 1 index, then bit k scan
  logic          first_look;
  logic [3:0]    ncyc;

  // neighbour geometry
  always_comb
    for (int k = 0; k < 27; k++) begin
      automatic int nx = int'(cx) + (k % 3) - 1;
      automatic int ny = int'(cy) + ((k / 3) % 3) - 1;
      automatic int nz = int'(cz) + (k / 9) - 1;
      automatic logic [CW-1:0] ux = CW'(nx), uy = CW'(ny), uz = CW'(nz);
      inr[k]   = nx >= 0 && nx < (1 << CW) && ny >= 0 && ny < (1 << CW) && nz >= 0 && nz < (1 << CW);
      q_grp[k] = {uz[CW-1:2], uy[CW-1:3], ux[CW-1:2]};
      nbank[k] = {uy[2], uz[1:0]};
      nlane[k] = {uy[1:0], ux[1:0]};
    end

  // bank request selection
  logic [26:0] sel_now;
  always_comb begin
    b_rd_en = '0; b_rd_row = '0; sel_now = '0;
    if (st == A_LOOK && !first_look) begin
      for (int b = 0; b < 8; b++) begin
        for (int k = 26; k >= 0; k--)
          if (pend[k] && nbank[k] == 3'(b)) begin b_rd_en[b] = 1'b1; b_rd_row[b] = q_row[k]; end
      end
      for (int k = 0; k < 27; k++)
        if (pend[k] && b_rd_en[nbank[k]] && b_rd_row[nbank[k]] == q_row[k]) sel_now[k] = 1'b1;
    end
  end

  // next set bit of `found` at or after wk-2 for the index list
  logic       nb_v;
  logic [4:0] nb_k;
  always_comb begin
    nb_v = 1'b0; nb_k = '0;
    for (int k = 26; k >= 0; k--)
      if (found[k] && 5'(k) + 5'd2 >= wk) begin nb_v = 1'b1; nb_k = 5'(k); end
  end

  always_comb begin
    w_valid = (st == A_WRITE) && (wk < 5'd2 || nb_v);
    if (wk == 5'd0)      begin w_addr = hdr_base + {cidx[30:0], 1'b0};         w_data = {5'd0, found}; end
    else if (wk == 5'd1) begin w_addr = hdr_base + {cidx[30:0], 1'b0} + 32'd1; w_data = cidx; end
    else                 begin w_addr = iptr;                                  w_data = nidx[nb_k]; end
  end
  assign v_ready = (st == A_WRITE) && !(wk < 5'd2 || nb_v);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= A_IDLE; cx <= '0; cy <= '0; cz <= '0; cidx <= '0; iptr <= '0;
      pend <= '0; srv <= '0; found <= '0; nidx <= '0; wk <= '0; first_look <= 1'b0; ncyc <= '0;
      lookup_cycles <= '0; multi_cycle_voxels <= '0; neighbours_found <= '0;
    end else begin
      if (start) begin
        iptr <= idx_base; lookup_cycles <= '0; multi_cycle_voxels <= '0; neighbours_found <= '0;
      end
      // returning rows
      for (int k = 0; k < 27; k++)
        if (srv[k] && b_rd_act[nbank[k]][nlane[k]]) begin
          found[k] <= 1'b1; nidx[k] <= b_rd_data[nbank[k]][nlane[k]];
        end
      srv <= sel_now;
      case (st)
        A_IDLE: if (v_valid && !start) begin
          cx <= v_xyz[CW-1:0]; cy <= v_xyz[10 +: CW]; cz <= v_xyz[20 +: CW]; cidx <= v_idx;
          st <= A_LOOK; first_look <= 1'b1; found <= '0; ncyc <= '0;
        end
        A_LOOK: begin
          if (first_look) begin
            pend <= inr & q_present;
            first_look <= 1'b0;
          end else pend <= pend & ~sel_now;
          if (sel_now != '0) begin
            lookup_cycles <= lookup_cycles + 32'd1;
            ncyc <= ncyc + 4'd1;
          end
          if (!first_look && (pend & ~sel_now) == '0) begin
            st <= A_SETTLE; wk <= '0;
            if (ncyc + 4'(sel_now != '0) > 4'd1) multi_cycle_voxels <= multi_cycle_voxels + 32'd1;
          end
        end
        A_SETTLE: st <= A_WRITE;     // last rows arrive
        A_WRITE: begin
          if (w_valid && w_ready) begin
            if (wk < 5'd2) wk <= wk + 5'd1;
            else begin
              wk <= nb_k + 5'd3; iptr <= iptr + 32'd1; neighbours_found <= neighbours_found + 32'd1;
            end
          end
          if (v_ready) st <= A_IDLE;
        end
        default: st <= A_IDLE;
      endcase
    end
  end
endmodule
