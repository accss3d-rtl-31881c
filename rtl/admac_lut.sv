// admac_lut: AdMAC block B, the two-level voxel lookup table (paper Sec. IV-E
// and Fig. 12 block B: bitmask lookup, L1 BUF bitmask, Rd/Wr control logic,
// address pointer counter, point buffer).
//
// Level one covers the grid at the granularity of voxel 3D groups of 4 (x) by
// 8 (y) by 4 (z) voxels: for each group a valid bit and a row pointer. Level
// two holds, per voxel, an active bit and the voxel's index ("active
// information and corresponding memory address per voxel"), in 8 banks
// selected by {y[2], z[1:0]}; a bank row of 16 x 32 bits (64 B) holds the 16
// voxels {y[1:0], x[1:0]} of one group, so the 27 voxels around any point lie
// in at most one row per bank unless the point is at a group boundary
// (paper: "This specific hashing helps in reading 26 neighboring voxels in a
// single cycle, with the exception of boundary voxels").
//
// Insert (one voxel per cycle): a level-one miss allocates the next row from
// the pointer counter, clears that row's active bits in all banks and marks
// the group; then the voxel's active bit and index are written into its lane.
// Lookup: 27 combinational level-one queries (present, row) and one row read
// per bank per cycle, returned one cycle later with its 16 active bits.
// The paper gives the bank and lane hashing; the grid size (2^CW per axis),
// the number of rows and the dense level-one array are this design's.
// `overflow` is set when more groups are touched than there are rows.
module admac_lut #(
  parameter int unsigned CW   = 7,
  parameter int unsigned ROWS = 512,
  localparam int unsigned RW  = $clog2(ROWS),
  localparam int unsigned GW  = 3*CW - 7       // group index bits
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  // insert
  input  logic                 ins_valid,
  input  logic [29:0]          ins_xyz,
  input  logic [31:0]          ins_idx,
  // level-one queries
  input  logic [26:0][GW-1:0]  q_grp,
  output logic [26:0]          q_present,
  output logic [26:0][RW-1:0]  q_row,
  // per-bank row reads
  input  logic [7:0]           b_rd_en,
  input  logic [7:0][RW-1:0]   b_rd_row,
  output logic [7:0][15:0]     b_rd_act,
  output logic [7:0][15:0][31:0] b_rd_data,
  output logic [31:0]          groups_used,
  output logic [31:0]          l1_hits,
  output logic                 overflow
);
  logic [(1<<GW)-1:0] gvalid;   // level-one valid bits (one per 3D group)
  logic [RW-1:0]      gptr [1<<GW];
  logic [15:0]        act  [8][ROWS];
  logic [15:0][31:0]  dat  [8][ROWS];

  // insert address decomposition
  logic [CW-1:0] x, y, z;
  assign x = ins_xyz[CW-1:0];
  assign y = ins_xyz[10 +: CW];
  assign z = ins_xyz[20 +: CW];
  logic [GW-1:0] g;
  assign g = {z[CW-1:2], y[CW-1:3], x[CW-1:2]};
  logic [2:0] bank;
  logic [3:0] lane;
  assign bank = {y[2], z[1:0]};
  assign lane = {y[1:0], x[1:0]};
  logic          hit;
  logic [RW-1:0] row;
  assign hit = gvalid[g];
  assign row = hit ? gptr[g] : groups_used[RW-1:0];

  always_comb
    for (int k = 0; k < 27; k++) begin
      q_present[k] = gvalid[q_grp[k]];
      q_row[k]     = gptr[q_grp[k]];
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gvalid <= '0; groups_used <= '0; l1_hits <= '0; overflow <= 1'b0;
    end else if (clear) begin
      gvalid <= '0; groups_used <= '0; l1_hits <= '0; overflow <= 1'b0;
    end else if (ins_valid) begin
      if (hit) l1_hits <= l1_hits + 32'd1;
      else if (groups_used < ROWS) begin
        gvalid[g] <= 1'b1; groups_used <= groups_used + 32'd1;
      end else overflow <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (ins_valid && (hit || groups_used < ROWS)) begin
      gptr[g] <= row;
      for (int b = 0; b < 8; b++)
        if (3'(b) == bank) act[b][row] <= (hit ? act[b][row] : 16'd0) | (16'd1 << lane);
        else if (!hit)     act[b][row] <= 16'd0;
      dat[bank][row][lane] <= ins_idx;
    end
    for (int b = 0; b < 8; b++)
      if (b_rd_en[b]) begin
        b_rd_act[b]  <= act[b][b_rd_row[b]];
        b_rd_data[b] <= dat[b][b_rd_row[b]];
      end
  end
endmodule
