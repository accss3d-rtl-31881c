// admac: AdMAC, the Adjacency map and Metadata accelerator core (paper
// Sec. IV-E, Fig. 12, Fig. 13).
//
// AdMAC turns a list of active voxels (x, y, z) in memory into the COIR
// metadata of a submanifold 3x3x3 convolution, so that neighbourhood search
// does not run on the host. It works in two passes over the voxel list, both
// streamed by block A (admac_fetch):
//   1. build: every voxel is inserted into the two-level lookup table of
//      block B (admac_lut), one per cycle;
//   2. adjacency: block C (admac_adj) looks up the 3x3x3 neighbourhood of every
//      voxel in that table and writes its metadata entry (mask header, voxel
//      index, neighbour indices) back to memory.
// Reads of A and writes of C share one word-wide memory port through
// admac_memarb. Command: `start` with nvox, vox_base (voxel words), hdr_base
// and idx_base (where headers and neighbour indices go); `done` pulses at the
// end. The two-pass sequencing is this design's reading of the paper's "Block
// B creates lookup table for all the active voxels ... Block C creates
// Adjacency List for the voxels in the memory using the Sparse hash from B".
module admac #(
  parameter int unsigned CW   = 7,
  parameter int unsigned ROWS = 512
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] nvox,
  input  logic [31:0] vox_base,
  input  logic [31:0] hdr_base,
  input  logic [31:0] idx_base,
  output logic        done,
  output logic        busy,
  output logic        m_valid,
  input  logic        m_ready,
  output logic        m_we,
  output logic [31:0] m_addr,
  output logic [31:0] m_wdata,
  input  logic        m_rsp_valid,
  input  logic [31:0] m_rsp_data,
  output logic [31:0] lookup_cycles,
  output logic [31:0] multi_cycle_voxels,
  output logic [31:0] neighbours_found,
  output logic        overflow
);
  localparam int unsigned RW = $clog2(ROWS);
  localparam int unsigned GW = 3*CW - 7;
  typedef enum logic [1:0] {M_IDLE, M_BUILD, M_ADJ, M_END} mst_e;
  mst_e st;

  logic        f_start, f_done, r_valid, r_ready, r_rsp_valid;
  logic [31:0] r_addr, r_rsp_data, v_idx;
  logic        v_valid, v_ready, a_ready, a_start;
  logic [29:0] v_xyz;
  logic        w_valid, w_ready;
  logic [31:0] w_addr, w_data;
  logic [26:0][GW-1:0] q_grp;
  logic [26:0]         q_present;
  logic [26:0][RW-1:0] q_row;
  logic [7:0]          b_rd_en;
  logic [7:0][RW-1:0]  b_rd_row;
  logic [7:0][15:0]    b_rd_act;
  logic [7:0][15:0][31:0] b_rd_data;
  logic [31:0]         groups_used, l1_hits;

  admac_fetch u_fetch (
    .clk, .rst_n, .start (f_start), .nvox, .vox_base, .done (f_done),
    .rd_valid (r_valid), .rd_ready (r_ready), .rd_addr (r_addr),
    .rsp_valid (r_rsp_valid), .rsp_data (r_rsp_data),
    .v_valid, .v_ready, .v_xyz, .v_idx
  );

  admac_lut #(.CW(CW), .ROWS(ROWS)) u_lut (
    .clk, .rst_n, .clear (start),
    .ins_valid (st == M_BUILD && v_valid), .ins_xyz (v_xyz), .ins_idx (v_idx),
    .q_grp, .q_present, .q_row, .b_rd_en, .b_rd_row, .b_rd_act, .b_rd_data,
    .groups_used, .l1_hits, .overflow
  );

  admac_adj #(.CW(CW), .ROWS(ROWS)) u_adj (
    .clk, .rst_n, .start (a_start), .hdr_base, .idx_base,
    .v_valid (st == M_ADJ && v_valid), .v_ready (a_ready), .v_xyz, .v_idx,
    .q_grp, .q_present, .q_row, .b_rd_en, .b_rd_row, .b_rd_act, .b_rd_data,
    .w_valid, .w_ready, .w_addr, .w_data,
    .lookup_cycles, .multi_cycle_voxels, .neighbours_found
  );

  admac_memarb u_arb (
    .clk, .rst_n,
    .r_valid, .r_ready, .r_addr, .r_rsp_valid, .r_rsp_data,
    .w_valid, .w_ready, .w_addr, .w_data,
    .m_valid, .m_ready, .m_we, .m_addr, .m_wdata, .m_rsp_valid, .m_rsp_data
  );

  assign v_ready = (st == M_BUILD) ? 1'b1 : (st == M_ADJ) ? a_ready : 1'b0;
  assign busy    = (st != M_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= M_IDLE; f_start <= 1'b0; a_start <= 1'b0; done <= 1'b0;
    end else begin
      f_start <= 1'b0; a_start <= 1'b0; done <= 1'b0;
      case (st)
        M_IDLE:  if (start) begin st <= M_BUILD; f_start <= 1'b1; end
        M_BUILD: if (f_done && !f_start) begin st <= M_ADJ; f_start <= 1'b1; a_start <= 1'b1; end
        M_ADJ:   if (f_done && !f_start && !w_valid) st <= M_END;
        M_END:   begin st <= M_IDLE; done <= 1'b1; end
        default: st <= M_IDLE;
      endcase
    end
  end

  logic [63:0] unused;
  assign unused = {groups_used, l1_hits};
endmodule
