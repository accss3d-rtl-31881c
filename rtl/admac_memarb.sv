// admac_memarb: AdMAC memory arbiter and interface control (paper Fig. 12,
// "Mem Arb and Interface control", named only).
//
// Two AdMAC clients share one word-wide memory port: read requests of the
// voxel fetch (block A) and metadata writes of the adjacency-list block
// (block C). When both request in the same cycle the grant alternates
// (round robin). Read responses, which the memory returns in order, are passed
// back to the reader.
module admac_memarb (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        r_valid,
  output logic        r_ready,
  input  logic [31:0] r_addr,
  output logic        r_rsp_valid,
  output logic [31:0] r_rsp_data,
  input  logic        w_valid,
  output logic        w_ready,
  input  logic [31:0] w_addr,
  input  logic [31:0] w_data,
  output logic        m_valid,
  input  logic        m_ready,
  output logic        m_we,
  output logic [31:0] m_addr,
  output logic [31:0] m_wdata,
  input  logic        m_rsp_valid,
  input  logic [31:0] m_rsp_data
);
  logic last_w;     // last grant went to the writer
  logic gw;
  assign gw      = w_valid && (!r_valid || !last_w);
  assign m_valid = r_valid || w_valid;
  assign m_we    = gw;
  assign m_addr  = gw ? w_addr : r_addr;
  assign m_wdata = w_data;
  assign w_ready = gw && m_ready;
  assign r_ready = !gw && m_ready;
  assign r_rsp_valid = m_rsp_valid;
  assign r_rsp_data  = m_rsp_data;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) last_w <= 1'b0;
    else if (m_valid && m_ready) last_w <= gw;
endmodule
