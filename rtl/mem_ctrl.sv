// mem_ctrl: SyMAC memory controller for OFM write-back (paper Fig. 11(b),
// block 7, which the paper only names).
//
// It takes one request at a time: a word address and four FP32 partial sums
// evicted from the ACC OFM buffer. It reads the four OFM words at that address
// from L1 (cycle 1), adds the partial sums with four FP32 adders and writes the
// result back (cycle 2). `req_ready` is high only when idle, so a request
// takes two cycles and two requests to the same address can never overlap.
// The read-add-write scheme is this design's way of doing the paper's
// "OFM Write" accumulation; OFM regions are expected to be zeroed or hold
// earlier partial sums when a tile starts.
module mem_ctrl
  import accss3d_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             req_valid,
  output logic             req_ready,
  input  logic [L1_AW-1:0] req_addr,
  input  fp32_t [3:0]      req_val,
  output logic             rd_en,
  output logic [L1_AW-1:0] rd_addr,
  input  fp32_t [3:0]      rd_data,
  output logic             wr_en,
  output logic [L1_AW-1:0] wr_addr,
  output fp32_t [3:0]      wr_data,
  output logic             busy
);
  logic             pend;
  logic [L1_AW-1:0] addr_q;
  fp32_t [3:0]      val_q;

  assign req_ready = !pend;
  assign busy      = pend;
  assign rd_en     = req_valid & req_ready;
  assign rd_addr   = req_addr;
  assign wr_en     = pend;
  assign wr_addr   = addr_q;
  always_comb
    for (int i = 0; i < 4; i++) wr_data[i] = fp_add(rd_data[i], val_q[i]);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      pend <= 1'b0; addr_q <= '0; val_q <= '0;
    end else if (rd_en) begin
      pend <= 1'b1; addr_q <= req_addr; val_q <= req_val;
    end else begin
      pend <= 1'b0;
    end
endmodule
