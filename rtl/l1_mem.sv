// l1_mem: the 64 KB L1 scratchpad of one SSpNNA core (paper Sec. V-A, Fig. 13,
// Fig. 20 "L1 Memory size 64KB").
//
// Written as an array of DEPTH 32-bit words. It has NRP narrow read ports, each
// returning RPW consecutive words starting at any word address, and one wide
// port of WPW words that either reads or writes (per-word write mask). All
// reads have one cycle of latency; addresses wrap at DEPTH. The paper gives
// only the size; the port structure is this design's abstraction of the banked
// SRAM a real core would use (it lets weight, IFM, metadata and OFM streams
// proceed in the same cycle without modelling bank conflicts).
module l1_mem #(
  parameter int unsigned DEPTH = 16384,
  parameter int unsigned NRP   = 16,
  parameter int unsigned RPW   = 16,
  parameter int unsigned WPW   = 32,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                         clk,
  input  logic [NRP-1:0][AW-1:0]       rd_addr,
  output logic [NRP-1:0][RPW-1:0][31:0] rd_data,
  input  logic                         w_en,
  input  logic                         w_we,
  input  logic [AW-1:0]                w_addr,
  input  logic [WPW-1:0][31:0]         w_wdata,
  input  logic [WPW-1:0]               w_mask,
  output logic [WPW-1:0][31:0]         w_rdata
);
  logic [31:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    for (int p = 0; p < NRP; p++)
      for (int i = 0; i < RPW; i++)
        rd_data[p][i] <= mem[AW'(rd_addr[p] + AW'(i))];
    if (w_en && w_we) begin
      for (int i = 0; i < WPW; i++)
        if (w_mask[i]) mem[AW'(w_addr + AW'(i))] <= w_wdata[i];
    end
    if (w_en && !w_we)
      for (int i = 0; i < WPW; i++) w_rdata[i] <= mem[AW'(w_addr + AW'(i))];
  end
endmodule
