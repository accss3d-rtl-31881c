// l2_mem: one instance of the shared L2 scratchpad (paper Sec. VI-A: "L2
// memory of 2x1MB is constructed hierarchically, using sub-arrays of size 16KB
// each, with 4 banks per instance, 4 sub-banks per bank and 4 sub-arrays per
// sub-bank"; Fig. 20 "L2 Size 2 x 1 MB"). The top instantiates two, one per
// buffer of the dual-buffered L2.
//
// Written as an array of DEPTH 32-bit words with two independent ports: port A
// of AW_WORDS words for the L1-DMA (shared bus side, 128 B per clock) and port
// B of BW_WORDS words for the L2-DMA (DRAM side, 48 B per clock). Each port
// reads or writes a run of consecutive words at any word address, with a
// per-word mask; reads return one cycle later. Both ports are always ready.
// The bank / sub-bank / sub-array hierarchy is not modelled: it matters for
// area and energy, not for function.
module l2_mem #(
  parameter int unsigned DEPTH    = 262144,
  parameter int unsigned AW_WORDS = 32,
  parameter int unsigned BW_WORDS = 12,
  localparam int unsigned AW      = $clog2(DEPTH)
) (
  input  logic                     clk,
  input  logic                     a_valid,
  input  logic                     a_we,
  input  logic [AW-1:0]            a_addr,
  input  logic [AW_WORDS-1:0][31:0] a_wdata,
  input  logic [AW_WORDS-1:0]      a_mask,
  output logic                     a_rvalid,
  output logic [AW_WORDS-1:0][31:0] a_rdata,
  input  logic                     b_valid,
  input  logic                     b_we,
  input  logic [AW-1:0]            b_addr,
  input  logic [BW_WORDS-1:0][31:0] b_wdata,
  input  logic [BW_WORDS-1:0]      b_mask,
  output logic                     b_rvalid,
  output logic [BW_WORDS-1:0][31:0] b_rdata
);
  logic [31:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    a_rvalid <= a_valid && !a_we;
    b_rvalid <= b_valid && !b_we;
    if (a_valid) begin
      for (int i = 0; i < AW_WORDS; i++) begin
        if (a_we && a_mask[i]) mem[AW'(a_addr + AW'(i))] <= a_wdata[i];
        a_rdata[i] <= mem[AW'(a_addr + AW'(i))];
      end
    end
    if (b_valid) begin
      for (int i = 0; i < BW_WORDS; i++) begin
        if (b_we && b_mask[i]) mem[AW'(b_addr + AW'(i))] <= b_wdata[i];
        b_rdata[i] <= mem[AW'(b_addr + AW'(i))];
      end
    end
  end
endmodule
