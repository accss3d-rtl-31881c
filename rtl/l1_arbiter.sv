// l1_arbiter: memory arbiter of the SSpNNA core (paper Sec. IV-D: "HWA also
// has a memory arbiter"; the paper gives no details).
//
// The wide L1 port is shared by two masters: the L1-DMA, which loads a tile
// and unloads its results over the shared bus, and the core's OFM write-back
// (mem_ctrl). The paper runs these in distinct phases ("All data transfers
// between the shared-L2 and a SSpNNA core's L1 are blocked when the core is
// active, and the SSpNNA core is idled when data is being exchanged"), so the
// arbiter grants the core while `core_active` is high and the DMA otherwise.
// A DMA request during the compute phase is held off with `dma_ready` low
// (counted in `dma_blocked`). DMA read data returns one cycle after the grant,
// marked by `dma_rvalid`. The assertion checks that the core never writes
// outside its compute phase.
module l1_arbiter #(
  parameter int unsigned AW  = 14,
  parameter int unsigned WPW = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 core_active,
  // DMA master
  input  logic                 dma_valid,
  output logic                 dma_ready,
  input  logic                 dma_we,
  input  logic [AW-1:0]        dma_addr,
  input  logic [WPW-1:0][31:0] dma_wdata,
  input  logic [WPW-1:0]       dma_mask,
  output logic                 dma_rvalid,
  output logic [WPW-1:0][31:0] dma_rdata,
  // core master (4-word OFM write-back)
  input  logic                 core_wr_en,
  input  logic [AW-1:0]        core_wr_addr,
  input  logic [3:0][31:0]     core_wr_data,
  // L1 wide port
  output logic                 w_en,
  output logic                 w_we,
  output logic [AW-1:0]        w_addr,
  output logic [WPW-1:0][31:0] w_wdata,
  output logic [WPW-1:0]       w_mask,
  input  logic [WPW-1:0][31:0] w_rdata,
  output logic [31:0]          dma_blocked
);
  assign dma_ready = !core_active;
  assign dma_rdata = w_rdata;

  always_comb begin
    w_wdata = '0;
    w_mask  = '0;
    if (core_active) begin
      w_en   = core_wr_en;
      w_we   = 1'b1;
      w_addr = core_wr_addr;
      w_wdata[3:0] = core_wr_data;
      w_mask[3:0]  = 4'hf;
    end else begin
      w_en    = dma_valid;
      w_we    = dma_we;
      w_addr  = dma_addr;
      w_wdata = dma_wdata;
      w_mask  = dma_mask;
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      dma_rvalid <= 1'b0; dma_blocked <= '0;
    end else begin
      dma_rvalid <= dma_valid && dma_ready && !dma_we;
      if (dma_valid && !dma_ready) dma_blocked <= dma_blocked + 32'd1;
    end

  assert property (@(posedge clk) disable iff (!rst_n) core_wr_en |-> core_active)
    else $error("l1_arbiter: core write outside compute phase");
endmodule
