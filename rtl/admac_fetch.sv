// admac_fetch: AdMAC block A, voxel fetch (paper Sec. IV-E, Fig. 12 block A:
// "Voxel read Addr Gen", "Mem RdReq", "Schedule 1-by-1").
//
// On `start` it reads `nvox` voxel words from memory, word i at
// vox_base + i, and hands them out one per cycle, in order, with their serial
// number as voxel index. A voxel word is {2'b0, z[9:0], y[9:0], x[9:0]}
// (this packing is this design's; the paper says only that "input voxels
// (x,y,z) are fetched serially"). Up to four reads are outstanding; their
// responses wait in a 4-entry queue in front of the output ("schedule
// 1-by-1"). `done` is high once every voxel has been handed out.
module admac_fetch (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] nvox,
  input  logic [31:0] vox_base,
  output logic        done,
  output logic        rd_valid,
  input  logic        rd_ready,
  output logic [31:0] rd_addr,
  input  logic        rsp_valid,
  input  logic [31:0] rsp_data,
  output logic        v_valid,
  input  logic        v_ready,
  output logic [29:0] v_xyz,
  output logic [31:0] v_idx
);
  logic        run;
  logic [31:0] issued, handed;
  logic [2:0]  outst, qcnt;
  logic [29:0] q [4];
  logic [1:0]  wp, rp;

  assign rd_valid = run && (issued < nvox) && (32'(outst) + 32'(qcnt) < 32'd4);
  assign rd_addr  = vox_base + issued;
  assign v_valid  = qcnt != 3'd0;
  assign v_xyz    = q[rp];
  assign v_idx    = handed;
  assign done     = !run;

  logic pop;
  assign pop = v_valid && v_ready;

  always_ff @(posedge clk) if (rsp_valid) q[wp] <= rsp_data[29:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; issued <= '0; handed <= '0; outst <= '0; qcnt <= '0; wp <= '0; rp <= '0;
    end else begin
      if (start) begin
        run <= nvox != 32'd0; issued <= '0; handed <= '0; outst <= '0; qcnt <= '0; wp <= '0; rp <= '0;
      end else begin
        if (rd_valid && rd_ready) issued <= issued + 32'd1;
        outst <= outst + 3'(rd_valid && rd_ready) - 3'(rsp_valid);
        qcnt  <= qcnt + 3'(rsp_valid) - 3'(pop);
        if (rsp_valid) wp <= wp + 2'd1;
        if (pop) begin
          rp <= rp + 2'd1; handed <= handed + 32'd1;
          if (handed + 32'd1 == nvox) run <= 1'b0;
        end
      end
    end
  end
endmodule
