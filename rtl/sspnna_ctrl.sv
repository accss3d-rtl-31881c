// sspnna_ctrl: configuration and control block of the SSpNNA core (paper
// Sec. IV-D names "a configuration and a control block"; its insides are this
// design's).
//
// On `start` (from the global event controller, after the tile has been
// loaded into L1) it reads the eight-word tile descriptor at L1 address 0 in
// one access, latches it as `cfg`, starts WAVES, waits until WAVES has formatted
// and handed over all tuples and SyMAC has gone idle, then flushes the ACC OFM
// buffer into L1 and pulses `done`. `active` is high from start to done (the
// compute phase, in which the memory arbiter blocks DMA). `cycles` counts the
// cycles of the last tile.
module sspnna_ctrl
  import accss3d_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  output logic             active,
  output logic             done,
  output logic [L1_AW-1:0] cfg_rd_addr,
  input  logic [7:0][31:0] cfg_rd_data,
  output tile_cfg_t        cfg,
  output logic             waves_start,
  input  logic             waves_done,
  input  logic             symac_idle,
  output logic             symac_flush,
  input  logic             symac_flush_done,
  output logic [31:0]      cycles
);
  typedef enum logic [2:0] {C_IDLE, C_CFG, C_RUN, C_WAIT, C_FLUSH} cst_e;
  cst_e st;

  assign cfg_rd_addr = '0;
  assign active      = (st != C_IDLE);
  assign symac_flush = (st == C_FLUSH);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; cfg <= '0; waves_start <= 1'b0; done <= 1'b0; cycles <= '0;
    end else begin
      waves_start <= 1'b0;
      done        <= 1'b0;
      if (st != C_IDLE) cycles <= cycles + 32'd1;
      case (st)
        C_IDLE: if (start) begin st <= C_CFG; cycles <= '0; end
        C_CFG: begin
          // descriptor word k arrives in cfg_rd_data[k]
          cfg.md_count <= cfg_rd_data[0][IDX_W-1:0];
          cfg.hdr_base <= cfg_rd_data[1][L1_AW-1:0];
          cfg.idx_base <= cfg_rd_data[2][L1_AW-1:0];
          cfg.ifm_base <= cfg_rd_data[3][L1_AW-1:0];
          cfg.wt_base  <= cfg_rd_data[4][L1_AW-1:0];
          cfg.ofm_base <= cfg_rd_data[5][L1_AW-1:0];
          cfg.mode     <= sys_mode_e'(cfg_rd_data[6][1:0]);
          cfg.corf     <= cfg_rd_data[6][4];
          cfg.c4       <= cfg_rd_data[7][4:0];
          cfg.n4       <= cfg_rd_data[7][15:8];
          waves_start  <= 1'b1;
          st <= C_RUN;
        end
        C_RUN:  st <= C_WAIT;          // let waves leave its done state
        C_WAIT: if (waves_done && symac_idle) st <= C_FLUSH;
        C_FLUSH: if (symac_flush_done) begin st <= C_IDLE; done <= 1'b1; end
        default: st <= C_IDLE;
      endcase
    end
  end
endmodule
