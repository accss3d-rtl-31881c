// accss3d_pkg: types, constants and IEEE-754 single-precision helpers shared by
// the AccSS3D RTL.
//
// The sparse NN core (SSpNNA) works on one tile held in its 64 KB L1. The tile is
// described by a descriptor of eight 32-bit words at L1 word address 0
// (tile_cfg_t below). COIR metadata entries ("headers") are pairs of words
// {weight mask[26:0], centre index}; the neighbour indices of all entries are
// packed, in bit order of the masks, in a separate index region. This layout,
// the 16-bit voxel index width and the word-addressed L1 are choices of this
// implementation; the paper fixes only the 27-plane (3x3x3) masks, the tuple of
// four features per weight plane and the FP32 arithmetic.
//
// Floating point: fp_mul / fp_add implement IEEE-754 binary32 multiply and add
// with round-to-nearest-even. Subnormal inputs and results are flushed to zero
// and NaN payloads are not propagated (an infinite or NaN operand gives
// infinity); these simplifications are this design's, the paper says only that
// the PEs work on "IEEE754 Full Floating-Point numbers".
package accss3d_pkg;

  localparam int unsigned IDX_W        = 16;   // voxel / feature-row index
  localparam int unsigned L1_AW        = 14;   // 64 KB of 32-bit words
  localparam int unsigned NPLANES      = 27;   // 3x3x3 weight planes
  localparam int unsigned TUPLE_PAIRS  = 4;    // features per tuple (paper)
  localparam int unsigned PES_PER_DENN = 4;    // paper, Fig. 20
  localparam int unsigned MULS_PER_PE  = 4;    // paper, Fig. 20
  localparam int unsigned WT_WORDS     = PES_PER_DENN * MULS_PER_PE; // 16
  localparam int unsigned MAX_C4       = 16;   // IC buffer: 64 FP32 channels

  typedef logic [31:0] fp32_t;

  // Systolic grouping of the DeNNs (paper Fig. 11(b) options A, B, C).
  // Within each cluster of four DeNNs: A = two groups of two, B = one group of
  // four, C = a group of three plus a single DeNN.
  typedef enum logic [1:0] {SYS_A = 2'd0, SYS_B = 2'd1, SYS_C = 2'd2} sys_mode_e;

  typedef struct packed {
    logic [IDX_W-1:0] in_idx;
    logic [IDX_W-1:0] out_idx;
  } pair_t;

  typedef struct packed {
    logic [4:0]  plane;
    logic [2:0]  cnt;                 // 1..4 valid pairs, pairs[0] first
    pair_t [TUPLE_PAIRS-1:0] pairs;
  } tuple_t;

  // Tile descriptor, read from L1 words 0..7.
  typedef struct packed {
    logic [IDX_W-1:0] md_count;   // word 0: number of COIR entries
    logic [L1_AW-1:0] hdr_base;   // word 1
    logic [L1_AW-1:0] idx_base;   // word 2
    logic [L1_AW-1:0] ifm_base;   // word 3
    logic [L1_AW-1:0] wt_base;    // word 4
    logic [L1_AW-1:0] ofm_base;   // word 5
    sys_mode_e        mode;       // word 6 [1:0]
    logic             corf;       // word 6 [4]: 1 = CORF, 0 = CIRF
    logic [4:0]       c4;         // word 7 [4:0]  : input channels / 4 (1..16)
    logic [7:0]       n4;         // word 7 [15:8] : output channels / 4
  } tile_cfg_t;

  // One DeNN result: four output channels of one output voxel.
  typedef struct packed {
    logic [IDX_W-1:0] out_idx;
    logic [7:0]       ng;         // output channel group (channels 4*ng..4*ng+3)
    fp32_t [3:0]      val;
  } denn_res_t;

  // Systolic weight beat travelling DeNN to DeNN.
  typedef struct packed {
    logic        valid;
    logic        first;           // first input-channel group: restart accumulation
    logic        last;            // last input-channel group: emit result
    logic [4:0]  cg;
    logic [7:0]  ng;
    fp32_t [WT_WORDS-1:0] w;      // w[p*4+j]: PE p, channel j of the group
  } sys_beat_t;

  // ---------------------------------------------------------------- FP32
  function automatic fp32_t fp_pack(input logic s, input int e, input logic [23:0] m);
    if (e <= 0)        return {s, 31'd0};           // flush to zero
    else if (e >= 255) return {s, 8'hff, 23'd0};    // overflow to infinity
    else               return {s, e[7:0], m[22:0]};
  endfunction

  function automatic fp32_t fp_mul(input fp32_t a, input fp32_t b);
    logic        s;
    logic [47:0] p;
    logic [24:0] m;
    logic        g, st;
    int          e;
    s = a[31] ^ b[31];
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) return {s, 31'd0};
    if (a[30:23] == 8'hff || b[30:23] == 8'hff) return {s, 8'hff, 23'd0};
    p = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e = int'(a[30:23]) + int'(b[30:23]) - 127;
    if (p[47]) begin
      m = {1'b0, p[47:24]}; g = p[23]; st = |p[22:0]; e = e + 1;
    end else begin
      m = {1'b0, p[46:23]}; g = p[22]; st = |p[21:0];
    end
    if (g && (st || m[0])) m = m + 25'd1;
    if (m[24]) begin m = m >> 1; e = e + 1; end
    return fp_pack(s, e, m[23:0]);
  endfunction

  function automatic fp32_t fp_add(input fp32_t a, input fp32_t b);
    fp32_t       x, y;
    logic [26:0] mx, my;          // hidden, 23 fraction bits, guard, round, sticky
    logic [27:0] sum;
    logic [24:0] m;
    int          d, e, lz;
    logic        g, rs;
    if (a[30:23] == 8'd0 && b[30:23] == 8'd0) return {a[31] & b[31], 31'd0};
    if (a[30:23] == 8'd0) return b;
    if (b[30:23] == 8'd0) return a;
    if (a[30:23] == 8'hff) return a;
    if (b[30:23] == 8'hff) return b;
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end else begin x = b; y = a; end
    d  = int'(x[30:23]) - int'(y[30:23]);
    e  = int'(x[30:23]);
    mx = {1'b1, x[22:0], 3'b000};
    my = {1'b1, y[22:0], 3'b000};
    if (d > 26) my = 27'd1;
    else if (d > 0) my = (my >> d) | 27'(((my & ((27'd1 << d) - 27'd1)) != 27'd0) ? 1 : 0);
    if (x[31] == y[31]) begin
      sum = {1'b0, mx} + {1'b0, my};
      if (sum[27]) begin sum = {1'b0, sum[27:2], sum[1] | sum[0]}; e = e + 1; end
    end else begin
      sum = {1'b0, mx} - {1'b0, my};
      if (sum == 28'd0) return 32'd0;
      lz = 0;
      for (int i = 26; i >= 0; i--) begin
        if (sum[i]) break;
        lz++;
      end
      sum = sum << lz;
      e = e - lz;
    end
    m  = {1'b0, sum[26:3]};
    g  = sum[2];
    rs = sum[1] | sum[0];
    if (g && (rs || m[0])) m = m + 25'd1;
    if (m[24]) begin m = m >> 1; e = e + 1; end
    return fp_pack(x[31], e, m[23:0]);
  endfunction

endpackage
