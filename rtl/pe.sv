// pe: one processing element of a DeNN.
//
// Each cycle with `en` high the PE multiplies four FP32 input-feature values
// (multicast to all PEs of the DeNN) with four FP32 weights of its own output
// channel, sums the four products in a two-level adder tree and adds the tree
// sum to its local accumulator, so a partial sum is built up along the input
// channels (paper: "PEs are implemented using tree structure where they can
// perform dot-product on IEEE754 Full Floating-Point numbers and accumulate
// locally along the input channels"; Fig. 20: 4 multipliers per PE).
//
// `first` restarts the accumulation. `sum` is the value the accumulator takes
// at the next clock edge (combinational), `acc` the registered value. The
// single-cycle multiply-add (no pipeline registers inside the tree) and the
// summation order ((x0w0+x1w1)+(x2w2+x3w3))+acc are this design's choices.
module pe
  import accss3d_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic        first,
  input  fp32_t [3:0] x,
  input  fp32_t [3:0] w,
  output fp32_t       sum,
  output fp32_t       acc
);
  fp32_t [3:0] prod;
  fp32_t       tree;

  always_comb begin
    for (int i = 0; i < 4; i++) prod[i] = fp_mul(x[i], w[i]);
    tree = fp_add(fp_add(prod[0], prod[1]), fp_add(prod[2], prod[3]));
    sum  = first ? tree : fp_add(acc, tree);
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)  acc <= '0;
    else if (en) acc <= sum;
endmodule
