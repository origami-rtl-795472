// reduction_engine: the Reduction compute engine (RU) of ORIGAMI, "k/RU".
//
// Computes sum = x[0]*w[0] + ... + x[K-1]*w[K-1] with K fixed-point
// multipliers followed by a binary tree of K-1 adders, as in the paper's
// reduction-engine diagram (8 multipliers and 7 adders for the 8/RU of the
// evaluated configuration). The multipliers and every adder level are
// pipeline stages: x and w are sampled in the cycle `start` is high, and
// `valid` with `sum` appears 1 + clog2(K) cycles later (4 cycles for K = 8).
// The result is meant to be written into the engine's sum register, which
// adds one more clock edge: 5 cycles at 313 MHz, i.e. the 15 ns latency the
// paper reports for the reduction engine. The stage split is this design's
// choice; the paper gives only the total latency. A new operation may start
// in every cycle. A K that is not a power of two is padded with zero
// products.
module reduction_engine
  import origami_pkg::*;
#(
  parameter int unsigned K = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  word_t [K-1:0]    x,
  input  word_t [K-1:0]    w,
  output logic             valid,
  output word_t            sum
);

  localparam int unsigned LEVELS = (K > 1) ? $clog2(K) : 1;
  localparam int unsigned P      = 1 << LEVELS;  // padded width

  // tree[0] holds the products, tree[l] the partial sums after adder level l.
  word_t [P-1:0]  tree [LEVELS+1];
  logic [LEVELS:0] vld;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld <= '0;
      for (int l = 0; l <= LEVELS; l++) tree[l] <= '0;
    end else begin
      vld[0] <= start;
      for (int i = 0; i < P; i++)
        tree[0][i] <= (i < K) ? fx_mul(x[i], w[i]) : '0;
      for (int l = 1; l <= LEVELS; l++) begin
        vld[l] <= vld[l-1];
        for (int i = 0; i < P; i++)
          tree[l][i] <= (i < (P >> l)) ? tree[l-1][2*i] + tree[l-1][2*i+1] : '0;
      end
    end
  end

  assign valid = vld[LEVELS];
  assign sum   = tree[LEVELS][0];

endmodule
