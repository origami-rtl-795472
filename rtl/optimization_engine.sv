// optimization_engine: the Optimization compute engine (OU) of ORIGAMI.
//
// Updates one element of the model: w' = w - mu * (delta * x), built as the
// paper draws it, a serial chain of two multipliers (delta*x, then *mu) and a
// subtractor (w minus the product). Each of the three operators is a pipeline
// stage: delta, x, mu and w are sampled in the cycle `start` is high and
// `valid` with `w_new` appears 3 cycles later. Writing w_new into the
// engine's output register takes one more edge: 4 cycles at 313 MHz, the
// 12 ns latency the paper reports. A new operation may start every cycle.
module optimization_engine
  import origami_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  word_t delta,
  input  word_t x,
  input  word_t mu,
  input  word_t w,
  output logic  valid,
  output word_t w_new
);

  word_t       p1, p2, mu_d, w_d1, w_d2;
  logic [2:0]  vld;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld <= '0;
      p1 <= '0; p2 <= '0; mu_d <= '0; w_d1 <= '0; w_d2 <= '0; w_new <= '0;
    end else begin
      vld   <= {vld[1:0], start};
      // stage 1: delta * x
      p1    <= fx_mul(delta, x);
      mu_d  <= mu;
      w_d1  <= w;
      // stage 2: * mu
      p2    <= fx_mul(p1, mu_d);
      w_d2  <= w_d1;
      // stage 3: w - product
      w_new <= w_d2 - p2;
    end
  end

  assign valid = vld[2];

endmodule
