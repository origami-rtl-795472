// nonlinear_engine: address generator of the Non-Linearity compute engine.
//
// ORIGAMI does not compute non-linear functions (sigmoid, Gaussian, log, ...)
// on the logic die: their outputs are tabulated in the stacked DRAM itself,
// and the engine only turns an operand into the DRAM address of its table
// entry; the controller then reads that word. This module is that mapping.
// A table has 2**LUT_BITS entries starting at word address `base` and covers
// operands uniformly around zero: entry i stands for the operand value
// (i - 2**(LUT_BITS-1)) << shift (in raw fixed-point units), so
//   index = clamp((operand >>> shift) + 2**(LUT_BITS-1), 0, 2**LUT_BITS - 1)
//   addr  = base + index
// Operands outside the table's range clamp to its first or last entry. The
// table layout, the clamping and the per-instruction shift are this design's
// choices; the paper states only that the function outputs are held in DRAM.
// Timing: operand sampled with `start`, `valid` and `addr` one cycle later.
module nonlinear_engine
  import origami_pkg::*;
#(
  parameter int unsigned LUT_BITS = 10
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  word_t             operand,
  input  logic [4:0]        shift,
  input  logic [ADDR_W-1:0] base,
  output logic              valid,
  output logic [ADDR_W-1:0] addr
);

  localparam longint signed HALF = longint'(1) << (LUT_BITS - 1);
  localparam longint signed LAST = (longint'(1) << LUT_BITS) - 1;

  longint signed idx;

  always_comb begin
    idx = (longint'(operand) >>> shift) + HALF;
    if (idx < 0)    idx = 0;
    if (idx > LAST) idx = LAST;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= 1'b0;
      addr  <= '0;
    end else begin
      valid <= start;
      addr  <= base + ADDR_W'(idx);
    end
  end

endmodule
