// comparator_engine: the Comparator compute engine (CU) of ORIGAMI.
//
// Compares the predicted output PO with the expected output (or threshold)
// EO by subtraction and produces delta = PO - EO, the error used to update the
// model. The sign of delta is the outcome of the comparison against a
// threshold. The subtractor is combinational: `valid` follows `start` in the
// same cycle, and the engine's output register captures delta at the next
// clock edge, one cycle at 313 MHz, which covers the 3 ns the paper reports.
// The operand order PO - EO is this design's choice (it makes
// w - mu*delta*x descend the squared error); the paper says only that the
// engine subtracts the two.
module comparator_engine
  import origami_pkg::*;
(
  input  logic  start,
  input  word_t po,
  input  word_t eo,
  output logic  valid,
  output word_t delta
);

  always_comb begin
    valid = start;
    delta = po - eo;
  end

endmodule
