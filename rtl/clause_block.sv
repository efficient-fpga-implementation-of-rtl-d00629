// clause_block: the Boolean clauses of one class.
//
// Each clause is a conjunction of literals, the literals being the
// Boolean features x and their negations ~x. include_i[j] selects the
// literals of clause j: bits [N_FEATURES-1:0] include x, bits
// [2*N_FEATURES-1:N_FEATURES] include ~x. A clause outputs 1 when every
// included literal is 1; a clause that includes nothing outputs 0, the
// usual inference convention. The block is purely combinational; in the
// asynchronous design its worst-case delay is covered by the bundling
// delay. The clause function follows the paper; supplying the trained
// model as an include mask (instead of hard-wiring it) is this design's
// choice, so one netlist can run any model of the same size.
module clause_block
  import tm_pkg::*;
#(
  parameter int unsigned N_FEATURES = N_FEATURES_DEF,
  parameter int unsigned N_CLAUSES  = N_CLAUSES_DEF
) (
  input  logic [N_FEATURES-1:0]                  x_i,
  input  logic [N_CLAUSES-1:0][2*N_FEATURES-1:0] include_i,
  output logic [N_CLAUSES-1:0]                   clause_o
);
  timeunit 1ps;
  timeprecision 100fs;

  logic [2*N_FEATURES-1:0] literals;
  assign literals = {~x_i, x_i};

  always_comb begin
    for (int unsigned j = 0; j < N_CLAUSES; j++) begin
      clause_o[j] = (|include_i[j]) && ((literals | ~include_i[j]) == '1);
    end
  end
endmodule
