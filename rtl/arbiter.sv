// arbiter: two-input time comparator for the race of two transitions.
//
// Two arbiters share each node, one per transition direction:
//  * rising transitions: a cross-coupled NAND SR latch. With both inputs
//    low both NAND outputs are high; the input that rises first pulls its
//    own NAND output low, which blocks the other side. An OR gate of the
//    two inputs rises at the first arrival (completion).
//  * falling transitions: a cross-coupled NOR SR latch. With both inputs
//    high both NOR outputs are low; the input that falls first drives its
//    NOR output high and blocks the other side. An AND gate of the two
//    inputs falls at the first arrival.
// Each latch clears itself while the opposite direction is in flight
// (both inputs low for the NAND latch, both high for the NOR latch), so
// no reset is needed. phase_i = 1 while a rising transition is in flight
// and selects which latch and completion gate drive the outputs, so
// completion goes to the level of phase_i once either input has arrived.
// output_o = 0 means input_up arrived first, 1 means input_lo did. When
// both arrive at once the latch resolves to one side (in silicon this is
// the metastable case). The two latches and completion gates follow the
// paper; the phase multiplexer and the output convention are this design's.
// The cross-coupled gates are intended combinational loops.
module arbiter (
  input  logic phase_i,
  input  logic input_up,
  input  logic input_lo,
  output logic completion,
  output logic output_o
);
  timeunit 1ps;
  timeprecision 100fs;

  logic nand_up, nand_lo;   // rising-transition latch
  logic nor_up,  nor_lo;    // falling-transition latch

  assign nand_up = ~(input_up & nand_lo);
  assign nand_lo = ~(input_lo & nand_up);

  assign nor_up  = ~(input_up | nor_lo);
  assign nor_lo  = ~(input_lo | nor_up);

  assign completion = phase_i ? (input_up | input_lo) : (input_up & input_lo);
  assign output_o   = phase_i ? nand_up : ~nor_up;
endmodule
