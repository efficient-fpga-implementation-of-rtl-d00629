// tm_pkg: constants shared by the time-domain Tsetlin Machine.
//
// Defaults describe the three-class Iris model with 10 clauses per class
// over 12 Boolean features, and the routed net delays measured for it
// (375.4 ps low-latency net, 641.9 ps high-latency net). The bundling delay
// and the start-synchroniser clock are this design's own choices. All
// modules of the design use a 1 ps time unit with 100 fs precision so
// that the fractional net delays are kept exactly.
package tm_pkg;
  timeunit 1ps;
  timeprecision 100fs;

  parameter int unsigned N_CLASSES_DEF  = 3;
  parameter int unsigned N_FEATURES_DEF = 12;
  parameter int unsigned N_CLAUSES_DEF  = 10;

  // Routed net delays of one delay element, in ps.
  parameter realtime LOW_PS_DEF  = 375.4;
  parameter realtime HIGH_PS_DEF = 641.9;

  // Propagation delay of the clause logic (data latch to PDL select pins).
  // It must exceed HIGH - LOW: when a PDL output has arrived over a short
  // net, the long net into that element still carries the old level for
  // HIGH - LOW, and a select change inside that window would glitch it.
  parameter realtime CLAUSE_PS_DEF = 1000.0;

  // Bundling delay from the MOUSETRAP bit latch to the PDL start flip-flops;
  // must exceed the worst-case clause logic delay.
  parameter realtime BUNDLE_PS_DEF = 2000.0;

  // LUT3 truth table of a delay element: out = I2 ? I1 : I0.
  parameter logic [7:0] DELAY_LUT_INIT = 8'hCA;

  // Clause polarity: even clauses vote for their class, odd ones against.
  function automatic logic clause_is_negative(int unsigned j);
    return logic'(j % 2);
  endfunction

  // Number of arbiter-tree leaves (next power of two, at least 2).
  function automatic int unsigned tree_leaves(int unsigned n);
    int unsigned p = 2;
    while (p < n) p = p * 2;
    return p;
  endfunction
endpackage
