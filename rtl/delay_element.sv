// delay_element: one stage of a programmable delay line (PDL).
//
// A single LUT3 is configured as a 2:1 multiplexer (INIT = 8'hCA, i.e.
// out = I2 ? I1 : I0). Both data pins carry the output of the previous
// stage, routed once over a high-latency net and once over a low-latency
// net; pin I2 is the clause output ("select"). For a positive clause the
// high-latency net feeds I0 and the low-latency net feeds I1, so a clause
// output of 1 takes the short path. For a negative clause (NEGATIVE = 1)
// the two nets are swapped at the LUT pins, so a 1 takes the long path.
// The element's logic function is a buffer; its delay is what carries the
// information: LOW_PS or HIGH_PS per transition.
// The LUT truth table, the mux polarity and the net swap follow the paper;
// which net goes to which physical LUT pin is a placement constraint and
// is not expressed here.
module delay_element
  import tm_pkg::*;
#(
  parameter logic [7:0] INIT     = DELAY_LUT_INIT,
  parameter bit         NEGATIVE = 1'b0,
  parameter realtime    LOW_PS   = LOW_PS_DEF,
  parameter realtime    HIGH_PS  = HIGH_PS_DEF
) (
  input  logic in_i,
  input  logic sel_i,
  output logic out_o
);
  timeunit 1ps;
  timeprecision 100fs;

  logic net_high, net_low;   // the two routed copies of in_i
  logic pin_i0, pin_i1;      // LUT data pins

  net_delay #(.DELAY_PS(HIGH_PS)) u_high (.in_i(in_i), .out_o(net_high));
  net_delay #(.DELAY_PS(LOW_PS))  u_low  (.in_i(in_i), .out_o(net_low));

  assign pin_i0 = NEGATIVE ? net_low  : net_high;
  assign pin_i1 = NEGATIVE ? net_high : net_low;

  // LUT3: address {I2, I1, I0}
  assign out_o = INIT[{sel_i, pin_i1, pin_i0}];
endmodule
