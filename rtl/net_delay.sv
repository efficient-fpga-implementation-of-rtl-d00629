// net_delay: behavioural model of one routed FPGA net.
//
// On the FPGA the delay of a net is set only by place-and-route: each
// delay element gets a low-latency and a high-latency net whose delays are
// fixed by routing constraints, and the bundling signal of the MOUSETRAP
// stage is a net given a delay larger than the clause logic. The net has no
// logic function, so this model copies in_i to out_o after DELAY_PS
// (transport delay: every change of in_i reappears DELAY_PS later). The
// input is also sampled once 1 ps after start-up, when the drivers have
// settled, so out_o takes the driven level like a real net does, without
// a reset. Synthesis sees a plain wire; the delay is for simulation only.
// Every instance of the same kind uses the same delay, as the symmetric
// placement and routing aims for; process variation is not modelled.
module net_delay
  import tm_pkg::*;
#(
  parameter realtime DELAY_PS = HIGH_PS_DEF
) (
  input  logic in_i,
  output logic out_o
);
  timeunit 1ps;
  timeprecision 100fs;

  bit settled = 1'b0;
  initial #1 settled = 1'b1;

  always @(in_i or settled) out_o <= #(DELAY_PS) in_i;
endmodule
