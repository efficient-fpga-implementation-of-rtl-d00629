// async_controller: generates the acknowledge of the MOUSETRAP stage.
//
// The root arbiter's completion changes as soon as the fastest PDL has
// arrived, but the slower PDLs are still in flight and must not be
// disturbed by the next inference. A Muller C-element over all PDL
// outputs forms the join: its output takes the common level only when
// every PDL output has made its transition. wait_o = completion XOR join
// rises with the completion transition and falls when the join completes.
// ack is a second C-element of completion and join, so it toggles only
// after both, i.e. right after wait_o falls. ack feeds the latch enable of
// the MOUSETRAP stage. The function (wait on completion, join on all PDL
// outputs, then ack) follows the paper; the gate structure and the
// asynchronous reset are this design's choices. The C-elements are
// intended level-sensitive storage.
module async_controller
  import tm_pkg::*;
#(
  parameter int unsigned N_CLASSES = N_CLASSES_DEF
) (
  input  logic                 rst_n,
  input  logic                 completion_i,
  input  logic [N_CLASSES-1:0] pdl_i,
  output logic                 wait_o,
  output logic                 ack
);
  timeunit 1ps;
  timeprecision 100fs;

  logic join_q;

  // C-element over all PDL outputs (join)
  always_latch begin
    if (!rst_n)             join_q = 1'b0;
    else if (&pdl_i)        join_q = 1'b1;
    else if (!(|pdl_i))     join_q = 1'b0;
  end

  assign wait_o = completion_i ^ join_q;

  // C-element of completion and join
  always_latch begin
    if (!rst_n)                          ack = 1'b0;
    else if (completion_i && join_q)     ack = 1'b1;
    else if (!completion_i && !join_q)   ack = 1'b0;
  end
endmodule
