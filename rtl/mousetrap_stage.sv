// mousetrap_stage: the single MOUSETRAP stage in front of the clause logic.
//
// A bit latch passes the two-phase request req to done, and a data latch
// passes the input vector to the clause blocks. Both are transparent while
// en = XNOR(done, ack). A request toggle passes to done, which makes done
// differ from ack and closes the latches, holding the request and the data
// for the whole inference. When the controller toggles ack the latches
// open again, and the next req toggle (with new data) starts the next
// inference. done is also the transition that, after the bundling delay,
// starts the PDLs. The latch structure and the XNOR enable follow the
// MOUSETRAP circuit used in the paper; the asynchronous reset (both
// latches cleared, latches open) is this design's choice. The latches are
// intended level-sensitive storage.
module mousetrap_stage
  import tm_pkg::*;
#(
  parameter int unsigned WIDTH = N_FEATURES_DEF
) (
  input  logic             rst_n,
  input  logic             req,
  input  logic [WIDTH-1:0] data_i,
  input  logic             ack,
  output logic             done,
  output logic [WIDTH-1:0] data_o,
  output logic             en
);
  timeunit 1ps;
  timeprecision 100fs;

  assign en = ~(done ^ ack);

  always_latch begin
    if (!rst_n) begin
      done   = 1'b0;
      data_o = '0;
    end else if (en) begin
      done   = req;
      data_o = data_i;
    end
  end
endmodule
