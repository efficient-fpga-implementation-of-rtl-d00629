// async_tm_top: asynchronous Tsetlin Machine inference with time-domain
// popcount and argmax.
//
// Data flow of one inference:
//   1. The environment presents a feature vector on x_i and toggles req
//      (two-phase handshake). The MOUSETRAP stage passes the toggle to
//      done and closes its latches, holding the vector.
//   2. The clause blocks (one per class) evaluate the held vector; their
//      propagation delay is represented by CLAUSE_PS. done, delayed by the
//      bundling net (BUNDLE_PS, longer than the clause logic), is the
//      start transition of every PDL.
//   3. Each PDL's start flip-flop releases the transition on the next clk
//      edge; the transition runs through one delay element per clause,
//      each taking a short or long net chosen by its clause output, so a
//      class with more votes arrives earlier.
//   4. The arbiter tree reports the earliest arrival: completion_o takes
//      the level of done and class_o holds the winning class.
//   5. The asynchronous controller waits (wait_o) until every PDL output
//      has arrived, then toggles ack, which reopens the MOUSETRAP latches.
// The controller only waits for the PDL outputs. When an output arrived
// over a short net, the unselected long net into the same element settles
// HIGH_PS - LOW_PS later; the new select values must not reach the PDL
// before that, so CLAUSE_PS > HIGH_PS - LOW_PS is required (a timing
// assumption, not enforced by the handshake; checked at elaboration).
// Successive inferences alternate between rising and falling transitions.
// phase (= done) tells the arbiters which direction is in flight.
//
// The handshake is a ring (done -> PDLs -> arbiters -> controller ->
// ack -> latch enable -> done), and the arbiters are cross-coupled
// latches, so lint and synthesis report combinational loops here; they are
// the intended asynchronous structure, not errors.
//
// Interface: clk is the free-running start-synchronisation clock; rst_n
// (active low, asynchronous) clears latches, controller and start
// flip-flops; it must be held for at least N_CLAUSES * HIGH_PS (plus a
// clk period) so that whatever level the delay lines held at power-up has
// drained out of them before the first request. include_i holds the trained model: for class c and clause j,
// bits [N_FEATURES-1:0] include x and bits [2*N_FEATURES-1:N_FEATURES]
// include ~x. Even clauses vote for their class, odd clauses against it.
// class_o is valid from the completion_o transition until the next req
// toggle; ack toggling marks the end of the inference.
// The architecture follows the paper; the reset, the bundling and clause delay values,
// the model-as-input form and the ordering of classes in the arbiter tree
// are this design's choices.
module async_tm_top
  import tm_pkg::*;
#(
  parameter int unsigned N_CLASSES  = N_CLASSES_DEF,
  parameter int unsigned N_FEATURES = N_FEATURES_DEF,
  parameter int unsigned N_CLAUSES  = N_CLAUSES_DEF,
  parameter realtime     LOW_PS     = LOW_PS_DEF,
  parameter realtime     HIGH_PS    = HIGH_PS_DEF,
  parameter realtime     CLAUSE_PS  = CLAUSE_PS_DEF,
  parameter realtime     BUNDLE_PS  = BUNDLE_PS_DEF,
  localparam int unsigned CW = (N_CLASSES > 1) ? $clog2(N_CLASSES) : 1
) (
  input  logic                                                  clk,
  input  logic                                                  rst_n,
  input  logic                                                  req,
  input  logic [N_FEATURES-1:0]                                 x_i,
  input  logic [N_CLASSES-1:0][N_CLAUSES-1:0][2*N_FEATURES-1:0] include_i,
  output logic                                                  done,
  output logic                                                  ack,
  output logic                                                  en_o,
  output logic                                                  wait_o,
  output logic                                                  completion_o,
  output logic [CW-1:0]                                         class_o,
  output logic [N_CLASSES-1:0]                                  pdl_o
);
  timeunit 1ps;
  timeprecision 100fs;

  logic [N_FEATURES-1:0]                x_held;
  logic                                 start;
  logic [N_CLASSES-1:0][N_CLAUSES-1:0]  clause;       // clause logic outputs
  logic [N_CLASSES-1:0][N_CLAUSES-1:0]  clause_sel;   // as seen at the PDL select pins

  // Timing assumptions of the bundled-data scheme (checked at elaboration):
  // the bundling delay covers the clause logic, and the clause logic is
  // slower than the residual transition on an unselected long net.
  if (!(BUNDLE_PS > CLAUSE_PS)) begin : g_bad_bundle
    $error("BUNDLE_PS must exceed CLAUSE_PS");
  end
  if (!(CLAUSE_PS > HIGH_PS - LOW_PS)) begin : g_bad_clause
    $error("CLAUSE_PS must exceed HIGH_PS - LOW_PS");
  end

  mousetrap_stage #(.WIDTH(N_FEATURES)) u_stage (
    .rst_n (rst_n),
    .req   (req),
    .data_i(x_i),
    .ack   (ack),
    .done  (done),
    .data_o(x_held),
    .en    (en_o)
  );

  net_delay #(.DELAY_PS(BUNDLE_PS)) u_bundle (.in_i(done), .out_o(start));

  for (genvar c = 0; c < N_CLASSES; c++) begin : g_class
    clause_block #(
      .N_FEATURES(N_FEATURES),
      .N_CLAUSES (N_CLAUSES)
    ) u_clauses (
      .x_i      (x_held),
      .include_i(include_i[c]),
      .clause_o (clause[c])
    );

    for (genvar j = 0; j < N_CLAUSES; j++) begin : g_wire
      net_delay #(.DELAY_PS(CLAUSE_PS)) u_clause_net (.in_i(clause[c][j]), .out_o(clause_sel[c][j]));
    end

    pdl #(
      .N_ELEM (N_CLAUSES),
      .LOW_PS (LOW_PS),
      .HIGH_PS(HIGH_PS)
    ) u_pdl (
      .clk    (clk),
      .rst_n  (rst_n),
      .start_i(start),
      .sel_i  (clause_sel[c]),
      .pdl_o  (pdl_o[c])
    );
  end

  arbiter_tree #(.N_CLASSES(N_CLASSES)) u_tree (
    .phase_i     (done),
    .pdl_i       (pdl_o),
    .completion_o(completion_o),
    .class_o     (class_o)
  );

  async_controller #(.N_CLASSES(N_CLASSES)) u_ctrl (
    .rst_n       (rst_n),
    .completion_i(completion_o),
    .pdl_i       (pdl_o),
    .wait_o      (wait_o),
    .ack         (ack)
  );
endmodule
