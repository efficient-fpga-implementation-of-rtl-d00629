// pdl: programmable delay line computing one class sum in the time domain.
//
// A D flip-flop, clocked by the free-running synchronisation clock,
// releases the start transition (rising or falling) on a clock edge, so
// that every PDL of the design starts at the same instant. The transition
// then ripples through N_ELEM delay elements, one per clause. Element j
// takes the long (HIGH_PS) or short (LOW_PS) net depending on clause bit j
// and its polarity: even clauses are positive (1 -> short), odd clauses
// are negative (1 -> long). The end-to-end delay after the clock edge is
//   k * LOW_PS + (N_ELEM - k) * HIGH_PS,
// where k = (positive clauses at 1) + (negative clauses at 0), so the class
// with the larger vote sum (positives minus negatives) arrives first.
// The flip-flop and delay-element chain follow the paper; the alternating
// polarity order and the reset of the flip-flop are this design's choices.
module pdl
  import tm_pkg::*;
#(
  parameter int unsigned N_ELEM  = N_CLAUSES_DEF,
  parameter realtime     LOW_PS  = LOW_PS_DEF,
  parameter realtime     HIGH_PS = HIGH_PS_DEF
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start_i,
  input  logic [N_ELEM-1:0] sel_i,
  output logic              pdl_o
);
  timeunit 1ps;
  timeprecision 100fs;

  logic [N_ELEM:0] chain;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) chain[0] <= 1'b0;
    else        chain[0] <= start_i;
  end

  for (genvar j = 0; j < N_ELEM; j++) begin : g_elem
    delay_element #(
      .NEGATIVE(clause_is_negative(j)),
      .LOW_PS  (LOW_PS),
      .HIGH_PS (HIGH_PS)
    ) u_de (
      .in_i (chain[j]),
      .sel_i(sel_i[j]),
      .out_o(chain[j+1])
    );
  end

  assign pdl_o = chain[N_ELEM];
endmodule
