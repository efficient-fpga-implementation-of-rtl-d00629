// pdl_sweep_tb: delay-versus-Hamming-weight characterisation of a
// 150-element PDL, with a low/high net difference of 60 ps and of 600 ps
// (low-latency net 384.5 ps in both). For every weight w = 0..150 the
// effective select vector (w elements on the short net) is applied with
// two different random placements of the short elements; the testbench
// checks that both placements give the same delay (the delay depends on
// the weight, not on which bits are set), that the delay equals
//   w * LOW + (150 - w) * HIGH
// and that it falls strictly as w rises. Process variation is not
// modelled, so the ideal line is expected exactly.
module pdl_sweep_tb;
  timeunit 1ps;
  timeprecision 100fs;
  import tm_pkg::*;

  localparam int unsigned N    = 150;
  localparam realtime     LO   = 384.5;
  localparam realtime     HI_A = LO + 60.0;
  localparam realtime     HI_B = LO + 600.0;
  localparam realtime     TCLK = 400000.0;   // slow clock: one sweep point per period

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic start = 1'b0;
  logic [N-1:0] sel = '0;
  logic ya, yb;
  realtime t_edge, ta, tb;

  pdl #(.N_ELEM(N), .LOW_PS(LO), .HIGH_PS(HI_A)) dut_a (
    .clk(clk), .rst_n(rst_n), .start_i(start), .sel_i(sel), .pdl_o(ya));
  pdl #(.N_ELEM(N), .LOW_PS(LO), .HIGH_PS(HI_B)) dut_b (
    .clk(clk), .rst_n(rst_n), .start_i(start), .sel_i(sel), .pdl_o(yb));

  always #(TCLK/2) clk = ~clk;
  always @(posedge ya or negedge ya) ta = $realtime;
  always @(posedge yb or negedge yb) tb = $realtime;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // effective select: w randomly placed elements on the short net
  function automatic logic [N-1:0] pattern(int unsigned w);
    logic [N-1:0] short_mask = '0;
    logic [N-1:0] neg_mask;
    int unsigned placed = 0;
    while (placed < w) begin
      int unsigned b;
      b = $urandom_range(0, N - 1);
      if (!short_mask[b]) begin
        short_mask[b] = 1'b1;
        placed++;
      end
    end
    for (int j = 0; j < N; j++) neg_mask[j] = clause_is_negative(j);
    return short_mask ^ neg_mask;   // negative elements take the short net on 0
  endfunction

  initial begin
    realtime prev_a, prev_b;
    prev_a = 1.0e15; prev_b = 1.0e15;
    #(2*TCLK) rst_n = 1'b1;
    for (int unsigned w = 0; w <= N; w++) begin
      realtime da[2], db[2];
      for (int rep = 0; rep < 2; rep++) begin
        sel = pattern(w);
        @(negedge clk);
        start = ~start;
        @(posedge clk) t_edge = $realtime;
        #(TCLK/2 - 1000.0);                  // longest line is 150 * 984.5 ps
        da[rep] = ta - t_edge;
        db[rep] = tb - t_edge;
        chk(ya == start && yb == start, "outputs arrived");
      end
      chk(da[0] == da[1] && db[0] == db[1], $sformatf("w=%0d delay depends on placement", w));
      chk(da[0] > w * LO + (N - w) * HI_A - 0.05 && da[0] < w * LO + (N - w) * HI_A + 0.05,
          $sformatf("w=%0d 60 ps line: %0.1f", w, da[0]));
      chk(db[0] > w * LO + (N - w) * HI_B - 0.05 && db[0] < w * LO + (N - w) * HI_B + 0.05,
          $sformatf("w=%0d 600 ps line: %0.1f", w, db[0]));
      chk(da[0] < prev_a && db[0] < prev_b, $sformatf("w=%0d not strictly decreasing", w));
      prev_a = da[0]; prev_b = db[0];
      if (w == 0 || w == N)
        $display("w=%0d: delay %0.2f ns (60 ps step), %0.2f ns (600 ps step)", w, da[0] / 1000.0, db[0] / 1000.0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(400.0 * TCLK * 2);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
