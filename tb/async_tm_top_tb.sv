// async_tm_top_tb: end-to-end test of the asynchronous Tsetlin Machine at
// its default size (3 classes, 12 features, 10 clauses per class).
//
// A random sparse model (include masks) is loaded and a batch of random
// feature vectors is run through the two-phase handshake: the environment
// toggles req, waits for ack, and immediately presents the next vector,
// as a batch source that toggles req on done would. For every inference
// the testbench works out, independently of the design,
//   * each class sum (positive clauses at 1 minus negative clauses at 1),
//     the expected winner (any of the tied classes on a tie);
//   * the time of every PDL arrival: the first clk edge at or after
//     req + bundling delay, plus k*LOW + (10-k)*HIGH for that class;
// and checks the decoded class, that completion happens exactly at the
// earliest arrival, that wait is raised in between and that ack comes
// exactly at the latest arrival. The feature vector is changed while the
// latches are closed to check that the MOUSETRAP stage holds it.
// Every mechanism is counted (rising and falling inferences, ties, wait
// periods, data held against a change) and one that never happened is a
// failure. A new model is drawn every 25 inferences.
module async_tm_top_tb;
  timeunit 1ps;
  timeprecision 100fs;
  import tm_pkg::*;

  localparam int unsigned NC = N_CLASSES_DEF;
  localparam int unsigned NF = N_FEATURES_DEF;
  localparam int unsigned NK = N_CLAUSES_DEF;
  localparam realtime     LO = LOW_PS_DEF;
  localparam realtime     HI = HIGH_PS_DEF;
  localparam realtime     BD = BUNDLE_PS_DEF;
  localparam realtime     TCLK = 2500.0;     // 400 MHz start-synchronisation clock
  localparam int unsigned N_INF = 200;
  localparam int unsigned CW = $clog2(NC);

  int checks = 0, failures = 0;
  int n_rise = 0, n_fall = 0, n_tie = 0, n_wait = 0, n_hold = 0;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic req = 1'b0;
  logic [NF-1:0] x = '0;
  logic [NC-1:0][NK-1:0][2*NF-1:0] inc = '0;
  logic done, ack, en, w, comp;
  logic [CW-1:0] cls;
  logic [NC-1:0] pdl;
  realtime t_comp, t_ack, t_wait;

  async_tm_top dut (
    .clk(clk), .rst_n(rst_n), .req(req), .x_i(x), .include_i(inc),
    .done(done), .ack(ack), .en_o(en), .wait_o(w), .completion_o(comp),
    .class_o(cls), .pdl_o(pdl));

  always #(TCLK/2) clk = ~clk;
  always @(posedge comp or negedge comp) t_comp = $realtime;
  always @(posedge ack or negedge ack) t_ack = $realtime;
  always @(posedge w) t_wait = $realtime;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $realtime);
    end
  endtask

  function automatic logic clause_ref(logic [NF-1:0] xv, logic [2*NF-1:0] m);
    logic r = 1'b1;
    if (m == '0) return 1'b0;
    for (int f = 0; f < NF; f++) begin
      if (m[f] && !xv[f]) r = 1'b0;
      if (m[NF+f] && xv[f]) r = 1'b0;
    end
    return r;
  endfunction

  task automatic new_model();
    for (int c = 0; c < NC; c++)
      for (int j = 0; j < NK; j++) begin
        inc[c][j] = '0;
        for (int l = 0; l < $urandom_range(1, 3); l++)
          inc[c][j][$urandom_range(0, 2*NF-1)] = 1'b1;
      end
  endtask

  initial begin
    new_model();
    #(4*TCLK + NK*HI) rst_n = 1'b1;   // hold reset until the delay lines have drained
    #(2*TCLK);
    for (int it = 0; it < N_INF; it++) begin
      int sum[NC];
      int unsigned k[NC];
      int best;
      realtime t_req, t_edge, t_first, t_last;
      logic [NF-1:0] xv;
      bit tie;
      if (it % 25 == 24) new_model();
      xv = NF'($urandom);
      x = xv;
      // reference: class sums, short-net counts, winner
      best = -1000;
      for (int c = 0; c < NC; c++) begin
        sum[c] = 0; k[c] = 0;
        for (int j = 0; j < NK; j++) begin
          logic o;
          o = clause_ref(xv, inc[c][j]);
          if (j % 2 == 0) begin sum[c] += int'(o); k[c] += o ? 1 : 0; end
          else            begin sum[c] -= int'(o); k[c] += o ? 0 : 1; end
        end
        if (sum[c] > best) best = sum[c];
      end
      tie = 0;
      begin
        int nb;
        nb = 0;
        for (int c = 0; c < NC; c++) if (sum[c] == best) nb++;
        tie = (nb > 1);
      end
      // launch
      #(100 + $urandom_range(0, 3000));
      chk(en == 1'b1, "latches open before request");
      req = ~req;
      t_req = $realtime;
      #1;
      chk(en == 1'b0 && done == req, "request latched");
      if (req) n_rise++; else n_fall++;
      // change the input while the latches are closed
      x = ~xv;
      // expected timing
      t_edge = TCLK * $ceil((t_req + BD - TCLK/2) / TCLK) + TCLK/2;   // posedges at TCLK/2 + n*TCLK
      t_first = 1.0e12; t_last = 0.0;
      for (int c = 0; c < NC; c++) begin
        realtime d;
        d = t_edge + k[c] * LO + (NK - k[c]) * HI;
        if (d < t_first) t_first = d;
        if (d > t_last)  t_last = d;
      end
      wait (ack == req);
      #1;
      chk(comp == req, "completion at request level");
      chk(pdl == {NC{req}}, $sformatf("all PDL outputs arrived before ack (pdl=%b req=%b)", pdl, req));
      chk(t_comp > t_first - 0.05 && t_comp < t_first + 0.05,
          $sformatf("completion time %0.1f exp %0.1f", t_comp, t_first));
      chk(t_ack > t_last - 0.05 && t_ack < t_last + 0.05,
          $sformatf("ack time %0.1f exp %0.1f", t_ack, t_last));
      if (t_last > t_first + 0.05) begin
        chk(t_wait > t_first - 0.05 && t_wait < t_first + 0.05, "wait raised at completion");
        n_wait++;
      end
      chk(sum[cls] == best, $sformatf("class %0d (sum %0d), best sum %0d", cls, sum[cls], best));
      if (tie) n_tie++;
      else if (sum[cls] == best) n_hold++;   // decided on the held, not the changed, vector
      chk(w == 1'b0 && en == 1'b1, "stage reopened");
    end
    chk(n_rise > 0, "rising inferences happened");
    chk(n_fall > 0, "falling inferences happened");
    chk(n_tie > 0, "ties happened");
    chk(n_wait > 0, "wait periods happened");
    chk(n_hold > 0, "data held while latches closed");
    $display("rising=%0d falling=%0d ties=%0d waits=%0d held=%0d", n_rise, n_fall, n_tie, n_wait, n_hold);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(N_INF * 100000.0);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
