// tm_workload_runner: drives one async_tm_top of a given size through a
// batch of inferences with a random sparse model and random feature
// vectors, and checks every prediction against an independent argmax of
// the class sums (any tied class accepted) and the completion and ack
// times against the delay model (first clk edge after req + bundling
// delay, plus k*LOW + (N-k)*HIGH per class). It reports its counts on
// finished_o and the average request-to-ack latency. It starts when
// start_i is set, so that several sizes can run one after another.
module tm_workload_runner #(
  parameter string       NAME   = "workload",
  parameter int unsigned NC     = 3,
  parameter int unsigned NF     = 12,
  parameter int unsigned NK     = 10,
  parameter realtime     LO     = 375.4,
  parameter realtime     HI     = 641.9,
  parameter int unsigned N_INF  = 40
) (
  input  bit start_i,
  output bit finished_o,
  output int checks_o,
  output int failures_o
);
  timeunit 1ps;
  timeprecision 100fs;
  import tm_pkg::*;

  localparam realtime     BD   = BUNDLE_PS_DEF;
  localparam realtime     TCLK = 2500.0;
  localparam int unsigned CW   = (NC > 1) ? $clog2(NC) : 1;

  int checks = 0, failures = 0, n_tie = 0, n_wait = 0;
  realtime lat_sum = 0.0, lat_worst = 0.0;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic req = 1'b0;
  logic [NF-1:0] x = '0;
  logic [NC-1:0][NK-1:0][2*NF-1:0] inc = '0;
  logic done, ack, en, w, comp;
  logic [CW-1:0] cls;
  logic [NC-1:0] pdl;
  realtime t_comp, t_ack;

  async_tm_top #(.N_CLASSES(NC), .N_FEATURES(NF), .N_CLAUSES(NK), .LOW_PS(LO), .HIGH_PS(HI)) dut (
    .clk(clk), .rst_n(rst_n), .req(req), .x_i(x), .include_i(inc),
    .done(done), .ack(ack), .en_o(en), .wait_o(w), .completion_o(comp),
    .class_o(cls), .pdl_o(pdl));

  always #(TCLK/2) clk = ~clk;
  always @(posedge comp or negedge comp) t_comp = $realtime;
  always @(posedge ack or negedge ack) t_ack = $realtime;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL [%s] %s at %0t", NAME, what, $realtime);
    end
  endtask

  function automatic logic clause_ref(logic [NF-1:0] xv, logic [2*NF-1:0] m);
    if (m == '0) return 1'b0;
    return ((m[NF-1:0] & ~xv) == '0) && ((m[2*NF-1:NF] & xv) == '0);
  endfunction

  // Each clause includes a few literals over a small window of features,
  // so that clauses fire often enough for the class sums to differ.
  task automatic new_model();
    for (int c = 0; c < NC; c++)
      for (int j = 0; j < NK; j++) begin
        int unsigned n;
        inc[c][j] = '0;
        n = $urandom_range(1, 3);
        for (int l = 0; l < n; l++) begin
          int unsigned f;
          f = $urandom_range(0, (NF < 16 ? NF : 16) - 1);
          inc[c][j][$urandom_range(0, 1) * NF + f] = 1'b1;
        end
      end
  endtask

  initial begin
    finished_o = 1'b0;
    wait (start_i);
    new_model();
    #(4*TCLK + NK*HI) rst_n = 1'b1;   // hold reset until the delay lines have drained
    #(2*TCLK);
    lat_worst = BD + TCLK + NK * HI;
    for (int it = 0; it < N_INF; it++) begin
      int sum[NC];
      int unsigned k[NC];
      int best, nb;
      realtime t_req, t_edge, t_first, t_last, d;
      logic [NF-1:0] xv;
      for (int b = 0; b < NF; b++) xv[b] = 1'($urandom_range(0, 1));
      x = xv;
      best = -1000000;
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
      nb = 0;
      for (int c = 0; c < NC; c++) if (sum[c] == best) nb++;
      #(100 + $urandom_range(0, 3000));
      req = ~req;
      t_req = $realtime;
      t_edge = TCLK * $ceil((t_req + BD - TCLK/2) / TCLK) + TCLK/2;
      t_first = 1.0e15; t_last = 0.0;
      for (int c = 0; c < NC; c++) begin
        d = t_edge + k[c] * LO + (NK - k[c]) * HI;
        if (d < t_first) t_first = d;
        if (d > t_last)  t_last = d;
      end
      wait (ack == req);
      #1;
      chk(t_comp > t_first - 0.05 && t_comp < t_first + 0.05,
          $sformatf("completion time %0.1f exp %0.1f", t_comp, t_first));
      chk(t_ack > t_last - 0.05 && t_ack < t_last + 0.05,
          $sformatf("ack time %0.1f exp %0.1f", t_ack, t_last));
      chk(int'(cls) < NC && sum[cls] == best,
          $sformatf("class %0d, best sum %0d", cls, best));
      chk(t_ack - t_req <= lat_worst, "latency within worst case");
      if (nb > 1) n_tie++;
      if (t_last > t_first) n_wait++;
      lat_sum += t_ack - t_req;
    end
    chk(n_wait > 0, "wait periods happened");
    $display("[%s] %0d classes, %0d features, %0d clauses: %0d inferences, %0d ties, mean req-to-ack %0.1f ns (worst case %0.1f ns)",
             NAME, NC, NF, NK, N_INF, n_tie, lat_sum / N_INF / 1000.0, lat_worst / 1000.0);
    checks_o = checks;
    failures_o = failures;
    finished_o = 1'b1;
  end
endmodule
