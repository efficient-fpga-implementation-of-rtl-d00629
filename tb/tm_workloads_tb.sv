// tm_workloads_tb: runs the Tsetlin Machine sizes evaluated besides the
// default one, each with the net delays found for it:
//   Iris,  3 classes,  12 features,  50 clauses, nets 388.6 / 593.0 ps
//   MNIST, 10 classes, 784 features, 50 clauses, nets 402.8 / 603.3 ps
//   MNIST, 10 classes, 784 features, 100 clauses, nets 371.1 / 632.1 ps
// The trained models and data sets are not available, so each runs a
// random sparse model on random feature vectors; predictions and timing
// are checked by tm_workload_runner. The three sizes run one after the
// other.
module tm_workloads_tb;
  timeunit 1ps;
  timeprecision 100fs;

  bit f0, f1, f2;
  int c0, c1, c2, e0, e1, e2;

  tm_workload_runner #(.NAME("iris_50"),   .NC(3),  .NF(12),  .NK(50),  .LO(388.6), .HI(593.0), .N_INF(60))
    u_iris50   (.start_i(1'b1), .finished_o(f0), .checks_o(c0), .failures_o(e0));
  tm_workload_runner #(.NAME("mnist_50"),  .NC(10), .NF(784), .NK(50),  .LO(402.8), .HI(603.3), .N_INF(40))
    u_mnist50  (.start_i(f0), .finished_o(f1), .checks_o(c1), .failures_o(e1));
  tm_workload_runner #(.NAME("mnist_100"), .NC(10), .NF(784), .NK(100), .LO(371.1), .HI(632.1), .N_INF(40))
    u_mnist100 (.start_i(f1), .finished_o(f2), .checks_o(c2), .failures_o(e2));

  initial begin
    wait (f0 && f1 && f2);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, e0 + e1 + e2);
    $finish;
  end

  initial begin
    #100000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, e0 + e1 + e2 + 1);
    $finish;
  end
endmodule
