// arbiter_tree_tb: races random arrival times through arbiter trees of
// 3 classes (the default, with one constant leaf) and of 10 classes
// (six constant leaves, four levels). In alternating rising and falling
// phases it checks that the root completion changes exactly at the
// earliest arrival and that the decoded class is the earliest one.
module arbiter_tree_tb;
  timeunit 1ps;
  timeprecision 100fs;

  int checks = 0, failures = 0;
  logic phase = 1'b0;

  logic [2:0]  p3 = '0;
  logic [9:0]  p10 = '0;
  logic        c3, c10;
  logic [1:0]  k3;
  logic [3:0]  k10;
  realtime     tc3, tc10;

  arbiter_tree #(.N_CLASSES(3))  dut3  (.phase_i(phase), .pdl_i(p3),  .completion_o(c3),  .class_o(k3));
  arbiter_tree #(.N_CLASSES(10)) dut10 (.phase_i(phase), .pdl_i(p10), .completion_o(c10), .class_o(k10));

  always @(posedge c3 or negedge c3)  tc3  = $realtime;
  always @(posedge c10 or negedge c10) tc10 = $realtime;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $realtime);
    end
  endtask

  initial begin
    #1000;
    for (int it = 0; it < 60; it++) begin
      int unsigned d3[3];
      int unsigned d10[10];
      int unsigned w3, w10, m3, m10;
      realtime t0;
      phase = ~phase;
      #500;
      chk(c3 == ~phase && c10 == ~phase, "completion idle");
      // distinct arrival times in units of 100 ps
      m3 = 1000; m10 = 1000;
      for (int c = 0; c < 3; c++) begin
        d3[c] = 1 + 10 * $urandom_range(0, 40) + c;
        if (d3[c] < m3) begin m3 = d3[c]; w3 = c; end
      end
      for (int c = 0; c < 10; c++) begin
        d10[c] = 1 + 10 * $urandom_range(0, 40) + c;
        if (d10[c] < m10) begin m10 = d10[c]; w10 = c; end
      end
      t0 = $realtime;
      fork
        for (int c = 0; c < 3; c++) begin
          automatic int cc = c;
          fork
            begin #(d3[cc] * 100.0) p3[cc] = phase; end
          join_none
        end
        for (int c = 0; c < 10; c++) begin
          automatic int cc = c;
          fork
            begin #(d10[cc] * 100.0) p10[cc] = phase; end
          join_none
        end
      join
      #50000;
      chk(c3 == phase && c10 == phase, "completion after race");
      chk(tc3 == t0 + m3 * 100.0, "3-class completion time");
      chk(tc10 == t0 + m10 * 100.0, "10-class completion time");
      chk(k3 == 2'(w3), $sformatf("3-class winner %0d exp %0d", k3, w3));
      chk(k10 == 4'(w10), $sformatf("10-class winner %0d exp %0d", k10, w10));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
