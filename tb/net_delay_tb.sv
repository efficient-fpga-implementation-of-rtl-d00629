// net_delay_tb: checks that a net model reproduces its input exactly
// DELAY_PS later, for rising and falling edges, using two delays taken
// from the low- and high-latency nets of the default model.
module net_delay_tb;
  timeunit 1ps;
  timeprecision 100fs;

  int checks = 0, failures = 0;
  logic a = 1'b0;
  logic y_lo, y_hi;

  net_delay #(.DELAY_PS(375.4)) u_lo (.in_i(a), .out_o(y_lo));
  net_delay #(.DELAY_PS(641.9)) u_hi (.in_i(a), .out_o(y_hi));

  task automatic check(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %b exp %b at %0t", what, got, exp, $realtime);
    end
  endtask

  initial begin
    #1000;
    for (int i = 0; i < 4; i++) begin
      a = ~a;
      #375.3 check(y_lo, ~a, "low net before delay");
      #0.2   check(y_lo, a,  "low net after delay");
      #266.3 check(y_hi, ~a, "high net before delay");
      #0.2   check(y_hi, a,  "high net after delay");
      #2000;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
