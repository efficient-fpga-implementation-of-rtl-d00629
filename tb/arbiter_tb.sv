// arbiter_tb: races two inputs through one arbiter node. For alternating
// rising and falling phases and random arrival gaps (including the case
// where only one input ever moves, as for a constant-padded node) it
// checks that output_o names the first arrival (0 = upper, 1 = lower),
// that completion takes the phase level exactly at the first arrival and
// not before, and that the result holds after the second arrival.
module arbiter_tb;
  timeunit 1ps;
  timeprecision 100fs;

  int checks = 0, failures = 0;
  logic phase = 1'b0;
  logic up = 1'b0, lo = 1'b0;
  logic completion, out;
  realtime t_comp;

  arbiter dut (.phase_i(phase), .input_up(up), .input_lo(lo),
               .completion(completion), .output_o(out));

  always @(posedge completion or negedge completion) t_comp = $realtime;

  task automatic expect_bit(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %b exp %b (phase %b) at %0t", what, got, exp, phase, $realtime);
    end
  endtask

  initial begin
    #1000;
    for (int it = 0; it < 40; it++) begin
      int unsigned gap;
      logic up_first, lo_moves, up_moves;
      realtime t0;
      phase    = ~phase;                    // new direction
      up_first = $urandom_range(0, 1);
      gap      = $urandom_range(1, 800);
      lo_moves = !(it % 5 == 4 && up_first);   // sometimes the lower input is a constant
      up_moves = !(it % 5 == 4 && !up_first);  // or the upper one
      #500;
      expect_bit(completion, ~phase, "completion before arrival");
      t0 = $realtime;
      if (up_first) up = phase; else lo = phase;
      #0.1;
      expect_bit(completion, phase, "completion at first arrival");
      checks++;
      if (t_comp != t0) begin
        failures++;
        $display("FAIL completion at %0t, first arrival at %0t", t_comp, t0);
      end
      expect_bit(out, !up_first, "winner after first arrival");
      #(gap);
      if (up_first && lo_moves) lo = phase;
      if (!up_first && up_moves) up = phase;
      #100;
      expect_bit(out, !up_first, "winner held after second arrival");
      expect_bit(completion, phase, "completion held");
      // settle both inputs to the phase level before the next race
      // (a constant input returns at the phase change, like ~phase does)
      up = phase; lo = phase;
      #100;
    end
    // simultaneous arrival: any winner, but completion must happen
    phase = ~phase; #500;
    up = phase; lo = phase; #10;
    expect_bit(completion, phase, "completion on tie");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
