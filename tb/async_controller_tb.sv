// async_controller_tb: for alternating phases, applies the completion
// transition and then the PDL output transitions one by one in random
// order. Checks that wait_o rises with completion, that ack does not move
// while any PDL output is still missing, and that wait_o falls and ack
// takes the phase level once the last PDL output has arrived.
module async_controller_tb;
  timeunit 1ps;
  timeprecision 100fs;

  localparam int unsigned N = 3;

  int checks = 0, failures = 0;
  logic rst_n = 1'b0;
  logic comp = 1'b0;
  logic [N-1:0] p = '0;
  logic w, ack;
  logic phase = 1'b0;

  async_controller #(.N_CLASSES(N)) dut (.rst_n(rst_n), .completion_i(comp), .pdl_i(p),
                                         .wait_o(w), .ack(ack));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t (wait=%b ack=%b)", what, $realtime, w, ack);
    end
  endtask

  initial begin
    #100 rst_n = 1'b1;
    #10 chk(w == 1'b0 && ack == 1'b0, "idle after reset");
    for (int it = 0; it < 30; it++) begin
      int unsigned order[N];
      phase = ~phase;
      for (int c = 0; c < N; c++) order[c] = c;
      order.shuffle();
      // first PDL arrives, completion follows
      p[order[0]] = phase;
      #5 comp = phase;
      #5 chk(w == 1'b1, "wait rises after completion");
      chk(ack != phase, "no ack with PDLs missing");
      for (int c = 1; c < N; c++) begin
        #20;
        chk(w == 1'b1 && ack != phase, "still waiting");
        p[order[c]] = phase;
      end
      #5 chk(w == 1'b0, "wait falls after the last PDL");
      chk(ack == phase, "ack follows");
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
