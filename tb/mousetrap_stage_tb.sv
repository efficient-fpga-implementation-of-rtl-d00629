// mousetrap_stage_tb: steps the stage through several two-phase cycles.
// After reset the latches are open (en = 1) and data passes. A req toggle
// reaches done and closes the latches (en = 0); data and further req
// changes are then ignored until ack follows done, which reopens them.
module mousetrap_stage_tb;
  timeunit 1ps;
  timeprecision 100fs;

  localparam int unsigned W = 12;

  int checks = 0, failures = 0;
  logic rst_n = 1'b0;
  logic req = 1'b0, ack = 1'b0;
  logic [W-1:0] d = '0;
  logic done, en;
  logic [W-1:0] q;

  mousetrap_stage #(.WIDTH(W)) dut (.rst_n(rst_n), .req(req), .data_i(d), .ack(ack),
                                    .done(done), .data_o(q), .en(en));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t (done=%b ack=%b en=%b)", what, $realtime, done, ack, en);
    end
  endtask

  initial begin
    #100 rst_n = 1'b1;
    #10 chk(en == 1'b1 && done == 1'b0, "open after reset");
    for (int it = 0; it < 20; it++) begin
      logic [W-1:0] held;
      d = W'($urandom);
      #10 chk(q == d, "transparent data");
      held = d;
      req = ~req;                         // new request
      #10 chk(done == req, "done follows req");
      chk(en == 1'b0, "latches closed");
      d = ~d;                             // data changes while closed
      #10 chk(q == held, "data held while closed");
      req = ~req;                         // a spurious req toggle must not pass
      #10 chk(done != req, "req blocked while closed");
      req = ~req;                         // restore
      ack = done;                         // controller acknowledges
      #10 chk(en == 1'b1, "latches reopen on ack");
      chk(q == d, "new data passes after ack");
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
