// delay_element_tb: measures the delay of a positive and a negative
// delay element for both select values and both edge directions, and
// checks it against the routed net delays (low 375.4 ps, high 641.9 ps):
// positive element, select 1 -> low net; negative element, select 1 ->
// high net. Also checks the LUT truth table INIT = 8'hCA statically.
module delay_element_tb;
  timeunit 1ps;
  timeprecision 100fs;

  localparam realtime LO = 375.4;
  localparam realtime HI = 641.9;

  int checks = 0, failures = 0;
  logic a = 1'b0;
  logic sel = 1'b0;
  logic y_pos, y_neg;
  realtime t_start, t_pos, t_neg;

  delay_element #(.NEGATIVE(1'b0), .LOW_PS(LO), .HIGH_PS(HI)) u_pos (.in_i(a), .sel_i(sel), .out_o(y_pos));
  delay_element #(.NEGATIVE(1'b1), .LOW_PS(LO), .HIGH_PS(HI)) u_neg (.in_i(a), .sel_i(sel), .out_o(y_neg));

  always @(posedge y_pos or negedge y_pos) t_pos = $realtime;
  always @(posedge y_neg or negedge y_neg) t_neg = $realtime;

  task automatic check_time(input realtime got, input realtime exp, input string what);
    checks++;
    if (got < exp - 0.05 || got > exp + 0.05) begin
      failures++;
      $display("FAIL %s: delay %0.1f ps, expected %0.1f ps", what, got, exp);
    end
  endtask

  initial begin
    #1000;
    for (int i = 0; i < 8; i++) begin
      sel = i[1];
      #500;
      a = ~a;
      t_start = $realtime;
      #2000;
      check_time(t_pos - t_start, sel ? LO : HI, "positive element");
      check_time(t_neg - t_start, sel ? HI : LO, "negative element");
      checks++;
      if (y_pos !== a || y_neg !== a) begin
        failures++;
        $display("FAIL outputs do not follow input");
      end
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
