// pdl_tb: drives a 10-element PDL with random clause vectors, toggles the
// start input and checks that the output transition arrives
//   k * 375.4 ps + (10 - k) * 641.9 ps
// after the start flip-flop's clock edge, with k = positive clauses at 1
// plus negative clauses at 0 (even clauses positive). Also checks that the
// transition waits for the clock edge and that both edge directions work.
module pdl_tb;
  timeunit 1ps;
  timeprecision 100fs;

  localparam int unsigned N  = 10;
  localparam realtime     LO = 375.4;
  localparam realtime     HI = 641.9;
  localparam realtime     TCLK = 4000.0;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic start = 1'b0;
  logic [N-1:0] sel = '0;
  logic y;
  realtime t_edge, t_out;

  pdl #(.N_ELEM(N), .LOW_PS(LO), .HIGH_PS(HI)) dut (
    .clk(clk), .rst_n(rst_n), .start_i(start), .sel_i(sel), .pdl_o(y));

  always #(TCLK/2) clk = ~clk;
  always @(posedge y or negedge y) t_out = $realtime;

  function automatic int unsigned short_count(logic [N-1:0] s);
    int unsigned k = 0;
    for (int j = 0; j < N; j++) k += ((j % 2 == 0) ? s[j] : !s[j]);
    return k;
  endfunction

  initial begin
    #(3*TCLK) rst_n = 1'b1;
    for (int it = 0; it < 24; it++) begin
      realtime exp_d;
      if (it == 0) sel = 10'b1010101010;        // every element long
      else if (it == 1) sel = 10'b0101010101;   // every element short
      else sel = N'($urandom);
      @(negedge clk);
      #(TCLK/4) start = ~start;                 // between clock edges
      @(posedge clk) t_edge = $realtime;
      checks++;
      if (y !== ~start) begin
        failures++;
        $display("FAIL output changed before it could");
      end
      exp_d = short_count(sel) * LO + (N - short_count(sel)) * HI;
      #(N*HI + 1000);
      checks++;
      if (y !== start) begin
        failures++;
        $display("FAIL output did not follow start");
      end
      checks++;
      if ((t_out - t_edge) < exp_d - 0.05 || (t_out - t_edge) > exp_d + 0.05) begin
        failures++;
        $display("FAIL sel=%b delay %0.1f ps, expected %0.1f ps", sel, t_out - t_edge, exp_d);
      end
    end
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
