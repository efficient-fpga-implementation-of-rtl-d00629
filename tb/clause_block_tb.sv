// clause_block_tb: applies random feature vectors and random include masks
// (sparse, so that clauses are often satisfied) to the default clause
// block (12 features, 10 clauses) and compares every clause output with a
// literal-by-literal reference evaluation. Empty clauses must output 0.
module clause_block_tb;
  timeunit 1ps;
  timeprecision 100fs;

  localparam int unsigned F = 12;
  localparam int unsigned C = 10;

  int checks = 0, failures = 0;
  int ones = 0;
  logic [F-1:0] x;
  logic [C-1:0][2*F-1:0] inc;
  logic [C-1:0] y;

  clause_block #(.N_FEATURES(F), .N_CLAUSES(C)) dut (.x_i(x), .include_i(inc), .clause_o(y));

  function automatic logic ref_clause(logic [F-1:0] xv, logic [2*F-1:0] m);
    logic r = 1'b1;
    logic any = 1'b0;
    for (int f = 0; f < F; f++) begin
      if (m[f])   begin any = 1'b1; if (!xv[f]) r = 1'b0; end
      if (m[F+f]) begin any = 1'b1; if (xv[f])  r = 1'b0; end
    end
    return any & r;
  endfunction

  initial begin
    for (int it = 0; it < 400; it++) begin
      x = F'($urandom);
      for (int j = 0; j < C; j++) begin
        inc[j] = '0;
        if (it % 7 != 0) begin
          int unsigned n;
          n = $urandom_range(1, 3);
          for (int l = 0; l < n; l++) inc[j][$urandom_range(0, 2*F-1)] = 1'b1;
        end
      end
      #10;
      for (int j = 0; j < C; j++) begin
        checks++;
        if (y[j]) ones++;
        if (y[j] !== ref_clause(x, inc[j])) begin
          failures++;
          $display("FAIL clause %0d x=%h inc=%h got %b", j, x, inc[j], y[j]);
        end
      end
    end
    checks++;
    if (ones == 0) begin
      failures++;
      $display("FAIL no clause ever fired");
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
