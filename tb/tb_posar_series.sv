// tb_posar_series: the level-one numerical-series workloads on the posit
// unit at the three sizes Posit(8,1), Posit(16,2) and Posit(32,3).
//
// Each size runs in its own series_runner, which checks the unit's results
// bit for bit against the software model.  In addition the Posit(32,3)
// results must reach a minimum number of exact fraction digits: e 6,
// pi (Nilakantha) 6, sin(1) 8, pi (Leibniz, 2,000,000 iterations) 4.
// The first three equal the published Posit(32,3) figures (this unit gives
// the very same values, 2.7182817, 3.1415922 and 0.84147098).  For Leibniz
// the published figure is 5 digits, but that depends on the exact source
// program, which is not known; the straightforward loop used here
// accumulates rounding error to 3.1415893 (4 digits) in both of the usual
// forms (sum of 1/(2i+1) times 4, or sum of 4/(2i+1)).  The number of
// exact fraction digits of every result is printed for all three sizes.
module tb_posar_series;
  int checks = 0;
  int failures = 0;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic done [3];
  int   c [3], f [3];
  real  res [3][4];

  series_runner #(.PS(8),  .ES(1)) r8  (.clk(clk), .rst_n(rst_n), .done(done[0]), .checks(c[0]),
    .failures(f[0]), .result(res[0]));
  series_runner #(.PS(16), .ES(2)) r16 (.clk(clk), .rst_n(rst_n), .done(done[1]), .checks(c[1]),
    .failures(f[1]), .result(res[1]));
  series_runner #(.PS(32), .ES(3)) r32 (.clk(clk), .rst_n(rst_n), .done(done[2]), .checks(c[2]),
    .failures(f[2]), .result(res[2]));

  localparam real REF [4] = '{2.718281828459045, 3.141592653589793, 0.8414709848078965,
                              3.141592653589793};
  localparam string NAME [4] = '{"e (Euler, 20)", "pi (Nilakantha, 200)", "sin(1) (10)",
                                 "pi (Leibniz, 2M)"};
  localparam int MIN_DIGITS_P32 [4] = '{6, 6, 8, 4};

  // Number of exact fraction digits of v against r (up to 12).
  function automatic int digits(input real v, input real r);
    real sv, sr;
    int d;
    d = 0;
    sv = v; sr = r;
    for (int i = 1; i <= 12; i++) begin
      sv = sv * 10.0; sr = sr * 10.0;
      if ($rtoi(sv) != $rtoi(sr)) break;
      d = i;
    end
    return d;
  endfunction

  initial begin : watchdog
    repeat (40000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (done[0] && done[1] && done[2]);
    for (int s = 0; s < 3; s++) begin
      checks += c[s];
      failures += f[s];
    end
    for (int w = 0; w < 4; w++) begin
      $display("%-22s P8 %.8f (%0d)  P16 %.8f (%0d)  P32 %.10f (%0d)", NAME[w],
               res[0][w], digits(res[0][w], REF[w]), res[1][w], digits(res[1][w], REF[w]),
               res[2][w], digits(res[2][w], REF[w]));
      checks++;
      if (digits(res[2][w], REF[w]) < MIN_DIGITS_P32[w]) begin
        failures++;
        $display("FAIL P32 %s has fewer than %0d exact digits", NAME[w], MIN_DIGITS_P32[w]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
