// prime_scaling_tb: the multi-core prime-counting workload on 1, 2, 4 and 8
// cores at the default cache and memory sizes.
//
// Four systems run side by side, each with its own copy of the program
// (prime_run). Each must report the number of primes below LIMIT, computed
// here independently, and doubling the core count must cut the cycle count
// to under 70 % of the previous one (the evaluated systems nearly halve it).
// The cycle counts are printed for comparison.
module prime_scaling_tb;
  localparam int LIMIT = 300;
  logic clk = 0; always #5 clk = ~clk;
  logic done [4]; logic [31:0] total [4]; int cycles [4];
  int checks = 0, failures = 0;

  prime_run #(.NC(1), .LIMIT(LIMIT)) r1 (.clk, .done(done[0]), .total(total[0]), .cycles(cycles[0]));
  prime_run #(.NC(2), .LIMIT(LIMIT)) r2 (.clk, .done(done[1]), .total(total[1]), .cycles(cycles[1]));
  prime_run #(.NC(4), .LIMIT(LIMIT)) r4 (.clk, .done(done[2]), .total(total[2]), .cycles(cycles[2]));
  prime_run #(.NC(8), .LIMIT(LIMIT)) r8 (.clk, .done(done[3]), .total(total[3]), .cycles(cycles[3]));

  function automatic int count_primes(input int lim);
    int c = 0;
    for (int n = 2; n < lim; n++) begin
      bit p = 1;
      for (int d = 2; d * d <= n; d++) if (n % d == 0) p = 0;
      c += int'(p);
    end
    return c;
  endfunction

  initial begin
    automatic int expected = count_primes(LIMIT);
    @(posedge clk);
    wait (done[0] && done[1] && done[2] && done[3]);
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (total[i] != 32'(expected)) begin
        failures++; $display("FAIL %0d cores: %0d primes, expected %0d", 1 << i, total[i], expected);
      end
      $display("%0d cores: %0d primes in %0d cycles", 1 << i, total[i], cycles[i]);
      if (i > 0) begin
        checks++;
        if (cycles[i] * 10 >= cycles[i-1] * 7) begin
          failures++; $display("FAIL %0d cores not faster enough than %0d", 1 << i, 1 << (i - 1));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
