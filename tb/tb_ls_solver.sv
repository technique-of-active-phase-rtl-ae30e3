// tb_ls_solver: self-checking test of the least-squares phase estimate.
// For random true phases and visibilities the testbench builds the four
// fixed-step fractions f_k = (1 + V cos(alpha_k - theta)) / 2 (with a little
// noise), evaluates the cost S(p) of every grid candidate in floating point
// and checks that the solver's choice has the minimum cost (within rounding
// of the Q1.15 arithmetic). Noise-free inputs on a grid point must return
// exactly that point. Also checks the latency of N_FIXED*P + 2 cycles.
module tb_ls_solver;
  import apsc_pkg::*;
  localparam int P = 64;
  localparam real PI = 3.14159265358979323846;
  logic clk = 0, rst_n = 0, start = 0, done;
  frac_t frac [N_FIXED];
  logic [5:0] best_idx;
  logic [35:0] best_s;
  int checks = 0, failures = 0;

  ls_solver #(.P(P)) dut (.clk, .rst_n, .start, .frac, .done, .best_idx, .best_s);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real cost(int p, real f [N_FIXED]);
    real s = 0.0;
    for (int k = 0; k < N_FIXED; k++) begin
      real g;
      g = (1.0 + $cos(2.0 * PI * (real'(k) / 4.0 - real'(p) / real'(P)))) / 2.0;
      s += (g - f[k]) ** 2;
    end
    return s;
  endfunction

  task automatic run_case(real theta, real vis, real noise, int exact_idx);
    real f [N_FIXED];
    real smin, sdut;
    int  pmin, lat;
    for (int k = 0; k < N_FIXED; k++) begin
      f[k] = (1.0 + vis * $cos(2.0 * PI * real'(k) / 4.0 - theta)) / 2.0
             + noise * (real'($urandom_range(0, 2000)) / 1000.0 - 1.0);
      if (f[k] < 0.0) f[k] = 0.0;
      if (f[k] > 1.0) f[k] = 1.0;
      frac[k] = frac_t'(int'(f[k] * 32768.0));
      f[k] = real'(frac[k]) / 32768.0;
    end
    smin = 1.0e9; pmin = 0;
    for (int p = 0; p < P; p++) begin
      real c;
      c = cost(p, f);
      if (c < smin) begin smin = c; pmin = p; end
    end
    @(posedge clk); start <= 1; @(posedge clk); start <= 0;
    lat = 1;
    while (!done) begin @(posedge clk); lat++; end
    checks++;
    if (lat != N_FIXED * P + 2) begin
      failures++; $display("FAIL latency %0d", lat);
    end
    sdut = cost(int'(best_idx), f);
    checks++;
    if (sdut > smin + 2.0e-4) begin
      failures++;
      $display("FAIL theta=%f: dut idx %0d S=%f, best %0d S=%f", theta, best_idx, sdut, pmin, smin);
    end
    if (exact_idx >= 0) begin
      checks++;
      if (int'(best_idx) != exact_idx) begin
        failures++; $display("FAIL exact case: idx %0d exp %0d", best_idx, exact_idx);
      end
    end
  endtask

  initial begin
    for (int k = 0; k < N_FIXED; k++) frac[k] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int p = 0; p < P; p += 5) run_case(2.0 * PI * real'(p) / real'(P), 1.0, 0.0, p);
    for (int i = 0; i < 60; i++)
      run_case(2.0 * PI * real'($urandom_range(0, 9999)) / 10000.0,
               0.6 + 0.4 * real'($urandom_range(0, 100)) / 100.0, 0.03, -1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
