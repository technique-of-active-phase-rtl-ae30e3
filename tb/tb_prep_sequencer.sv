// tb_prep_sequencer: self-checking test of the 23-step calibration.
// Reduced timing (step 700 cycles, 4 paths). The testbench plays the
// interferometer: for path r with arm phase theta_r and visibility V_r it
// returns photon counts C1 = N (1 + V cos(phi(code) - theta_r)) / 2 and
// C2 = N - C1 for the code last applied, where phi(code) is the modulator
// phase of that code. A reference model, written here in floating point,
// repeats the search: least-squares PT1 over the 64-point grid, 9 coarse
// codes 655 apart around PT1 (PT3 = best), 8 fine codes 328 apart around
// PT3 (PT5 = best), PT5 again. Checked: the code of every step, the
// measured fraction of every step, the table entry, the step and path
// timing, and that PT5 lies within a few degrees of the ideal phase.
module tb_prep_sequencer;
  import apsc_pkg::*;
  localparam int STEP = 700, SETTLE = 60, PERM = 23 * STEP + 37, NP = 4;
  localparam int CP2PI = 16384, GBASE = 32768 - 8192, NCNT = 20000;
  localparam real PI = 3.14159265358979323846;

  logic clk = 0, rst_n = 0, start = 0;
  logic [23:0] cnt1, cnt2;
  logic tdc_clear, tdc_gate, code_valid, tbl_we, busy, done, meas_valid;
  path_t path, tbl_addr;
  code_t code, meas_code;
  ref_entry_t tbl_wdata;
  logic [4:0] meas_step;
  frac_t meas_frac;
  int checks = 0, failures = 0;

  prep_sequencer #(.N_PATHS_P(NP), .PERM_CYCLES(PERM), .STEP_CYCLES(STEP), .SETTLE_CYCLES(SETTLE))
    dut (.clk, .rst_n, .start, .cnt1, .cnt2, .tdc_clear, .tdc_gate, .path, .code, .code_valid,
         .tbl_we, .tbl_addr, .tbl_wdata, .busy, .done, .meas_valid, .meas_step, .meas_frac, .meas_code);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (NP * PERM + 5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real theta [NP];
  real vis [NP];

  // interferometer + detector model, counts for a code
  function automatic int c1_of(int r, int c);
    real ph;
    ph = 2.0 * PI * real'(c - GBASE) / real'(CP2PI);
    return int'(real'(NCNT) * (1.0 + vis[r] * $cos(ph - theta[r])) / 2.0);
  endfunction
  function automatic int frac_of(int r, int c);
    return int'((longint'(c1_of(r, c)) * 32768) / NCNT);
  endfunction

  code_t applied;
  always @(posedge clk) if (code_valid) applied <= code;
  always_comb begin
    cnt1 = 24'(c1_of(int'(path), int'(applied)));
    cnt2 = 24'(NCNT - c1_of(int'(path), int'(applied)));
  end

  // reference search for path r; fills the expected code of each step
  int exp_code [NP][N_STEPS];
  int exp_pt5 [NP];
  function automatic void reference(int r);
    real f [4];
    real smin;
    int pt1, pt3, pt5, bf, p1;
    for (int k = 0; k < 4; k++) begin
      exp_code[r][k] = GBASE + k * 4096;
      f[k] = real'(frac_of(r, exp_code[r][k])) / 32768.0;
    end
    smin = 1.0e9; p1 = 0;
    for (int p = 0; p < 64; p++) begin
      real s = 0.0;
      for (int k = 0; k < 4; k++)
        s += ((1.0 + $cos(2.0 * PI * (real'(k) / 4.0 - real'(p) / 64.0))) / 2.0 - f[k]) ** 2;
      if (s < smin) begin smin = s; p1 = p; end
    end
    pt1 = GBASE + p1 * 256;
    exp_code[r][4] = pt1;
    bf = -1; pt3 = 0;
    for (int i = 0; i < 9; i++) begin
      exp_code[r][5 + i] = pt1 + (i - 4) * 655;
      if (frac_of(r, exp_code[r][5 + i]) > bf) begin bf = frac_of(r, exp_code[r][5 + i]); pt3 = exp_code[r][5 + i]; end
    end
    bf = -1; pt5 = 0;
    for (int j = 0; j < 8; j++) begin
      exp_code[r][14 + j] = pt3 + (j - 3) * 328;
      if (frac_of(r, exp_code[r][14 + j]) > bf) begin bf = frac_of(r, exp_code[r][14 + j]); pt5 = exp_code[r][14 + j]; end
    end
    exp_code[r][22] = pt5;
    exp_pt5[r] = pt5;
  endfunction

  // monitors
  int t = 0, t_start = 0, last_cv = -1, n_cv = 0, n_meas = 0, n_tbl = 0;
  always @(posedge clk) begin
    t++;
    if (code_valid && rst_n) begin
      n_cv++;
      if (last_cv >= 0 && (n_cv - 1) % 23 != 0) begin
        checks++;
        if (t - last_cv != STEP) begin failures++; $display("FAIL step spacing %0d", t - last_cv); end
      end
      last_cv = t;
    end
    if (meas_valid && rst_n) begin
      int r;
      r = int'(path);
      n_meas++;
      checks += 2;
      if (int'(meas_code) != exp_code[r][meas_step]) begin
        failures++; $display("FAIL path %0d step %0d code %0d exp %0d", r, meas_step + 1, meas_code, exp_code[r][meas_step]);
      end
      if (int'(meas_frac) != frac_of(r, int'(meas_code))) begin
        failures++; $display("FAIL path %0d step %0d frac %0d exp %0d", r, meas_step + 1, meas_frac, frac_of(r, int'(meas_code)));
      end
    end
    if (tbl_we && rst_n) begin
      int r;
      real err;
      r = int'(tbl_addr);
      n_tbl++;
      checks += 3;
      if (int'(tbl_wdata.code) != exp_pt5[r]) begin
        failures++; $display("FAIL table %0d code %0d exp %0d", r, tbl_wdata.code, exp_pt5[r]);
      end
      if (int'(tbl_wdata.check_frac) != frac_of(r, exp_pt5[r])) begin
        failures++; $display("FAIL table %0d check frac", r);
      end
      err = 2.0 * PI * real'(int'(tbl_wdata.code) - GBASE) / real'(CP2PI) - theta[r];
      while (err > PI) err -= 2.0 * PI;
      while (err < -PI) err += 2.0 * PI;
      if (err > 0.25 || err < -0.25) begin
        failures++; $display("FAIL table %0d phase error %f rad", r, err);
      end
      $display("INFO path %0d theta %f PT5 %0d phase error %f rad", r, theta[r], tbl_wdata.code, err);
    end
  end

  initial begin
    for (int r = 0; r < NP; r++) begin
      theta[r] = 2.0 * PI * real'($urandom_range(0, 9999)) / 10000.0;
      vis[r] = 0.85 + 0.14 * real'($urandom_range(0, 100)) / 100.0;
      reference(r);
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (3) @(posedge clk);
    start <= 1; @(posedge clk); start <= 0;
    t_start = t;
    wait (done);
    checks += 3;
    if (t - t_start != NP * PERM + 1) begin failures++; $display("FAIL pass length %0d exp %0d", t - t_start, NP * PERM + 1); end
    if (n_meas != NP * 23) begin failures++; $display("FAIL %0d measurements", n_meas); end
    if (n_tbl != NP) begin failures++; $display("FAIL %0d table writes", n_tbl); end
    @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
