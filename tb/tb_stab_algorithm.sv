// tb_stab_algorithm: self-checking test of the algorithm module (sequencer,
// least-squares solver, table and QKD control together), reduced timing
// (500-cycle steps), all 128 paths. The testbench returns noise-free photon
// counts for the current path and code from an ideal interferometer with a
// known phase per path. Checks: no QKD switching before the table is valid;
// after the preparation pass every table entry (read through the host
// port) lies within 0.15 rad of the ideal phase; in the QKD stage each slot
// selects the offered random number as path, records it, and outputs the
// table code of that path; `enable` low blocks a new pass.
module tb_stab_algorithm;
  import apsc_pkg::*;
  localparam int STEP = 500, SETTLE = 20, PERM = 23 * STEP + 10;
  localparam int NCNT = 20000, GBASE = 32768 - 8192;
  localparam real PI = 3.14159265358979323846;

  logic clk = 0, rst_n = 0, enable = 1, sec_start = 0, prep = 0, slot_tick = 0, rn_valid = 0;
  logic [23:0] cnt1, cnt2;
  logic tdc_clear, tdc_gate, rn_take, code_valid, rec_we, table_valid, prep_busy, prep_done, underrun, meas_valid;
  path_t rn = '0, path, rec_data, host_tbl_addr = '0;
  code_t code, meas_code;
  ref_entry_t host_tbl_data;
  stage_e stage;
  logic [4:0] meas_step;
  frac_t meas_frac;
  int checks = 0, failures = 0;

  stab_algorithm #(.PERM_CYCLES(PERM), .STEP_CYCLES(STEP), .SETTLE_CYCLES(SETTLE)) dut (
    .clk, .rst_n, .enable, .sec_start, .prep, .slot_tick, .cnt1, .cnt2, .tdc_clear, .tdc_gate,
    .rn, .rn_valid, .rn_take, .path, .code, .code_valid, .rec_we, .rec_data,
    .host_tbl_addr, .host_tbl_data, .stage, .table_valid, .prep_busy, .prep_done, .underrun,
    .meas_valid, .meas_step, .meas_frac, .meas_code);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (128 * PERM + 100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real theta_of(int r);
    return 2.0 * PI * real'((r * 577 + 91) % 1000) / 1000.0;
  endfunction

  code_t applied = DAC_MID;
  always @(posedge clk) if (code_valid) applied <= code;
  always_comb begin
    int c1;
    c1 = int'(real'(NCNT) * (1.0 + 0.95 * $cos(2.0 * PI * real'(int'(applied) - GBASE) / 16384.0 - theta_of(int'(path)))) / 2.0);
    cnt1 = 24'(c1);
    cnt2 = 24'(NCNT - c1);
  end

  int n_rec_early = 0;
  always @(posedge clk) if (rst_n && rec_we && !table_valid) n_rec_early++;

  task automatic tick();
    @(negedge clk); slot_tick = 1; @(negedge clk); slot_tick = 0;
  endtask

  initial begin
    ref_entry_t tbl [N_PATHS];
    repeat (3) @(negedge clk);
    rst_n = 1;
    // QKD ticks before any table exists: nothing may happen
    rn = 7'd5; rn_valid = 1;
    repeat (3) begin tick(); repeat (10) @(negedge clk); end
    checks++;
    if (n_rec_early != 0 || table_valid) begin failures++; $display("FAIL QKD before table"); end
    // disabled: start is ignored
    enable = 0; prep = 1;
    @(negedge clk); sec_start = 1; @(negedge clk); sec_start = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (prep_busy) begin failures++; $display("FAIL pass started while disabled"); end
    enable = 1;
    @(negedge clk); sec_start = 1; @(negedge clk); sec_start = 0;
    wait (prep_done);
    @(negedge clk); @(negedge clk);
    prep = 0;
    checks++;
    if (!table_valid) begin failures++; $display("FAIL table not valid"); end
    for (int r = 0; r < N_PATHS; r++) begin
      real e;
      host_tbl_addr = path_t'(r);
      @(negedge clk); @(negedge clk);
      tbl[r] = host_tbl_data;
      e = 2.0 * PI * real'(int'(tbl[r].code) - GBASE) / 16384.0 - theta_of(r);
      while (e > PI) e -= 2.0 * PI;
      while (e <= -PI) e += 2.0 * PI;
      checks++;
      if (e > 0.15 || e < -0.15) begin failures++; $display("FAIL path %0d phase error %f", r, e); end
    end
    // QKD slots
    for (int s = 0; s < 300; s++) begin
      path_t v;
      logic got_code, got_rec;
      v = path_t'($urandom);
      rn = v; rn_valid = 1;
      tick();
      got_code = 0; got_rec = 0;
      for (int c = 0; c < 8; c++) begin
        if (rec_we) begin got_rec = 1; if (rec_data != v) begin failures++; $display("FAIL record %0d exp %0d", rec_data, v); end end
        if (code_valid) begin got_code = 1; if (code != tbl[v].code) begin failures++; $display("FAIL code %0d exp %0d", code, tbl[v].code); end end
        @(negedge clk);
      end
      checks += 3;
      if (!got_code || !got_rec) begin failures++; $display("FAIL slot %0d incomplete", s); end
      if (path != v) begin failures++; $display("FAIL path %0d exp %0d", path, v); end
      if (stage != STAGE_QKD) begin failures++; $display("FAIL stage"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
