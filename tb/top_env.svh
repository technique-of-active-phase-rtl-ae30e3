// top_env.svh: shared body of the end-to-end testbenches of bob_ctrl_top.
// The including module defines SEC, PREP, SLOT, N_PPS (seconds started by a
// GPS pulse), N_FREE (seconds without one) and TOL (allowed phase error in
// rad), and instantiates the design as u_dut with .* connections.
//
// Models: optics_model (interferometer, PM and detectors), dac_model (SPI
// DAC), rng_model (random chip). The host bus is driven by this file.
// Checks:
//  - after each preparation pass the whole reference table is read over the
//    host bus; every code must put the PM within TOL of the path's ideal
//    phase (known to the optics model);
//  - at the end of every QKD slot, the DAC output code equals the table
//    code of the path the Pockels gates selected;
//  - while the design is disabled the gates stay low;
//  - the random-number record, read over the host bus, holds exactly the
//    sequence of paths the gates showed, and its total matches;
//  - the number of seconds and the underrun count match what was caused.
// Every mechanism (preparation pass, least-squares fit, coarse scan, fine
// scan, check step, table write, QKD switch, underrun, GPS-aligned second,
// free-running second, host access, disable) is counted; one that never
// happened counts as a failure.

  import apsc_pkg::*;
  localparam real PI = 3.14159265358979323846;

  logic        clk = 0, rst_n = 0;
  logic [1:0]  apd_pulse;
  logic        gps_pps = 0, rng_bit, rng_strobe;
  logic [6:0]  pc_gate;
  logic        dac_sclk, dac_sync_n, dac_din, dac_ldac_n;
  logic [15:0] bus_addr = '0;
  logic        bus_wr = 0, bus_rd = 0;
  logic [31:0] bus_wdata = '0, bus_rdata;
  logic        bus_rvalid;
  logic        rng_pause = 0;
  logic [15:0] dac_out, dac_in_reg;
  int          dac_frames, dac_bad;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  optics_model u_opt (.clk, .pc_gate, .pm_code(dac_out), .new_second(u_dut.sec_start), .apd_pulse);
  dac_model    u_dacm (.sclk(dac_sclk), .sync_n(dac_sync_n), .din(dac_din), .ldac_n(dac_ldac_n),
                       .out_code(dac_out), .input_reg(dac_in_reg), .frames(dac_frames), .bad_frames(dac_bad));
  rng_model    u_rngm (.clk, .pause(rng_pause), .bit_o(rng_bit), .strobe(rng_strobe));

  // ---------------- mechanism counters ----------------
  int n_pass = 0, n_ls = 0, n_coarse = 0, n_fine = 0, n_check = 0, n_tblwr = 0;
  int n_switch = 0, n_under = 0, n_pps_sec = 0, n_free_sec = 0, n_host = 0, n_disabled = 0;
  int n_slot_checked = 0;

  always @(posedge clk) if (rst_n) begin
    if (u_dut.prep_done) n_pass++;
    if (u_dut.u_alg.u_seq.u_ls.done) n_ls++;
    if (u_dut.meas_valid && u_dut.meas_step == 5'd13) n_coarse++;
    if (u_dut.meas_valid && u_dut.meas_step == 5'd21) n_fine++;
    if (u_dut.meas_valid && u_dut.meas_step == 5'd22) n_check++;
    if (u_dut.u_alg.tbl_we) n_tblwr++;
    if (u_dut.underrun) n_under++;
  end

  // ---------------- host bus ----------------
  logic bus_busy = 0;
  task automatic host_read(input logic [15:0] a, output logic [31:0] d);
    wait (!bus_busy);
    bus_busy = 1;
    @(negedge clk); bus_addr = a; bus_rd = 1;
    @(negedge clk); bus_rd = 0;
    while (!bus_rvalid) @(negedge clk);
    d = bus_rdata;
    n_host++;
    bus_busy = 0;
  endtask
  task automatic host_write(input logic [15:0] a, input logic [31:0] d);
    wait (!bus_busy);
    bus_busy = 1;
    @(negedge clk); bus_addr = a; bus_wdata = d; bus_wr = 1;
    @(negedge clk); bus_wr = 0;
    n_host++;
    bus_busy = 0;
  endtask

  // ---------------- table mirror after each pass ----------------
  ref_entry_t mirror [N_PATHS];
  logic       mirror_ok = 0;
  real        worst_err = 0.0;
  always @(posedge clk) if (rst_n && u_dut.prep_done) begin
    fork
      begin
        logic [31:0] d;
        real e;
        mirror_ok = 0;
        for (int r = 0; r < N_PATHS; r++) begin
          host_read(16'h1000 + 16'(r), d);
          mirror[r] = ref_entry_t'(d);
          e = 2.0 * PI * real'(int'(d[15:0]) - (32768 - 8192)) / 16384.0 - u_opt.theta[r];
          while (e > PI) e -= 2.0 * PI;
          while (e <= -PI) e += 2.0 * PI;
          if (e < 0) e = -e;
          if (e > worst_err) worst_err = e;
          checks++;
          if (e > TOL) begin failures++; $display("FAIL path %0d phase error %f rad (code %0d)", r, e, d[15:0]); end
        end
        mirror_ok = 1;
      end
    join_none
  end

  // ---------------- per-slot checks ----------------
  // The path of a slot is read from the gates just after the low gap at the
  // slot start (the last slot of a free-running second can be short); a
  // slot is checked only if `enable` stayed at one level through all of it.
  logic   slot_is_qkd = 0;
  logic   en_any = 0, dis_any = 0;
  logic [6:0] gate_or = '0;
  path_t  path_mid = '0;
  int     slot_cyc = 0;
  path_t  rec_q [$];
  always @(posedge clk) if (rst_n) begin
    slot_cyc++;
    if (slot_cyc == 110) path_mid = pc_gate;
    if (u_dut.enable) en_any = 1; else dis_any = 1;
    gate_or |= pc_gate;
    if (u_dut.slot_tick) begin
      // the slot that just ended
      if (slot_is_qkd) begin
        rec_q.push_back(path_mid);
        if (mirror_ok && !dis_any) begin
          checks += 2;
          n_slot_checked++;
          if (dac_out != mirror[path_mid].code) begin
            failures++; $display("FAIL t=%0t slot: DAC %0d, table code %0d of path %0d", $time, dac_out, mirror[path_mid].code, path_mid);
          end
          if (dac_bad != 0) begin failures++; $display("FAIL malformed DAC frames"); end
        end
      end
      if (dis_any && !en_any) begin
        checks++;
        n_disabled++;
        if (gate_or != 0) begin failures++; $display("FAIL gates active while disabled"); end
      end
      slot_is_qkd = u_dut.u_alg.qkd_active;
      if (u_dut.u_alg.qkd_active) n_switch++;
      en_any = 0; dis_any = 0; gate_or = '0; slot_cyc = 0;
    end
  end

  // ---------------- stimulus ----------------
  initial begin : watchdog
    repeat ((N_PPS + N_FREE + 1) * SEC + 100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one QKD-stage episode: RNG pause (underruns) and a host disable
  task automatic qkd_episode();
    repeat (20 * SLOT) @(posedge clk);
    rng_pause = 1;
    repeat (3 * SLOT) @(posedge clk);
    rng_pause = 0;
    repeat (3 * SLOT) @(posedge clk);
    // bus writes land mid-slot, away from the slot ticks
    @(posedge clk iff u_dut.slot_tick);
    repeat (SLOT / 2) @(posedge clk);
    host_write(16'h0001, 32'd0);
    repeat (4 * SLOT) @(posedge clk);
    host_write(16'h0001, 32'd1);
  endtask

  initial begin
    logic [31:0] d;
    int n_sec;
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (20) @(posedge clk);
    for (int s = 0; s < N_PPS; s++) begin
      gps_pps = 1; repeat (10) @(posedge clk); gps_pps = 0;
      n_pps_sec++;
      fork begin wait (u_dut.prep == 1'b0); qkd_episode(); end join_none
      repeat (SEC - 10) @(posedge clk);
    end
    for (int s = 0; s < N_FREE; s++) begin
      @(posedge clk iff u_dut.sec_start);
      n_free_sec++;
      checks++;
      if (u_dut.pps_seen) begin failures++; $display("FAIL free-running second marked as GPS"); end
    end
    if (N_FREE > 0) begin
      // the free-running second ends after WRAP cycles
      @(posedge clk iff u_dut.sec_start);
    end else begin
      @(posedge clk iff u_dut.sec_start);
    end
    repeat (20) @(posedge clk);
    // ---- final checks over the host bus ----
    host_read(16'h0002, d);
    checks++;
    if (int'(d) != N_PPS + N_FREE + 2) begin failures++; $display("FAIL seconds %0d exp %0d", d, N_PPS + N_FREE + 2); end
    host_read(16'h0004, d);
    checks++;
    if (int'(d) != n_under) begin failures++; $display("FAIL underrun register %0d exp %0d", d, n_under); end
    host_read(16'h0003, d);
    checks++;
    if (int'(d) != rec_q.size()) begin failures++; $display("FAIL rn_total %0d exp %0d", d, rec_q.size()); end
    begin
      int n, first;
      n = rec_q.size();
      first = (n > 8192) ? n - 8192 : 0;
      for (int i = first; i < n; i += ((n - first) > 600 ? 7 : 1)) begin
        host_read(16'h4000 + 16'(i % 8192), d);
        checks++;
        if (d[6:0] != rec_q[i]) begin failures++; $display("FAIL record %0d: %0d exp %0d", i, d[6:0], rec_q[i]); end
      end
    end
    // ---- mechanisms ----
    $display("INFO passes=%0d ls=%0d coarse=%0d fine=%0d check=%0d tblwr=%0d switch=%0d under=%0d pps_sec=%0d free_sec=%0d host=%0d disabled=%0d slots_checked=%0d worst_err=%f",
             n_pass, n_ls, n_coarse, n_fine, n_check, n_tblwr, n_switch, n_under, n_pps_sec, n_free_sec, n_host, n_disabled, n_slot_checked, worst_err);
    checks += 12;
    if (n_pass == 0)    begin failures++; $display("FAIL no preparation pass"); end
    if (n_ls < N_PATHS) begin failures++; $display("FAIL too few LS fits"); end
    if (n_coarse < N_PATHS) begin failures++; $display("FAIL too few coarse scans"); end
    if (n_fine < N_PATHS)   begin failures++; $display("FAIL too few fine scans"); end
    if (n_check < N_PATHS)  begin failures++; $display("FAIL too few check steps"); end
    if (n_tblwr < N_PATHS)  begin failures++; $display("FAIL too few table writes"); end
    if (n_switch == 0)  begin failures++; $display("FAIL no QKD switch"); end
    if (n_under == 0)   begin failures++; $display("FAIL no underrun"); end
    if (n_pps_sec == 0) begin failures++; $display("FAIL no GPS second"); end
    if (N_FREE > 0 && n_free_sec == 0) begin failures++; $display("FAIL no free-running second"); end
    if (n_host == 0)    begin failures++; $display("FAIL no host access"); end
    if (n_disabled == 0) begin failures++; $display("FAIL never disabled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
