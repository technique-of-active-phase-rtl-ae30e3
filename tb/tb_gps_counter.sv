// tb_gps_counter: self-checking test of the one-second frame timing at
// reduced sizes (second = 1000 cycles, preparation 340, slot 20).
// Checks: the second restarts at each GPS pulse edge; `prep` is high for
// exactly PREP_CYCLES after `sec_start`; slot ticks come every SLOT_CYCLES;
// without GPS pulses a new second starts after WRAP_CYCLES.
module tb_gps_counter;
  localparam int SEC = 1000, PREP = 340, SLOT = 20, WRAP = 1100;
  logic clk = 0, rst_n = 0, pps = 0;
  logic sec_start, prep, slot_tick, pps_seen;
  logic [26:0] cyc;
  logic [31:0] sec_cnt;
  int checks = 0, failures = 0;

  gps_counter #(.SEC_CYCLES(SEC), .PREP_CYCLES(PREP), .SLOT_CYCLES(SLOT), .WRAP_CYCLES(WRAP))
    dut (.clk, .rst_n, .pps, .sec_start, .prep, .slot_tick, .cyc, .sec_cnt, .pps_seen);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // observe: distance between second starts, prep length, tick spacing
  int since_start = -1, prep_len = 0, last_tick = -1, n_sec = 0;
  int starts [$];
  int t = 0;
  always @(posedge clk) begin
    t++;
    if (rst_n) begin
      if (sec_start) begin
        if (since_start >= PREP) begin
          checks++;
          if (prep_len != PREP) begin
            failures++; $display("FAIL prep length %0d", prep_len);
          end
        end
        starts.push_back(t);
        since_start = 0; prep_len = 0; last_tick = -1; n_sec++;
      end
      if (since_start >= 0) begin
        if (prep) prep_len++;
        if (slot_tick) begin
          if (last_tick >= 0) begin
            checks++;
            if (since_start - last_tick != SLOT) begin
              failures++; $display("FAIL tick spacing %0d", since_start - last_tick);
            end
          end
          last_tick = since_start;
        end
        since_start++;
      end
    end
  end

  task automatic pulse_pps();
    pps <= 1; repeat (5) @(posedge clk); pps <= 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    // three GPS seconds, 1000 cycles apart
    repeat (50) @(posedge clk);
    for (int i = 0; i < 3; i++) begin
      pulse_pps();
      repeat (SEC - 5) @(posedge clk);
    end
    // no pulse: free run for two wraps
    repeat (2 * WRAP + 50) @(posedge clk);
    // distances between starts: after the first (reset) start
    // s[1] at first pps, then SEC, SEC, then WRAP, WRAP
    checks++;
    if (starts.size() < 6) begin
      failures++; $display("FAIL only %0d second starts", starts.size());
    end else begin
      int d1, d2, d3, d4;
      d1 = starts[2] - starts[1]; d2 = starts[3] - starts[2];
      d3 = starts[4] - starts[3]; d4 = starts[5] - starts[4];
      checks += 3;
      if (d1 != SEC || d2 != SEC) begin failures++; $display("FAIL GPS second %0d %0d", d1, d2); end
      if (d3 != WRAP || d4 != WRAP) begin failures++; $display("FAIL free-run second %0d %0d", d3, d4); end
      if (sec_cnt != 32'(starts.size())) begin failures++; $display("FAIL sec_cnt %0d", sec_cnt); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
