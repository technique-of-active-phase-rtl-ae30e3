// tb_pockels_io: self-checking test of the Pockels-cell driver outputs.
// Slot ticks every 200 cycles, dead time 10 cycles, a new random path in
// each slot. The testbench predicts every output cycle itself: all gates
// low in the tick cycle and until DEAD_CYCLES cycles have passed since the
// tick, then equal to the path, one cycle later for the output register;
// all low while `enable` is low.
module tb_pockels_io;
  import apsc_pkg::*;
  localparam int DEAD = 10, SLOT = 200;
  logic clk = 0, rst_n = 0, enable = 1, slot_tick = 0;
  path_t path = '0;
  logic [6:0] pc_gate;
  int checks = 0, failures = 0;
  int since = 1000;
  logic [6:0] expect_q = '0;
  int n_pulses = 0;
  logic [6:0] prev = '0;

  pockels_io #(.DEAD_CYCLES(DEAD)) dut (.clk, .rst_n, .enable, .slot_tick, .path, .pc_gate);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n) begin
      checks++;
      if (pc_gate !== expect_q) begin
        failures++; $display("FAIL since=%0d gate %b exp %b", since, pc_gate, expect_q);
      end
      for (int b = 0; b < 7; b++) if (pc_gate[b] && !prev[b]) n_pulses++;
      prev = pc_gate;
      since = slot_tick ? 0 : since + 1;
      expect_q = (enable && !slot_tick && since >= DEAD) ? path : '0;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 40; s++) begin
      @(negedge clk);
      slot_tick = 1;
      enable = (s % 10 != 7);
      @(negedge clk);
      slot_tick = 0;
      path = path_t'($urandom);
      repeat (SLOT - 2) @(negedge clk);
    end
    checks++;
    if (n_pulses < 40) begin failures++; $display("FAIL only %0d gate pulses", n_pulses); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
