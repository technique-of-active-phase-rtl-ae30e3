// tb_bob_ctrl_top: end-to-end test of the control FPGA at reduced timing.
// All 128 paths and all 23 steps per path are kept; the clock-cycle counts
// are shortened: 2000-cycle steps, 46100-cycle paths, 1000-cycle slots, a
// second of 6.2 M cycles (preparation 5.9 M). Two seconds start with a GPS
// pulse, a third runs without one. See top_env.svh for what is checked.
module tb_bob_ctrl_top;
  localparam int STEP = 2000, PERM = 23 * STEP + 100, SLOT = 1000;
  localparam int PREP = ((128 * PERM + SLOT - 1) / SLOT) * SLOT;
  localparam int SEC = PREP + 300 * SLOT;
  localparam int N_PPS = 2, N_FREE = 1;
  localparam real TOL = 0.5;

  `include "top_env.svh"

  bob_ctrl_top #(
    .SEC_CYCLES(SEC), .PREP_CYCLES(PREP), .SLOT_CYCLES(SLOT),
    .PERM_CYCLES(PERM), .STEP_CYCLES(STEP), .SETTLE_CYCLES(100)
  ) u_dut (.*);
endmodule
