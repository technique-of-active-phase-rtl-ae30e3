// tb_bob_ctrl_full: one complete second of operation with every parameter
// of the design at its default: 100 MHz clock, 340 ms preparation stage
// (128 paths x 2.5 ms, 23 steps each), 660 ms QKD stage with 6600 path
// switches at 10 kHz. One second starts with a GPS pulse; the run ends when
// the next second starts by itself. Same checks as tb_bob_ctrl_top (see
// top_env.svh); about 1e8 simulated cycles.
module tb_bob_ctrl_full;
  localparam int SEC = 100_000_000, PREP = 34_000_000, SLOT = 10_000;
  localparam int N_PPS = 1, N_FREE = 0;
  localparam real TOL = 0.4;

  `include "top_env.svh"

  bob_ctrl_top u_dut (.*);
endmodule
