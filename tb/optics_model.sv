// optics_model: behavioural model of the interferometer, phase modulator
// and the two single-photon detectors (testbench only).
// Path r has an arm phase theta[r] (a fixed pseudo-random value plus a slow
// drift per second) and a visibility that falls from 0.99 at r = 0 to 0.93
// at r = 127. The PM adds phi = 2*pi*(code - GBASE)/CODES_PER_2PI. Each
// cycle a detector fires with probability RATE*(1 +/- V cos(phi - theta))/2
// (one-cycle pulses, never two cycles in a row). The gate pattern is taken
// as the path once it has been stable for STABLE cycles, so the short low
// gap at each slot start is ignored.
module optics_model #(
  parameter real RATE          = 0.4,
  parameter int  STABLE        = 150,
  parameter int  CODES_PER_2PI = 16384,
  parameter int  GBASE         = 32768 - 8192
) (
  input  logic        clk,
  input  logic [6:0]  pc_gate,
  input  logic [15:0] pm_code,
  input  logic        new_second,
  output logic [1:0]  apd_pulse
);
  localparam real PI = 3.14159265358979323846;
  real theta [128];
  real vis [128];
  real drift [128];
  logic [6:0] path, last_gate;
  int stable_cnt;
  int p1_ppm, p2_ppm;

  initial begin
    for (int r = 0; r < 128; r++) begin
      theta[r] = 2.0 * PI * real'(((r * 7919 + 1234) % 10007)) / 10007.0;
      vis[r]   = 0.99 - 0.06 * real'(r) / 127.0;
      drift[r] = 0.02 * (real'((r * 31) % 11) - 5.0) / 5.0;
    end
    path = '0; last_gate = '0; stable_cnt = 0; apd_pulse = '0;
  end

  always @(posedge new_second)
    for (int r = 0; r < 128; r++) theta[r] += drift[r];

  always @(posedge clk) begin
    real phi, c;
    if (pc_gate == last_gate) begin
      if (stable_cnt < STABLE) stable_cnt++;
      else path = pc_gate;
    end else begin
      stable_cnt = 0;
      last_gate = pc_gate;
    end
    phi = 2.0 * PI * real'(int'(pm_code) - GBASE) / real'(CODES_PER_2PI);
    c = vis[path] * $cos(phi - theta[path]);
    p1_ppm = int'(1.0e6 * RATE * (1.0 + c) / 2.0);
    p2_ppm = int'(1.0e6 * RATE * (1.0 - c) / 2.0);
    apd_pulse[0] <= !apd_pulse[0] && ($urandom_range(0, 999999) < p1_ppm);
    apd_pulse[1] <= !apd_pulse[1] && ($urandom_range(0, 999999) < p2_ppm);
  end

  // phase error of a code for path r, wrapped to (-pi, pi]
  function automatic real phase_err(int r, int code);
    real e;
    e = 2.0 * PI * real'(code - GBASE) / real'(CODES_PER_2PI) - theta[r];
    while (e > PI) e -= 2.0 * PI;
    while (e <= -PI) e += 2.0 * PI;
    return e;
  endfunction
endmodule
