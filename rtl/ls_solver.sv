// ls_solver: least-squares estimate of the compensation phase (PT1).
//
// Steps 1 to 4 of a path's calibration apply four extra phases alpha_k to the
// phase modulator and measure the port-1 fraction f_k = C1 / (C1 + C2). For a
// candidate compensation phase theta the ideal fraction is
//   g_k(theta) = (1 + cos(alpha_k - theta)) / 2,
// and the solver returns the candidate that minimises
//   S(theta) = sum_k (g_k(theta) - f_k)^2.
// Candidates are the P points of a grid over one phase period, theta_p =
// 2*pi*p/P; the four extra phases are grid points k*P/4 (0, 90, 180 and 270
// degrees). The cosine table is computed at elaboration in Q1.15.
//
// Interface: pulse `start` with `frac` valid and held; `done` pulses after
// N_FIXED*P + 2 cycles with `best_idx` (the grid index of PT1) and `best_s`.
// Ties keep the lower index.
//
// The cost function and its four terms follow the paper's equation; the
// paper prints the ideal intensity as 1 + cos(alpha_r) + cos(alpha_ext), which
// this design reads as the interference law 1 + cos(alpha_r + alpha_ext).
// The grid search, the grid size and the four extra phases are this design's
// own choices.
module ls_solver
  import apsc_pkg::*;
#(
  parameter int unsigned P = 64
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  frac_t                 frac [N_FIXED],
  output logic                  done,
  output logic [$clog2(P)-1:0]  best_idx,
  output logic [35:0]           best_s
);

  localparam int unsigned IW = $clog2(P);

  function automatic logic signed [16:0] cos_q15(int k);
    real x;
    x = 2.0 * 3.14159265358979323846 * real'(k) / real'(P);
    return 17'(int'($cos(x) * 32767.0));
  endfunction

  logic signed [16:0] cos_rom [P];
  for (genvar g = 0; g < P; g++) begin : g_rom
    assign cos_rom[g] = cos_q15(g);
  end

  logic                   busy;
  logic [IW-1:0]          p;
  logic [1:0]             k;
  logic [35:0]            acc;
  logic [IW-1:0]          ridx;
  logic signed [17:0]     pred;
  logic signed [17:0]     err;
  logic [35:0]            sq;
  logic [35:0]            sum;

  always_comb begin
    ridx = IW'(int'(k) * int'(P / N_FIXED)) - p;
    pred = (18'sd32768 + 18'(cos_rom[ridx])) >>> 1;
    err  = pred - $signed({2'b00, frac[k]});
    sq   = 36'(err * err);
    sum  = (k == 2'd0) ? sq : acc + sq;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      p        <= '0;
      k        <= '0;
      acc      <= '0;
      best_idx <= '0;
      best_s   <= '1;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy   <= 1'b1;
        p      <= '0;
        k      <= '0;
        acc    <= '0;
        best_s <= '1;
      end else if (busy) begin
        acc <= sum;
        k   <= k + 1'b1;
        if (k == 2'(N_FIXED - 1)) begin
          if (sum < best_s) begin
            best_s   <= sum;
            best_idx <= p;
          end
          p <= p + 1'b1;
          if (p == IW'(P - 1)) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

endmodule
